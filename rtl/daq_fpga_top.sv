// daq_fpga_top: FPGA side of the high-speed link between the acquisition
// FPGA and an ARM11 (S3C6410) processor. The FPGA appears to the processor
// as a 16-bit memory in bank 4 of its SROM controller; reading that memory
// pops the 32 KB data FIFO, so event data moves at memory-bus speed (one
// 16-bit word per 40 ns access, 50 MB/s) instead of through GPIO or a
// serial port.
//
// Data path:
//   FEE stream (fee_*) --> write port of daq_fifo --> q --> srom_data_o
//   SROM write access (WEN) --------^        read access (OEN) pops q
// srom_strobe_conv builds rdclk = ~CSN4 & ~OEN and wrclk = ~CSN4 & ~WEN,
// synchronises them to clk and reports the end of each access. The FIFO is
// show-ahead: the word the processor will read is already on q when OEN
// falls; the synchronised start of the read consumes it, and the next word
// replaces it 40..60 ns after the access began (two synchroniser stages). A bank-4 write pushes the
// written word into the FIFO; it has priority over the front-end stream,
// which is stalled (fee_ready low) in that cycle and whenever the FIFO is
// full. event_irq counts completed events (fee_last accepted) and pulses irq
// when irq_preset of them have been stored (multi-event mode).
//
// Interface: srom_* are the processor bus pins; srom_data_o/srom_data_oe
// drive the tristate data pad (srom_data_oe is high only while CSN4 and OEN
// are both low). fee_data/fee_valid/fee_last/fee_ready is a valid/ready word
// stream from the front-end logic, fee_last marking the last word of an
// event. overflow is set by a bank-4 write to a full FIFO (the word is
// dropped), underflow by a bank-4 read of an empty FIFO; both are sticky
// until reset. srom_addr is accepted but not decoded (bank 4 is selected by
// CSN4 alone), which is why the linter reports it unused. rdclk/wrclk are
// the synchronised strobes, for a scope or logic analyser.
//
// Timing: an access needs its strobe active for at least one clock and idle
// for at least one (40 ns cycle at 50 MHz). The processor must sample read
// data within SYNC_STAGES clocks of OEN falling (Tacc = 3 HCLK = 22.5 ns at
// 133 MHz does), because the word on srom_data_o changes SYNC_STAGES to
// SYNC_STAGES+1 clocks after the read starts.
//
// What follows the paper: bank-4 memory mapping, the strobe equations, the
// CSN4 check, the 32 KB FIFO, the IRQ line and multi-event interrupts. This
// design's own choices: the front-end stream interface, write priority, the
// status flags and the show-ahead read.
module daq_fpga_top #(
  parameter int unsigned DATA_W      = daq_pkg::DATA_W,
  parameter int unsigned ADDR_W      = daq_pkg::ADDR_W,
  parameter int unsigned FIFO_DEPTH  = daq_pkg::FIFO_DEPTH,
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned CNT_W       = 16,
  parameter int unsigned IRQ_PULSE   = 8,
  localparam int unsigned LW         = $clog2(FIFO_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // ARM11 SROM controller, bank 4
  input  logic [ADDR_W-1:0] srom_addr,
  input  logic              srom_csn4,
  input  logic              srom_oen,
  input  logic              srom_wen,
  input  logic [DATA_W-1:0] srom_data_i,
  output logic [DATA_W-1:0] srom_data_o,
  output logic              srom_data_oe,
  output logic              irq,
  // front-end data stream
  input  logic [DATA_W-1:0] fee_data,
  input  logic              fee_valid,
  input  logic              fee_last,
  output logic              fee_ready,
  // configuration and status
  input  logic [CNT_W-1:0]  irq_preset,
  output logic [LW-1:0]     fifo_level,
  output logic              overflow,
  output logic              underflow,
  output logic [CNT_W-1:0]  event_count,  // events since the last interrupt
  output logic [CNT_W-1:0]  irq_count,    // interrupts raised
  // synchronised FIFO read/write clocks, brought out as test points
  output logic              rdclk,
  output logic              wrclk
);
  logic              rd_req, wr_req;
  logic [DATA_W-1:0] wr_data, fifo_q, fifo_din;
  logic              fifo_wrreq, fifo_q_valid, fifo_full, fee_accept;

  srom_strobe_conv #(.DATA_W(DATA_W), .SYNC_STAGES(SYNC_STAGES)) u_conv (
    .clk, .rst_n,
    .csn4(srom_csn4), .oen(srom_oen), .wen(srom_wen), .data_i(srom_data_i),
    .data_oe(srom_data_oe), .rdclk, .wrclk, .rd_req, .wr_req, .wr_data
  );

  // FIFO write port: a bank-4 write wins, the front end waits
  assign fee_ready  = ~fifo_full & ~wr_req;
  assign fee_accept = fee_valid & fee_ready;
  assign fifo_wrreq = (wr_req & ~fifo_full) | fee_accept;
  assign fifo_din   = wr_req ? wr_data : fee_data;

  daq_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wrreq(fifo_wrreq), .data(fifo_din),
    .rdreq(rd_req & fifo_q_valid),
    .q(fifo_q), .q_valid(fifo_q_valid), .full(fifo_full), .usedw(fifo_level)
  );

  assign srom_data_o = fifo_q;

  event_irq #(.CNT_W(CNT_W), .IRQ_PULSE(IRQ_PULSE)) u_irq (
    .clk, .rst_n,
    .event_done(fee_accept & fee_last), .preset(irq_preset),
    .irq, .event_count, .irq_count
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      overflow  <= 1'b0;
      underflow <= 1'b0;
    end else begin
      if (wr_req & fifo_full)     overflow  <= 1'b1;
      if (rd_req & ~fifo_q_valid) underflow <= 1'b1;
    end
  end

  // front-end stream rule: a word offered is held until taken
  a_fee_hold: assert property (@(posedge clk) disable iff (!rst_n)
    fee_valid & ~fee_ready |=> fee_valid & $stable(fee_data) & $stable(fee_last));
endmodule

// srom_strobe_conv: turns the ARM11 SROM-controller strobes of bank 4 into
// read and write events for the FIFO, in the FPGA system-clock domain.
//
// The FIFO is clocked, the SROM controller is strobe driven. The two
// "clocks" are formed from the bank-4 chip select and the strobes:
//     rdclk = ~CSN4 & ~OEN        wrclk = ~CSN4 & ~WEN
// so an OEN or WEN pulse meant for another device on the shared bus (CSN4
// high) is ignored. Both are passed through a SYNC_STAGES-deep flip-flop
// synchroniser clocked by the 50 MHz system clock, which removes glitches
// from the combinational AND and makes them safe to use as enables.
//
// Read: the rising edge of the synchronised rdclk (start of the access)
// gives a one-cycle rd_req, which consumes the word the processor is
// reading. The FIFO is show-ahead, so that word is already on the bus when
// OEN falls; it is replaced SYNC_STAGES to SYNC_STAGES+1 clocks after the
// access starts (40..60 ns with two stages), i.e. after the processor has
// sampled it if its access time is under SYNC_STAGES clocks, and before the
// next access samples if the access cycle is at least 40 ns.
// Write: the falling edge of the synchronised wrclk (end of the access)
// gives wr_req. The data bus is sampled through the same synchroniser and
// wr_data is the sample taken in the last cycle the strobe was seen active,
// so the written word is taken while it is surely stable.
//
// Timing: each strobe must be active for at least one system clock and
// inactive for at least one, an access cycle of 40 ns or more at 50 MHz
// (two bytes per 40 ns = 50 MB/s). rd_req follows the start of a read by
// SYNC_STAGES clocks at most, wr_req the end of a write by SYNC_STAGES+1.
// data_oe is combinational from the pins so the FPGA drives the bus for
// exactly the read window.
//
// The equations, the CSN4 gating and the synchronisation follow the paper;
// the synchroniser depth, the choice of edges and the data sampling are
// this design's choices. ADDR is not decoded: bank 4 is selected by CSN4.
module srom_strobe_conv #(
  parameter int unsigned DATA_W      = daq_pkg::DATA_W,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              csn4,
  input  logic              oen,
  input  logic              wen,
  input  logic [DATA_W-1:0] data_i,
  output logic              data_oe,
  output logic              rdclk,
  output logic              wrclk,
  output logic              rd_req,
  output logic              wr_req,
  output logic [DATA_W-1:0] wr_data
);
  logic rdclk_raw, wrclk_raw;
  assign rdclk_raw = ~csn4 & ~oen;
  assign wrclk_raw = ~csn4 & ~wen;
  assign data_oe   = rdclk_raw;

  // synchroniser chains; index SYNC_STAGES is one extra stage for edge detection
  logic [SYNC_STAGES:0] rd_sync, wr_sync;
  logic [DATA_W-1:0]    d_sync [SYNC_STAGES+1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_sync <= '0;
      wr_sync <= '0;
      for (int i = 0; i <= SYNC_STAGES; i++) d_sync[i] <= '0;
    end else begin
      rd_sync <= {rd_sync[SYNC_STAGES-1:0], rdclk_raw};
      wr_sync <= {wr_sync[SYNC_STAGES-1:0], wrclk_raw};
      d_sync[0] <= data_i;
      for (int i = 1; i <= SYNC_STAGES; i++) d_sync[i] <= d_sync[i-1];
    end
  end

  assign rdclk   = rd_sync[SYNC_STAGES-1];
  assign wrclk   = wr_sync[SYNC_STAGES-1];
  assign rd_req  = rd_sync[SYNC_STAGES-1] & ~rd_sync[SYNC_STAGES];
  assign wr_req  = wr_sync[SYNC_STAGES] & ~wr_sync[SYNC_STAGES-1];
  assign wr_data = d_sync[SYNC_STAGES];

  initial assert (SYNC_STAGES >= 1) else $error("SYNC_STAGES must be at least 1");
endmodule

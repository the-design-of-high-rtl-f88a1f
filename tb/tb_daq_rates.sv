// tb_daq_rates: workload test of the whole link at its default sizes. The
// front end sends 4-word (8-byte) events at a fixed rate; the processor
// model waits for each interrupt, spends IRQ_LATENCY ns before its handler
// runs (an own estimate of interrupt entry on a 533 MHz ARM11), then reads
// the batch of PRESET events with 43 ns bank-4 reads. Two runs:
//   2 MB/s: 250 kHz events, one every 200 clocks (the pulser test);
//   8 MB/s: 1 MHz events, one every 50 clocks (the front end's maximum).
// Checks per run: every word read equals the word the front end sent, in
// order; the front end is never stalled (fee_ready low while it offers a
// word), i.e. the link adds no dead time; the measured rate matches the
// offered rate within 2 %; the FIFO level stays far below 32 KB.
module tb_daq_rates;
  import daq_pkg::*;
  localparam int EV_WORDS    = 4;
  localparam int PRESET      = 16;
  localparam int IRQ_LATENCY = 5000;     // ns
  localparam int N_BATCHES   = 64;

  logic clk = 0, rst_n = 0;
  logic [ADDR_W-1:0] srom_addr = '0;
  logic srom_csn4 = 1, srom_oen = 1, srom_wen = 1;
  word_t srom_data_i = '0, srom_data_o;
  logic srom_data_oe, irq;
  word_t fee_data = '0;
  logic fee_valid = 0, fee_last = 0, fee_ready;
  logic [15:0] irq_preset = 16'(PRESET);
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_level;
  logic overflow, underflow;
  logic [15:0] event_count, irq_count;
  logic rdclk, wrclk;

  daq_fpga_top dut (.*);

  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // front end: an event of EV_WORDS back-to-back words every ev_period clocks
  bit fee_en = 0;
  int ev_period = 200, widx = 0, since_ev = 0, n_stall = 0, max_level = 0;
  int unsigned seq = 0;
  word_t fee_acc [$];
  always @(posedge clk) begin
    since_ev++;
    if (fee_valid && !fee_ready) n_stall++;
    if (int'(fifo_level) > max_level) max_level = int'(fifo_level);
    if (fee_valid && fee_ready) begin
      fee_acc.push_back(fee_data);
      widx = (widx + 1) % EV_WORDS;
    end
    if (!fee_valid || fee_ready) begin
      bit offer;
      offer = fee_en && !(widx == 0 && since_ev < ev_period);
      if (offer) begin
        if (widx == 0) since_ev = 0;
        fee_data <= word_t'(seq);
        fee_last <= (widx == EV_WORDS - 1);
        seq++;
      end
      fee_valid <= offer;
    end
  end

  task automatic arm_read(output word_t w);
    srom_csn4 = 0; srom_oen = 0;
    #21 w = srom_data_o;
    #1 srom_oen = 1; srom_csn4 = 1;
    #21;
  endtask

  task automatic run(int period, real mbps);
    longint t0, t1;
    word_t w;
    real rate;
    ev_period = period; n_stall = 0; max_level = 0;
    fee_en = 1;
    @(posedge irq);
    t0 = $time;
    for (int b = 0; b < N_BATCHES; b++) begin
      if (b > 0) @(posedge irq);
      #(IRQ_LATENCY);
      repeat (PRESET * EV_WORDS) begin
        arm_read(w);
        check(fee_acc.size() > 0 && w == fee_acc[0], $sformatf("word %h", w));
        if (fee_acc.size() > 0) void'(fee_acc.pop_front());
      end
    end
    @(posedge irq);
    t1 = $time;
    fee_en = 0;
    while (fee_valid) @(posedge clk);
    repeat (4) @(posedge clk);
    // the level follows a read by up to three clocks: read what it shows
    repeat (int'(fifo_level)) begin
      arm_read(w);
      check(fee_acc.size() > 0 && w == fee_acc[0], "drain word");
      if (fee_acc.size() > 0) void'(fee_acc.pop_front());
    end
    #100 check(fifo_level == 0, "drained");
    // N_BATCHES batches of PRESET events, 8 bytes each, between the first
    // and the last of N_BATCHES+1 interrupts; bytes per us = MB/s
    rate = real'(N_BATCHES * PRESET * EV_WORDS * 2) * 1000.0 / real'(t1 - t0);
    $display("offered %0.1f MB/s: carried %0.2f MB/s, stalls %0d, max FIFO level %0d words",
             mbps, rate, n_stall, max_level);
    check(rate > mbps * 0.98 && rate < mbps * 1.02, "carried rate");
    check(n_stall == 0, "front end never stalled");
    check(max_level < FIFO_DEPTH / 4, "FIFO far from full");
    check(fee_acc.size() == 0, "nothing left over");
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    #3 rst_n = 1;
    run(200, 2.0);
    run(50, 8.0);
    check(!overflow && !underflow, "no overflow or underflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_daq_fpga_top: end-to-end test of the FPGA side of the link at its
// default sizes (32 KB FIFO, 16-bit bus, two synchroniser stages).
//
// Models in the testbench:
//  - front end: events of EV_WORDS 16-bit words (8 bytes, as a 2 MB/s
//    stream at 250 kHz implies) on the valid/ready port; FEE words carry a
//    running sequence number with bit 15 clear;
//  - processor bus: bank-4 reads and writes with Tacs = Tcos = Tcoh = Tcah
//    = 0 and a 43 ns cycle (strobe low 22 ns, about Tacc = 3 HCLK at
//    133 MHz, high 21 ns: both phases must outlast one 20 ns system clock,
//    so 40 ns is a bound that cannot quite be reached); the read sample is
//    taken just before OEN rises. Words the
//    processor writes have bit 15 set.
// Every word read is checked: FEE words must come out in the order they were
// accepted, processor-written words in the order written, none lost or
// duplicated. Phases: underflow read; write/read-back loopback (the 0000..
// 0004 pattern); foreign-chip-select accesses that must be ignored;
// interrupt-driven multi-event reading with events every 200 clocks (the
// 250 kHz test); filling the FIFO to full (front end stalled), a write to the
// full FIFO (overflow), and a 16384-word drain at 50 MB/s; processor writes
// during a continuous front-end stream (write priority). Each mechanism is
// counted and one that never happened counts as a failure.
module tb_daq_fpga_top;
  import daq_pkg::*;
  localparam int EV_WORDS  = 4;
  localparam int PRESET    = 16;
  localparam int DEPTH     = FIFO_DEPTH;
  localparam int EV_PERIOD = 200;         // clocks: 250 kHz at 50 MHz

  logic clk = 0, rst_n = 0;
  logic [ADDR_W-1:0] srom_addr = '0;
  logic srom_csn4 = 1, srom_oen = 1, srom_wen = 1;
  word_t srom_data_i = '0, srom_data_o;
  logic srom_data_oe, irq;
  word_t fee_data = '0;
  logic fee_valid = 0, fee_last = 0, fee_ready;
  logic [15:0] irq_preset = 16'(PRESET);
  logic [$clog2(DEPTH+1)-1:0] fifo_level;
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

  // ---------------- front-end model ----------------
  bit fee_en = 0;
  int fee_pct = 100;                 // offer probability per free slot, %
  int ev_period = 0;                 // minimum clocks between event starts
  int widx = 0, since_ev = 0;
  int unsigned seq = 0;
  word_t fee_acc [$];                // accepted FEE words, in order
  int n_events = 0;

  always @(posedge clk) begin
    since_ev++;
    if (fee_valid && fee_ready) begin
      fee_acc.push_back(fee_data);
      if (fee_last) n_events++;
      widx = (widx + 1) % EV_WORDS;
    end
    if (!fee_valid || fee_ready) begin
      bit offer;
      offer = fee_en && ($urandom_range(0, 99) < fee_pct) &&
              !(widx == 0 && since_ev < ev_period);
      if (offer) begin
        if (widx == 0) since_ev = 0;
        fee_data  <= {1'b0, 15'(seq)};
        fee_last  <= (widx == EV_WORDS - 1);
        seq++;
      end
      fee_valid <= offer;
    end
  end

  // stop the stream cleanly: no new word, wait for the offered one to be taken
  task automatic fee_stop();
    fee_en = 0;
    while (fee_valid) @(posedge clk);
    @(posedge clk);
  endtask

  // ---------------- processor bus model ----------------
  word_t arm_wr [$];                 // processor-written words accepted, in order
  int got_fee = 0, got_arm = 0;
  int n_reads = 0, n_writes = 0;

  // check one word read back against the two reference streams
  task automatic check_word(word_t w);
    if (w[15]) begin
      check(arm_wr.size() > 0 && w == arm_wr[0], $sformatf("processor word %h", w));
      if (arm_wr.size() > 0) void'(arm_wr.pop_front());
      got_arm++;
    end else begin
      check(fee_acc.size() > 0 && w == fee_acc[0],
            $sformatf("FEE word %h expected %h", w, (fee_acc.size() > 0) ? fee_acc[0] : 16'hffff));
      if (fee_acc.size() > 0) void'(fee_acc.pop_front());
      got_fee++;
    end
  endtask

  task automatic arm_read(output word_t w, input bit cs = 1);
    srom_csn4 = ~cs; srom_oen = 0;
    #21;
    check(srom_data_oe == cs, "data_oe during read");
    w = srom_data_o;
    #1;
    srom_oen = 1; srom_csn4 = 1;
    #21;
    n_reads += cs;
  endtask

  task automatic arm_write(word_t w, input bit cs = 1);
    srom_csn4 = ~cs; srom_wen = 0; srom_data_i = w;
    #22;
    srom_wen = 1; srom_csn4 = 1;
    #21;
    srom_data_i = word_t'($urandom);
    n_writes += cs;
  endtask

  task automatic read_n(int n);
    word_t w;
    repeat (n) begin arm_read(w); check_word(w); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_irq = 0, n_stall_full = 0, n_wr_priority = 0, n_foreign = 0;
  int n_overflow = 0, n_underflow = 0, n_fast_burst = 0;
  logic irq_d = 0;
  always @(posedge clk) begin
    irq_d <= irq & rst_n;
    if (rst_n && irq && !irq_d) n_irq++;
    if (fee_valid && !fee_ready && int'(fifo_level) == DEPTH) n_stall_full++;
    if (fee_valid && !fee_ready && int'(fifo_level) <  DEPTH) n_wr_priority++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t w;
    longint t0, t1;
    repeat (4) @(posedge clk);
    #3 rst_n = 1;
    #40;

    // 1. read of the empty FIFO
    arm_read(w);
    #100 check(underflow, "underflow flag after read of empty FIFO");
    n_underflow += underflow;
    check(fifo_level == 0, "still empty");

    // 2. loopback: write 0000..0004 (bit 15 marks processor data), read back
    for (int i = 0; i < 5; i++) begin arm_write(16'h8000 | 16'(i)); arm_wr.push_back(16'h8000 | 16'(i)); end
    #100 check(fifo_level == 5, $sformatf("5 words after writes, level %0d", fifo_level));
    read_n(5);
    #100 check(fifo_level == 0 && got_arm == 5, "loopback read");

    // 3. strobes for another chip select: nothing stored or popped
    for (int i = 0; i < 5; i++) begin arm_write(16'h8123, 0); n_foreign++; end
    #100 check(fifo_level == 0, "foreign writes ignored");
    arm_write(16'h8000 | 16'h55); arm_wr.push_back(16'h8055);
    #100;
    for (int i = 0; i < 5; i++) begin arm_read(w, 0); n_foreign++; end
    #100 check(fifo_level == 1, "foreign reads ignored");
    read_n(1);

    // 4. interrupt-driven multi-event reading, events every 200 clocks
    fee_en = 1; fee_pct = 100; ev_period = EV_PERIOD;
    t0 = $time;
    for (int b = 0; b < 24; b++) begin
      @(posedge irq);
      read_n(PRESET * EV_WORDS);
    end
    t1 = $time;
    fee_stop();
    #200;
    // bytes moved per microsecond equals MB/s; expect about 2 MB/s
    $display("multi-event phase: %0d events, %0d interrupts, %0.2f MB/s",
             n_events, n_irq, 24.0 * PRESET * EV_WORDS * 2 * 1000.0 / real'(t1 - t0));
    check(n_irq >= 24, "interrupts in multi-event phase");
    read_n(int'(fifo_level));
    #100 check(fifo_level == 0 && fee_acc.size() == 0, "drained after multi-event phase");

    // 5. fill to full: front end stalls, processor write overflows
    ev_period = 0; fee_en = 1;
    wait (int'(fifo_level) == DEPTH);
    repeat (200) @(posedge clk);
    check(int'(fifo_level) == DEPTH, "FIFO holds 32 KB");
    fee_en = 0;                        // the word on offer waits for space
    arm_write(16'hbeef);               // dropped
    #100 check(overflow, "overflow flag after write to full FIFO");
    n_overflow += overflow;
    // drain at the maximum rate, timed
    t0 = $time;
    read_n(DEPTH);
    t1 = $time;
    check(t1 - t0 == 43 * DEPTH, "one 16-bit word per 43 ns");
    $display("drain: %0d words in %0d ns = %0.1f MB/s", DEPTH, t1 - t0, 2.0 * DEPTH * 1000.0 / real'(t1 - t0));
    n_fast_burst++;
    fee_stop();
    #100;
    read_n(int'(fifo_level));
    #100 check(fifo_level == 0 && fee_acc.size() == 0, "empty after drain");

    // 6. processor writes while the front end streams: writes take priority
    fee_en = 1; fee_pct = 100;
    for (int i = 0; i < 20; i++) begin
      arm_write(16'h9000 | 16'(i)); arm_wr.push_back(16'h9000 | 16'(i));
    end
    fee_stop();
    #200;
    read_n(int'(fifo_level));
    #100 check(fifo_level == 0 && fee_acc.size() == 0 && arm_wr.size() == 0, "all words read after mixed phase");

    // interrupt bookkeeping against the events counted here
    check(int'(irq_count) == n_events / PRESET, $sformatf("irq_count %0d events %0d", irq_count, n_events));
    check(int'(event_count) == n_events % PRESET, "event_count");
    check(n_irq == int'(irq_count), "irq pulses");

    $display("mechanisms: irq=%0d stall_full=%0d write_priority=%0d foreign=%0d overflow=%0d underflow=%0d fast_burst=%0d",
             n_irq, n_stall_full, n_wr_priority, n_foreign, n_overflow, n_underflow, n_fast_burst);
    $display("words read: %0d from FEE, %0d processor-written; bus reads %0d writes %0d",
             got_fee, got_arm, n_reads, n_writes);
    check(n_irq > 0, "mechanism: interrupt");
    check(n_stall_full > 0, "mechanism: FEE stall on full FIFO");
    check(n_wr_priority > 0, "mechanism: processor write priority");
    check(n_foreign > 0, "mechanism: foreign chip select");
    check(n_overflow > 0, "mechanism: overflow");
    check(n_underflow > 0, "mechanism: underflow");
    check(n_fast_burst > 0, "mechanism: full-rate burst");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

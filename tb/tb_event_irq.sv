// tb_event_irq: self-checking test of the multi-event interrupt generator.
// Random event_done pulses with presets of 1, 5 and 37 events; an
// independent counter in the testbench predicts when each interrupt is due.
// Checks: irq rises exactly on the clock after the event that completes a
// batch, stays high IRQ_PULSE clocks, event_count and irq_count match, and a
// preset of 0 behaves like 1.
module tb_event_irq;
  localparam int CW = 16, PULSE = 8;
  logic clk = 0, rst_n = 0;
  logic event_done = 0;
  logic [CW-1:0] preset = 1, event_count, irq_count;
  logic irq;
  int checks = 0, failures = 0;
  int ref_cnt = 0, ref_irqs = 0, ref_pulse = 0;

  event_irq #(.CNT_W(CW), .IRQ_PULSE(PULSE)) dut (.*);

  always #10 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // reference model, updated at the same clock edge as the DUT
  always @(posedge clk) if (rst_n) begin
    int p;
    p = (preset == 0) ? 1 : int'(preset);
    if (event_done && ref_cnt + 1 >= p) begin
      ref_cnt = 0; ref_irqs++; ref_pulse = PULSE;
    end else begin
      if (event_done) ref_cnt++;
      if (ref_pulse > 0) ref_pulse--;
    end
  end

  always @(negedge clk) if (rst_n) begin
    check(irq == (ref_pulse > 0), "irq level");
    check(event_count == CW'(ref_cnt), "event_count");
    check(irq_count == CW'(ref_irqs), "irq_count");
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int presets[4] = '{1, 5, 37, 0};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (presets[k]) begin
      int n_before;
      preset = CW'(presets[k]);
      n_before = ref_irqs;
      for (int n = 0; n < 400; n++) begin
        event_done = ($urandom_range(0, 3) == 0);
        @(posedge clk); #1;
      end
      event_done = 0;
      repeat (PULSE + 2) @(posedge clk);
      #1 check(ref_irqs > n_before, $sformatf("interrupts raised with preset %0d", presets[k]));
    end
    $display("interrupts: %0d", ref_irqs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_daq_fifo: self-checking test of the show-ahead data FIFO at a reduced
// depth of 16 words. A queue in the testbench is the reference: after every
// clock q/q_valid must show the oldest word, usedw the number held and full
// the capacity limit. Phases: write-to-empty latency (q valid two clocks
// after wrreq), fill to full and check that a further write is ignored,
// drain at one word per clock, then random simultaneous reads and writes.
module tb_daq_fifo;
  localparam int W = 16, D = 16;
  logic clk = 0, rst_n = 0;
  logic wrreq = 0, rdreq = 0;
  logic [W-1:0] data = '0, q;
  logic q_valid, full;
  logic [$clog2(D+1)-1:0] usedw;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  daq_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #10 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // one clock with the given requests; the reference model follows the FIFO rules
  task automatic step(bit w, bit r, logic [W-1:0] d);
    wrreq = w; rdreq = r; data = d;
    @(posedge clk);
    if (r && model.size() > 0 && q_valid) void'(model.pop_front());
    if (w && !full) model.push_back(d);
    #1;
    wrreq = 0; rdreq = 0;
  endtask

  // q becomes valid one clock after the array is loaded; compare when valid
  task automatic compare();
    check(usedw == model.size(), $sformatf("usedw %0d vs %0d", usedw, model.size()));
    check(full == (model.size() == D), "full flag");
    if (q_valid) check(model.size() > 0 && q == model[0], $sformatf("q %h", q));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(!q_valid && usedw == 0, "empty after reset");
    // latency from a write into an empty FIFO to q
    step(1, 0, 16'h0000);
    check(!q_valid, "q not yet valid one clock after write");
    step(0, 0, 0);
    check(q_valid && q == 16'h0000, "q valid two clocks after write");
    // fill up (Fig2-like counting pattern)
    for (int i = 1; i < D; i++) begin step(1, 0, 16'(i)); compare(); end
    check(full, "full after DEPTH writes");
    step(1, 0, 16'hdead);       // ignored
    compare();
    // drain one word per clock, order preserved
    for (int i = 0; i < D; i++) begin
      check(q_valid && q == 16'(i), $sformatf("drain word %0d", i));
      step(0, 1, 0);
      compare();
    end
    check(!q_valid && usedw == 0, "empty after drain");
    // random traffic
    for (int n = 0; n < 4000; n++) begin
      step($urandom_range(0, 2) != 0, $urandom_range(0, 2) != 0, 16'($urandom));
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_srom_strobe_conv: self-checking test of the SROM strobe converter.
// A small processor-bus model drives CSN4/OEN/WEN/DATA asynchronously to the
// 20-unit system clock (one unit = 1 ns of the real design). Checked:
//  - data_oe equals ~CSN4 & ~OEN at every sampled instant;
//  - exactly one rd_req / wr_req per bank-4 access, and none for OEN/WEN
//    pulses while CSN4 is high (another device on the shared bus);
//  - wr_data carries the written word;
//  - the clock edge that takes a read event lies at least SYNC_STAGES and
//    at most SYNC_STAGES+1 clocks after the read starts; the one that takes a
//    write event at most SYNC_STAGES+1 clocks after the write ends;
//  - back-to-back accesses with a 43-unit cycle (strobe low 22, about
//    Tacc = 3 HCLK at 133 MHz, high 21) are all seen, i.e. 16 bits per 43 ns;
//    each phase must outlast one clock, so 40 ns is the limit.
module tb_srom_strobe_conv;
  localparam int W = 16, SYNC = 2;
  logic clk = 0, rst_n = 0;
  logic csn4 = 1, oen = 1, wen = 1;
  logic [W-1:0] data_i = '0, wr_data;
  logic data_oe, rdclk, wrclk, rd_req, wr_req;
  int checks = 0, failures = 0;
  int n_rd = 0, n_wr = 0;
  logic [W-1:0] wr_seen [$];
  longint t_starts [$];
  longint t_end, max_lat = 0, max_rd_lat = 0, min_rd_lat = 1000;

  srom_strobe_conv #(.DATA_W(W), .SYNC_STAGES(SYNC)) dut (.*);

  always #10 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) begin
    if (rd_req) begin
      n_rd++;
      if (t_starts.size() > 0) begin
        longint lat;
        lat = $time - t_starts.pop_front();
        if (lat > max_rd_lat) max_rd_lat = lat;
        if (lat < min_rd_lat) min_rd_lat = lat;
      end
    end
    if (wr_req) begin n_wr++; wr_seen.push_back(wr_data); if ($time - t_end > max_lat) max_lat = $time - t_end; end
    if (rst_n) check(data_oe == (~csn4 & ~oen), "data_oe");
  end

  // one access: chip select and strobe fall together (Tacs = Tcos = 0)
  task automatic rd_access(int t_low, int t_high, bit cs = 1);
    csn4 = ~cs; oen = 0; if (cs) t_starts.push_back($time);
    #(t_low);
    oen = 1; csn4 = 1; t_end = $time;
    #(t_high);
  endtask
  task automatic wr_access(logic [W-1:0] d, int t_low, int t_high, bit cs = 1);
    csn4 = ~cs; wen = 0; data_i = d;
    #(t_low);
    wen = 1; csn4 = 1; t_end = $time;
    #(t_high);
    data_i = $urandom;
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #3 rst_n = 1;
    #37;
    // slow reads at an odd phase
    for (int i = 0; i < 5; i++) rd_access(53, 61);
    #100 check(n_rd == 5 && n_wr == 0, $sformatf("5 slow reads, got %0d", n_rd));
    // OEN/WEN pulses for another chip select: ignored
    for (int i = 0; i < 4; i++) begin rd_access(50, 50, 0); wr_access(16'h1111, 50, 50, 0); end
    #100 check(n_rd == 5 && n_wr == 0, "accesses with CSN4 high ignored");
    // writes carry their data
    for (int i = 0; i < 6; i++) wr_access(16'(16'h0a00 + i), 47, 33);
    #100 check(n_wr == 6, $sformatf("6 writes, got %0d", n_wr));
    for (int i = 0; i < 6; i++)
      check(wr_seen.size() > i && wr_seen[i] == 16'(16'h0a00 + i), $sformatf("write data %0d", i));
    // maximum rate: 40-unit cycle, read burst then write burst
    n_rd = 0; n_wr = 0; wr_seen.delete();
    for (int i = 0; i < 200; i++) rd_access(22, 21);
    for (int i = 0; i < 200; i++) wr_access(16'(i * 3), 22, 21);
    #200;
    check(n_rd == 200, $sformatf("200 fast reads, got %0d", n_rd));
    check(n_wr == 200, $sformatf("200 fast writes, got %0d", n_wr));
    for (int i = 0; i < 200; i++)
      check(wr_seen.size() > i && wr_seen[i] == 16'(i * 3), $sformatf("fast write data %0d", i));
    check(max_lat <= (SYNC + 1) * 20, $sformatf("write latency %0d", max_lat));
    check(max_rd_lat <= (SYNC + 1) * 20, $sformatf("read latency %0d", max_rd_lat));
    check(min_rd_lat >= SYNC * 20, $sformatf("read min latency %0d", min_rd_lat));
    $display("write latency max %0d, read latency %0d..%0d units", max_lat, min_rd_lat, max_rd_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

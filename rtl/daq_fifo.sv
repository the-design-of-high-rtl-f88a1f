// daq_fifo: the 32 KB data FIFO between the acquisition logic and the ARM11
// memory bus, 16384 words of 16 bits by default.
//
// Single clock: both the write and the read side are driven by enables that
// have already been synchronised to the system clock. The storage is a
// synchronous-read array (block RAM) followed by an output register, used in
// show-ahead fashion: q always holds the oldest word when q_valid is set, and
// rdreq consumes it. A word written into an empty FIFO appears on q two
// clocks after wrreq. The array is refilled into the output register in the
// same cycle q is consumed, so a read every clock is sustained.
//
// Capacity is exactly DEPTH words, counted by usedw (array plus output
// register). wrreq while full and rdreq while q_valid is low are ignored;
// the assertions below report them so the surrounding logic can be checked.
//
// Size and the wrreq/rdreq/data/q names follow the paper; show-ahead reading
// and the single clock are this design's choices.
module daq_fifo #(
  parameter int unsigned WIDTH = daq_pkg::DATA_W,
  parameter int unsigned DEPTH = daq_pkg::FIFO_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wrreq,
  input  logic [WIDTH-1:0] data,
  input  logic             rdreq,
  output logic [WIDTH-1:0] q,
  output logic             q_valid,
  output logic             full,
  output logic [CW-1:0]    usedw
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [CW-1:0]    mem_cnt;          // words in the array, not counting q
  logic             do_wr, do_rd, load_q;

  assign usedw  = mem_cnt + CW'(q_valid);
  assign full   = (usedw == CW'(DEPTH));
  assign do_wr  = wrreq & ~full;
  assign do_rd  = rdreq & q_valid;
  assign load_q = (mem_cnt != '0) & (~q_valid | do_rd);

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= data;
    if (load_q) q <= mem[rptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr    <= '0;
      rptr    <= '0;
      mem_cnt <= '0;
      q_valid <= 1'b0;
    end else begin
      if (do_wr)  wptr <= incr(wptr);
      if (load_q) rptr <= incr(rptr);
      mem_cnt <= mem_cnt + CW'(do_wr) - CW'(load_q);
      if (load_q)     q_valid <= 1'b1;
      else if (do_rd) q_valid <= 1'b0;
    end
  end

  // the users of the FIFO must respect full and q_valid
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wrreq |-> !full)
    else $warning("daq_fifo: write while full ignored");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rdreq |-> q_valid)
    else $warning("daq_fifo: read while empty ignored");
endmodule

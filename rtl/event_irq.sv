// event_irq: multi-event interrupt generator. Counts the events stored in
// the FIFO and signals the ARM11 once their number reaches a preset value,
// so the processor reads a batch of events per interrupt instead of polling.
//
// Every event_done pulse increments event_count. When the incremented count
// reaches preset the counter restarts from zero and irq goes high for
// IRQ_PULSE system clocks (an edge for the processor's external interrupt
// input). An event arriving while irq is still high is counted towards the
// next batch. irq_count counts the interrupts raised.
//
// Timing: irq rises the clock after the event_done that completes a batch.
//
// Counting events and interrupting at a preset number follows the paper;
// the pulse form, the active-high level, the preset as an input port and
// treating a preset of 0 as 1 are this design's choices.
module event_irq #(
  parameter int unsigned CNT_W     = 16,
  parameter int unsigned IRQ_PULSE = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             event_done,
  input  logic [CNT_W-1:0] preset,
  output logic             irq,
  output logic [CNT_W-1:0] event_count,
  output logic [CNT_W-1:0] irq_count
);
  localparam int unsigned PW = $clog2(IRQ_PULSE + 1);
  logic [PW-1:0]    pulse_left;
  logic [CNT_W-1:0] next_count;
  logic             batch_done;

  assign next_count = event_count + 1'b1;
  assign batch_done = event_done & (next_count >= preset);
  assign irq        = (pulse_left != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      event_count <= '0;
      irq_count   <= '0;
      pulse_left  <= '0;
    end else begin
      if (batch_done) begin
        event_count <= '0;
        irq_count   <= irq_count + 1'b1;
        pulse_left  <= PW'(IRQ_PULSE);
      end else begin
        if (event_done) event_count <= next_count;
        if (pulse_left != '0) pulse_left <= pulse_left - 1'b1;
      end
    end
  end
endmodule

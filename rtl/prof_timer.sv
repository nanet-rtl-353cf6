// prof_timer - cycle counter of the hardware path latency profiler.
//
// NaNet-1 measures how long a packet spends in each processing stage by
// stamping it with the value of a cycle counter at up to four points and
// writing the four values in a footer after the payload.  This block is that
// counter: it counts clock cycles while enabled, wraps at 2^W, and restarts
// from zero on clear.  The stamping itself is done by the stages
// (udp_offloader, nanet_ctrl, ni_tx), which sample the count.
//
// Interface: en counts, clr (synchronous, higher priority) zeroes.  The
// count is registered: it shows the number of enabled cycles since the last
// clear, one cycle after each enabled edge.
//
// From the paper: a profiler storing up to four cycle counter values in a
// footer.  Own choices: the width (32 bits, over 20 s at 200 MHz) and the
// enable/clear controls.
module prof_timer #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         clr,
  output logic [W-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  count <= '0;
    else if (clr) count <= '0;
    else if (en)  count <= count + 1'b1;
  end

endmodule

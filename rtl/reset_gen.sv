// reset_gen: reset generator of one clock domain (one per die, one for the
// wafer-level controllers). The reset is asserted at once, without a clock,
// and released only after STAGES rising edges of the local clock, so every
// flip-flop of the domain leaves reset on the same edge. The source names a
// reset generator in each die; the synchroniser form is this design's choice.
// Timing: rst_out_n rises STAGES cycles after rst_in_n rises.
module reset_gen #(
  parameter int STAGES = 2
) (
  input  logic clk,
  input  logic rst_in_n,
  output logic rst_out_n
);
  logic [STAGES-1:0] sr;

  always_ff @(posedge clk or negedge rst_in_n) begin
    if (!rst_in_n) sr <= '0;
    else           sr <= {sr[STAGES-2:0], 1'b1};
  end

  assign rst_out_n = sr[STAGES-1];
endmodule

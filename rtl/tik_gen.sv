// tik_gen: time-step tick generator of one die.
//
// The local time-step controller announces a new step by flipping the level
// step_req (its new value is the step's parity). tik_gen brings that level
// into the die clock through a two-flop synchroniser and, on a change, sends
// a one-cycle tick with the new parity to every neuron node of the die.
// It reports back two levels: die_parity, the parity of the last tick sent,
// and die_idle, high while no neuron node is busy, every router buffer is
// empty, no inter-die link touching the die holds an event, and no tick is
// on its way. die_idle can fall again after it rose, when a late event from
// another die arrives; the controllers above allow for that.
//
// From the source: a tick generator in each die and a hierarchy of
// time-step controllers. The level/toggle protocol and the idle condition
// are this design's choices. Timing: tick follows a step_req change by 3
// die-clock cycles; die_idle is registered (one cycle behind).
module tik_gen (
  input  logic clk,
  input  logic rst_n,
  input  logic step_req,
  input  logic nodes_busy,
  input  logic net_idle,
  output logic tick,
  output logic step_parity,
  output logic die_parity,
  output logic die_idle
);
  logic [1:0] req_sync;
  logic       seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_sync <= '0;
      seen     <= 1'b0;
      tick     <= 1'b0;
      die_idle <= 1'b0;
    end else begin
      req_sync <= {req_sync[0], step_req};
      tick     <= 1'b0;
      if (req_sync[1] != seen) begin
        seen <= req_sync[1];
        tick <= 1'b1;
      end
      die_idle <= (req_sync[1] == seen) && !tick && !nodes_busy && net_idle;
    end
  end

  assign step_parity = seen;
  assign die_parity  = seen;
endmodule

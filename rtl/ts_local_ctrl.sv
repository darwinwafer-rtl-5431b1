// ts_local_ctrl: local time-step controller of one domain (a group of dies).
//
// It passes the global step level step_req on to the dies of its domain and
// reports done to the global controller when every die of the domain shows
// the current step's parity and is idle. Die status arrives from other clock
// domains and goes through two-flop synchronisers; done is registered.
//
// From the source: the wafer is split into domains, each run by a local
// controller under a global controller. The status encoding is this
// design's choice. Timing: done follows the last die turning idle by 3
// cycles of clk.
module ts_local_ctrl #(
  parameter int NDIES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step_req,
  output logic             die_step_req,
  input  logic [NDIES-1:0] die_parity,
  input  logic [NDIES-1:0] die_idle,
  output logic             done
);
  logic [NDIES-1:0] par_s0, par_s1, idle_s0, idle_s1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      par_s0  <= '0;
      par_s1  <= '0;
      idle_s0 <= '0;
      idle_s1 <= '0;
      done    <= 1'b0;
    end else begin
      par_s0  <= die_parity;
      par_s1  <= par_s0;
      idle_s0 <= die_idle;
      idle_s1 <= idle_s0;
      done    <= (&idle_s1) && (par_s1 == {NDIES{step_req}});
    end
  end

  assign die_step_req = step_req;
endmodule

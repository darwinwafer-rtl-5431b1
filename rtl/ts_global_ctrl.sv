// ts_global_ctrl: global (master) time-step controller of the wafer.
//
// When run is high it starts n_steps time steps, one after another. A step
// starts by flipping step_req; it ends when every local controller has
// reported done without a break for HOLD+1 cycles and at least min_len cycles
// have passed since it started. The length of a step therefore follows the
// work in it: a light step ends at min_len, a heavy one as soon as the
// slowest domain is finished (the adaptive time step). last_len gives the
// length of the last step, extended pulses when a step ran past min_len.
//
// The HOLD window covers the case of a die that turned idle while an event
// was still crossing into another die: the receiving die's busy status must
// reach this controller within HOLD cycles. HOLD must therefore exceed the
// synchroniser and link latency seen in the slowest clock domain.
//
// From the source: a master controller that coordinates local controllers
// and adapts the step length. The done/HOLD rule and the counters are this
// design's choices.
module ts_global_ctrl #(
  parameter int NDOM   = 4,
  parameter int HOLD   = 16,
  parameter int CNT_W  = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,
  input  logic [CNT_W-1:0] n_steps,
  input  logic [CNT_W-1:0] min_len,
  output logic             step_req,
  input  logic [NDOM-1:0]  dom_done,
  output logic             busy,
  output logic [CNT_W-1:0] step_count,
  output logic [CNT_W-1:0] last_len,
  output logic             step_end,
  output logic             extended
);
  typedef enum logic [1:0] {G_IDLE, G_STEP, G_FINISH} gstate_e;
  gstate_e         state;
  logic [CNT_W-1:0] len, left;
  logic [$clog2(HOLD+1)-1:0] stable;

  wire all_done = &dom_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= G_IDLE;
      step_req   <= 1'b0;
      len        <= '0;
      left       <= '0;
      stable     <= '0;
      step_count <= '0;
      last_len   <= '0;
      step_end   <= 1'b0;
      extended   <= 1'b0;
    end else begin
      step_end <= 1'b0;
      extended <= 1'b0;
      unique case (state)
        G_IDLE: if (run && n_steps != '0) begin
          left     <= n_steps - 1'b1;
          step_req <= ~step_req;
          len      <= '0;
          stable   <= '0;
          state    <= G_STEP;
        end
        G_STEP: begin
          len <= len + 1'b1;
          // done must not be taken from the step before: wait HOLD cycles
          // at least, by which time the dies have seen the new level.
          if (all_done) begin
            if (stable != ($clog2(HOLD+1))'(HOLD)) stable <= stable + 1'b1;
          end else begin
            stable <= '0;
          end
          if (stable == ($clog2(HOLD+1))'(HOLD) && all_done && len + 1'b1 >= min_len) begin
            step_count <= step_count + 1'b1;
            last_len   <= len + 1'b1;
            step_end   <= 1'b1;
            extended   <= (len + 1'b1 > min_len);
            if (left == '0) begin
              state <= G_FINISH;
            end else begin
              left     <= left - 1'b1;
              step_req <= ~step_req;
              len      <= '0;
              stable   <= '0;
            end
          end
        end
        G_FINISH: if (!run) state <= G_IDLE;
        default: state <= G_IDLE;
      endcase
    end
  end

  assign busy = (state == G_STEP);
endmodule

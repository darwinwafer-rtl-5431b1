// tb_ts_global_ctrl: four model domains answer each step after a random
// amount of work. The controller must run exactly n_steps steps, flip
// step_req once per step, and end every step at
// max(min_len, last domain done + HOLD + 2) cycles, reporting that length in
// last_len and flagging the steps that ran past min_len. A short glitch of
// one domain's done must restart the HOLD window.
module tb_ts_global_ctrl;
  localparam int NDOM = 4, HOLD = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run = 0, step_req, busy, step_end, extended;
  logic [31:0] n_steps = 0, min_len = 0, step_count, last_len;
  logic [NDOM-1:0] dom_done = '1;
  ts_global_ctrl #(.NDOM(NDOM), .HOLD(HOLD), .CNT_W(32)) dut (.*);
  int checks = 0, failures = 0, n_ext = 0, n_min = 0;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // domain models: after a step_req flip, done drops for work[d] cycles
  int work [NDOM];
  int glitch;
  logic last_req = 0;
  int cyc = 0, t_start = 0, t_done = 0, exp_len;
  always @(posedge clk) cyc++;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    n_steps = 12; min_len = 40;
    @(negedge clk);
    run = 1;
    for (int s = 0; s < 12; s++) begin
      int longest;
      wait (step_req != last_req);
      @(negedge clk);
      last_req = step_req;
      t_start = cyc - 1;
      dom_done = '0;
      longest = 0;
      for (int d = 0; d < NDOM; d++) begin
        work[d] = (s % 2 == 0) ? $urandom_range(2, 20) : $urandom_range(30, 90);
        if (work[d] > longest) longest = work[d];
      end
      glitch = (s == 5);
      for (int c = 1; c <= longest; c++) begin
        @(negedge clk);
        for (int d = 0; d < NDOM; d++) if (c >= work[d]) dom_done[d] = 1;
      end
      if (glitch) begin
        repeat (3) @(negedge clk);
        dom_done[1] = 0;
        @(negedge clk);
        dom_done[1] = 1;
      end
      t_done = cyc;
      exp_len = t_done - t_start + HOLD + 1;
      if (exp_len < 40) exp_len = 40;
      wait (step_end);
      @(negedge clk);
      chk(last_len == exp_len, $sformatf("step %0d length %0d, expected %0d", s, last_len, exp_len));
      chk(extended == (last_len > 40), "extended flag");
      if (last_len > 40) n_ext++; else n_min++;
      chk(step_count == s + 1, "step count");
    end
    repeat (200) @(negedge clk);
    chk(step_count == 12, "exactly n_steps steps");
    chk(!busy, "idle after the last step");
    chk(n_ext > 0 && n_min > 0, "both short (min_len) and extended steps seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

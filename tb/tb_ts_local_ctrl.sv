// tb_ts_local_ctrl: a domain of four dies. done must be high only when all
// four dies show the current step's parity and are idle, and must follow
// the die status after the synchroniser and output register (3 edges).
module tb_ts_local_ctrl;
  localparam int ND = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic step_req = 0, die_step_req, done;
  logic [ND-1:0] die_parity = '0, die_idle = '0;
  ts_local_ctrl #(.NDIES(ND)) dut (.*);
  int checks = 0, failures = 0;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (200) begin
      @(negedge clk);
      step_req   = $urandom_range(0, 1);
      die_parity = ND'($urandom_range(0, 15));
      die_idle   = ($urandom_range(0, 1) == 1) ? '1 : ND'($urandom_range(0, 15));
      if ($urandom_range(0, 1) == 1) die_parity = {ND{step_req}};
      repeat (3) @(negedge clk);
      chk(die_step_req == step_req, "step level passed to the dies");
      chk(done == ((&die_idle) && die_parity == {ND{step_req}}), "done rule");
    end
    // latency: all dies turn idle; done must rise on the third edge
    @(negedge clk);
    die_parity = {ND{step_req}}; die_idle = '0;
    repeat (4) @(negedge clk);
    die_idle = '1;
    @(negedge clk); chk(!done, "not yet after 1 edge");
    @(negedge clk); chk(!done, "not yet after 2 edges");
    @(negedge clk); chk(done,  "done after 3 edges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

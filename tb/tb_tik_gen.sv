// tb_tik_gen: flips step_req several times and checks that each flip gives
// exactly one tick, three clock edges later, with the new parity; that
// die_idle is low from the flip until the nodes are no longer busy and the
// network is idle; and that a late busy (an event arriving from another die)
// pulls die_idle low again.
module tb_tik_gen;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic step_req = 0, nodes_busy = 0, net_idle = 1;
  logic tick, step_parity, die_parity, die_idle;
  tik_gen dut (.*);
  int checks = 0, failures = 0, ticks = 0;
  always @(posedge clk) if (tick) ticks++;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    chk(die_idle == 1, "idle before any step");
    for (int s = 1; s <= 4; s++) begin
      int t;
      @(negedge clk);
      step_req = s[0];
      t = 0;
      while (!tick) begin @(negedge clk); t++; if (t > 10) break; end
      chk(t == 3, "tick 3 edges after the flip");
      chk(step_parity == s[0] && die_parity == s[0], "parity follows the step");
      chk(die_idle == 0, "not idle at the tick");
      nodes_busy = 1;
      repeat (5) @(negedge clk);
      chk(die_idle == 0, "not idle while nodes busy");
      nodes_busy = 0;
      repeat (2) @(negedge clk);
      chk(die_idle == 1, "idle after nodes finish");
      net_idle = 0;
      repeat (2) @(negedge clk);
      chk(die_idle == 0, "late network traffic clears idle");
      net_idle = 1;
      repeat (2) @(negedge clk);
      chk(die_idle == 1, "idle again");
    end
    chk(ticks == 4, "one tick per step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

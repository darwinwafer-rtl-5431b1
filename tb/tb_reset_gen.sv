// tb_reset_gen: the output must fall at once when the input reset falls
// (no clock edge needed), and rise exactly STAGES clock edges after the
// input rises.
module tb_reset_gen;
  logic clk = 0, rst_in_n = 0, rst_out_n;
  always #5 clk = ~clk;
  reset_gen #(.STAGES(3)) dut (.*);
  int checks = 0, failures = 0;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    #1 chk(rst_out_n == 0, "out low in reset");
    repeat (2) begin
      @(negedge clk);
      rst_in_n = 1;
      @(posedge clk); #1 chk(rst_out_n == 0, "low after 1 edge");
      @(posedge clk); #1 chk(rst_out_n == 0, "low after 2 edges");
      @(posedge clk); #1 chk(rst_out_n == 1, "high after 3 edges");
      repeat (2) @(posedge clk);
      #2 rst_in_n = 0;
      #1 chk(rst_out_n == 0, "asynchronous assertion");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

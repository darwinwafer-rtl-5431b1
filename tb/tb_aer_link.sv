// tb_aer_link: sends random events across the link between two unrelated
// clocks (10 and 7 time units), with random gaps at the sender and random
// back-pressure at the receiver (light in the first run, heavy in the
// second, so that events queue up behind a blocked output). Every event must arrive once, unchanged and
// in order; both busy flags must fall once all events are through. The test
// is run once with the faster clock at the receiver and once at the sender.
module tb_aer_link;
  localparam int W = 52;
  localparam int NEV = 300;

  logic clk_tx = 0, clk_rx = 0, rst_tx_n = 0, rst_rx_n = 0;
  int   ptx = 5, prx = 3;
  always #(ptx) clk_tx = ~clk_tx;
  always #(prx) clk_rx = ~clk_rx;

  logic         in_valid, in_ready, out_valid, out_ready, tx_busy, rx_busy;
  logic [W-1:0] in_data, out_data;

  aer_link #(.W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  int sent = 0, recv = 0;

  task automatic run_once(int n, int p_ready);
    int target;
    target = sent + n;
    fork
      begin
        while (sent < target) begin
          @(negedge clk_tx);
          in_valid = ($urandom_range(0, 2) != 0);
          in_data  = {$urandom, $urandom};
          #1;
          if (in_valid && in_ready) begin
            q.push_back(in_data);
            sent++;
          end
          @(posedge clk_tx);
          #1 in_valid = 0;
        end
      end
      begin
        while (recv < target) begin
          @(negedge clk_rx);
          out_ready = ($urandom_range(0, 99) < p_ready);
          #1;
          if (out_valid && out_ready) begin
            checks++;
            recv++;
            if (q.size() == 0 || q[0] != out_data) begin
              failures++;
              $display("FAIL: event %0d got %h", recv, out_data);
            end
            if (q.size() != 0) void'(q.pop_front());
          end
          @(posedge clk_rx);
          #1;
        end
      end
    join
    out_ready = 0;
    repeat (10) @(posedge clk_tx);
    repeat (10) @(posedge clk_rx);
    checks++;
    if (tx_busy || rx_busy) begin
      failures++; $display("FAIL: busy after all events tx=%b rx=%b st=%0d ov=%b lf=%b", tx_busy, rx_busy, dut.s_state, out_valid, dut.latch_full);
    end
  endtask

  initial begin
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk_tx);
    rst_tx_n = 1; rst_rx_n = 1;
    repeat (3) @(posedge clk_tx);
    run_once(NEV, 75);
    ptx = 3; prx = 5;
    run_once(NEV, 10);
    checks++;
    if (sent != 2 * NEV || recv != 2 * NEV) begin
      failures++; $display("FAIL: sent %0d received %0d", sent, recv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

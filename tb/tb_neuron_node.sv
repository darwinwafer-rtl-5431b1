// tb_neuron_node: configures a 16-neuron node through CFG_WR packets (leak,
// threshold, reset potential, potentials, fan-out entries), then runs four
// time steps. Before each step random spike events are sent into the input
// bank of that step. Each step's outgoing spike packets are compared, in
// order, with a reference model of the update (multiply by leak, add input,
// saturate, threshold, reset). One step runs with the output blocked for a
// while, so the output queue fills and the update must stall and resume
// without loss. The update time of an unstalled step is checked against
// NEURONS + pipeline depth.
module tb_neuron_node;
  import darwin_pkg::*;
  import tb_util_pkg::*;

  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tick = 0, step_parity = 0, busy, done, stall;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  pkt_t in_pkt = '0, out_pkt;

  neuron_node #(.NEURONS(N), .OQ_DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  int v [N], inb [2][N];
  bit axv [N];
  int axdx [N], axdy [N], axn [N], axw [N];
  int leak = 24576, th = 30, vr = -10;
  pkt_t exp_q [$];
  int stall_cycles = 0;

  int done_cnt = 0;
  always @(posedge clk) if (stall) stall_cycles++;
  always @(posedge clk) if (done) done_cnt++;

  task automatic send(pkt_t p);
    @(negedge clk);
    in_pkt = p; in_valid = 1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  // output monitor
  always @(negedge clk) begin
    #2;
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected spike packet %h", out_pkt);
      end else begin
        if (exp_q[0] != out_pkt) begin
          failures++; $display("FAIL: spike packet %h, expected %h", out_pkt, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
    end
  end

  task automatic run_step(bit p, bit block_out);
    int t0, t1, d0;
    bit f;
    d0 = done_cnt;
    // reference
    for (int i = 0; i < N; i++) begin
      v[i] = lif(v[i], inb[p][i], leak, th, vr, f);
      inb[p][i] = 0;
      if (f && axv[i]) exp_q.push_back(mk_spike(axdx[i], axdy[i], ~p, axn[i], axw[i]));
    end
    @(negedge clk);
    out_ready = !block_out;
    step_parity = p; tick = 1;
    @(negedge clk);
    tick = 0;
    t0 = $time / 10;
    if (block_out) begin
      repeat (N + 10) @(negedge clk);
      out_ready = 1;
    end
    wait (done_cnt == d0 + 1);
    t1 = $time / 10;
    if (!block_out) begin
      checks++;
      if (t1 - t0 > N + 5 || t1 - t0 < N) begin
        failures++; $display("FAIL: update took %0d cycles for %0d neurons", t1 - t0, N);
      end
    end
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d spikes missing", exp_q.size()); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    send(mk_cfg(0, 0, CFG_PARAM, PRM_LEAK, leak));
    send(mk_cfg(0, 0, CFG_PARAM, PRM_THRESH, th));
    send(mk_cfg(0, 0, CFG_PARAM, PRM_VRESET, vr));
    send(mk_cfg(0, 0, CFG_PARAM, PRM_NACT, N));
    for (int i = 0; i < N; i++) begin
      v[i] = $urandom_range(0, 140) - 40;
      send(mk_cfg(0, 0, CFG_V, i, v[i]));
      axv[i]  = ($urandom_range(0, 3) != 0);
      axdx[i] = $urandom_range(0, 20) - 10;
      axdy[i] = $urandom_range(0, 20) - 10;
      axn[i]  = $urandom_range(0, 4095);
      axw[i]  = $urandom_range(0, 400) - 200;
      send(mk_cfg(0, 0, CFG_AX_DX, i, (int'(axv[i]) << 15) | (axdx[i] & 'h1ff)));
      send(mk_cfg(0, 0, CFG_AX_DY, i, axdy[i] & 'h1ff));
      send(mk_cfg(0, 0, CFG_AX_N, i, axn[i]));
      send(mk_cfg(0, 0, CFG_AX_W, i, axw[i]));
      inb[0][i] = 0; inb[1][i] = 0;
    end
    for (int s = 0; s < 4; s++) begin
      bit p;
      p = s[0];
      repeat (60) begin
        int n, w;
        n = $urandom_range(0, N - 1);
        w = $urandom_range(0, 80) - 20;
        inb[p][n] = sat16(longint'(inb[p][n]) + w);
        send(mk_spike(0, 0, p, n, w));
      end
      run_step(p, s == 2);
    end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL: the blocked step never stalled"); end
    $display("stall cycles %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

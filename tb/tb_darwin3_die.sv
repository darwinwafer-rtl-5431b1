// tb_darwin3_die: a 4 x 3 die with 8 neurons per node. The RISC-V channel
// (router (0, 0)) writes a random network into all eleven neuron nodes:
// potentials, and for each neuron a fan-out entry pointing at a neuron of a
// random node, or past a die edge. Then four time steps are run by flipping
// step_req. A reference model computes every neuron update and follows each
// spike by XY routing: it lands in the addressed neuron's input for the next
// step, or leaves the die through the edge port XY routing reaches, with the
// offsets left over. The packets seen on each edge port must match the
// model's, and die_idle/die_parity must report each step's end.
module tb_darwin3_die;
  import darwin_pkg::*;
  import tb_util_pkg::*;

  localparam int MX = 4, MY = 3, NN = 8, NR = MX * MY;
  localparam int LEAK = 30000, TH = 60, VR = 0;

  logic clk = 0, rst_in_n = 0;
  always #5 clk = ~clk;

  logic step_req = 0, link_busy = 0, die_parity, die_idle;
  logic n_out_valid [MX], n_out_ready [MX], n_in_valid [MX], n_in_ready [MX];
  logic s_out_valid [MX], s_out_ready [MX], s_in_valid [MX], s_in_ready [MX];
  logic e_out_valid [MY], e_out_ready [MY], e_in_valid [MY], e_in_ready [MY];
  logic w_out_valid [MY], w_out_ready [MY], w_in_valid [MY], w_in_ready [MY];
  pkt_t n_out_pkt [MX], n_in_pkt [MX], s_out_pkt [MX], s_in_pkt [MX];
  pkt_t e_out_pkt [MY], e_in_pkt [MY], w_out_pkt [MY], w_in_pkt [MY];
  logic riscv_tx_valid = 0, riscv_tx_ready, riscv_rx_valid, riscv_rx_ready = 1;
  pkt_t riscv_tx_pkt = '0, riscv_rx_pkt;

  darwin3_die #(.MESH_X(MX), .MESH_Y(MY), .NEURONS(NN)) dut (.*);

  int checks = 0, failures = 0;

  // potentials held by the nodes, read through the hierarchy
  int vhw [NR][NN];
  for (genvar gy = 0; gy < MY; gy++) begin : g_vy
    for (genvar gx = 0; gx < MX; gx++) begin : g_vx
      if (gx != 0 || gy != 0) begin : g_n
        always @(negedge clk)
          for (int i = 0; i < NN; i++)
            vhw[gy * MX + gx][i] = int'(dut.g_y[gy].g_x[gx].g_node.u_node.v_mem[i]);
      end
    end
  end

  // reference state
  int v [NR][NN], inb [NR][2][NN];
  bit axv [NR][NN];
  int axdx [NR][NN], axdy [NR][NN], axn [NR][NN], axw [NR][NN];
  pkt_t exp_edge [$], got_edge [$];
  int n_inside = 0, n_out = 0;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send(pkt_t p);
    @(negedge clk);
    riscv_tx_pkt = p; riscv_tx_valid = 1;
    #1;
    while (!riscv_tx_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    riscv_tx_valid = 0;
  endtask

  // collect every packet leaving an edge
  always @(negedge clk) begin
    #2;
    for (int k = 0; k < MX; k++) begin
      if (n_out_valid[k]) got_edge.push_back(n_out_pkt[k]);
      if (s_out_valid[k]) got_edge.push_back(s_out_pkt[k]);
    end
    for (int k = 0; k < MY; k++) begin
      if (e_out_valid[k]) got_edge.push_back(e_out_pkt[k]);
      if (w_out_valid[k]) got_edge.push_back(w_out_pkt[k]);
    end
  end

  // XY route from (x, y) with offsets (dx, dy): inside, or the packet as it
  // leaves the die (offset still to travel after the exit hop).
  function automatic bit route_ref(int x, int y, int dx, int dy, output int node,
                                   output int rdx, output int rdy);
    int tx, ty;
    tx = x + dx; ty = y + dy;
    rdx = dx; rdy = dy; node = -1;
    if (tx >= MX)      begin rdx = tx - (MX - 1) - 1; rdy = dy; return 0; end
    if (tx < 0)        begin rdx = tx + 1;            rdy = dy; return 0; end
    if (ty >= MY)      begin rdx = 0; rdy = ty - (MY - 1) - 1; return 0; end
    if (ty < 0)        begin rdx = 0; rdy = ty + 1;            return 0; end
    node = ty * MX + tx;
    return 1;
  endfunction

  function automatic bit same(pkt_t a, pkt_t b);
    return a == b;
  endfunction

  initial begin
    for (int k = 0; k < MX; k++) begin
      n_out_ready[k] = 1; s_out_ready[k] = 1; n_in_valid[k] = 0; s_in_valid[k] = 0;
      n_in_pkt[k] = '0; s_in_pkt[k] = '0;
    end
    for (int k = 0; k < MY; k++) begin
      e_out_ready[k] = 1; w_out_ready[k] = 1; e_in_valid[k] = 0; w_in_valid[k] = 0;
      e_in_pkt[k] = '0; w_in_pkt[k] = '0;
    end
    repeat (3) @(negedge clk);
    rst_in_n = 1;
    repeat (NN + 10) @(negedge clk);
    // network
    for (int r = 1; r < NR; r++) begin
      int x, y;
      x = r % MX; y = r / MX;
      send(mk_cfg(x, y, CFG_PARAM, PRM_LEAK, LEAK));
      send(mk_cfg(x, y, CFG_PARAM, PRM_THRESH, TH));
      send(mk_cfg(x, y, CFG_PARAM, PRM_VRESET, VR));
      send(mk_cfg(x, y, CFG_PARAM, PRM_NACT, NN));
      for (int i = 0; i < NN; i++) begin
        int tx, ty;
        v[r][i] = $urandom_range(0, 90);
        inb[r][0][i] = 0; inb[r][1][i] = 0;
        axv[r][i] = ($urandom_range(0, 4) != 0);
        tx = $urandom_range(0, MX + 1) - 1;       // -1 .. MX: may leave the die
        ty = $urandom_range(0, MY + 1) - 1;
        if (tx == 0 && ty == 0) tx = 1;           // (0,0) is the RISC-V core
        axdx[r][i] = tx - x; axdy[r][i] = ty - y;
        axn[r][i]  = $urandom_range(0, NN - 1);
        axw[r][i]  = $urandom_range(10, 50);
        send(mk_cfg(x, y, CFG_V, i, v[r][i]));
        send(mk_cfg(x, y, CFG_AX_DX, i, (int'(axv[r][i]) << 15) | (axdx[r][i] & 'h1ff)));
        send(mk_cfg(x, y, CFG_AX_DY, i, axdy[r][i] & 'h1ff));
        send(mk_cfg(x, y, CFG_AX_N, i, axn[r][i]));
        send(mk_cfg(x, y, CFG_AX_W, i, axw[r][i]));
      end
    end
    repeat (50) @(negedge clk);
    for (int s = 1; s <= 4; s++) begin
      bit p;
      p = s[0];
      // reference step
      for (int r = 1; r < NR; r++) begin
        for (int i = 0; i < NN; i++) begin
          bit f;
          v[r][i] = lif(v[r][i], inb[r][p][i], LEAK, TH, VR, f);
          inb[r][p][i] = 0;
          if (f && axv[r][i]) begin
            int node, rdx, rdy;
            if (route_ref(r % MX, r / MX, axdx[r][i], axdy[r][i], node, rdx, rdy)) begin
              inb[node][~p][axn[r][i]] = sat16(longint'(inb[node][~p][axn[r][i]]) + axw[r][i]);
              n_inside++;
            end else begin
              exp_edge.push_back(mk_spike(rdx, rdy, ~p, axn[r][i], axw[r][i]));
              n_out++;
            end
          end
        end
      end
      @(negedge clk);
      step_req = p;
      repeat (5) @(negedge clk);
      chk(die_parity == p, "die took the step");
      while (!die_idle) @(negedge clk);
      repeat (5) @(negedge clk);
      chk(die_idle, "die idle at step end");
    end
    // compare edge packets as multisets
    chk(got_edge.size() == exp_edge.size(),
        $sformatf("%0d edge packets, expected %0d", got_edge.size(), exp_edge.size()));
    foreach (exp_edge[k]) begin
      int hit;
      hit = -1;
      foreach (got_edge[j]) if (same(got_edge[j], exp_edge[k])) begin hit = j; break; end
      chk(hit >= 0, $sformatf("missing edge packet %h", exp_edge[k]));
      if (hit >= 0) got_edge.delete(hit);
    end
    // potentials after four steps
    for (int r = 1; r < NR; r++)
      for (int i = 0; i < NN; i++)
        chk(v[r][i] == vhw[r][i],
            $sformatf("v of node %0d neuron %0d", r, i));
    chk(n_inside > 0 && n_out > 0, "spikes both inside the die and across its edges");
    $display("spikes inside %0d, leaving %0d", n_inside, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

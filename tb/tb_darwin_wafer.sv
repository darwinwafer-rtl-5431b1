// tb_darwin_wafer: end-to-end run of a 2 x 2 wafer of 3 x 3 dies with 16
// neurons per node; every die and the wafer controllers run on clocks of
// different periods.
//
// 1. The network is written from outside: CFG_WR packets enter through the
//    west aggregation controller, cross an AER link into the die array and
//    travel the mesh to their node.
// 2. Five time steps run under the global controller: two with a long
//    minimum step length (steps end at min_len) and three with min_len = 1
//    (steps end when the slowest domain is done, i.e. extended).
// 3. A reference model computes every neuron update and follows each spike by
//    XY routing over the whole 6 x 6 router grid: into a neuron's input for
//    the next step, or off the wafer to the aggregation controller and link
//    that XY routing reaches. Upstream packets (edge, link number, packet)
//    must match the model; final potentials must match too.
// Some nodes are set to fire all their neurons in the first step toward
// another die and off the east edge, so that these mechanisms occur, and
// each is counted: die-to-die link transfers, neuron-node stalls on a full
// output queue, several edge links waiting at one aggregation controller,
// switch back-pressure, steps ending at min_len and extended steps.
module tb_darwin_wafer;
  import darwin_pkg::*;
  import tb_util_pkg::*;

  localparam int DX = 2, DY = 2, MX = 3, MY = 3, NN = 16;
  localparam int GX = DX * MX, GY = DY * MY, NDIE = DX * DY;
  localparam int NEDGE = (GX > GY) ? GX : GY;
  localparam int PW = $clog2(NEDGE);
  localparam int LEAK = 30000, TH = 60, VR = 0;

  // power-on reset is applied as a falling edge before the first clock edge
  logic clk_sys = 0, rst_n = 1;
  initial #1 rst_n = 0;
  logic clk_die [NDIE];
  always #5 clk_sys = ~clk_sys;
  for (genvar d = 0; d < NDIE; d++) begin : g_clk
    initial clk_die[d] = 0;
    always #(4 + 2 * d) clk_die[d] = ~clk_die[d];
  end

  logic run = 0, ts_busy, step_end, step_extended;
  logic [31:0] n_steps = 0, min_len = 0, step_count, last_len;
  logic up_valid [4], up_ready [4], dn_valid [4], dn_ready [4];
  logic [PW-1:0] up_port [4], dn_port [4];
  pkt_t up_pkt [4], dn_pkt [4];
  logic riscv_tx_valid [NDIE], riscv_tx_ready [NDIE], riscv_rx_valid [NDIE], riscv_rx_ready [NDIE];
  pkt_t riscv_tx_pkt [NDIE], riscv_rx_pkt [NDIE];

  darwin_wafer #(
    .DIES_X(DX), .DIES_Y(DY), .MESH_X(MX), .MESH_Y(MY), .NEURONS(NN), .HOLD(16)
  ) dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- reference model ----------------
  int v [GX*GY][NN], inb [GX*GY][2][NN];
  bit axv [GX*GY][NN];
  int axdx [GX*GY][NN], axdy [GX*GY][NN], axn [GX*GY][NN], axw [GX*GY][NN];
  typedef struct packed { logic [1:0] side; logic [PW-1:0] port; pkt_t p; } up_t;
  up_t exp_up [$], got_up [$];

  function automatic bit is_riscv(int x, int y);
    return (x % MX == 0) && (y % MY == 0);
  endfunction

  // XY route over the whole grid; returns 1 with the node index when the
  // target is on the wafer, else the edge side, link and leftover offsets.
  function automatic bit route_ref(int x, int y, int dx, int dy, output int node,
                                   output int side, output int port, output int rdx, output int rdy);
    int tx, ty;
    tx = x + dx; ty = y + dy;
    node = -1; side = 0; port = 0; rdx = 0; rdy = 0;
    if (tx >= GX) begin side = 1; port = y;  rdx = tx - GX; rdy = dy; return 0; end
    if (tx < 0)   begin side = 3; port = y;  rdx = tx + 1;  rdy = dy; return 0; end
    if (ty >= GY) begin side = 2; port = tx; rdx = 0; rdy = ty - GY; return 0; end
    if (ty < 0)   begin side = 0; port = tx; rdx = 0; rdy = ty + 1;  return 0; end
    node = ty * GX + tx;
    return 1;
  endfunction

  // ---------------- stimulus helpers ----------------
  // configuration through the west aggregation controller, link = row y
  task automatic cfg(int x, int y, logic [3:0] sel, int idx, int data);
    @(negedge clk_sys);
    dn_valid[3] = 1; dn_port[3] = PW'(y); dn_pkt[3] = mk_cfg(x, 0, sel, idx, data);
    #1;
    while (!dn_ready[3]) begin @(negedge clk_sys); #1; end
    @(posedge clk_sys); #1;
    dn_valid[3] = 0;
  endtask

  // ---------------- monitors and mechanism counters ----------------
  int n_d2d = 0, n_stall = 0, n_contend = 0, n_backp = 0, n_ext = 0, n_min = 0, n_riscv = 0;

  always @(negedge clk_sys) begin
    #2;
    for (int s = 0; s < 4; s++) begin
      up_ready[s] = ($urandom_range(0, 2) != 0);
    end
    #1;
    for (int s = 0; s < 4; s++) begin
      int nv;
      if (up_valid[s] && up_ready[s]) got_up.push_back(up_t'({2'(s), up_port[s], up_pkt[s]}));
      if (up_valid[s] && !up_ready[s]) n_backp++;
      nv = 0;
      for (int k = 0; k < NEDGE; k++) if (dut.a_iv[s][k]) nv++;
      if (nv > 1) n_contend++;
    end
  end

  always @(posedge clk_sys) if (step_end) begin
    if (step_extended) n_ext++; else n_min++;
  end

  for (genvar d = 0; d < NDIE; d++) begin : g_mon
    always @(posedge clk_die[d]) begin
      for (int s = 0; s < 4; s++)
        for (int k = 0; k < MX; k++)
          if (dut.d_iv[d][s][k] && dut.d_ir[d][s][k]) begin
            // inbound transfers at die ports that face another die
            int i, j;
            i = d % DX; j = d / DX;
            if ((s == 0 && j > 0) || (s == 2 && j < DY - 1) ||
                (s == 3 && i > 0) || (s == 1 && i < DX - 1)) n_d2d++;
          end
      if (riscv_rx_valid[d]) n_riscv++;
    end
    for (genvar y = 0; y < MY; y++) begin : g_y
      for (genvar x = 0; x < MX; x++) begin : g_x
        if (x != 0 || y != 0) begin : g_n
          always @(posedge clk_die[d])
            if (dut.g_die[d].u_die.g_y[y].g_x[x].g_node.u_node.stall) n_stall++;
        end
      end
    end
  end

  // potentials held by the nodes
  int vhw [GX*GY][NN];
  for (genvar d = 0; d < NDIE; d++) begin : g_vd
    for (genvar y = 0; y < MY; y++) begin : g_vy
      for (genvar x = 0; x < MX; x++) begin : g_vx
        if (x != 0 || y != 0) begin : g_n
          always @(negedge clk_sys)
            for (int i = 0; i < NN; i++)
              vhw[((d / DX) * MY + y) * GX + (d % DX) * MX + x][i] =
                int'(dut.g_die[d].u_die.g_y[y].g_x[x].g_node.u_node.v_mem[i]);
        end
      end
    end
  end

  // ---------------- one reference step ----------------
  task automatic ref_step(bit p);
    for (int r = 0; r < GX * GY; r++) begin
      if (is_riscv(r % GX, r / GX)) continue;
      for (int i = 0; i < NN; i++) begin
        bit f;
        v[r][i] = lif(v[r][i], inb[r][p][i], LEAK, TH, VR, f);
        inb[r][p][i] = 0;
        if (f && axv[r][i]) begin
          int node, side, port, rdx, rdy;
          if (route_ref(r % GX, r / GX, axdx[r][i], axdy[r][i], node, side, port, rdx, rdy))
            inb[node][~p][axn[r][i]] = sat16(longint'(inb[node][~p][axn[r][i]]) + axw[r][i]);
          else
            exp_up.push_back(up_t'({2'(side), PW'(port), mk_spike(rdx, rdy, ~p, axn[r][i], axw[r][i])}));
        end
      end
    end
  endtask

  task automatic run_steps(int n, int minl, int first);
    @(negedge clk_sys);
    n_steps = n; min_len = minl; run = 1;
    for (int s = first; s < first + n; s++) ref_step(s[0]);
    @(negedge clk_sys);
    wait (step_count == first + n - 1 && !ts_busy);
    repeat (200) @(negedge clk_sys);
    run = 0;
    repeat (5) @(negedge clk_sys);
  endtask

  initial begin
    for (int s = 0; s < 4; s++) begin
      dn_valid[s] = 0; dn_port[s] = '0; dn_pkt[s] = '0; up_ready[s] = 1;
    end
    for (int d = 0; d < NDIE; d++) begin
      riscv_tx_valid[d] = 0; riscv_tx_pkt[d] = '0; riscv_rx_ready[d] = 1;
    end
    repeat (3) @(negedge clk_sys);
    rst_n = 1;
    repeat (NN + 30) @(negedge clk_sys);
    // random network, plus three burst nodes
    for (int r = 0; r < GX * GY; r++) begin
      int x, y;
      x = r % GX; y = r / GX;
      if (is_riscv(x, y)) continue;
      cfg(x, y, CFG_PARAM, PRM_LEAK, LEAK);
      cfg(x, y, CFG_PARAM, PRM_THRESH, TH);
      cfg(x, y, CFG_PARAM, PRM_VRESET, VR);
      cfg(x, y, CFG_PARAM, PRM_NACT, NN);
      for (int i = 0; i < NN; i++) begin
        int tx, ty;
        inb[r][0][i] = 0; inb[r][1][i] = 0;
        if (r == 1 * GX + 1 || r == 1 * GX + 2) begin  // (1,1), (2,1): all fire into die (1,0)
          v[r][i] = 200; axv[r][i] = 1; tx = 4; ty = 1; axn[r][i] = i % 2; axw[r][i] = 20;
        end else if (r == 2 * GX + 5 || r == 4 * GX + 5) begin  // off the east edge
          v[r][i] = 200; axv[r][i] = 1; tx = GX; ty = y; axn[r][i] = i; axw[r][i] = 7;
        end else begin
          v[r][i] = $urandom_range(0, 90);
          axv[r][i] = ($urandom_range(0, 4) != 0);
          do begin
            tx = $urandom_range(0, GX + 1) - 1;
            ty = $urandom_range(0, GY + 1) - 1;
          end while (tx >= 0 && tx < GX && ty >= 0 && ty < GY && is_riscv(tx, ty));
          axn[r][i] = $urandom_range(0, NN - 1);
          axw[r][i] = $urandom_range(10, 50);
        end
        axdx[r][i] = tx - x; axdy[r][i] = ty - y;
        cfg(x, y, CFG_V, i, v[r][i]);
        cfg(x, y, CFG_AX_DX, i, (int'(axv[r][i]) << 15) | (axdx[r][i] & 'h1ff));
        cfg(x, y, CFG_AX_DY, i, axdy[r][i] & 'h1ff);
        cfg(x, y, CFG_AX_N, i, axn[r][i]);
        cfg(x, y, CFG_AX_W, i, axw[r][i]);
      end
    end
    repeat (300) @(negedge clk_sys);
    run_steps(2, 3000, 1);
    run_steps(3, 1, 3);
    repeat (100) @(negedge clk_sys);
    // results
    chk(step_count == 5, $sformatf("%0d steps run", step_count));
    chk(got_up.size() == exp_up.size(),
        $sformatf("%0d upstream packets, expected %0d", got_up.size(), exp_up.size()));
    foreach (exp_up[k]) begin
      int hit;
      hit = -1;
      foreach (got_up[j]) if (got_up[j] == exp_up[k]) begin hit = j; break; end
      chk(hit >= 0, $sformatf("missing upstream packet %h", exp_up[k]));
      if (hit >= 0) got_up.delete(hit);
    end
    for (int r = 0; r < GX * GY; r++)
      if (!is_riscv(r % GX, r / GX))
        for (int i = 0; i < NN; i++)
          chk(v[r][i] == vhw[r][i], $sformatf("v of node (%0d,%0d) neuron %0d: %0d, expected %0d",
                                              r % GX, r / GX, i, vhw[r][i], v[r][i]));
    chk(n_riscv == 0, "no packet reached a RISC-V port");
    $display("mechanisms: die-to-die transfers %0d, node stall cycles %0d, aggregator contention %0d,",
             n_d2d, n_stall, n_contend);
    $display("            switch back-pressure %0d, steps at min_len %0d, extended steps %0d",
             n_backp, n_min, n_ext);
    chk(n_d2d > 0,     "die-to-die link transfers happened");
    chk(n_stall > 0,   "a neuron node stalled on its output queue");
    chk(n_contend > 0, "several edge links waited at one aggregation controller");
    chk(n_backp > 0,   "switch back-pressure happened");
    chk(n_min == 2,    "two steps ended at min_len");
    chk(n_ext == 3,    "three steps were extended to the slowest domain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk_sys);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

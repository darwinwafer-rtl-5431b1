// tb_noc_router: random single-flit packets enter all five ports of one
// router with random back-pressure on the outputs. Every packet must leave
// through the port given by XY routing on its offsets, with the offset of
// that dimension moved one step toward zero, in order per (input, output)
// pair. Also checks the one-cycle latency of an idle router.
module tb_noc_router;
  import darwin_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid [NPORTS], in_ready [NPORTS], out_valid [NPORTS], out_ready [NPORTS];
  pkt_t in_pkt [NPORTS], out_pkt [NPORTS];
  logic idle;

  noc_router #(.FIFO_DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  pkt_t exp_q [NPORTS][$];   // expected packets per output
  int   sent = 0, recv = 0;
  localparam int NPKT = 2000;

  function automatic port_e ref_route(pkt_t p);
    if (p.dx > 0) return P_E;
    if (p.dx < 0) return P_W;
    if (p.dy > 0) return P_S;
    if (p.dy < 0) return P_N;
    return P_L;
  endfunction

  function automatic pkt_t ref_hop(pkt_t p);
    pkt_t q = p;
    case (ref_route(p))
      P_E: q.dx = p.dx - 1;
      P_W: q.dx = p.dx + 1;
      P_S: q.dy = p.dy - 1;
      P_N: q.dy = p.dy + 1;
      default: ;
    endcase
    return q;
  endfunction

  // A port never sends a packet back where it came from: an input only
  // carries packets that can legally arrive there.
  function automatic pkt_t rand_pkt(int port);
    pkt_t p;
    p = pkt_t'({$urandom, $urandom});
    p.ptype = ptype_e'($urandom_range(0, 1));
    p.dx = OFS_W'($signed($urandom_range(0, 6)) - 3);
    p.dy = OFS_W'($signed($urandom_range(0, 6)) - 3);
    case (port)
      P_E: if (p.dx > 0) p.dx = -p.dx;      // from east: travels west or turns
      P_W: if (p.dx < 0) p.dx = -p.dx;
      P_N: begin p.dx = 0; if (p.dy < 0) p.dy = -p.dy; end
      P_S: begin p.dx = 0; if (p.dy > 0) p.dy = -p.dy; end
      default: ;
    endcase
    return p;
  endfunction

  // Inputs and out_ready change just after a falling edge; transfers are
  // read 1 time unit later, before the rising edge that performs them.
  task automatic settle_and_score();
    #1;
    for (int o = 0; o < NPORTS; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        int hit;
        recv++;
        hit = -1;
        for (int k = 0; k < exp_q[o].size(); k++)
          if (exp_q[o][k] == out_pkt[o]) begin hit = k; break; end
        checks++;
        if (hit < 0) begin
          failures++; $display("FAIL: unexpected packet %h at port %0d", out_pkt[o], o);
        end else exp_q[o].delete(hit);
      end
    end
    for (int i = 0; i < NPORTS; i++) begin
      if (in_valid[i] && in_ready[i]) begin
        exp_q[ref_route(in_pkt[i])].push_back(ref_hop(in_pkt[i]));
        sent++;
        taken[i] = 1;
      end else taken[i] = 0;
    end
  endtask

  bit taken [NPORTS];

  initial begin
    for (int i = 0; i < NPORTS; i++) begin
      in_valid[i] = 0; in_pkt[i] = '0; out_ready[i] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // latency: a packet into an idle router, local to east, offered on one
    // edge, must be at the east output right after the next edge.
    @(negedge clk);
    in_pkt[P_L] = '0; in_pkt[P_L].dx = 2; in_valid[P_L] = 1;
    settle_and_score();
    @(negedge clk);
    in_valid[P_L] = 0;
    #1;
    checks++;
    if (!(out_valid[P_E] && out_pkt[P_E].dx == 1)) begin
      failures++; $display("FAIL latency: packet not at east output one cycle later");
    end
    // random traffic
    while (sent < NPKT + 1) begin
      for (int i = 0; i < NPORTS; i++) begin
        if (taken[i]) in_valid[i] = 0;
        out_ready[i] = ($urandom_range(0, 3) != 0);
        if (!in_valid[i] && $urandom_range(0, 1) == 1) begin
          in_pkt[i]   = rand_pkt(i);
          in_valid[i] = 1;
        end
      end
      settle_and_score();
      @(negedge clk);
    end
    for (int i = 0; i < NPORTS; i++) if (taken[i]) in_valid[i] = 0;
    for (int i = 0; i < NPORTS; i++) begin
      in_valid[i] = 0; out_ready[i] = 1;
    end
    repeat (50) begin settle_and_score(); @(negedge clk); end
    for (int i = 0; i < NPORTS; i++) begin
      checks++;
      if (exp_q[i].size() != 0) begin
        failures++; $display("FAIL: %0d packets never left port %0d", exp_q[i].size(), i);
      end
    end
    checks++;
    if (!idle) begin failures++; $display("FAIL: router not idle at the end"); end
    checks++;
    if (recv != sent) begin failures++; $display("FAIL: received %0d of %0d", recv, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

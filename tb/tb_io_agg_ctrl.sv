// tb_io_agg_ctrl: eight edge links offer random packets while the switch
// side applies random back-pressure. Every packet must come out on the
// upstream port once, tagged with its link number and in order per link.
// With all eight links waiting at once, grants must rotate so that each
// link is served once in every eight packets. Downstream, tagged packets
// must appear on exactly the addressed link, and dn_ready must follow that
// link's ready.
module tb_io_agg_ctrl;
  import darwin_pkg::*;
  localparam int N = 8, PW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic edge_in_valid [N], edge_in_ready [N], edge_out_valid [N], edge_out_ready [N];
  pkt_t edge_in_pkt [N], edge_out_pkt [N];
  logic up_valid, up_ready, dn_valid, dn_ready;
  logic [PW-1:0] up_port, dn_port;
  pkt_t up_pkt, dn_pkt;

  io_agg_ctrl #(.N(N), .PW(PW)) dut (.*);

  int checks = 0, failures = 0;
  pkt_t q [N][$];
  int sent = 0, recv = 0;
  bit taken [N];
  int last_port = -1, rot_ok = 0, rot_bad = 0;
  bit all_busy_phase = 0;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic cycle_upstream(int p_valid, int p_ready);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      if (taken[i]) edge_in_valid[i] = 0;
      if (!edge_in_valid[i] && $urandom_range(0, 99) < p_valid) begin
        edge_in_valid[i] = 1;
        edge_in_pkt[i]   = pkt_t'({$urandom, $urandom});
      end
    end
    up_ready = ($urandom_range(0, 99) < p_ready);
    #1;
    if (up_valid && up_ready) begin
      recv++;
      chk(q[up_port].size() != 0 && q[up_port][0] == up_pkt, "upstream packet and tag");
      if (q[up_port].size() != 0) void'(q[up_port].pop_front());
      if (all_busy_phase && last_port >= 0) begin
        if (int'(up_port) == (last_port + 1) % N) rot_ok++; else rot_bad++;
      end
      last_port = up_port;
    end
    for (int i = 0; i < N; i++) begin
      taken[i] = edge_in_valid[i] && edge_in_ready[i];
      if (taken[i]) begin q[i].push_back(edge_in_pkt[i]); sent++; end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      edge_in_valid[i] = 0; edge_in_pkt[i] = '0; edge_out_ready[i] = 0; taken[i] = 0;
    end
    up_ready = 0; dn_valid = 0; dn_port = 0; dn_pkt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (600) cycle_upstream(40, 70);
    // all links busy, switch always ready: strict rotation
    all_busy_phase = 1;
    repeat (200) cycle_upstream(100, 100);
    all_busy_phase = 0;
    repeat (40) cycle_upstream(0, 100);
    chk(sent == recv && sent > 500, $sformatf("sent %0d received %0d", sent, recv));
    chk(rot_ok > 150 && rot_bad == 0, $sformatf("round robin rotation ok=%0d bad=%0d", rot_ok, rot_bad));
    // downstream
    repeat (300) begin
      @(negedge clk);
      dn_valid = $urandom_range(0, 1);
      dn_port  = PW'($urandom_range(0, N - 1));
      dn_pkt   = pkt_t'({$urandom, $urandom});
      for (int i = 0; i < N; i++) edge_out_ready[i] = $urandom_range(0, 1);
      #1;
      for (int i = 0; i < N; i++)
        chk(edge_out_valid[i] == (dn_valid && dn_port == i) &&
            (!edge_out_valid[i] || edge_out_pkt[i] == dn_pkt), "downstream steering");
      chk(dn_ready == edge_out_ready[dn_port], "downstream ready");
    end
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

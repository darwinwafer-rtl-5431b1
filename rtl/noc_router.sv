// noc_router: one node of the mesh network-on-chip, with ports North, East,
// South, West and Local (the neuron node or the RISC-V core).
//
// Packets are single flits that carry the hops still to travel as signed
// offsets (dx, dy). Routing is dimension-ordered: first along x until dx is
// zero, then along y, then out of the local port; each hop moves the offset
// one step toward zero. Because only relative offsets are carried, the same
// packet crosses die boundaries unchanged in format, which is how a spike
// reaches any node of the wafer. Relative addressing is from the source; the
// XY order, the buffering and the arbitration are this design's choices.
//
// Every input has a FIFO_DEPTH-entry buffer. Every output has a round-robin
// arbiter over the five inputs, rotating past the last winner, and passes at
// most one packet per cycle. A packet that finds its output not ready waits
// in its input buffer (back-pressure), which holds up only that input.
//
// Interface: valid/ready on every channel, a transfer when both are high on
// a rising clock edge. in_ready is high while the input buffer has space;
// out_valid does not depend on out_ready. Latency through an idle router is
// one cycle (buffer write, then the head is presented at the output).
module noc_router
  import darwin_pkg::*;
#(
  parameter int FIFO_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid  [NPORTS],
  output logic in_ready  [NPORTS],
  input  pkt_t in_pkt    [NPORTS],
  output logic out_valid [NPORTS],
  input  logic out_ready [NPORTS],
  output pkt_t out_pkt   [NPORTS],
  output logic idle
);

  logic  hv    [NPORTS];   // input buffer head valid
  pkt_t  hp    [NPORTS];   // input buffer head
  logic  pop   [NPORTS];
  logic  empty [NPORTS];
  port_e dest  [NPORTS];

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    sync_fifo #(.T(pkt_t), .DEPTH(FIFO_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid (in_valid[i]),
      .in_ready (in_ready[i]),
      .in_data  (in_pkt[i]),
      .out_valid(hv[i]),
      .out_ready(pop[i]),
      .out_data (hp[i]),
      .empty    (empty[i])
    );
    assign dest[i] = route(hp[i]);
  end

  // Round-robin arbitration per output.
  logic [2:0] last  [NPORTS];  // last input granted at each output
  logic [2:0] grant [NPORTS];
  logic       gv    [NPORTS];

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      gv[o]    = 1'b0;
      grant[o] = '0;
      for (int k = 1; k <= NPORTS; k++) begin
        int i;
        i = (int'(last[o]) + k) % NPORTS;
        if (!gv[o] && hv[i] && dest[i] == port_e'(o)) begin
          gv[o]    = 1'b1;
          grant[o] = 3'(i);
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NPORTS; i++) pop[i] = 1'b0;
    for (int o = 0; o < NPORTS; o++) begin
      out_valid[o] = gv[o];
      out_pkt[o]   = hop(hp[grant[o]], port_e'(o));
      if (gv[o] && out_ready[o]) pop[grant[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORTS; o++) last[o] <= 3'(NPORTS - 1);
    end else begin
      for (int o = 0; o < NPORTS; o++)
        if (gv[o] && out_ready[o]) last[o] <= grant[o];
    end
  end

  always_comb begin
    idle = 1'b1;
    for (int i = 0; i < NPORTS; i++) if (!empty[i]) idle = 1'b0;
  end

  // A packet never turns back through the port it came in on.
  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    if (o != P_L) begin : g_nl
      assert property (@(posedge clk) disable iff (!rst_n)
        gv[o] |-> int'(grant[o]) != o)
        else $error("router: packet routed back out of its input port %0d", o);
    end
  end

endmodule

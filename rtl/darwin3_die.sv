// darwin3_die: one Darwin3 chiplet, a MESH_X x MESH_Y mesh of routers.
//
// Router (x, y) sits in column x (east is +x) and row y (south is +y); its
// north/east/south/west ports join the neighbouring routers. Routers on the
// die boundary bring that port out of the die as inter-chip port k, where
// k is the column (north and south edges) or the row (east and west edges);
// the wafer joins these ports to the next die through AER links. The local
// port of router (0, 0) belongs to the RISC-V control core, which is not part
// of this RTL: its channel is brought out as the riscv_* ports. Every other
// router has a neuron node on its local port.
//
// A reset generator releases the die reset on the die clock, and the tick
// generator (tik_gen) starts each time step in all neuron nodes and reports
// when the die is finished and quiet (die_idle). link_busy tells it that an
// AER link touching the die still holds an event.
//
// From the source: the 24 x 24 router mesh, the RISC-V core at router (0, 0),
// a neuron node at each other router, inter-chip communication on all four
// sides, a reset generator and a tick generator. The clocking and the
// status signals are this design's choices.
module darwin3_die
  import darwin_pkg::*;
#(
  parameter int MESH_X     = 24,
  parameter int MESH_Y     = 24,
  parameter int NEURONS    = 4096,
  parameter int FIFO_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_in_n,
  // time-step control
  input  logic step_req,
  input  logic link_busy,
  output logic die_parity,
  output logic die_idle,
  // inter-chip ports, north and south edges (one per column)
  output logic n_out_valid [MESH_X], input  logic n_out_ready [MESH_X], output pkt_t n_out_pkt [MESH_X],
  input  logic n_in_valid  [MESH_X], output logic n_in_ready  [MESH_X], input  pkt_t n_in_pkt  [MESH_X],
  output logic s_out_valid [MESH_X], input  logic s_out_ready [MESH_X], output pkt_t s_out_pkt [MESH_X],
  input  logic s_in_valid  [MESH_X], output logic s_in_ready  [MESH_X], input  pkt_t s_in_pkt  [MESH_X],
  // inter-chip ports, east and west edges (one per row)
  output logic e_out_valid [MESH_Y], input  logic e_out_ready [MESH_Y], output pkt_t e_out_pkt [MESH_Y],
  input  logic e_in_valid  [MESH_Y], output logic e_in_ready  [MESH_Y], input  pkt_t e_in_pkt  [MESH_Y],
  output logic w_out_valid [MESH_Y], input  logic w_out_ready [MESH_Y], output pkt_t w_out_pkt [MESH_Y],
  input  logic w_in_valid  [MESH_Y], output logic w_in_ready  [MESH_Y], input  pkt_t w_in_pkt  [MESH_Y],
  // RISC-V control core channel (local port of router (0, 0))
  input  logic riscv_tx_valid, output logic riscv_tx_ready, input  pkt_t riscv_tx_pkt,
  output logic riscv_rx_valid, input  logic riscv_rx_ready, output pkt_t riscv_rx_pkt
);
  localparam int NR = MESH_X * MESH_Y;

  logic rst_n;
  reset_gen u_rst (.clk, .rst_in_n, .rst_out_n(rst_n));

  // router channel arrays, indexed [router][port]
  logic iv [NR][NPORTS];
  logic ir [NR][NPORTS];
  pkt_t ip [NR][NPORTS];
  logic ov [NR][NPORTS];
  logic orr[NR][NPORTS];
  pkt_t op [NR][NPORTS];
  logic r_idle    [NR];
  logic node_busy [NR];

  logic tick, step_parity;

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int R = y * MESH_X + x;

      noc_router #(.FIFO_DEPTH(FIFO_DEPTH)) u_router (
        .clk, .rst_n,
        .in_valid (iv[R]),  .in_ready (ir[R]),  .in_pkt (ip[R]),
        .out_valid(ov[R]),  .out_ready(orr[R]), .out_pkt(op[R]),
        .idle     (r_idle[R])
      );

      // north
      if (y == 0) begin : g_n_edge
        assign n_out_valid[x] = ov[R][P_N];
        assign orr[R][P_N]    = n_out_ready[x];
        assign n_out_pkt[x]   = op[R][P_N];
        assign iv[R][P_N]     = n_in_valid[x];
        assign n_in_ready[x]  = ir[R][P_N];
        assign ip[R][P_N]     = n_in_pkt[x];
      end else begin : g_n_int
        assign iv[R][P_N]  = ov[R-MESH_X][P_S];
        assign ip[R][P_N]  = op[R-MESH_X][P_S];
        assign orr[R][P_N] = ir[R-MESH_X][P_S];
      end
      // south
      if (y == MESH_Y-1) begin : g_s_edge
        assign s_out_valid[x] = ov[R][P_S];
        assign orr[R][P_S]    = s_out_ready[x];
        assign s_out_pkt[x]   = op[R][P_S];
        assign iv[R][P_S]     = s_in_valid[x];
        assign s_in_ready[x]  = ir[R][P_S];
        assign ip[R][P_S]     = s_in_pkt[x];
      end else begin : g_s_int
        assign iv[R][P_S]  = ov[R+MESH_X][P_N];
        assign ip[R][P_S]  = op[R+MESH_X][P_N];
        assign orr[R][P_S] = ir[R+MESH_X][P_N];
      end
      // west
      if (x == 0) begin : g_w_edge
        assign w_out_valid[y] = ov[R][P_W];
        assign orr[R][P_W]    = w_out_ready[y];
        assign w_out_pkt[y]   = op[R][P_W];
        assign iv[R][P_W]     = w_in_valid[y];
        assign w_in_ready[y]  = ir[R][P_W];
        assign ip[R][P_W]     = w_in_pkt[y];
      end else begin : g_w_int
        assign iv[R][P_W]  = ov[R-1][P_E];
        assign ip[R][P_W]  = op[R-1][P_E];
        assign orr[R][P_W] = ir[R-1][P_E];
      end
      // east
      if (x == MESH_X-1) begin : g_e_edge
        assign e_out_valid[y] = ov[R][P_E];
        assign orr[R][P_E]    = e_out_ready[y];
        assign e_out_pkt[y]   = op[R][P_E];
        assign iv[R][P_E]     = e_in_valid[y];
        assign e_in_ready[y]  = ir[R][P_E];
        assign ip[R][P_E]     = e_in_pkt[y];
      end else begin : g_e_int
        assign iv[R][P_E]  = ov[R+1][P_W];
        assign ip[R][P_E]  = op[R+1][P_W];
        assign orr[R][P_E] = ir[R+1][P_W];
      end

      // local port: RISC-V core at (0, 0), neuron node elsewhere
      if (x == 0 && y == 0) begin : g_riscv
        assign iv[R][P_L]     = riscv_tx_valid;
        assign ip[R][P_L]     = riscv_tx_pkt;
        assign riscv_tx_ready = ir[R][P_L];
        assign riscv_rx_valid = ov[R][P_L];
        assign riscv_rx_pkt   = op[R][P_L];
        assign orr[R][P_L]    = riscv_rx_ready;
        assign node_busy[R]   = 1'b0;
      end else begin : g_node
        logic node_done, node_stall;
        neuron_node #(.NEURONS(NEURONS)) u_node (
          .clk, .rst_n,
          .tick, .step_parity,
          .busy     (node_busy[R]),
          .done     (node_done),
          .stall    (node_stall),
          .in_valid (ov[R][P_L]),
          .in_ready (orr[R][P_L]),
          .in_pkt   (op[R][P_L]),
          .out_valid(iv[R][P_L]),
          .out_ready(ir[R][P_L]),
          .out_pkt  (ip[R][P_L])
        );
      end
    end
  end

  logic any_busy, net_idle;
  always_comb begin
    any_busy = 1'b0;
    net_idle = !link_busy;
    for (int r = 0; r < NR; r++) begin
      if (node_busy[r]) any_busy = 1'b1;
      if (!r_idle[r])   net_idle = 1'b0;
    end
  end

  tik_gen u_tik (
    .clk, .rst_n,
    .step_req,
    .nodes_busy (any_busy),
    .net_idle,
    .tick,
    .step_parity,
    .die_parity,
    .die_idle
  );

endmodule

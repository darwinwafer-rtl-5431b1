// darwin_wafer: the wafer-scale system, a DIES_X x DIES_Y array of Darwin3
// dies with I/O aggregation controllers on its four edges and a two-level
// time-step controller.
//
// Fabric. Every die runs on its own clock (clk_die[d], die d = j*DIES_X + i
// for die (i, j)). Each inter-chip port of a die is joined to the facing
// port of the neighbouring die by a pair of AER links, one per direction,
// so the routers of all dies form one 2-D mesh of (DIES_X*MESH_X) x
// (DIES_Y*MESH_Y) routers in which a packet travels by relative offsets with
// no change of format at die boundaries. Ports on the outer edge of the
// wafer go through AER links to the aggregation controller of that edge
// (index 0 north, 1 east, 2 south, 3 west), which runs on clk_sys. Edge
// link k of the north and south controllers is column k of the router grid,
// of the east and west controllers row k.
//
// Time steps. The wafer is split into four domains, the quadrants of the
// die array (0 top-left, 1 top-right, 2 bottom-left, 3 bottom-right), each
// with a local controller; a global controller starts each step and ends it
// when all four domains are done (see ts_global_ctrl). Both run on clk_sys.
//
// The RISC-V control core of each die is outside this RTL; its NoC channel
// is brought out as riscv_*[d]. The external switch is outside too: the
// aggregated streams are the up_* / dn_* ports.
//
// From the source: the 8 x 8 die array, the AER links between dies, four
// edge aggregation controllers toward a switch, four domains with local
// controllers under a global controller. Clock and port arrangement are
// this design's choices.
module darwin_wafer
  import darwin_pkg::*;
#(
  parameter int DIES_X     = 4,
  parameter int DIES_Y     = 2,
  parameter int MESH_X     = 24,
  parameter int MESH_Y     = 24,
  parameter int NEURONS    = 4096,
  parameter int FIFO_DEPTH = 4,
  parameter int HOLD       = 16,
  parameter int NDIE       = DIES_X * DIES_Y,
  parameter int NCOL       = DIES_X * MESH_X,
  parameter int NROW       = DIES_Y * MESH_Y,
  parameter int NEDGE      = (NCOL > NROW) ? NCOL : NROW,
  parameter int PW         = $clog2(NEDGE)
) (
  input  logic             clk_sys,
  input  logic             clk_die [NDIE],
  input  logic             rst_n,
  // time-step control
  input  logic             run,
  input  logic [31:0]      n_steps,
  input  logic [31:0]      min_len,
  output logic             ts_busy,
  output logic [31:0]      step_count,
  output logic [31:0]      last_len,
  output logic             step_end,
  output logic             step_extended,
  // aggregated streams to and from the external switch, one per edge
  output logic             up_valid [4],
  input  logic             up_ready [4],
  output logic [PW-1:0]    up_port  [4],
  output pkt_t             up_pkt   [4],
  input  logic             dn_valid [4],
  output logic             dn_ready [4],
  input  logic [PW-1:0]    dn_port  [4],
  input  pkt_t             dn_pkt   [4],
  // RISC-V core channels, one per die
  input  logic             riscv_tx_valid [NDIE],
  output logic             riscv_tx_ready [NDIE],
  input  pkt_t             riscv_tx_pkt   [NDIE],
  output logic             riscv_rx_valid [NDIE],
  input  logic             riscv_rx_ready [NDIE],
  output pkt_t             riscv_rx_pkt   [NDIE]
);
  localparam int SN = 0, SE = 1, SS = 2, SW = 3;

  logic sys_rst_n;
  reset_gen u_sys_rst (.clk(clk_sys), .rst_in_n(rst_n), .rst_out_n(sys_rst_n));

  // die-side channels, [die][side][k]; k < MESH_X on N/S, k < MESH_Y on E/W
  localparam int MK = (MESH_X > MESH_Y) ? MESH_X : MESH_Y;
  logic d_ov [NDIE][4][MK];  // die output valid
  logic d_or [NDIE][4][MK];  // die output ready
  pkt_t d_op [NDIE][4][MK];
  logic d_iv [NDIE][4][MK];  // die input valid
  logic d_ir [NDIE][4][MK];
  pkt_t d_ip [NDIE][4][MK];
  logic tx_busy [NDIE][4][MK];  // link leaving the die, die clock
  logic rx_busy [NDIE][4][MK];  // link entering the die, die clock

  // aggregation-controller-side channels, [edge][k]
  logic a_iv [4][NEDGE];
  logic a_ir [4][NEDGE];
  pkt_t a_ip [4][NEDGE];
  logic a_ov [4][NEDGE];
  logic a_or [4][NEDGE];
  pkt_t a_op [4][NEDGE];

  logic step_req;
  logic die_step_req [NDIE];
  logic die_parity   [NDIE];
  logic die_idle     [NDIE];
  logic link_busy    [NDIE];

  // ---------------- dies ----------------
  // die_rst_n[d] is released on the same die-clock edge as the die's own
  // reset generator; the link ends on that die use it.
  logic die_rst_n [NDIE];
  for (genvar d = 0; d < NDIE; d++) begin : g_die
    reset_gen u_link_rst (.clk(clk_die[d]), .rst_in_n(rst_n), .rst_out_n(die_rst_n[d]));
    darwin3_die #(
      .MESH_X(MESH_X), .MESH_Y(MESH_Y), .NEURONS(NEURONS), .FIFO_DEPTH(FIFO_DEPTH)
    ) u_die (
      .clk        (clk_die[d]),
      .rst_in_n   (rst_n),
      .step_req   (die_step_req[d]),
      .link_busy  (link_busy[d]),
      .die_parity (die_parity[d]),
      .die_idle   (die_idle[d]),
      .n_out_valid(d_ov[d][SN][0:MESH_X-1]), .n_out_ready(d_or[d][SN][0:MESH_X-1]), .n_out_pkt(d_op[d][SN][0:MESH_X-1]),
      .n_in_valid (d_iv[d][SN][0:MESH_X-1]), .n_in_ready (d_ir[d][SN][0:MESH_X-1]), .n_in_pkt (d_ip[d][SN][0:MESH_X-1]),
      .s_out_valid(d_ov[d][SS][0:MESH_X-1]), .s_out_ready(d_or[d][SS][0:MESH_X-1]), .s_out_pkt(d_op[d][SS][0:MESH_X-1]),
      .s_in_valid (d_iv[d][SS][0:MESH_X-1]), .s_in_ready (d_ir[d][SS][0:MESH_X-1]), .s_in_pkt (d_ip[d][SS][0:MESH_X-1]),
      .e_out_valid(d_ov[d][SE][0:MESH_Y-1]), .e_out_ready(d_or[d][SE][0:MESH_Y-1]), .e_out_pkt(d_op[d][SE][0:MESH_Y-1]),
      .e_in_valid (d_iv[d][SE][0:MESH_Y-1]), .e_in_ready (d_ir[d][SE][0:MESH_Y-1]), .e_in_pkt (d_ip[d][SE][0:MESH_Y-1]),
      .w_out_valid(d_ov[d][SW][0:MESH_Y-1]), .w_out_ready(d_or[d][SW][0:MESH_Y-1]), .w_out_pkt(d_op[d][SW][0:MESH_Y-1]),
      .w_in_valid (d_iv[d][SW][0:MESH_Y-1]), .w_in_ready (d_ir[d][SW][0:MESH_Y-1]), .w_in_pkt (d_ip[d][SW][0:MESH_Y-1]),
      .riscv_tx_valid(riscv_tx_valid[d]), .riscv_tx_ready(riscv_tx_ready[d]), .riscv_tx_pkt(riscv_tx_pkt[d]),
      .riscv_rx_valid(riscv_rx_valid[d]), .riscv_rx_ready(riscv_rx_ready[d]), .riscv_rx_pkt(riscv_rx_pkt[d])
    );
  end

  // ---------------- AER links ----------------
  // For every die side and port: the link out of the die goes to the
  // neighbour's opposite side, or to the edge controller on the wafer rim.
  for (genvar j = 0; j < DIES_Y; j++) begin : g_lj
    for (genvar i = 0; i < DIES_X; i++) begin : g_li
      localparam int D = j * DIES_X + i;
      for (genvar s = 0; s < 4; s++) begin : g_side
        localparam int NK  = (s == SN || s == SS) ? MESH_X : MESH_Y;
        localparam bit RIM = (s == SN && j == 0) || (s == SS && j == DIES_Y-1) ||
                             (s == SW && i == 0) || (s == SE && i == DIES_X-1);
        localparam int NI  = (s == SE) ? i + 1 : (s == SW) ? i - 1 : i;
        localparam int NJ  = (s == SS) ? j + 1 : (s == SN) ? j - 1 : j;
        localparam int ND  = NJ * DIES_X + NI;      // neighbour die
        localparam int OS  = (s + 2) % 4;           // neighbour's facing side
        localparam int BASE = (s == SN || s == SS) ? i * MESH_X : j * MESH_Y;
        for (genvar k = 0; k < MK; k++) begin : g_k
          if (k >= NK) begin : g_unused
            assign d_or[D][s][k]    = 1'b0;
            assign d_iv[D][s][k]    = 1'b0;
            assign d_ip[D][s][k]    = '0;
            assign tx_busy[D][s][k] = 1'b0;
            assign rx_busy[D][s][k] = 1'b0;
          end else if (RIM) begin : g_rim
            // die -> edge controller
            aer_link #(.W(PKT_W)) u_up (
              .clk_tx(clk_die[D]), .rst_tx_n(die_rst_n[D]),
              .in_valid(d_ov[D][s][k]), .in_ready(d_or[D][s][k]), .in_data(d_op[D][s][k]),
              .tx_busy(tx_busy[D][s][k]),
              .clk_rx(clk_sys), .rst_rx_n(sys_rst_n),
              .out_valid(a_iv[s][BASE+k]), .out_ready(a_ir[s][BASE+k]), .out_data(a_ip[s][BASE+k]),
              .rx_busy()
            );
            // edge controller -> die
            aer_link #(.W(PKT_W)) u_dn (
              .clk_tx(clk_sys), .rst_tx_n(sys_rst_n),
              .in_valid(a_ov[s][BASE+k]), .in_ready(a_or[s][BASE+k]), .in_data(a_op[s][BASE+k]),
              .tx_busy(),
              .clk_rx(clk_die[D]), .rst_rx_n(die_rst_n[D]),
              .out_valid(d_iv[D][s][k]), .out_ready(d_ir[D][s][k]), .out_data(d_ip[D][s][k]),
              .rx_busy(rx_busy[D][s][k])
            );
          end else begin : g_d2d
            // this die -> neighbour die (the neighbour's g_d2d builds the
            // opposite direction)
            aer_link #(.W(PKT_W)) u_link (
              .clk_tx(clk_die[D]), .rst_tx_n(die_rst_n[D]),
              .in_valid(d_ov[D][s][k]), .in_ready(d_or[D][s][k]), .in_data(d_op[D][s][k]),
              .tx_busy(tx_busy[D][s][k]),
              .clk_rx(clk_die[ND]), .rst_rx_n(die_rst_n[ND]),
              .out_valid(d_iv[ND][OS][k]), .out_ready(d_ir[ND][OS][k]), .out_data(d_ip[ND][OS][k]),
              .rx_busy(rx_busy[ND][OS][k])
            );
          end
        end
      end
    end
  end

  // link activity seen by each die, in its own clock domain
  always_comb begin
    for (int d = 0; d < NDIE; d++) begin
      link_busy[d] = 1'b0;
      for (int s = 0; s < 4; s++)
        for (int k = 0; k < MK; k++)
          if (tx_busy[d][s][k] || rx_busy[d][s][k]) link_busy[d] = 1'b1;
    end
  end

  // ---------------- I/O aggregation controllers ----------------
  for (genvar s = 0; s < 4; s++) begin : g_agg
    localparam int NE = (s == SN || s == SS) ? NCOL : NROW;
    for (genvar k = NE; k < NEDGE; k++) begin : g_pad
      assign a_iv[s][k] = 1'b0;
      assign a_ip[s][k] = '0;
      assign a_or[s][k] = 1'b0;
    end
    io_agg_ctrl #(.N(NEDGE), .PW(PW)) u_agg (
      .clk(clk_sys), .rst_n(sys_rst_n),
      .edge_in_valid(a_iv[s]), .edge_in_ready(a_ir[s]), .edge_in_pkt(a_ip[s]),
      .up_valid(up_valid[s]), .up_ready(up_ready[s]), .up_port(up_port[s]), .up_pkt(up_pkt[s]),
      .dn_valid(dn_valid[s]), .dn_ready(dn_ready[s]), .dn_port(dn_port[s]), .dn_pkt(dn_pkt[s]),
      .edge_out_valid(a_ov[s]), .edge_out_ready(a_or[s]), .edge_out_pkt(a_op[s])
    );
  end

  // ---------------- time-step controllers ----------------
  localparam int HX = (DIES_X > 1) ? DIES_X / 2 : 1;
  localparam int HY = (DIES_Y > 1) ? DIES_Y / 2 : 1;
  logic [3:0] dom_done;

  for (genvar q = 0; q < 4; q++) begin : g_dom
    localparam int X0 = (q % 2 == 0) ? 0 : HX;
    localparam int X1 = (q % 2 == 0) ? HX : DIES_X;
    localparam int Y0 = (q < 2) ? 0 : HY;
    localparam int Y1 = (q < 2) ? HY : DIES_Y;
    localparam int NQ = (X1 - X0) * (Y1 - Y0);
    if (NQ > 0) begin : g_has
      logic [NQ-1:0] par, idl;
      logic          dreq;
      for (genvar m = 0; m < NQ; m++) begin : g_m
        localparam int DI = (Y0 + m / (X1 - X0)) * DIES_X + X0 + m % (X1 - X0);
        assign par[m] = die_parity[DI];
        assign idl[m] = die_idle[DI];
        assign die_step_req[DI] = dreq;
      end
      ts_local_ctrl #(.NDIES(NQ)) u_local (
        .clk(clk_sys), .rst_n(sys_rst_n),
        .step_req, .die_step_req(dreq),
        .die_parity(par), .die_idle(idl),
        .done(dom_done[q])
      );
    end else begin : g_empty
      assign dom_done[q] = 1'b1;
    end
  end

  ts_global_ctrl #(.NDOM(4), .HOLD(HOLD), .CNT_W(32)) u_global (
    .clk(clk_sys), .rst_n(sys_rst_n),
    .run, .n_steps, .min_len,
    .step_req,
    .dom_done,
    .busy(ts_busy),
    .step_count, .last_len, .step_end,
    .extended(step_extended)
  );

endmodule

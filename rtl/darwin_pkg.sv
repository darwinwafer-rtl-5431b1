// darwin_pkg: types and constants shared by the wafer, die, router, neuron
// node and link modules.
//
// Every transfer on the network is one flit, a packet of PKT_W bits:
//   ptype   2 bits   SPIKE or CFG_WR
//   dx, dy  9 bits   signed hop offsets still to travel (relative address);
//                    +dx is east, +dy is south. Nine bits span the
//                    192 x 192 router grid of an 8 x 8 wafer of 24 x 24 dies.
//   addr    16 bits  SPIKE:  {parity, 3'b0, target neuron[11:0]}
//                    CFG_WR: {table select[3:0], index[11:0]}
//   data    16 bits  SPIKE: signed synaptic weight; CFG_WR: value written
// The field layout, the widths and the configuration map are this design's
// own choices; the source describes only relative addressing and packets
// that cross the whole wafer without header rewriting.
package darwin_pkg;

  localparam int OFS_W  = 9;
  localparam int ADDR_W = 16;
  localparam int DATA_W = 16;
  localparam int NID_W  = 12;

  typedef enum logic [1:0] {
    PT_SPIKE  = 2'd0,
    PT_CFG_WR = 2'd1
  } ptype_e;

  typedef struct packed {
    ptype_e                   ptype;
    logic signed [OFS_W-1:0]  dx;
    logic signed [OFS_W-1:0]  dy;
    logic [ADDR_W-1:0]        addr;
    logic [DATA_W-1:0]        data;
  } pkt_t;

  localparam int PKT_W = $bits(pkt_t);

  // Router port order.
  typedef enum logic [2:0] {
    P_N = 3'd0,
    P_E = 3'd1,
    P_S = 3'd2,
    P_W = 3'd3,
    P_L = 3'd4
  } port_e;

  localparam int NPORTS = 5;

  // Configuration table selects (addr[15:12] of a CFG_WR packet).
  localparam logic [3:0] CFG_V     = 4'd0;  // membrane potential
  localparam logic [3:0] CFG_AX_DX = 4'd1;  // fan-out dx, data[15] = entry valid
  localparam logic [3:0] CFG_AX_DY = 4'd2;  // fan-out dy
  localparam logic [3:0] CFG_AX_N  = 4'd3;  // fan-out target neuron
  localparam logic [3:0] CFG_AX_W  = 4'd4;  // fan-out weight
  localparam logic [3:0] CFG_PARAM = 4'd5;  // node registers, index below

  localparam logic [11:0] PRM_LEAK   = 12'd0;  // Q1.15 leak factor
  localparam logic [11:0] PRM_THRESH = 12'd1;  // firing threshold
  localparam logic [11:0] PRM_VRESET = 12'd2;  // potential after a spike
  localparam logic [11:0] PRM_NACT   = 12'd3;  // neurons updated per step

  // XY routing decision on the relative offsets.
  function automatic port_e route(input pkt_t p);
    if (p.dx > 0)      return P_E;
    else if (p.dx < 0) return P_W;
    else if (p.dy > 0) return P_S;
    else if (p.dy < 0) return P_N;
    else               return P_L;
  endfunction

  // Offsets after one hop through output port o.
  function automatic pkt_t hop(input pkt_t p, input port_e o);
    pkt_t q = p;
    unique case (o)
      P_E:     q.dx = p.dx - 9'sd1;
      P_W:     q.dx = p.dx + 9'sd1;
      P_S:     q.dy = p.dy - 9'sd1;
      P_N:     q.dy = p.dy + 9'sd1;
      default: q   = p;
    endcase
    return q;
  endfunction

endpackage

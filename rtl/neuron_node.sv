// neuron_node: a time-multiplexed neuron core attached to the local port of
// one mesh router.
//
// The node holds NEURONS neurons. Their state lives in on-node memories,
// written here as arrays: membrane potential v, two input accumulator banks,
// and one fan-out entry per neuron (valid, dx, dy, target neuron, weight).
// Node registers hold the leak factor, the threshold, the reset potential and
// the number of active neurons.
//
// Time step. A tick pulse starts the update of neurons 0 .. nact-1, one per
// cycle, through a two-stage pipeline that follows the multiply-then-add
// common data path of the source's neuron node:
//   stage 1 (multiply)  p = (v * leak) >>> 15          leak in Q1.15
//   stage 2 (add)       v' = sat16(p + I[step parity])  then threshold test
// If v' >= thresh the neuron fires: v' is replaced by vreset and, if its
// fan-out entry is valid, a SPIKE packet {dx, dy, target, weight} is queued
// to the router. The packet's address carries the parity of the next step,
// so the receiver adds the weight into the bank that the next step reads.
// The bank read by the update is cleared as it is read. A full output queue
// stalls the whole pipeline until the router takes a packet.
//
// Event coding and decoding: a firing neuron is sent as its fan-out address
// (the event's address), and a received event is decoded into an accumulate
// into the addressed neuron's input.
//
// Configuration: CFG_WR packets write a table entry or a register (map in
// darwin_pkg). They are accepted only while no update is running.
//
// After reset the node sweeps its memories once (NEURONS cycles) to clear
// them; busy is high meanwhile. busy is also high while an update runs or a
// packet waits in the output queue; done pulses when an update has finished.
//
// From the source: a node with a register set, a multiply stage and an add
// stage under a control logic, running neuron updates per time step, and AER
// events. This design's own: the leaky integrate-and-fire rule, number
// formats, memory map, one uncompressed fan-out entry per neuron and the
// input bank scheme. The source's custom instruction set (LSIS, UPTIS,
// GSPRS) is not given and is not implemented; the update rule is fixed.
module neuron_node
  import darwin_pkg::*;
#(
  parameter int NEURONS  = 4096,
  parameter int OQ_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic tick,
  input  logic step_parity,
  output logic busy,
  output logic done,
  output logic stall,
  input  logic in_valid,
  output logic in_ready,
  input  pkt_t in_pkt,
  output logic out_valid,
  input  logic out_ready,
  output pkt_t out_pkt
);
  localparam int IW = (NEURONS > 1) ? $clog2(NEURONS) : 1;

  // ---------------- memories and registers ----------------
  logic signed [15:0]      v_mem   [NEURONS];
  logic signed [15:0]      in0_mem [NEURONS];
  logic signed [15:0]      in1_mem [NEURONS];
  logic                    ax_v    [NEURONS];
  logic signed [OFS_W-1:0] ax_dx   [NEURONS];
  logic signed [OFS_W-1:0] ax_dy   [NEURONS];
  logic [NID_W-1:0]        ax_n    [NEURONS];
  logic signed [15:0]      ax_w    [NEURONS];

  logic signed [15:0] leak, thresh, vreset;
  logic [IW:0]        nact;

  // ---------------- control ----------------
  typedef enum logic [1:0] {N_INIT, N_IDLE, N_RUN} nstate_e;
  nstate_e      state;
  logic [IW:0]  idx;        // next neuron to issue / init address
  logic         bank;       // bank read in this step

  // pipeline registers
  logic               s1_v, s2_v;
  logic [IW-1:0]      s1_i, s2_i;
  logic signed [31:0] s1_prod;
  logic signed [15:0] s1_in;
  logic signed [15:0] s2_vnew;
  logic               s2_fire;

  // output queue
  logic oq_in_valid, oq_in_ready, oq_empty;
  pkt_t oq_in;

  wire s2_push = s2_v && s2_fire && ax_v[s2_i];
  wire adv     = !(s2_push && !oq_in_ready);
  wire issue   = (state == N_RUN) && (idx < nact) && adv;
  assign stall = (state == N_RUN) && !adv;

  // ---------------- incoming packets ----------------
  wire  in_cfg  = (in_pkt.ptype == PT_CFG_WR);
  assign in_ready = (state == N_IDLE) || ((state == N_RUN) && !in_cfg);
  wire  in_fire = in_valid && in_ready;
  wire [IW-1:0] in_nid  = in_pkt.addr[IW-1:0];
  wire          in_bank = in_pkt.addr[15];
  wire [3:0]    cfg_sel = in_pkt.addr[15:12];
  wire [11:0]   cfg_idx = in_pkt.addr[11:0];

  function automatic logic signed [15:0] sat16(input logic signed [31:0] x);
    if (x > 32'sd32767)       return 16'sh7fff;
    else if (x < -32'sd32768) return 16'sh8000;
    else                      return x[15:0];
  endfunction

  // ---------------- state machine and pipeline ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= N_INIT;
      idx    <= '0;
      bank   <= 1'b0;
      s1_v   <= 1'b0;
      s2_v   <= 1'b0;
      done   <= 1'b0;
      leak   <= 16'sh7fff;
      thresh <= 16'sd1024;
      vreset <= 16'sd0;
      nact   <= (IW+1)'(NEURONS);
    end else begin
      done <= 1'b0;
      unique case (state)
        N_INIT: begin
          idx <= idx + 1'b1;
          if (idx == (IW+1)'(NEURONS - 1)) begin
            state <= N_IDLE;
            idx   <= '0;
          end
        end
        N_IDLE: if (tick) begin
          state <= N_RUN;
          bank  <= step_parity;
          idx   <= '0;
        end
        N_RUN: begin
          if (issue) idx <= idx + 1'b1;
          if (idx >= nact && !s1_v && !s2_v && adv) begin
            state <= N_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= N_IDLE;
      endcase
      if (adv) begin
        s1_v <= issue;
        s2_v <= s1_v;
      end
      // configuration registers
      if (in_fire && in_cfg && cfg_sel == CFG_PARAM) begin
        unique case (cfg_idx)
          PRM_LEAK:   leak   <= in_pkt.data;
          PRM_THRESH: thresh <= in_pkt.data;
          PRM_VRESET: vreset <= in_pkt.data;
          PRM_NACT:   nact   <= (IW+1)'(in_pkt.data);
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      // stage 1: multiply
      s1_i    <= idx[IW-1:0];
      s1_prod <= (32'(v_mem[idx[IW-1:0]]) * 32'(leak)) >>> 15;
      s1_in   <= bank ? in1_mem[idx[IW-1:0]] : in0_mem[idx[IW-1:0]];
      // stage 2: add and threshold
      s2_i    <= s1_i;
      s2_fire <= (sat16(s1_prod + 32'(s1_in)) >= thresh);
      s2_vnew <= (sat16(s1_prod + 32'(s1_in)) >= thresh) ? vreset : sat16(s1_prod + 32'(s1_in));
    end
  end

  // ---------------- memory writes ----------------
  always_ff @(posedge clk) begin
    if (state == N_INIT) begin
      v_mem[idx[IW-1:0]]   <= '0;
      in0_mem[idx[IW-1:0]] <= '0;
      in1_mem[idx[IW-1:0]] <= '0;
      ax_v[idx[IW-1:0]]    <= 1'b0;
    end else begin
      // write-back of the updated potential
      if (s2_v && adv) v_mem[s2_i] <= s2_vnew;
      // clear the bank being read
      if (issue) begin
        if (bank) in1_mem[idx[IW-1:0]] <= '0;
        else      in0_mem[idx[IW-1:0]] <= '0;
      end
      // event decoding: accumulate into the addressed neuron
      if (in_fire && !in_cfg) begin
        if (in_bank) in1_mem[in_nid] <= sat16(32'(in1_mem[in_nid]) + 32'($signed(in_pkt.data)));
        else         in0_mem[in_nid] <= sat16(32'(in0_mem[in_nid]) + 32'($signed(in_pkt.data)));
      end
      // configuration tables
      if (in_fire && in_cfg) begin
        unique case (cfg_sel)
          CFG_V:     v_mem[cfg_idx[IW-1:0]] <= in_pkt.data;
          CFG_AX_DX: begin
            ax_dx[cfg_idx[IW-1:0]] <= in_pkt.data[OFS_W-1:0];
            ax_v[cfg_idx[IW-1:0]]  <= in_pkt.data[15];
          end
          CFG_AX_DY: ax_dy[cfg_idx[IW-1:0]] <= in_pkt.data[OFS_W-1:0];
          CFG_AX_N:  ax_n[cfg_idx[IW-1:0]]  <= in_pkt.data[NID_W-1:0];
          CFG_AX_W:  ax_w[cfg_idx[IW-1:0]]  <= in_pkt.data;
          default: ;
        endcase
      end
    end
  end

  // ---------------- event coding: spike packets out ----------------
  always_comb begin
    oq_in       = '0;
    oq_in.ptype = PT_SPIKE;
    oq_in.dx    = ax_dx[s2_i];
    oq_in.dy    = ax_dy[s2_i];
    oq_in.addr  = {~bank, 3'b000, ax_n[s2_i]};
    oq_in.data  = ax_w[s2_i];
    oq_in_valid = s2_push;
  end

  sync_fifo #(.T(pkt_t), .DEPTH(OQ_DEPTH)) u_oq (
    .clk, .rst_n,
    .in_valid (oq_in_valid),
    .in_ready (oq_in_ready),
    .in_data  (oq_in),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (out_pkt),
    .empty    (oq_empty)
  );

  assign busy = (state != N_IDLE) || !oq_empty;

  // A spike must never land in the bank the running update reads.
  assert property (@(posedge clk) disable iff (!rst_n)
    (in_fire && !in_cfg && state == N_RUN) |-> (in_bank != bank))
    else $error("neuron_node: spike for the bank being read");

endmodule

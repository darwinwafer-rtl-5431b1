// io_agg_ctrl: I/O aggregation controller on one edge of the wafer.
//
// Upstream (wafer to switch): N edge links, one per boundary router along
// this wafer edge, are merged into one stream. A round-robin arbiter, which
// starts its search after the last winner, picks one waiting link per cycle
// and the packet leaves in a registered output tagged with the link number
// (up_port), so one wide port carries the traffic of all N links.
// Downstream (switch to wafer): a packet tagged with a link number is sent
// into that edge link; only that link's ready matters.
//
// From the source: controllers on the wafer periphery that manage the
// traffic between the die array and an external high-bandwidth switch,
// with bandwidth aggregation. The tag format and the arbiter are this
// design's choices; the conversion to Ethernet is outside this block.
//
// Timing: a packet appears on up_* the cycle after its link is granted;
// up_* then holds until up_ready. One packet per cycle in each direction.
module io_agg_ctrl
  import darwin_pkg::*;
#(
  parameter int N  = 192,
  parameter int PW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // edge links toward the switch
  input  logic          edge_in_valid  [N],
  output logic          edge_in_ready  [N],
  input  pkt_t          edge_in_pkt    [N],
  output logic          up_valid,
  input  logic          up_ready,
  output logic [PW-1:0] up_port,
  output pkt_t          up_pkt,
  // switch toward the edge links
  input  logic          dn_valid,
  output logic          dn_ready,
  input  logic [PW-1:0] dn_port,
  input  pkt_t          dn_pkt,
  output logic          edge_out_valid [N],
  input  logic          edge_out_ready [N],
  output pkt_t          edge_out_pkt   [N]
);
  logic [PW-1:0] last, win;
  logic          any;
  wire           load = !up_valid || up_ready;

  always_comb begin
    any = 1'b0;
    win = last;
    for (int k = 1; k <= N; k++) begin
      int i;
      i = (int'(last) + k) % N;
      if (!any && edge_in_valid[i]) begin
        any = 1'b1;
        win = PW'(i);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) edge_in_ready[i] = load && any && (win == PW'(i));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last     <= PW'(N - 1);
      up_valid <= 1'b0;
      up_port  <= '0;
      up_pkt   <= '0;
    end else if (load) begin
      up_valid <= any;
      if (any) begin
        up_port <= win;
        up_pkt  <= edge_in_pkt[win];
        last    <= win;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      edge_out_valid[i] = dn_valid && (dn_port == PW'(i));
      edge_out_pkt[i]   = dn_pkt;
    end
    dn_ready = (int'(dn_port) < N) ? edge_out_ready[dn_port] : 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    (up_valid && !up_ready) |=> (up_valid && $stable(up_pkt) && $stable(up_port)))
    else $error("io_agg_ctrl: upstream packet changed before it was taken");

endmodule

// aer_link: address-event channel between two independently clocked chiplets.
//
// It carries one packet (an address event) at a time from the sender clock
// domain (clk_tx) to the receiver clock domain (clk_rx) without any relation
// between the two clocks. It is built as three controllers joined by
// request/acknowledge handshakes, following the send controller, async
// controller with latch, and receive controller of the source's asynchronous
// data path:
//
//   send controller   (clk_tx)  holds the event in its data path register and
//                               raises req1; four-phase: req1 up, ack1 up,
//                               req1 down, ack1 down.
//   async controller  (clk_rx)  sees req1 through a two-flop synchroniser,
//                               opens the latch (the data is stable while req1
//                               is high: bundled data), raises ack1; then offers
//                               the latched event to the receiver with req2/ack2.
//   receive controller(clk_rx)  takes the event into its output register and
//                               presents it with valid/ready.
//
// The original controllers are clockless circuits; here they are clocked
// state machines with synchronisers so that the link is ordinary
// synthesizable logic and works between any two clock frequencies. This
// substitution is this design's choice.
//
// Interface: in_valid/in_ready/in_data on clk_tx, out_valid/out_ready/out_data
// on clk_rx. tx_busy (clk_tx) is high from acceptance until the four-phase
// handshake has returned to zero; rx_busy (clk_rx) is high while the event is
// anywhere on the receiver side. An event is inside rx_busy before tx_busy
// falls, so a sender and a receiver that are both not busy hold no event.
//
// Timing: one event per full four-phase cycle, about two synchroniser delays
// in each clock domain plus a few cycles, roughly 6 receiver plus 4 sender
// clock cycles per event.
module aer_link #(
  parameter int W = 52
) (
  input  logic         clk_tx,
  input  logic         rst_tx_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         tx_busy,

  input  logic         clk_rx,
  input  logic         rst_rx_n,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         rx_busy
);

  // ---------------- send controller (clk_tx) ----------------
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT_ACK_LOW} send_e;
  send_e        s_state;
  logic         req1;
  logic [W-1:0] tx_data;      // send-side data path register
  logic [1:0]   ack1_sync;
  logic         ack1;         // driven in clk_rx

  always_ff @(posedge clk_tx or negedge rst_tx_n) begin
    if (!rst_tx_n) ack1_sync <= '0;
    else           ack1_sync <= {ack1_sync[0], ack1};
  end

  assign in_ready = (s_state == S_IDLE);
  assign tx_busy  = (s_state != S_IDLE);

  always_ff @(posedge clk_tx or negedge rst_tx_n) begin
    if (!rst_tx_n) begin
      s_state <= S_IDLE;
      req1    <= 1'b0;
      tx_data <= '0;
    end else begin
      unique case (s_state)
        S_IDLE: if (in_valid) begin
          tx_data <= in_data;
          req1    <= 1'b1;
          s_state <= S_REQ;
        end
        S_REQ: if (ack1_sync[1]) begin
          req1    <= 1'b0;
          s_state <= S_WAIT_ACK_LOW;
        end
        S_WAIT_ACK_LOW: if (!ack1_sync[1]) s_state <= S_IDLE;
        default: s_state <= S_IDLE;
      endcase
    end
  end

  // ---------------- async controller + latch (clk_rx) ----------------
  logic [1:0]   req1_sync;
  logic [W-1:0] latch_q;
  logic         latch_full;
  logic         req2, ack2;

  always_ff @(posedge clk_rx or negedge rst_rx_n) begin
    if (!rst_rx_n) req1_sync <= '0;
    else           req1_sync <= {req1_sync[0], req1};
  end

  always_ff @(posedge clk_rx or negedge rst_rx_n) begin
    if (!rst_rx_n) begin
      ack1       <= 1'b0;
      latch_full <= 1'b0;
      latch_q    <= '0;
      req2       <= 1'b0;
    end else begin
      // Capture: request up, previous event gone, no handshake pending.
      if (req1_sync[1] && !ack1 && !latch_full && !ack2) begin
        latch_q    <= tx_data;  // stable while req1 is high
        latch_full <= 1'b1;
        ack1       <= 1'b1;
      end else if (!req1_sync[1] && ack1) begin
        ack1 <= 1'b0;
      end
      // Offer to the receive controller.
      if (latch_full && !req2 && !ack2) req2 <= 1'b1;
      if (req2 && ack2) begin
        req2       <= 1'b0;
        latch_full <= 1'b0;
      end
    end
  end

  // ---------------- receive controller (clk_rx) ----------------
  always_ff @(posedge clk_rx or negedge rst_rx_n) begin
    if (!rst_rx_n) begin
      ack2      <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (req2 && !ack2 && !(out_valid && !out_ready)) begin
        out_data  <= latch_q;
        out_valid <= 1'b1;
        ack2      <= 1'b1;
      end else if (!req2 && ack2) begin
        ack2 <= 1'b0;
      end
    end
  end

  assign rx_busy = req1_sync[1] | ack1 | latch_full | req2 | ack2 | out_valid;

  // Four-phase rules: the sender holds its request until acknowledged.
  assert property (@(posedge clk_tx) disable iff (!rst_tx_n)
    (s_state == S_REQ) |-> req1)
    else $error("aer_link: req1 dropped before ack1");
  assert property (@(posedge clk_rx) disable iff (!rst_rx_n)
    (req2 && !ack2) |=> req2)
    else $error("aer_link: req2 dropped before ack2");

endmodule

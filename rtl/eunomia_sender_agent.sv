// eunomia_sender_agent -- sender-side part of the Eunomia ordering layer.
//
// Transmit direction. Every outgoing data packet gets 33 bits of metadata:
// 'first_seq', the first sequence number of its connection (the receiver's
// starting Head), and 'last', the flag of the connection's final packet. The
// agent learns first_seq itself. The first packet it sends on a closed
// connection opens that connection and records the packet's sequence number.
// WRITE verbs: the receiving application takes the final packet as its
// signal to read. So the final packet of a WRITE is parked in one of
// HOLD_SLOTS hold slots. It stays there until the receiver has acknowledged
// every earlier packet in order, which happens when the cumulative expected
// sequence number reaches the final packet's own number. A parked packet
// that becomes sendable goes out ahead of new packets. If all slots are full,
// the input stalls.
//
// Receive direction (acknowledgements):
//   ACK   updates the cumulative acknowledgement (ack_fwd to the transport).
//   SACK  also updates it, and marks the SACKed sequence number received
//         (sack_valid), for example for selective repeat. No recovery.
//   NACK  the receiver could not track the packet: trigger the transport's
//         loss recovery (recover_valid) from the expected sequence number.
// A connection closes when the acknowledgement passes its last packet.
//
// Interface: tx_in valid/ready stream from the transport. tx_out valid/ready
// stream to the wire. ack_valid input with no back-pressure. sack_valid,
// recover_valid and ack_fwd_valid are registered one-cycle pulses.
// Reset is synchronous, active low.
// Timing: one packet per cycle. An acknowledgement takes effect for the hold
// slots one cycle after it arrives.
// Following the paper: the metadata (32-bit first sequence + 1-bit last
// flag), the reaction to SACK and NACK, and holding the final WRITE packet
// until everything before it is acknowledged. This design's own choices: the
// hold slots, their number, and learning first_seq from the first packet.
module eunomia_sender_agent
  import eunomia_pkg::*;
#(
  parameter int unsigned NUM_CONN   = 256,
  parameter int unsigned HOLD_SLOTS = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  // packets from the transport
  input  logic     tx_in_valid,
  output logic     tx_in_ready,
  input  tx_desc_t tx_in,
  // packets with metadata to the network
  output logic     tx_out_valid,
  input  logic     tx_out_ready,
  output pkt_t     tx_out,
  // acknowledgements from the receiver
  input  logic     ack_valid,
  input  ack_t     ack,
  // hooks into the transport's loss recovery
  output logic     ack_fwd_valid,   // cumulative acknowledgement (ACK or SACK)
  output conn_t    ack_fwd_conn,
  output seq_t     ack_fwd_expected,
  output logic     sack_valid,      // mark a SACKed packet as received
  output conn_t    sack_conn,
  output seq_t     sack_seq,
  output logic     recover_valid,   // NACK: start recovery from 'recover_seq'
  output conn_t    recover_conn,
  output seq_t     recover_seq,
  output logic [$clog2(HOLD_SLOTS+1)-1:0] held_count
);

  localparam int unsigned CW = $clog2(NUM_CONN);
  localparam int unsigned HW = (HOLD_SLOTS > 1) ? $clog2(HOLD_SLOTS) : 1;

  logic [NUM_CONN-1:0] open, last_known;
  seq_t first_seq [NUM_CONN];
  seq_t cum       [NUM_CONN];   // highest expected sequence heard back
  seq_t last_seq  [NUM_CONN];

  logic [HOLD_SLOTS-1:0] h_valid;
  pkt_t                  h_pkt [HOLD_SLOTS];

  // ------------------------------------------------ parked packet ready to go
  logic          rel_any;
  logic [HW-1:0] rel_sel;
  always_comb begin
    rel_any = 1'b0;
    rel_sel = '0;
    for (int h = HOLD_SLOTS-1; h >= 0; h--) begin
      if (h_valid[h] && cum[h_pkt[h].conn[CW-1:0]] == h_pkt[h].seq) begin
        rel_any = 1'b1;
        rel_sel = HW'(h);
      end
    end
  end

  logic          free_any;
  logic [HW-1:0] free_sel;
  always_comb begin
    free_any = 1'b0;
    free_sel = '0;
    for (int h = HOLD_SLOTS-1; h >= 0; h--) begin
      if (!h_valid[h]) begin
        free_any = 1'b1;
        free_sel = HW'(h);
      end
    end
  end

  // ------------------------------------------------ incoming packet
  logic [CW-1:0] c;
  pkt_t          p;
  logic          park;
  always_comb begin
    c = tx_in.conn[CW-1:0];
    p.conn      = tx_in.conn;
    p.seq       = tx_in.seq;
    p.first_seq = open[c] ? first_seq[c] : tx_in.seq;
    p.last      = tx_in.last;
    // final WRITE packet waits unless everything before it is acknowledged
    park = tx_in.write && tx_in.last && !(open[c] && cum[c] == tx_in.seq);
  end

  always_comb begin
    if (rel_any) begin
      tx_out_valid = 1'b1;
      tx_out       = h_pkt[rel_sel];
      tx_in_ready  = 1'b0;
    end else begin
      tx_out_valid = tx_in_valid && !park;
      tx_out       = p;
      tx_in_ready  = park ? free_any : tx_out_ready;
    end
  end

  logic take;
  assign take = !rel_any && tx_in_valid && tx_in_ready;

  // acknowledgement decoding
  logic [CW-1:0] ac;
  seq_t          adv;
  assign ac  = ack.conn[CW-1:0];
  assign adv = ack.expected - cum[ac];

  always_comb begin
    held_count = '0;
    for (int h = 0; h < HOLD_SLOTS; h++) held_count = held_count + h_valid[h];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      open <= '0;
      last_known <= '0;
      h_valid <= '0;
      ack_fwd_valid <= 1'b0;
      sack_valid <= 1'b0;
      recover_valid <= 1'b0;
      ack_fwd_conn <= '0;
      ack_fwd_expected <= '0;
      sack_conn <= '0;
      sack_seq <= '0;
      recover_conn <= '0;
      recover_seq <= '0;
      for (int i = 0; i < NUM_CONN; i++) begin
        first_seq[i] <= '0;
        cum[i] <= '0;
        last_seq[i] <= '0;
      end
      for (int h = 0; h < HOLD_SLOTS; h++) h_pkt[h] <= '0;
    end else begin
      ack_fwd_valid <= 1'b0;
      sack_valid <= 1'b0;
      recover_valid <= 1'b0;

      if (rel_any && tx_out_ready) h_valid[rel_sel] <= 1'b0;

      if (take) begin
        if (!open[c]) begin
          open[c] <= 1'b1;
          first_seq[c] <= tx_in.seq;
          cum[c] <= tx_in.seq;
          last_known[c] <= 1'b0;
        end
        if (tx_in.last) begin
          last_known[c] <= 1'b1;
          last_seq[c] <= tx_in.seq;
        end
        if (park) begin
          h_valid[free_sel] <= 1'b1;
          h_pkt[free_sel] <= p;
        end
      end

      if (ack_valid && open[ac]) begin
        unique case (ack.kind)
          ACK_ACK, ACK_SACK: begin
            if (!adv[SEQ_W-1]) cum[ac] <= ack.expected;
            ack_fwd_valid <= 1'b1;
            ack_fwd_conn <= ack.conn;
            ack_fwd_expected <= ack.expected;
            if (ack.kind == ACK_SACK) begin
              sack_valid <= 1'b1;
              sack_conn <= ack.conn;
              sack_seq <= ack.seq;
            end
            if (last_known[ac] && ack.expected == last_seq[ac] + 1'b1) open[ac] <= 1'b0;
          end
          ACK_NACK: begin
            recover_valid <= 1'b1;
            recover_conn <= ack.conn;
            recover_seq <= ack.expected;
          end
          default: ;
        endcase
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    tx_out_valid && !tx_out_ready && rel_any |=> tx_out_valid);

endmodule

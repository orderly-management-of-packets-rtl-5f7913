// eunomia_pkt_driver -- entry point of received data packets (receiver-side agent).
//
// Every data packet that arrives passes through the driver first. For each
// connection the driver keeps:
//   conn_active          the connection has started and not yet completed
//   expected             next in-order sequence number (the value the RDMA
//                        transport keeps in its queue pair)
//   conn_module_valid    the connection has a live HD bitmap
//   conn_to_module_map   which HD bitmap engine serves it
// What it does with a packet:
//   * The connection has an HD bitmap: the packet goes to that connection's
//     engine, and the engine's result gives the answer.
//   * seq == expected: in-order fast path. Answer ACK, expected + 1. If the
//     packet is the last one, raise the completion notification.
//   * seq < expected: duplicate. Answer ACK. This also holds after the
//     connection has completed: a late copy of one of its packets (seq below
//     the stored expected) is answered as a duplicate and does not start a
//     new connection.
//   * seq > expected: first out-of-order packet. Enter the connection in
//     conn_to_module_map, taking engines in round-robin order. Set
//     conn_module_valid and send the packet to the engine with create = 1.
//     The new bitmap's head is 'expected'. For a connection that has not
//     started, it is the first sequence number the sender put in the
//     metadata.
// Termination (term_valid/term_conn): the host ends a connection before
// its last packet. If the connection has a bitmap, its engine frees it (and
// the metadata) and returns a result with no acknowledgement. Either way the
// driver then forgets the connection, so its ID starts afresh.
// Engine results become ACK/SACK/NACK messages. An engine result with freed
// set clears conn_module_valid (garbage collection). One with complete set
// raises the completion notification (cn_valid), which stands for the CN of
// SEND/RECV.
//
// Interface: pkt_valid/pkt_ready input stream. Per engine, hd_req
// valid/ready and hd_rsp valid/ready. ack_valid and cn_valid are one-cycle
// pulses with no back-pressure, registered (one cycle after the packet or
// result is taken). Reset is synchronous, active low.
// Timing: one packet per cycle on the fast path. The driver stalls
// (pkt_ready low) while the target engine is busy, in a cycle in which it
// takes an engine result, and while a termination is waiting. Termination
// has a valid/ready handshake; it waits for the connection's engine.
// Following the paper: the two arrays, the creation of a bitmap only on the
// first out-of-order packet, the head rule, ACK/SACK/NACK and the CN
// hold-off. This design's own choices: keeping 'expected' here, the
// round-robin choice of engine and the duplicate handling. Also this
// design's choice: a completed connection ID may be reused by a new
// connection.
module eunomia_pkt_driver
  import eunomia_pkg::*;
#(
  parameter int unsigned NUM_CONN = 256,   // 1-byte connection ID
  parameter int unsigned NUM_HDBM = 1      // HD bitmap engines
) (
  input  logic    clk,
  input  logic    rst_n,
  // received data packets
  input  logic    pkt_valid,
  output logic    pkt_ready,
  input  pkt_t    pkt,
  // connection terminated by the host before completion
  input  logic    term_valid,
  output logic    term_ready,
  input  conn_t   term_conn,
  // HD bitmap engines
  output logic    [NUM_HDBM-1:0] hd_req_valid,
  input  logic    [NUM_HDBM-1:0] hd_req_ready,
  output hd_req_t hd_req,
  input  logic    [NUM_HDBM-1:0] hd_rsp_valid,
  output logic    [NUM_HDBM-1:0] hd_rsp_ready,
  input  hd_rsp_t [NUM_HDBM-1:0] hd_rsp,
  // acknowledgements to the sender and completion notification to the host
  output logic    ack_valid,
  output ack_t    ack,
  output logic    cn_valid,
  output conn_t   cn_conn
);

  localparam int unsigned MW = (NUM_HDBM > 1) ? $clog2(NUM_HDBM) : 1;
  localparam int unsigned CW = $clog2(NUM_CONN);

  logic [NUM_CONN-1:0] conn_active;
  logic [NUM_CONN-1:0] conn_seen;   // a message of this ID has been seen since reset
  logic [NUM_CONN-1:0] conn_module_valid;
  logic [MW-1:0]       conn_to_module_map [NUM_CONN];
  seq_t                expected [NUM_CONN];
  logic [MW-1:0]       rr;     // next engine for a new bitmap

  // ------------------------------------------------------ engine results first
  logic          rsp_any;
  logic [MW-1:0] rsp_sel;
  always_comb begin
    rsp_any = 1'b0;
    rsp_sel = '0;
    for (int m = NUM_HDBM-1; m >= 0; m--) begin
      if (hd_rsp_valid[m]) begin
        rsp_any = 1'b1;
        rsp_sel = MW'(m);
      end
    end
  end
  hd_rsp_t r;
  assign r = hd_rsp[rsp_sel];

  // ------------------------------------------------------ packet classification
  logic [CW-1:0] c;
  seq_t          exp_seq, seq_gap, old_gap;
  logic          has_bm, in_order, dup;
  logic [MW-1:0] target;
  always_comb begin
    c        = pkt.conn[CW-1:0];
    exp_seq  = conn_active[c] ? expected[c] : pkt.first_seq;
    seq_gap  = pkt.seq - exp_seq;
    old_gap  = pkt.seq - expected[c];
    has_bm   = conn_module_valid[c];
    // sequence numbers keep rising from one message to the next, so a packet
    // below the stored expected of a finished connection is a late duplicate
    dup      = !has_bm && (seq_gap[SEQ_W-1] ||
                           (!conn_active[c] && conn_seen[c] && old_gap[SEQ_W-1]));
    in_order = !has_bm && !dup && seq_gap == '0;
    target   = has_bm ? conn_to_module_map[c] : rr;
  end

  // termination request
  logic [CW-1:0] tc;
  logic          t_has_bm, go_term_hd, go_term_local, pkt_slot;
  logic [MW-1:0] t_target;
  always_comb begin
    tc            = term_conn[CW-1:0];
    t_has_bm      = conn_module_valid[tc];
    t_target      = conn_to_module_map[tc];
    go_term_hd    = term_valid && !rsp_any && t_has_bm && hd_req_ready[t_target];
    go_term_local = term_valid && !rsp_any && !t_has_bm;
    term_ready    = go_term_hd || go_term_local;
    pkt_slot      = !rsp_any && !term_valid;
  end

  logic go_fast, go_hd;
  always_comb begin
    go_fast = pkt_valid && pkt_slot && (in_order || dup);
    go_hd   = pkt_valid && pkt_slot && !(in_order || dup) && hd_req_ready[target];
    pkt_ready = go_fast || go_hd;
    hd_req_valid = '0;
    if (term_valid) begin
      hd_req_valid[t_target] = !rsp_any && t_has_bm;
      hd_req.pkt       = '0;
      hd_req.pkt.conn  = term_conn;
      hd_req.create    = 1'b0;
      hd_req.term      = 1'b1;
      hd_req.init_head = '0;
    end else begin
      hd_req_valid[target] = pkt_valid && !rsp_any && !(in_order || dup);
      hd_req.pkt       = pkt;
      hd_req.create    = !has_bm;
      hd_req.term      = 1'b0;
      hd_req.init_head = exp_seq;
    end
    hd_rsp_ready = '0;
    if (rsp_any) hd_rsp_ready[rsp_sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      conn_active <= '0;
      conn_seen <= '0;
      conn_module_valid <= '0;
      rr <= '0;
      ack_valid <= 1'b0;
      ack <= '0;
      cn_valid <= 1'b0;
      cn_conn <= '0;
      for (int i = 0; i < NUM_CONN; i++) begin
        conn_to_module_map[i] <= '0;
        expected[i] <= '0;
      end
    end else begin
      ack_valid <= 1'b0;
      cn_valid <= 1'b0;
      if (rsp_any && r.kind == ACK_NONE) begin
        // termination finished: bitmap freed, the ID starts afresh
        conn_module_valid[r.conn[CW-1:0]] <= 1'b0;
        conn_active[r.conn[CW-1:0]] <= 1'b0;
        conn_seen[r.conn[CW-1:0]] <= 1'b0;
      end else if (rsp_any) begin
        ack_valid    <= 1'b1;
        ack.kind     <= r.kind;
        ack.conn     <= r.conn;
        ack.expected <= r.head;
        ack.seq      <= r.seq;
        expected[r.conn[CW-1:0]] <= r.head;
        if (r.freed) conn_module_valid[r.conn[CW-1:0]] <= 1'b0;
        if (r.complete) begin
          conn_active[r.conn[CW-1:0]] <= 1'b0;
          cn_valid <= 1'b1;
          cn_conn  <= r.conn;
        end
      end else if (go_term_local) begin
        conn_active[tc] <= 1'b0;
        conn_seen[tc] <= 1'b0;
      end else if (go_fast) begin
        ack_valid    <= 1'b1;
        ack.kind     <= ACK_ACK;
        ack.conn     <= pkt.conn;
        ack.seq      <= pkt.seq;
        if (in_order) begin
          conn_seen[c] <= 1'b1;
          ack.expected <= exp_seq + 1'b1;
          expected[c] <= exp_seq + 1'b1;
          conn_active[c] <= !pkt.last;
          if (pkt.last) begin
            cn_valid <= 1'b1;
            cn_conn  <= pkt.conn;
          end
        end else begin
          ack.expected <= conn_seen[c] ? expected[c] : exp_seq;
        end
      end else if (go_hd && !has_bm) begin
        // first out-of-order packet of the connection
        conn_module_valid[c]  <= 1'b1;
        conn_to_module_map[c] <= rr;
        conn_active[c]        <= 1'b1;
        conn_seen[c]          <= 1'b1;
        expected[c]           <= exp_seq;
        rr <= (int'(rr) == NUM_HDBM-1) ? '0 : rr + 1'b1;
      end
    end
  end

  a_one_dispatch: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hd_req_valid));

endmodule

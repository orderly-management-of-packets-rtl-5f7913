// tb_eunomia_top -- end-to-end test of the Eunomia ordering layer at its
// default size (no parameter overrides).
//
// One NIC talks to itself through a model network: the transmit side's
// tagged packets enter a network that delays each packet by a random time,
// which reorders them. It drops a small share outright, as a failing link
// would, and holds a few back for a long time. The network then delivers
// them to the receive side. Acknowledgements go straight back to the
// transmit side. A transport model on top drives 24 connections, each
// sending two messages one after the other on the same ID. Half of them are
// WRITEs, so their final packet is held back. The transport keeps at most 300
// packets in flight per connection. It re-sends a packet when the NACK hook
// asks for it, or when the packet is known to be lost: it left on the wire,
// is no longer in the network, and has been neither acknowledged nor
// selectively acknowledged.
//
// Checks, against the transport model's own bookkeeping:
//   * every packet delivered to the receiver gets exactly one answer;
//   * the cumulative expected value on a connection never decreases, and
//     never passes the end of the message;
//   * each message gets exactly one completion notification, and only once
//     all of its packets have reached the receiver;
//   * the final packet of a WRITE leaves only once everything before it is
//     acknowledged;
//   * at the end no memory, metadata region or hold slot is still in use.
// Every mechanism of the design is counted, and one that never happens
// counts as a failure: in-order fast path, duplicate, bitmap creation, SACK,
// bitmap growth, merge of the linear portion, NACK (bitmap cap), garbage
// collection, CN, WRITE hold and release, transmit stall on full hold slots,
// receive stall behind a busy engine, recovery hook, termination of a
// connection that holds a bitmap (at the end, with all memory freed).
module tb_eunomia_top;
  import eunomia_pkg::*;

  localparam int NC    = 24;      // connections driven
  localparam int NMSG  = 2;       // messages per connection
  localparam int MAXN  = 400;     // longest message
  localparam int WIN   = 300;     // packets in flight per connection
  localparam int MAXCYC = 4000000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     tx_in_valid, tx_in_ready, tx_out_valid, tx_out_ready;
  tx_desc_t tx_in;
  pkt_t     tx_out;
  logic     ack_in_valid;
  ack_t     ack_in;
  logic     ack_fwd_valid, sack_valid, recover_valid;
  conn_t    ack_fwd_conn, sack_conn, recover_conn;
  seq_t     ack_fwd_expected, sack_seq, recover_seq;
  logic [2:0] held_count;
  logic     rx_valid, rx_ready;
  pkt_t     rx_pkt;
  logic     term_valid, term_ready;
  conn_t    term_conn;
  logic     ack_out_valid, cn_valid;
  ack_t     ack_out;
  conn_t    cn_conn;
  logic [10:0] used_blocks;
  logic [5:0]  used_slots;

  eunomia_top dut (.*);

  // acknowledgements return to the sender at once
  assign ack_in_valid = ack_out_valid;
  assign ack_in       = ack_out;
  assign tx_out_ready = 1'b1;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ------------------------------------------------------------ transport model
  int  base [NC], nmsg [NC], next_new [NC], cum [NC], done [NC];
  bit  wr [NC], active [NC];
  bit  sacked [NC][MAXN], on_wire [NC][MAXN], queued [NC][MAXN], arrived [NC][MAXN];
  int  in_net [NC][MAXN];
  int  last_exp [NC];
  int  rq_c [$], rq_s [$];        // retransmission queue
  int  rr = 0;
  int  cyc = 0;

  // offer of this cycle
  bit  off_retx;
  int  off_c;

  // ------------------------------------------------------------ network model
  pkt_t net_p [$];
  int   net_t [$];
  int   pres = -1;                // index of the packet presented to the receiver
  int   rx_count = 0, ack_count = 0;

  // ------------------------------------------------------------ mechanism counters
  int n_fast, n_dup, n_create, n_sack, n_grow, n_merge, n_nack, n_gc, n_cn, n_hold,
      n_release, n_txstall, n_rxstall, n_recover, n_drop, n_retx, n_term;

  function automatic void start_msg(int c);
    base[c]     = (done[c] == 0) ? 1000 * (c + 1) * 7 : base[c] + nmsg[c];
    nmsg[c]     = 100 + $urandom_range(0, 200);
    next_new[c] = 0;
    cum[c]      = base[c];
    last_exp[c] = base[c];
    wr[c]       = (c % 2) == 0;
    active[c]   = 1;
    for (int i = 0; i < MAXN; i++) begin
      sacked[c][i] = 0; on_wire[c][i] = 0; queued[c][i] = 0; arrived[c][i] = 0; in_net[c][i] = 0;
    end
  endfunction

  function automatic int conn_of(conn_t x);
    return int'(x);
  endfunction

  // lost packets: left on the wire, not in the network, not acknowledged
  function automatic void find_lost(int c, int from);
    for (int s = from; s < base[c] + next_new[c]; s++) begin
      int i;
      i = s - base[c];
      if (i >= 0 && i < MAXN && s >= cum[c] && on_wire[c][i] && in_net[c][i] == 0 &&
          !sacked[c][i] && !queued[c][i]) begin
        queued[c][i] = 1;
        rq_c.push_back(c);
        rq_s.push_back(s);
      end
    end
  endfunction

  initial begin
    #(MAXCYC * 10);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ monitors (pre-edge values)
  always @(posedge clk) if (rst_n) begin
    cyc++;
    // transmit handshake
    if (tx_in_valid && tx_in_ready) begin
      if (off_retx) begin
        rq_c.pop_front();
        rq_s.pop_front();
      end else begin
        next_new[off_c]++;
      end
    end
    if (tx_in_valid && !tx_in_ready) n_txstall++;
    // cumulative acknowledgement seen by the sender (the sender acts on it in
    // the cycle it is forwarded, so take it before looking at the wire)
    if (ack_fwd_valid) begin
      int c;
      c = conn_of(ack_fwd_conn);
      if (active[c] && int'(ack_fwd_expected) > cum[c]) cum[c] = int'(ack_fwd_expected);
    end
    // wire: enter the network
    if (tx_out_valid) begin
      int c, i, d;
      c = conn_of(tx_out.conn);
      i = int'(tx_out.seq) - base[c];
      check(tx_out.first_seq == seq_t'(base[c]), "metadata carries the first sequence number");
      check(tx_out.last == (i == nmsg[c] - 1), "metadata last flag");
      if (wr[c] && tx_out.last) begin
        check(cum[c] == int'(tx_out.seq), $sformatf("WRITE final packet %0d of conn %0d leaves only after cumulative ACK (%0d)", tx_out.seq, c, cum[c]));
        n_release++;
      end
      on_wire[c][i] = 1;
      queued[c][i] = 0;
      if ($urandom_range(0, 999) < 5) begin
        n_drop++;                                   // lost on the link
      end else begin
        d = $urandom_range(0, 99);
        if (d < 30) d = 0;
        else if (d < 98) d = $urandom_range(1, 400);
        else d = $urandom_range(2000, 6000);        // held back for a long time
        in_net[c][i]++;
        net_p.push_back(tx_out);
        net_t.push_back(cyc + d);
      end
    end
    // receive handshake
    if (rx_valid && rx_ready) begin
      int c, i;
      c = conn_of(rx_pkt.conn);
      i = int'(rx_pkt.seq) - base[c];
      if (i >= 0 && i < MAXN) begin
        in_net[c][i]--;
        arrived[c][i] = 1;
      end
      net_p.delete(pres);
      net_t.delete(pres);
      rx_count++;
      if (dut.u_driver.go_fast && dut.u_driver.in_order) n_fast++;
      if (dut.u_driver.go_fast && dut.u_driver.dup) n_dup++;
      if (dut.u_driver.go_hd && !dut.u_driver.has_bm) n_create++;
    end
    if (rx_valid && !rx_ready) n_rxstall++;
    // acknowledgements leaving the receiver
    if (ack_out_valid) begin
      int c;
      c = conn_of(ack_out.conn);
      ack_count++;
      case (ack_out.kind)
        ACK_SACK: n_sack++;
        ACK_NACK: n_nack++;
        default: ;
      endcase
      if (active[c]) begin
        check(int'(ack_out.expected) >= last_exp[c], $sformatf("conn %0d expected went back", c));
        check(int'(ack_out.expected) <= base[c] + nmsg[c], $sformatf("conn %0d expected beyond end", c));
        if (int'(ack_out.expected) > last_exp[c]) last_exp[c] = int'(ack_out.expected);
      end
    end
    // transmit-side hooks
    if (sack_valid) begin
      int c, i;
      c = conn_of(sack_conn);
      i = int'(sack_seq) - base[c];
      if (active[c] && i >= 0 && i < MAXN) sacked[c][i] = 1;
    end
    if (recover_valid) begin
      n_recover++;
      find_lost(conn_of(recover_conn), int'(recover_seq));
    end
    // memory controller traffic
    if (dut.s_req_valid && dut.s_req_ready) begin
      if (dut.s_req.op == MC_ALLOC && dut.s_req.idx != 0) n_grow++;
      if (dut.s_req.op == MC_FREE) n_gc++;
    end
    if (dut.g_hdbm[0].u_hdbm.state.name() == "S_FLUSH_ADV" &&
        dut.g_hdbm[0].u_hdbm.dyn_rows > dut.g_hdbm[0].u_hdbm.circ_rows &&
        dut.g_hdbm[0].u_hdbm.head_adv == dut.g_hdbm[0].u_hdbm.tail + 1) n_merge++;
    if (held_count != 0) n_hold++;
    // completion
    if (cn_valid) begin
      int c;
      bit all;
      c = conn_of(cn_conn);
      n_cn++;
      all = 1;
      for (int i = 0; i < nmsg[c]; i++) if (!arrived[c][i]) all = 0;
      check(active[c] && all, $sformatf("CN of conn %0d only after all packets arrived", c));
      check(last_exp[c] == base[c] + nmsg[c], $sformatf("conn %0d final expected", c));
      active[c] = 0;
      done[c]++;
      if (done[c] < NMSG) start_msg(c);
    end
    // every ~1000 cycles, look for lost packets
    if (cyc % 1000 == 0)
      for (int c = 0; c < NC; c++) if (active[c]) find_lost(c, cum[c]);
  end

  // ------------------------------------------------------------ drivers (after the edge)
  always @(negedge clk) if (rst_n) begin
    // transmit: retransmissions first, otherwise new packets round robin
    tx_in_valid = 0;
    off_retx = 0;
    while (rq_c.size() != 0 && !(active[rq_c[0]] && rq_s[0] >= cum[rq_c[0]] &&
                                 !sacked[rq_c[0]][rq_s[0] - base[rq_c[0]]])) begin
      if (active[rq_c[0]]) queued[rq_c[0]][rq_s[0] - base[rq_c[0]]] = 0;
      rq_c.pop_front();
      rq_s.pop_front();
    end
    if (rq_c.size() != 0 && $urandom_range(0, 3) != 0) begin
      tx_in_valid = 1;
      off_retx = 1;
      off_c = rq_c[0];
      tx_in = '{conn: conn_t'(rq_c[0]), seq: seq_t'(rq_s[0]),
                last: (rq_s[0] - base[rq_c[0]]) == nmsg[rq_c[0]] - 1, write: wr[rq_c[0]]};
      n_retx++;
    end else begin
      for (int k = 0; k < NC && !tx_in_valid; k++) begin
        int c;
        c = (rr + k) % NC;
        if (active[c] && next_new[c] < nmsg[c] && base[c] + next_new[c] - cum[c] < WIN) begin
          tx_in_valid = 1;
          off_c = c;
          tx_in = '{conn: conn_t'(c), seq: seq_t'(base[c] + next_new[c]),
                    last: next_new[c] == nmsg[c] - 1, write: wr[c]};
        end
      end
      rr = (rr + 1 + $urandom_range(0, 2)) % NC;
    end
    // receive: the earliest packet whose delay has passed
    if (pres < 0 || !rx_valid) begin
      int best;
      best = -1;
      foreach (net_t[i]) if (net_t[i] <= cyc && (best < 0 || net_t[i] < net_t[best])) best = i;
      pres = best;
    end
    rx_valid = pres >= 0;
    if (pres >= 0) rx_pkt = net_p[pres];
  end
  // a delivered packet leaves the network; present a new one in the next cycle
  always @(posedge clk) if (rst_n && rx_valid && rx_ready) #1 pres = -1;

  initial begin
    int all_done;
    tx_in_valid = 0; tx_in = '0; rx_valid = 0; rx_pkt = '0; term_valid = 0; term_conn = '0;
    n_fast = 0; n_dup = 0; n_create = 0; n_sack = 0; n_grow = 0; n_merge = 0; n_nack = 0;
    n_gc = 0; n_cn = 0; n_hold = 0; n_release = 0; n_txstall = 0; n_rxstall = 0;
    n_recover = 0; n_drop = 0; n_retx = 0; n_term = 0;
    for (int c = 0; c < NC; c++) begin
      done[c] = 0;
      start_msg(c);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    do begin
      repeat (1000) @(posedge clk);
      all_done = 1;
      for (int c = 0; c < NC; c++) if (done[c] < NMSG) all_done = 0;
    end while (!all_done);
    repeat (100) @(posedge clk);

    // termination: connection 5 gets two packets past its end (a new message
    // whose start is lost), which builds a bitmap; the host then ends it
    begin
      int e, rx0;
      pkt_t p;
      e = base[5] + nmsg[5];
      rx0 = rx_count;
      for (int k = 3; k < 5; k++) begin
        p = '{conn: 8'd5, seq: seq_t'(e + k), first_seq: seq_t'(e), last: 1'b0};
        net_p.push_back(p);
        net_t.push_back(cyc);
      end
      while (rx_count < rx0 + 2) @(posedge clk);
      repeat (300) @(posedge clk);
      check(used_slots == 1 && used_blocks == 25, "out-of-order packets of a new message built a bitmap");
      @(negedge clk);
      term_valid = 1;
      term_conn = 8'd5;
      @(posedge clk);
      while (!term_ready) @(posedge clk);
      n_term++;
      @(negedge clk);
      term_valid = 0;
      repeat (100) @(posedge clk);
      check(used_slots == 0 && used_blocks == 0, "termination freed the bitmap and metadata");
    end

    check(n_cn == NC * NMSG, "one CN per message");
    check(ack_count == rx_count, $sformatf("one answer per packet (%0d answers, %0d packets)",
                                           ack_count, rx_count));
    check(used_blocks == 0, "all master array blocks freed");
    check(used_slots == 0, "all metadata regions freed");
    check(held_count == 0, "no packet left held");
    $display("cycles %0d, packets received %0d, dropped %0d, re-sent %0d", cyc, rx_count, n_drop, n_retx);
    $display("fast %0d dup %0d create %0d sack %0d grow %0d merge %0d nack %0d gc %0d cn %0d",
             n_fast, n_dup, n_create, n_sack, n_grow, n_merge, n_nack, n_gc, n_cn);
    $display("hold-cycles %0d release %0d tx-stall %0d rx-stall %0d recover %0d",
             n_hold, n_release, n_txstall, n_rxstall, n_recover);
    check(n_fast > 0, "in-order fast path happened");
    check(n_dup > 0, "duplicate happened");
    check(n_create > 0, "bitmap creation happened");
    check(n_sack > 0, "SACK happened");
    check(n_grow > 0, "bitmap growth happened");
    check(n_merge > 0, "merge of the linear portion happened");
    check(n_nack > 0, "NACK at the bitmap cap happened");
    check(n_gc > 0, "garbage collection happened");
    check(n_hold > 0 && n_release > 0, "WRITE hold and release happened");
    check(n_txstall > 0, "transmit stall on full hold slots happened");
    check(n_rxstall > 0, "receive stall behind the engine happened");
    check(n_recover > 0, "recovery hook happened");
    check(n_term > 0, "termination happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_eunomia_pkt_driver -- self-checking test of the packet driver.
//
// The driver is connected to two behavioural HD bitmap engines written in
// the testbench. Each engine keeps an unbounded set of received sequence
// numbers per connection and answers after a random delay, so it
// back-pressures the driver. The driver plus ideal engines must act as a
// perfect reorder tracker. Checks against a testbench model:
//   * ACK for in-order/duplicate packets, SACK for out-of-order ones, with
//     the right cumulative 'expected' value in every acknowledgement;
//   * a bitmap is created only on a connection's first out-of-order packet,
//     with head = expected (or the metadata first sequence number for a
//     connection whose very first packet is out of order);
//   * every later packet of that connection goes to the same engine until
//     it is freed, and engines are assigned round robin;
//   * exactly one completion notification per connection, after all of its
//     packets;
//   * in-order traffic passes at one packet per cycle;
//   * termination: handled locally for a connection with no bitmap, sent to
//     the owning engine otherwise, no acknowledgement, and the ID then
//     accepts a new connection.
module tb_eunomia_pkt_driver;
  import eunomia_pkg::*;
  localparam int NM = 2;
  localparam int NCONN = 8;
  localparam int NPKT = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    pkt_valid, pkt_ready;
  pkt_t    pkt;
  logic    term_valid, term_ready;
  conn_t   term_conn;
  logic    [NM-1:0] hd_req_valid, hd_req_ready, hd_rsp_valid, hd_rsp_ready;
  hd_req_t hd_req;
  hd_rsp_t [NM-1:0] hd_rsp;
  logic    ack_valid, cn_valid;
  ack_t    ack;
  conn_t   cn_conn;

  eunomia_pkt_driver #(.NUM_CONN(16), .NUM_HDBM(NM)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- behavioural engines
  bit   e_rx   [NM][NCONN][int];
  int   e_head [NM][NCONN];
  int   e_last [NM][NCONN];
  bit   e_busy [NM];
  int   e_wait [NM];
  int   owner  [NCONN];          // engine given at create, -1 if none
  int   creates, last_create_engine, rr_ok;

  for (genvar g = 0; g < NM; g++) begin : g_eng
    assign hd_req_ready[g] = !e_busy[g];
    always @(posedge clk) begin
      if (!rst_n) begin
        e_busy[g] <= 0; hd_rsp_valid[g] <= 0; hd_rsp[g] <= '0;
      end else begin
        if (hd_rsp_valid[g] && hd_rsp_ready[g]) begin
          hd_rsp_valid[g] <= 0; e_busy[g] <= 0;
        end
        if (hd_req_valid[g] && hd_req_ready[g]) begin
          int c, s;
          hd_rsp_t r;
          c = int'(hd_req.pkt.conn); s = int'(hd_req.pkt.seq);
          if (hd_req.term) begin
            check(owner[c] == g && !hd_req.create, "termination sent to the connection's engine");
            owner[c] = -1;
            n_term++;
            r = '0;
            r.conn = hd_req.pkt.conn;
            r.kind = ACK_NONE;
            r.freed = 1'b1;
          end else if (hd_req.create) begin
            check(owner[c] == -1, "create only once per bitmap lifetime");
            owner[c] = g;
            creates++;
            if (creates > 1 && g == last_create_engine) rr_ok = 0;
            last_create_engine = g;
            e_head[g][c] = int'(hd_req.init_head);
            e_last[g][c] = -1;
            e_rx[g][c].delete();
          end else begin
            check(owner[c] == g, "packet routed to its connection's engine");
          end
          if (!hd_req.term) begin
            if (hd_req.pkt.last) e_last[g][c] = s;
            r.conn = hd_req.pkt.conn; r.seq = hd_req.pkt.seq;
            r.kind = (s <= e_head[g][c]) ? ACK_ACK : ACK_SACK;
            e_rx[g][c][s] = 1;
            while (e_rx[g][c].exists(e_head[g][c])) e_head[g][c]++;
            r.head = seq_t'(e_head[g][c]);
            r.complete = (e_last[g][c] >= 0 && e_head[g][c] == e_last[g][c] + 1);
            r.freed = r.complete;
            if (r.freed) owner[c] = -1;
          end
          hd_rsp[g] <= r;
          e_busy[g] <= 1;
          e_wait[g] <= $urandom_range(1, 6);
        end else if (e_busy[g] && !hd_rsp_valid[g]) begin
          if (e_wait[g] == 0) hd_rsp_valid[g] <= 1;
          else e_wait[g] <= e_wait[g] - 1;
        end
      end
    end
  end

  // ---------------- reference model of the whole receive side
  bit m_rx [NCONN][int];
  int m_head [NCONN];
  int m_cn [NCONN];
  int acks_seen, n_stall, n_term;
  int q_seq [$], q_conn [$];   // packets in the order they were accepted

  always @(posedge clk) if (rst_n) begin
    if (pkt_valid && !pkt_ready) n_stall++;
    if (pkt_valid && pkt_ready) begin
      q_conn.push_back(int'(pkt.conn));
      q_seq.push_back(int'(pkt.seq));
    end
    if (ack_valid) begin
      int c, s;
      ack_kind_e k;
      c = int'(ack.conn); s = int'(ack.seq);
      acks_seen++;
      k = (s <= m_head[c]) ? ACK_ACK : ACK_SACK;
      m_rx[c][s] = 1;
      while (m_rx[c].exists(m_head[c])) m_head[c]++;
      check(ack.kind == k, $sformatf("conn %0d seq %0d kind %0d got %0d", c, s, k, ack.kind));
      check(ack.expected == seq_t'(m_head[c]),
            $sformatf("conn %0d seq %0d expected %0d got %0d", c, s, m_head[c], ack.expected));
    end
    if (cn_valid) begin
      int c;
      c = int'(cn_conn);
      m_cn[c]++;
      check(m_head[c] == 100 * c + NPKT, $sformatf("CN of conn %0d after all packets", c));
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int order [NCONN][$];

  task automatic deliver(input int c, input int sq, input int first);
    @(negedge clk);
    pkt_valid = 1;
    pkt = '{conn: conn_t'(c), seq: seq_t'(sq), first_seq: seq_t'(first), last: 1'b0};
    @(posedge clk);
    while (!pkt_ready) @(posedge clk);
    @(negedge clk);
    pkt_valid = 0;
  endtask

  task automatic terminate(input int c);
    @(negedge clk);
    term_valid = 1;
    term_conn = conn_t'(c);
    @(posedge clk);
    while (!term_ready) @(posedge clk);
    @(negedge clk);
    term_valid = 0;
  endtask
  initial begin
    int t0, cyc;
    pkt_valid = 0; pkt = '0; term_valid = 0; term_conn = '0; n_term = 0;
    creates = 0; rr_ok = 1; last_create_engine = -1;
    for (int c = 0; c < NCONN; c++) begin
      owner[c] = -1; m_head[c] = 100 * c; m_cn[c] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // in-order rate: connection 15, 20 packets back to back
    m_head[0] = 0;
    @(negedge clk);
    t0 = $time;
    for (int i = 0; i < 20; i++) begin
      pkt_valid = 1;
      pkt = '{conn: 8'd7, seq: seq_t'(700 + i), first_seq: seq_t'(700), last: 1'b0};
      @(posedge clk);
      check(pkt_ready, "in-order packet taken every cycle");
      @(negedge clk);
    end
    pkt_valid = 0;
    repeat (3) @(posedge clk);
    for (int i = 20; i < NPKT; i++) order[7].push_back(700 + i);

    // connections 0..6: even ones reordered, odd ones in order;
    // connection 2 starts out of order (first packet arriving is not 200)
    for (int c = 0; c < 7; c++) begin
      for (int i = 0; i < NPKT; i++) order[c].push_back(100 * c + i);
      if (c % 2 == 0)
        for (int i = 0; i < NPKT; i++) begin
          int j, t;
          j = i + $urandom_range(0, 8);
          if (j >= NPKT) j = NPKT - 1;
          t = order[c][i]; order[c][i] = order[c][j]; order[c][j] = t;
        end
    end
    begin int t; t = order[2][0]; order[2][0] = order[2][3]; order[2][3] = t; end
    if (order[2][0] == 200) begin int t; t = order[2][0]; order[2][0] = order[2][1]; order[2][1] = t; end

    cyc = 0;
    while (1) begin
      int c, left;
      left = 0;
      for (int k = 0; k < NCONN; k++) left += order[k].size();
      if (left == 0) break;
      c = $urandom_range(0, NCONN - 1);
      if (order[c].size() == 0) continue;
      @(negedge clk);
      pkt_valid = 1;
      pkt.conn = conn_t'(c);
      pkt.seq = seq_t'(order[c][0]);
      pkt.first_seq = seq_t'(100 * c);
      pkt.last = (order[c][0] == 100 * c + NPKT - 1);
      @(posedge clk);
      while (!pkt_ready) @(posedge clk);
      void'(order[c].pop_front());
      @(negedge clk);
      pkt_valid = 0;
    end
    repeat (50) @(posedge clk);

    for (int c = 0; c < NCONN; c++)
      check(m_cn[c] == 1, $sformatf("conn %0d: one CN (got %0d)", c, m_cn[c]));
    check(creates >= 4, $sformatf("bitmaps created for reordered connections (%0d)", creates));
    check(rr_ok == 1, "engines assigned round robin");
    check(n_stall > 0, "driver stalled on a busy engine");
    check(acks_seen == NCONN * NPKT, $sformatf("one acknowledgement per packet (%0d)", acks_seen));

    // termination. Connection 3 has completed (no bitmap): terminating it is
    // local, and the ID then takes a new connection whose sequence numbers
    // are lower (otherwise they would look like late duplicates).
    terminate(3);
    check(n_term == 0, "termination without a bitmap stays in the driver");
    m_rx[3].delete(); m_head[3] = 50;
    deliver(3, 50, 50);                  // in order: ACK 51
    deliver(3, 52, 50);                  // out of order: bitmap created, SACK 51
    repeat (20) @(posedge clk);
    check(owner[3] >= 0, "new connection got a bitmap");
    terminate(3);                        // goes to the engine, which frees it
    repeat (20) @(posedge clk);
    check(n_term == 1 && owner[3] == -1, "termination freed the bitmap through its engine");
    m_rx[3].delete(); m_head[3] = 10;
    deliver(3, 10, 10);                  // fresh connection, fast path again: ACK 11
    repeat (20) @(posedge clk);
    check(acks_seen == NCONN * NPKT + 3, "terminations produce no acknowledgement");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

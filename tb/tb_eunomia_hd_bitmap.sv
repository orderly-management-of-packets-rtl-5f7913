// tb_eunomia_hd_bitmap -- self-checking test of the HD bitmap engine.
//
// The engine runs against a real eunomia_mem_ctrl. Each answer (ACK, SACK
// or NACK, new Head, complete, freed) and the controller's block count are
// compared with a reference model. The model works on sequence numbers
// only: a set of received numbers plus Head, Tail, C and D counted in
// blocks. It knows nothing of bit positions or memory layout.
// Scenarios:
//   1. a worked example: growth by linear blocks, a flush that wraps
//      around the circular portion, merge of the linear portion, completion
//      and garbage collection;
//   2. packets beyond the 256-bit cap are NACKed and later re-sent;
//   3. random reordering on several connections sharing the engine;
//   then termination of a connection holding three bitmap blocks (all
//   freed, result without acknowledgement);
//   4. memory exhaustion: with 40 connections holding 25 blocks each, the
//      41st finds a metadata region but no bitmap block (NACK, nothing kept).
module tb_eunomia_hd_bitmap;
  import eunomia_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    req_valid, req_ready, rsp_valid, rsp_ready;
  hd_req_t req;
  hd_rsp_t rsp;
  logic    mc_req_valid, mc_req_ready, mc_rsp_valid;
  mc_req_t mc_req;
  mc_rsp_t mc_rsp;
  logic [10:0] used_blocks;
  logic [5:0]  used_slots;

  eunomia_hd_bitmap dut (.*);
  eunomia_mem_ctrl u_mc (.clk, .rst_n, .req_valid(mc_req_valid), .req_ready(mc_req_ready),
                         .req(mc_req), .rsp_valid(mc_rsp_valid), .rsp(mc_rsp),
                         .used_blocks, .used_slots);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------ reference model
  localparam int NC = 64;
  bit        m_live [NC];
  longint    m_head [NC], m_tail [NC], m_last [NC];
  int        m_c [NC], m_d [NC];
  bit        m_rx [NC][int];
  int        m_blocks;          // bitmap blocks in use, all connections

  function automatic void model(input int c, input longint s, input bit last,
                                input bit create, input longint init,
                                output ack_kind_e k, output longint hd,
                                output bit comp, output bit fr);
    comp = 0; fr = 0;
    if (create) begin
      m_live[c] = 1; m_head[c] = init; m_tail[c] = init + 15;
      m_c[c] = 1; m_d[c] = 1; m_last[c] = -1; m_rx[c].delete();
      m_blocks += 1;
    end
    if (last) m_last[c] = s;
    if (s < m_head[c]) k = ACK_ACK;
    else if (s <= m_tail[c]) begin
      m_rx[c][int'(s)] = 1;
      k = (s == m_head[c]) ? ACK_ACK : ACK_SACK;
    end else begin
      longint off = s - m_tail[c] - 1;
      int need = m_c[c] + int'(off / 16) + 1;
      if (need > 16) k = ACK_NACK;
      else begin
        if (need > m_d[c]) begin m_blocks += need - m_d[c]; m_d[c] = need; end
        m_rx[c][int'(s)] = 1;
        k = ACK_SACK;
      end
    end
    if (k == ACK_ACK && s == m_head[c]) begin
      while (m_rx[c].exists(int'(m_head[c]))) begin
        m_rx[c].delete(int'(m_head[c]));
        m_head[c]++;
        if (m_d[c] > m_c[c] && m_head[c] == m_tail[c] + 1) begin
          m_c[c] = m_d[c];
          m_tail[c] = m_head[c] + 16 * m_d[c] - 1;
        end else if (m_d[c] == m_c[c]) begin
          m_tail[c] = m_head[c] + 16 * m_c[c] - 1;
        end
      end
    end
    hd = m_head[c];
    if (m_last[c] >= 0 && m_head[c] == m_last[c] + 1) begin
      comp = 1; fr = 1; m_live[c] = 0; m_blocks -= m_d[c];
    end
  endfunction

  // ------------------------------------------------ driver
  hd_rsp_t got;
  int      lat;
  task automatic send(input int c, input longint s, input bit last, input bit create,
                      input longint init);
    @(negedge clk);
    req_valid = 1;
    req.pkt.conn = conn_t'(c);
    req.pkt.seq = seq_t'(s);
    req.pkt.first_seq = '0;
    req.pkt.last = last;
    req.create = create;
    req.term = 1'b0;
    req.init_head = seq_t'(init);
    lat = 0;
    do begin @(posedge clk); lat++; end while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) begin @(posedge clk); lat++; #1; end
    got = rsp;
    @(posedge clk);
  endtask

  // termination of a connection: only the connection ID is given
  task automatic terminate(input int c);
    @(negedge clk);
    req_valid = 1;
    req = '0;
    req.pkt.conn = conn_t'(c);
    req.term = 1'b1;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) begin @(posedge clk); #1; end
    got = rsp;
    @(posedge clk);
  endtask

  int n_nack, n_merge_seen, n_wrap, nsteps;
  task automatic step(input int c, input longint s, input bit last, input bit create,
                      input longint init);
    ack_kind_e k; longint hd; bit comp, fr; int c_before;
    c_before = m_c[c];
    nsteps++;
    send(c, s, last, create, init);
    model(c, s, last, create, init, k, hd, comp, fr);
    if (!create && m_c[c] > c_before) n_merge_seen++;
    if (k == ACK_NACK) n_nack++;
    check(got.kind == k, $sformatf("c%0d seq %0d kind %0d (got %0d)", c, s, k, got.kind));
    check(got.head == seq_t'(hd), $sformatf("c%0d seq %0d head %0d (got %0d)", c, s, hd, got.head));
    check(got.complete == comp && got.freed == fr,
          $sformatf("c%0d seq %0d complete/freed %0d%0d (got %0d%0d)", c, s, comp, fr,
                    got.complete, got.freed));
    check(got.conn == conn_t'(c) && got.seq == seq_t'(s), "response names its packet");
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int order[$];
  int nconn_live;
  initial begin
    req_valid = 0; req = '0; rsp_ready = 1;
    m_blocks = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. worked example, connection 0, packet 0 already delivered in order
    step(0, 6, 0, 1, 1);                 // first OOO packet: bitmap created, head 1
    check(used_blocks == 25, "create: 24 metadata blocks + 1 bitmap block");
    check(got.kind == ACK_SACK, "6 is SACKed");
    step(0, 8, 0, 0, 0);
    step(0, 11, 0, 0, 0);
    step(0, 20, 0, 0, 0);                // beyond tail 16: one linear block
    check(used_blocks == 26, "linear block added");
    step(0, 40, 0, 0, 0);                // one more linear block (rows: 1..16, 17..32, 33..48)
    check(used_blocks == 27, "second linear block");
    step(0, 33, 0, 0, 0);
    for (int s = 1; s <= 5; s++) step(0, s, 0, 0, 0);
    check(got.head == 7, "head moves to first missing (7)");
    step(0, 7, 0, 0, 0);
    check(got.head == 9, "head after 7 is 9");
    for (int s = 9; s <= 16; s++) if (s != 11) step(0, s, 0, 0, 0);
    check(got.head == 21 - 4, "circular portion flushed, head at 17");
    check(n_merge_seen == 1, "linear portion merged into circular");
    for (int s = 17; s <= 48; s++) if (s != 20 && s != 33 && s != 40) step(0, s, s == 48, 0, 0);
    check(got.complete && got.freed, "connection completes at Last Seq 48");
    check(used_blocks == 0 && used_slots == 0, "garbage collection released all blocks");

    // ---- 2. cap: bitmap at most 16 blocks = 256 sequence numbers
    step(1, 300, 0, 1, 10);              // head 10, tail 25
    check(got.kind == ACK_NACK, "packet 290 beyond the cap is NACKed");
    check(used_blocks == 25, "a NACKed create keeps the bitmap");
    step(1, 265, 0, 0, 0);               // need = 1 + (265-26)/16 + 1 = 16 blocks: fits
    check(got.kind == ACK_SACK && used_blocks == 24 + 16, "grown to 16 blocks");
    step(1, 266 + 16, 0, 0, 0);
    check(got.kind == ACK_NACK, "17th block refused");
    for (int s = 10; s <= 300; s++) if (s != 265) step(1, s, s == 300, 0, 0);
    check(got.complete && used_blocks == 0, "capped connection completes after resend");

    // ---- 3. random reordering, 4 connections interleaved
    begin
      int pend [4][$];
      int base [4];
      int total = 0;
      for (int c = 0; c < 4; c++) begin
        base[c] = 1000 * (c + 1);
        // displace each packet by up to 40 positions
        for (int i = 0; i < 150; i++) pend[c].push_back(base[c] + i);
        for (int i = 0; i < 150; i++) begin
          int j, t;
          j = i + $urandom_range(0, 40);
          if (j > 149) j = 149;
          t = pend[c][i]; pend[c][i] = pend[c][j]; pend[c][j] = t;
        end
      end
      // make the first arriving packet of each connection out of order
      for (int c = 0; c < 4; c++)
        if (pend[c][0] == base[c]) begin
          int t;
          t = pend[c][0]; pend[c][0] = pend[c][1]; pend[c][1] = t;
        end
      for (int c = 0; c < 4; c++) m_live[10 + c] = 0;
      while (pend[0].size() + pend[1].size() + pend[2].size() + pend[3].size() > 0) begin
        int c, s;
        c = $urandom_range(0, 3);
        if (pend[c].size() == 0) continue;
        s = pend[c].pop_front();
        step(10 + c, s, s == base[c] + 149, !m_live[10 + c], base[c]);
        if (got.kind == ACK_NACK) pend[c].push_back(s);   // sender resends
        total++;
      end
      check(used_blocks == 0, "all random connections garbage-collected");
      $display("random phase: %0d packets", total);
    end

    // ---- termination: a connection with three bitmap blocks is ended early
    step(19, 20, 0, 1, 0);
    step(19, 40, 0, 0, 0);
    check(used_slots == 1 && used_blocks == 24 + 3, "connection to terminate holds 27 blocks");
    terminate(19);
    check(got.kind == ACK_NONE && got.freed && !got.complete && got.conn == 19,
          "termination result: freed, no acknowledgement");
    check(used_slots == 0 && used_blocks == 0, "termination frees metadata and bitmap");
    m_live[19] = 0;

    // ---- 4. exhaustion: 40 connections x (24 + 1) blocks leave 24 free blocks,
    //         enough for a metadata region but not for its first bitmap block
    for (int c = 20; c < 20 + 40; c++) step(c, 5, 0, 1, 0);
    check(used_slots == 40 && used_blocks == 40 * 25, "40 connections with a bitmap");
    send(60, 5, 0, 1, 0);
    check(got.kind == ACK_NACK && got.freed && got.head == 0,
          "41st connection: no bitmap block left -> NACK, nothing kept");
    check(used_slots == 40 && used_blocks == 1000, "failed create released its metadata");
    n_nack++;
    check(n_nack >= 3, $sformatf("NACK path exercised (%0d)", n_nack));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

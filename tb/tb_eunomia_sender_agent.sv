// tb_eunomia_sender_agent -- self-checking test of the sender-side agent.
//
// Checks: the 33 bits of metadata (first sequence number learned from the
// connection's first packet, last flag); one packet per cycle; the final
// packet of a WRITE is held until the acknowledgement says everything
// before it arrived, while other connections keep flowing; the final
// packet of a SEND is not held; ACK/SACK/NACK become the cumulative,
// mark-received and recovery hooks; a connection closes once its final
// packet is acknowledged, and the same ID can open again with a new first
// sequence number.
module tb_eunomia_sender_agent;
  import eunomia_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tx_in_valid, tx_in_ready, tx_out_valid, tx_out_ready, ack_valid;
  tx_desc_t tx_in;
  pkt_t tx_out;
  ack_t ack;
  logic ack_fwd_valid, sack_valid, recover_valid;
  conn_t ack_fwd_conn, sack_conn, recover_conn;
  seq_t ack_fwd_expected, sack_seq, recover_seq;
  logic [2:0] held_count;

  eunomia_sender_agent #(.NUM_CONN(16), .HOLD_SLOTS(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // everything that leaves on the wire
  pkt_t txq [$];
  always @(posedge clk) if (rst_n && tx_out_valid && tx_out_ready) txq.push_back(tx_out);

  task automatic send(input int c, input int s, input bit last, input bit wr);
    @(negedge clk);
    tx_in_valid = 1;
    tx_in = '{conn: conn_t'(c), seq: seq_t'(s), last: last, write: wr};
    @(posedge clk);
    while (!tx_in_ready) @(posedge clk);
    @(negedge clk);
    tx_in_valid = 0;
  endtask

  task automatic give_ack(input ack_kind_e k, input int c, input int e, input int s);
    @(negedge clk);
    ack_valid = 1;
    ack = '{kind: k, conn: conn_t'(c), expected: seq_t'(e), seq: seq_t'(s)};
    @(posedge clk);
    @(negedge clk);
    ack_valid = 0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tx_in_valid = 0; tx_in = '0; tx_out_ready = 1; ack_valid = 0; ack = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // back-to-back packets of connection 3 (WRITE), first seq 500
    @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      tx_in_valid = 1;
      tx_in = '{conn: 8'd3, seq: seq_t'(500 + i), last: 1'b0, write: 1'b1};
      @(posedge clk);
      check(tx_in_ready, "one packet per cycle");
      @(negedge clk);
    end
    tx_in_valid = 0;
    repeat (2) @(posedge clk);
    check(txq.size() == 8, "8 packets on the wire");
    foreach (txq[i]) begin
      check(txq[i].first_seq == 500 && txq[i].seq == seq_t'(500 + i) && !txq[i].last,
            "metadata: first sequence 500, not last");
    end
    txq.delete();

    // final WRITE packet 508 is held
    send(3, 508, 1, 1);
    repeat (3) @(posedge clk);
    check(txq.size() == 0 && held_count == 1, "final WRITE packet held");
    // other connection (SEND) keeps flowing, its final packet is not held
    send(4, 40, 0, 0);
    send(4, 41, 1, 0);
    repeat (2) @(posedge clk);
    check(txq.size() == 2 && txq[1].last && txq[1].first_seq == 40, "SEND final packet not held");
    txq.delete();

    // SACK: mark received, no recovery, still held (expected 503 != 508)
    fork
      give_ack(ACK_SACK, 3, 503, 506);
      begin
        @(posedge clk); #1;
        check(sack_valid && sack_seq == 506 && sack_conn == 3 && !recover_valid, "SACK marks 506");
        check(ack_fwd_valid && ack_fwd_expected == 503, "SACK forwards cumulative 503");
      end
    join
    repeat (3) @(posedge clk);
    check(txq.size() == 0, "still held after partial acknowledgement");
    // NACK: recovery from expected
    fork
      give_ack(ACK_NACK, 3, 503, 507);
      begin
        @(posedge clk); #1;
        check(recover_valid && recover_seq == 503 && recover_conn == 3 && !sack_valid,
              "NACK triggers recovery from 503");
      end
    join
    // everything up to 507 acknowledged -> expected 508 -> release
    give_ack(ACK_ACK, 3, 508, 507);
    repeat (3) @(posedge clk);
    check(txq.size() == 1 && txq[0].seq == 508 && txq[0].last && txq[0].first_seq == 500,
          "final WRITE packet released after in-order acknowledgement");
    check(held_count == 0, "hold slot freed");
    txq.delete();

    // connection 3 closes when 508 is acknowledged; reopening gets a new first seq
    give_ack(ACK_ACK, 3, 509, 508);
    send(3, 900, 0, 1);
    repeat (2) @(posedge clk);
    check(txq.size() == 1 && txq[0].first_seq == 900, "connection reopened with first seq 900");
    txq.delete();

    // hold slots fill: 4 WRITE finals on 4 connections, the 5th stalls
    for (int c = 8; c < 12; c++) begin
      send(c, 10 * c, 0, 1);
      send(c, 10 * c + 1, 1, 1);
    end
    check(held_count == 4, "four packets held");
    @(negedge clk);
    tx_in_valid = 1;
    tx_in = '{conn: 8'd12, seq: seq_t'(1), last: 1'b1, write: 1'b1};
    repeat (3) begin @(posedge clk); check(!tx_in_ready, "input stalls with all hold slots full"); end
    @(negedge clk);
    tx_in_valid = 0;
    give_ack(ACK_ACK, 9, 91, 90);
    repeat (2) @(posedge clk);
    check(held_count == 3, "one slot released");
    begin
      bit found = 0;
      foreach (txq[i]) if (txq[i].seq == 91 && txq[i].last) found = 1;
      check(found, "conn 9 final packet sent");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

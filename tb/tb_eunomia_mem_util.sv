// tb_eunomia_mem_util -- memory use of the receive side with 20 concurrent
// connections, at the default size (no parameter overrides).
//
// The experiment: 20 connections send 100-packet messages at the same time.
// A chosen share of the connections (0%, 50% or 100%) is reordered. In a
// reordered connection, a chosen share of the packets (10% or 100%) is moved
// later in the stream by 1..32 positions. Packets of all connections are
// interleaved and offered to the receive port one per cycle. No packet is
// lost, so every message completes without retransmission. While the traffic
// runs, the master array's occupancy is sampled every cycle. It is reported
// as bitmap bytes and total bytes (metadata included) per connection,
// averaged over time. The reference point is a 256-bit static bitmap with
// its 9 bytes of state (41 bytes per connection).
//
// Checks, for every run: one CN per connection, and the final ACK of each
// connection carries the end of its message. At every cycle, occupancy
// equals 24 words per metadata region plus at most 16 bitmap blocks per
// region. No memory is used when nothing is reordered. The bitmap memory per
// connection stays below the 32 bytes of the static bitmap. All memory is
// free at the end. When every connection is reordered, the total per
// connection exceeds the static 41 bytes, because of the 48-byte metadata
// region; when none is, it is zero.
module tb_eunomia_mem_util;
  import eunomia_pkg::*;

  localparam int NC = 20;
  localparam int NP = 100;

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

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    #(100000000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-connection packet order
  int order [NC][NP];
  int pos [NC];
  int ncn, cn_seen [NC];
  longint last_exp [NC];
  // occupancy samples
  longint sum_blocks, sum_bm, nsamp;
  int peak_blocks;
  bit sampling;

  always @(posedge clk) if (rst_n) begin
    if (cn_valid) begin
      ncn++;
      cn_seen[int'(cn_conn)]++;
    end
    if (ack_out_valid && int'(ack_out.conn) < NC && longint'(ack_out.expected) > last_exp[int'(ack_out.conn)])
      last_exp[int'(ack_out.conn)] = longint'(ack_out.expected);
    if (sampling) begin
      int bm;
      bm = int'(used_blocks) - 24 * int'(used_slots);
      if (bm < 0 || bm > 16 * int'(used_slots))
        check(0, $sformatf("occupancy %0d with %0d regions", used_blocks, used_slots));
      sum_blocks += used_blocks;
      sum_bm += bm;
      nsamp++;
      if (int'(used_blocks) > peak_blocks) peak_blocks = used_blocks;
    end
  end

  function automatic int base_of(int c);
    return 5000 * (c + 1);
  endfunction

  task automatic run(input int pct_conn, input int pct_pkt, output real bm_b, output real tot_b);
    int nre;
    // build the orders
    nre = (NC * pct_conn) / 100;
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < NP; i++) order[c][i] = i;
      if (c < nre) begin
        for (int i = 0; i < NP; i++) begin
          if ($urandom_range(0, 99) < pct_pkt) begin
            int j, t;
            j = i + $urandom_range(1, 32);
            if (j > NP - 1) j = NP - 1;
            t = order[c][i]; order[c][i] = order[c][j]; order[c][j] = t;
          end
        end
        if (order[c][0] == 0) begin        // make sure the connection is reordered
          order[c][0] = order[c][1]; order[c][1] = 0;
        end
      end
      pos[c] = 0; cn_seen[c] = 0; last_exp[c] = base_of(c);
    end
    ncn = 0; sum_blocks = 0; sum_bm = 0; nsamp = 0; peak_blocks = 0;
    // reset the NIC between runs
    @(negedge clk);
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    sampling = 1;
    // offer packets round robin over connections
    begin
      int c, left;
      c = 0;
      left = NC * NP;
      while (left > 0) begin
        while (pos[c] >= NP) c = (c + 1) % NC;
        rx_valid = 1;
        rx_pkt = '{conn: conn_t'(c), seq: seq_t'(base_of(c) + order[c][pos[c]]),
                   first_seq: seq_t'(base_of(c)), last: order[c][pos[c]] == NP - 1};
        @(posedge clk);
        while (!rx_ready) @(posedge clk);
        @(negedge clk);
        rx_valid = 0;
        pos[c]++;
        left--;
        c = (c + 1) % NC;
      end
    end
    while (ncn < NC) @(posedge clk);
    repeat (5) @(posedge clk);
    sampling = 0;
    bm_b  = 2.0 * real'(sum_bm) / real'(nsamp) / NC;
    tot_b = 2.0 * real'(sum_blocks) / real'(nsamp) / NC;
    for (int c = 0; c < NC; c++) begin
      check(cn_seen[c] == 1, $sformatf("one CN for conn %0d", c));
      check(last_exp[c] == base_of(c) + NP, $sformatf("final expected of conn %0d", c));
    end
    check(used_blocks == 0 && used_slots == 0, "all memory free at the end");
    check(peak_blocks <= NC * 40, "peak within 20 x 40 blocks");
    $display("reordered conns %3d%%  reordered pkts %3d%%: bitmap %6.2f B/conn, total %6.2f B/conn, peak %0d blocks, %0d cycles",
             pct_conn, pct_pkt, bm_b, tot_b, peak_blocks, nsamp);
  endtask

  initial begin
    real bm, tot;
    tx_in_valid = 0; tx_in = '0; tx_out_ready = 1; ack_in_valid = 0; ack_in = '0;
    rx_valid = 0; rx_pkt = '0; sampling = 0; term_valid = 0; term_conn = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    run(0, 0, bm, tot);
    check(bm == 0.0 && tot == 0.0, "no memory without reordering");
    run(50, 10, bm, tot);
    check(bm > 0.0 && bm < 32.0, "bitmap memory below the static bitmap (50%/10%)");
    run(50, 100, bm, tot);
    check(bm > 0.0 && bm < 32.0, "bitmap memory below the static bitmap (50%/100%)");
    run(100, 10, bm, tot);
    check(bm > 0.0 && bm < 32.0, "bitmap memory below the static bitmap (100%/10%)");
    run(100, 100, bm, tot);
    check(bm > 0.0 && bm < 32.0, "bitmap memory below the static bitmap (100%/100%)");
    check(tot > 41.0, "with every connection reordered the metadata makes the total exceed 41 bytes");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_eunomia_mem_ctrl -- self-checking test of the Eunomia memory controller.
//
// Covers: metadata regions placed from the tail of the master array
// downwards and bitmap blocks from the head upwards; exhaustion of both (42
// regions of 24 blocks fit in 1024 blocks, then the 16 blocks left over
// serve as bitmap blocks); per-connection translation of (block, bit) to
// master-array words through base + relative addresses, with interleaved
// allocations so that the blocks of one connection are not contiguous;
// SET_BIT, state words, FREE, clearing of a reused block, rejection of
// unknown connections, and the documented latencies. Expected values come
// from a model kept in the testbench.
module tb_eunomia_mem_ctrl;
  import eunomia_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, rsp_valid;
  mc_req_t req;
  mc_rsp_t rsp;
  logic [10:0] used_blocks;
  logic [5:0]  used_slots;

  eunomia_mem_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic ok_o;
  word_t data_o;
  int lat_o;
  task automatic op(input mc_op_e o, input int conn, input int idx, input int bitpos, input int data);
    int t;
    @(negedge clk);
    req_valid = 1;
    req = '{op: o, conn: conn_t'(conn), idx: row_t'(idx), bitpos: bit_t'(bitpos), data: word_t'(data)};
    t = 0;
    do begin @(posedge clk); t++; end while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) begin @(posedge clk); t++; #1; end
    ok_o = rsp.ok;
    data_o = rsp.data;
    lat_o = t;
  endtask

  // model: data written to bitmap block (conn, row)
  word_t model [4][16];

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // unknown connection
    op(MC_RD_STATE, 9, 0, 0, 0);
    check(!ok_o, "read of unknown connection rejected");

    // first region from the tail
    op(MC_INIT, 1, 0, 0, 0);
    check(ok_o, "INIT conn 1");
    check(lat_o == 2, $sformatf("INIT latency 2 (got %0d)", lat_o));
    check(used_blocks == 24 && used_slots == 1, "24 blocks, 1 slot used");
    check(dut.block_alloc_bitmap[1023:1000] == '1 && !dut.block_alloc_bitmap[999],
          "first region occupies blocks 1000..1023");
    op(MC_INIT, 1, 0, 0, 0);
    check(ok_o && used_blocks == 24, "second INIT of same connection reuses region");
    op(MC_INIT, 2, 0, 0, 0);
    check(ok_o && dut.block_alloc_bitmap[999:976] == '1, "second region at 976..999");

    // interleaved bitmap blocks: conn1 row0, conn2 row0, conn1 row1, conn2 row1, ...
    for (int r = 0; r < 6; r++) begin
      for (int cn = 1; cn <= 2; cn++) begin
        op(MC_ALLOC, cn, r, 0, 0);
        check(ok_o, $sformatf("ALLOC conn %0d row %0d", cn, r));
        if (r == 0) check(lat_o == 3, $sformatf("ALLOC row 0 latency 3 (got %0d)", lat_o));
        else        check(lat_o == 4, $sformatf("ALLOC row>0 latency 4 (got %0d)", lat_o));
        model[cn][r] = '0;
      end
    end
    check(dut.block_alloc_bitmap[11:0] == 12'hfff && !dut.block_alloc_bitmap[12],
          "bitmap blocks taken from the head: 0..11");
    check(used_blocks == 48 + 12, "60 blocks in use");

    // new blocks read as zero, then write distinct patterns
    for (int r = 0; r < 6; r++)
      for (int cn = 1; cn <= 2; cn++) begin
        op(MC_RD_BM, cn, r, 0, 0);
        check(ok_o && data_o == 0, "fresh bitmap block is clear");
        op(MC_WR_BM, cn, r, 0, 16'h1000 * cn + 16'h0101 * r);
        model[cn][r] = word_t'(16'h1000 * cn + 16'h0101 * r);
      end
    // set bits
    op(MC_SET_BIT, 1, 5, 15, 0);
    model[1][5][15] = 1'b1;
    op(MC_SET_BIT, 2, 0, 3, 0);
    model[2][0][3] = 1'b1;
    check(lat_o == 5, $sformatf("SET_BIT row 0 latency 5 (got %0d)", lat_o));
    for (int r = 0; r < 6; r++)
      for (int cn = 1; cn <= 2; cn++) begin
        op(MC_RD_BM, cn, r, 0, 0);
        check(data_o == model[cn][r], $sformatf("conn %0d row %0d reads %h (got %h)",
              cn, r, model[cn][r], data_o));
      end
    // physical placement: conn 2 row 1 is block 3 (0:c1r0 1:c2r0 2:c1r1 3:c2r1)
    check(dut.master_array[3] == model[2][1], "conn 2 row 1 lives in block 3");

    // state words are private per connection
    for (int w = 0; w < 8; w++) begin
      op(MC_WR_STATE, 1, w, 0, 16'ha000 + w);
      op(MC_WR_STATE, 2, w, 0, 16'hb000 + w);
    end
    for (int w = 0; w < 8; w++) begin
      op(MC_RD_STATE, 1, w, 0, 0);
      check(data_o == 16'ha000 + w, "state word conn 1");
      op(MC_RD_STATE, 2, w, 0, 0);
      check(data_o == 16'hb000 + w, "state word conn 2");
    end
    check(lat_o == 3, $sformatf("RD_STATE latency 3 (got %0d)", lat_o));

    // free conn 1 (6 bitmap blocks)
    op(MC_FREE, 1, 6, 0, 0);
    check(ok_o && used_blocks == 24 + 6 && used_slots == 1, "FREE returns 30 blocks");
    check(lat_o == 3 + 6, $sformatf("FREE latency 9 (got %0d)", lat_o));
    check(!dut.block_alloc_bitmap[0] && !dut.block_alloc_bitmap[2] && dut.block_alloc_bitmap[1],
          "conn 1 blocks released, conn 2 blocks kept");
    op(MC_RD_BM, 1, 0, 0, 0);
    check(!ok_o, "freed connection no longer known");
    op(MC_RD_BM, 2, 5, 0, 0);
    check(data_o == model[2][5], "conn 2 intact after freeing conn 1");

    // reuse: a new connection gets the released region and block 0, cleared
    op(MC_INIT, 3, 0, 0, 0);
    check(dut.block_alloc_bitmap[1023:1000] == '1, "region 1000..1023 reused");
    op(MC_ALLOC, 3, 0, 0, 0);
    op(MC_RD_BM, 3, 0, 0, 0);
    check(ok_o && data_o == 0, "reused block cleared on allocation");
    check(dut.master_array[0] == 0, "block 0 reallocated");
    op(MC_FREE, 3, 1, 0, 0);
    op(MC_FREE, 2, 6, 0, 0);
    check(used_blocks == 0 && used_slots == 0, "everything released");

    // exhaustion: 42 regions fit, the 43rd does not
    for (int k = 0; k < 42; k++) begin
      op(MC_INIT, 100 + k, 0, 0, 0);
      if (!ok_o) check(0, $sformatf("INIT %0d", k));
    end
    check(used_blocks == 1008 && used_slots == 42, "42 regions = 1008 blocks");
    op(MC_INIT, 200, 0, 0, 0);
    check(!ok_o, "43rd region rejected");
    for (int k = 0; k < 16; k++) begin
      op(MC_ALLOC, 100, k, 0, 0);
      if (!ok_o) check(0, $sformatf("ALLOC %0d", k));
    end
    check(used_blocks == 1024, "all 1024 blocks in use");
    op(MC_ALLOC, 101, 0, 0, 0);
    check(!ok_o, "allocation fails when memory is full");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// eunomia_hd_bitmap -- hybrid-dynamic (HD) reordering bitmap engine.
//
// The engine handles one received packet at a time for a connection that
// faces reordering. It keeps no per-connection data between packets. For each
// packet it loads the connection's state words from the memory controller,
// updates the bitmap through the controller, and stores the state back. So
// one engine can serve any number of connections.
//
// The bitmap is a table of 16-bit rows (bitmap blocks). Rows 0..C-1 form the
// circular portion. Sequence number s with Head <= s <= Tail sits at
// position (HeadPos + s - Head) mod 16*C, where HeadPos = 16*HeadBmId +
// HeadBmIndex. Rows C..D-1, if any, form the linear portion. There, s > Tail
// sits at offset s - Tail - 1 counted from row C.
//   * First out-of-order packet (create): the controller allocates the
//     metadata region and one row. Head is the expected sequence number,
//     Tail = Head + 15, C = D = 1.
//   * A packet beyond the last row adds linear rows (MC_ALLOC), one at a
//     time, until it fits. If it would need more than MAX_BM_BLOCKS rows, or
//     memory is full, the packet is answered NACK and dropped.
//   * The packet's bit is set (MC_SET_BIT). The answer is SACK, or ACK if
//     s == Head.
//   * If s == Head, the run of set bits starting at Head is cleared row by
//     row, and Head moves to the first missing sequence number. With no
//     linear portion, Tail follows Head (Tail = Head + 16*C - 1). With a
//     linear portion, Tail stays put. Once the circular portion is fully
//     flushed (Head = Tail + 1), the linear rows are merged: Head moves to
//     row C, index 0, then C = D and Tail = Head + 16*D - 1.
//   * When Last Seq is known and Head = Last Seq + 1, the connection is
//     complete. The engine asks the controller to free every block
//     (garbage collection).
// Sequence numbers below Head are duplicates and are answered ACK.
//   * Termination (req.term): the connection ends before completion. The
//     engine reads the sizes word and frees every block. The result has
//     kind ACK_NONE and freed set; it answers no packet.
//
// Interface: req_valid/req_ready to take a packet from the packet driver.
// rsp_valid/rsp_ready to return its result. A memory-controller master
// port speaks the eunomia_mem_ctrl protocol. Reset is synchronous, active low.
// Timing: a packet takes about 8 state reads + 8 state writes + 1 set-bit
// (roughly 60 cycles). Each flushed row and each added row adds one or two
// controller operations.
// The algorithm (circular/linear portions, Head/Tail rules, merge, cap, NACK
// on overflow, free on completion) follows the paper. The encodings, the
// load/store of all state words on every packet and the treatment of
// duplicates are this design's own choices.
module eunomia_hd_bitmap
  import eunomia_pkg::*;
#(
  parameter int unsigned MAX_BM_BLOCKS = 16   // cap: 16 blocks x 16 bits = 256 bits
) (
  input  logic    clk,
  input  logic    rst_n,
  // packets from the packet driver
  input  logic    req_valid,
  output logic    req_ready,
  input  hd_req_t req,
  // per-packet result
  output logic    rsp_valid,
  input  logic    rsp_ready,
  output hd_rsp_t rsp,
  // memory controller master port
  output logic    mc_req_valid,
  input  logic    mc_req_ready,
  output mc_req_t mc_req,
  input  logic    mc_rsp_valid,
  input  mc_rsp_t mc_rsp
);

  localparam int unsigned B  = BLOCK_BITS;
  localparam int unsigned LB = $clog2(BLOCK_BITS);

  typedef enum logic [4:0] {
    S_IDLE, S_CALL, S_WAIT,
    S_CREATE_A, S_CREATE_B, S_LOAD, S_EVAL, S_GROW, S_GROW_R,
    S_SET_DONE, S_FLUSH_RD, S_FLUSH_WR, S_FLUSH_ADV, S_CHECK_DONE,
    S_STORE, S_STORE_NEXT, S_FREE_DONE, S_CREATE_FAIL, S_TERM, S_RESP
  } state_e;

  state_e state, ret;
  mc_rsp_t mc_r;              // last controller response

  // working copy of the connection's state (Table 2 of the paper)
  hd_req_t cur;
  seq_t    head, tail, last_seq;
  row_t    head_row;          // Head BM ID
  bit_t    head_idx;          // Head BM Index
  row_t    circ_rows;         // Circular BM Size, in blocks
  row_t    dyn_rows;          // Dynamic Size, in blocks
  row_t    need_rows;
  row_t    tgt_row;
  bit_t    tgt_idx;
  logic [3:0] wcnt;
  ack_kind_e kind;
  logic    complete, freed;
  logic [LB:0] run;           // set bits found from head_idx in the row read
  logic [LB:0] run_q;         // the same, kept while the row is written back

  // state words as stored in the metadata region
  function automatic word_t state_word(input logic [3:0] w);
    unique case (w)
      4'd0: return head[15:0];
      4'd1: return head[31:16];
      4'd2: return tail[15:0];
      4'd3: return tail[31:16];
      4'd4: return last_seq[15:0];
      4'd5: return last_seq[31:16];
      4'd6: return {head_row, head_idx};
      default: return {circ_rows, dyn_rows};
    endcase
  endfunction

  // ---------------------------------------------------------- mapping logic
  seq_t diff_head;             // seq - Head
  seq_t diff_tail;             // Tail - seq
  seq_t off_lin;               // seq - Tail - 1
  logic [9:0] circ_bits;       // 16*C
  logic [9:0] cpos;            // position in the circular portion
  always_comb begin
    diff_head = cur.pkt.seq - head;
    diff_tail = tail - cur.pkt.seq;
    off_lin   = cur.pkt.seq - tail - 1'b1;
    circ_bits = {2'b00, circ_rows} << LB;
    cpos = 10'({head_row, head_idx[LB-1:0]}) + diff_head[9:0];
    if (cpos >= circ_bits) cpos = cpos - circ_bits;
  end

  // run of ones starting at head_idx in the row just read
  word_t flushed;
  always_comb begin
    logic stop;
    run = '0;
    stop = 1'b0;
    flushed = mc_r.data;
    for (int i = 0; i < int'(B); i++) begin
      if (i >= int'(head_idx) && !stop) begin
        if (mc_r.data[i]) begin
          run = run + 1'b1;
          flushed[i] = 1'b0;
        end else begin
          stop = 1'b1;
        end
      end
    end
  end

  // head after this flush step
  seq_t head_adv;
  logic row_end;
  assign head_adv = head + seq_t'(run_q);
  assign row_end  = (32'(head_idx) + 32'(run_q)) == B;

  // ---------------------------------------------------------- controller port
  mc_req_t call_req;
  assign mc_req = call_req;
  assign mc_req_valid = (state == S_CALL);
  assign req_ready = (state == S_IDLE);
  assign rsp_valid = (state == S_RESP);

  always_comb begin
    rsp.kind     = kind;
    rsp.conn     = cur.pkt.conn;
    rsp.seq      = cur.pkt.seq;
    rsp.head     = head;
    rsp.complete = complete;
    rsp.freed    = freed;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ret <= S_IDLE;
      mc_r <= '0;
      call_req <= '0;
      cur <= '0;
      head <= '0;
      tail <= '0;
      last_seq <= LAST_UNKNOWN;
      head_row <= '0;
      head_idx <= '0;
      circ_rows <= '0;
      dyn_rows <= '0;
      need_rows <= '0;
      tgt_row <= '0;
      tgt_idx <= '0;
      wcnt <= '0;
      kind <= ACK_NONE;
      complete <= 1'b0;
      freed <= 1'b0;
      run_q <= '0;
    end else begin
      unique case (state)
        // ------------------------------------------------ generic call
        S_CALL: if (mc_req_ready) state <= S_WAIT;
        S_WAIT: if (mc_rsp_valid) begin
          mc_r <= mc_rsp;
          state <= ret;
        end

        S_IDLE: begin
          if (req_valid) begin
            cur <= req;
            complete <= 1'b0;
            freed <= 1'b0;
            kind <= ACK_NONE;
            wcnt <= '0;
            if (req.term) begin
              // termination: read the sizes word, then free everything
              call_req <= '{op: MC_RD_STATE, conn: req.pkt.conn,
                            idx: row_t'(STATE_WORDS - 1), bitpos: '0, data: '0};
              ret <= S_TERM;
            end else begin
              call_req <= '{op: req.create ? MC_INIT : MC_RD_STATE, conn: req.pkt.conn,
                            idx: '0, bitpos: '0, data: '0};
              ret <= req.create ? S_CREATE_A : S_LOAD;
            end
            state <= S_CALL;
          end
        end

        // ------------------------------------------------ creation
        S_CREATE_A: begin
          if (!mc_r.ok) begin
            kind <= ACK_NACK;            // no room for metadata: cannot track
            freed <= 1'b1;
            head <= cur.init_head;
            state <= S_RESP;
          end else begin
            call_req <= '{op: MC_ALLOC, conn: cur.pkt.conn, idx: '0, bitpos: '0, data: '0};
            ret <= S_CREATE_B;
            state <= S_CALL;
          end
        end
        S_CREATE_B: begin
          if (!mc_r.ok) begin
            call_req <= '{op: MC_FREE, conn: cur.pkt.conn, idx: '0, bitpos: '0, data: '0};
            ret <= S_CREATE_FAIL;
            state <= S_CALL;
          end else begin
            head <= cur.init_head;
            tail <= cur.init_head + seq_t'(B - 1);
            last_seq <= LAST_UNKNOWN;
            head_row <= '0;
            head_idx <= '0;
            circ_rows <= 8'd1;
            dyn_rows <= 8'd1;
            state <= S_EVAL;
          end
        end
        S_CREATE_FAIL: begin
          kind <= ACK_NACK;
          freed <= 1'b1;
          head <= cur.init_head;
          state <= S_RESP;
        end

        // ------------------------------------------------ state load
        S_LOAD: begin
          unique case (wcnt)
            4'd0: head[15:0]      <= mc_r.data;
            4'd1: head[31:16]     <= mc_r.data;
            4'd2: tail[15:0]      <= mc_r.data;
            4'd3: tail[31:16]     <= mc_r.data;
            4'd4: last_seq[15:0]  <= mc_r.data;
            4'd5: last_seq[31:16] <= mc_r.data;
            4'd6: {head_row, head_idx}  <= mc_r.data;
            default: {circ_rows, dyn_rows} <= mc_r.data;
          endcase
          if (wcnt == 4'(STATE_WORDS-1)) begin
            state <= S_EVAL;
          end else begin
            call_req.idx <= row_t'(wcnt) + 1'b1;
            wcnt <= wcnt + 1'b1;
            ret <= S_LOAD;
            state <= S_CALL;
          end
        end

        // ------------------------------------------------ map the sequence number
        S_EVAL: begin
          if (cur.pkt.last) last_seq <= cur.pkt.seq;
          if (diff_head[SEQ_W-1]) begin
            kind <= ACK_ACK;                       // duplicate of delivered data
            state <= S_CHECK_DONE;
          end else if (!diff_tail[SEQ_W-1]) begin
            tgt_row <= row_t'(cpos >> LB);         // circular portion
            tgt_idx <= bit_t'(cpos[LB-1:0]);
            call_req <= '{op: MC_SET_BIT, conn: cur.pkt.conn, idx: row_t'(cpos >> LB),
                          bitpos: bit_t'(cpos[LB-1:0]), data: '0};
            ret <= S_SET_DONE;
            state <= S_CALL;
          end else if (off_lin >= ((seq_t'(MAX_BM_BLOCKS) - seq_t'(circ_rows)) << LB)) begin
            kind <= ACK_NACK;                      // beyond the cap: drop
            state <= S_CHECK_DONE;
          end else begin
            tgt_row <= circ_rows + row_t'(off_lin >> LB);   // linear portion
            tgt_idx <= bit_t'(off_lin[LB-1:0]);
            need_rows <= circ_rows + row_t'(off_lin >> LB) + 1'b1;
            state <= S_GROW;
          end
        end

        S_GROW: begin
          if (dyn_rows >= need_rows) begin
            call_req <= '{op: MC_SET_BIT, conn: cur.pkt.conn, idx: tgt_row,
                          bitpos: tgt_idx, data: '0};
            ret <= S_SET_DONE;
            state <= S_CALL;
          end else begin
            call_req <= '{op: MC_ALLOC, conn: cur.pkt.conn, idx: dyn_rows,
                          bitpos: '0, data: '0};
            ret <= S_GROW_R;
            state <= S_CALL;
          end
        end
        S_GROW_R: begin
          if (!mc_r.ok) begin
            kind <= ACK_NACK;                      // memory exhausted: drop
            state <= S_CHECK_DONE;
          end else begin
            dyn_rows <= dyn_rows + 1'b1;
            state <= S_GROW;
          end
        end

        S_SET_DONE: begin
          if (diff_head == '0) begin
            kind <= ACK_ACK;
            state <= S_FLUSH_RD;
          end else begin
            kind <= ACK_SACK;
            state <= S_CHECK_DONE;
          end
        end

        // ------------------------------------------------ flush in-order run
        S_FLUSH_RD: begin
          call_req <= '{op: MC_RD_BM, conn: cur.pkt.conn, idx: head_row, bitpos: '0, data: '0};
          ret <= S_FLUSH_WR;
          state <= S_CALL;
        end
        S_FLUSH_WR: begin
          if (run == '0) begin
            state <= S_CHECK_DONE;
          end else begin
            run_q <= run;
            call_req <= '{op: MC_WR_BM, conn: cur.pkt.conn, idx: head_row, bitpos: '0,
                          data: flushed};
            ret <= S_FLUSH_ADV;
            state <= S_CALL;
          end
        end
        S_FLUSH_ADV: begin
          head <= head_adv;
          if (dyn_rows > circ_rows && head_adv == tail + 1'b1) begin
            // circular portion fully flushed: absorb the linear portion
            head_row <= circ_rows;
            head_idx <= '0;
            circ_rows <= dyn_rows;
            tail <= head_adv + (seq_t'(dyn_rows) << LB) - 1'b1;
            state <= S_FLUSH_RD;
          end else begin
            if (dyn_rows == circ_rows)
              tail <= head_adv + (seq_t'(circ_rows) << LB) - 1'b1;
            if (row_end) begin
              head_row <= (head_row + 1'b1 == circ_rows) ? '0 : head_row + 1'b1;
              head_idx <= '0;
              state <= S_FLUSH_RD;
            end else begin
              head_idx <= head_idx + bit_t'(run_q);
              state <= S_CHECK_DONE;
            end
          end
        end

        // ------------------------------------------------ completion / store
        S_CHECK_DONE: begin
          if (last_seq != LAST_UNKNOWN && head == last_seq + 1'b1) begin
            complete <= 1'b1;
            call_req <= '{op: MC_FREE, conn: cur.pkt.conn, idx: dyn_rows, bitpos: '0, data: '0};
            ret <= S_FREE_DONE;
            state <= S_CALL;
          end else begin
            wcnt <= '0;
            state <= S_STORE;
          end
        end
        S_STORE: begin
          call_req <= '{op: MC_WR_STATE, conn: cur.pkt.conn, idx: row_t'(wcnt), bitpos: '0,
                        data: state_word(wcnt)};
          ret <= S_STORE_NEXT;
          state <= S_CALL;
        end
        S_STORE_NEXT: begin
          if (wcnt == 4'(STATE_WORDS-1)) begin
            state <= S_RESP;
          end else begin
            wcnt <= wcnt + 1'b1;
            state <= S_STORE;
          end
        end
        S_TERM: begin
          call_req <= '{op: MC_FREE, conn: cur.pkt.conn, idx: mc_r.data[ROW_W-1:0],
                        bitpos: '0, data: '0};
          ret <= S_FREE_DONE;
          state <= S_CALL;
        end
        S_FREE_DONE: begin
          freed <= 1'b1;
          state <= S_RESP;
        end

        S_RESP: if (rsp_ready) state <= S_IDLE;

        default: state <= S_IDLE;
      endcase
    end
  end

  // Head never passes Tail: the circular portion always holds the head.
  seq_t tail_minus_head;
  assign tail_minus_head = tail - head;
  a_head_never_beyond_tail: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_EVAL |-> !tail_minus_head[SEQ_W-1]);

endmodule

// eunomia_mem_ctrl -- dynamic memory controller of the Eunomia receive path.
//
// It holds every piece of per-connection reordering state, so that the HD
// bitmap engines can be stateless and shared. It has three storage arrays:
//   master_array        NUM_BLOCKS blocks of 2 bytes (1024 by default). Each
//                       block holds either metadata or one 16-bit bitmap row.
//   block_alloc_bitmap  one bit per master_array block, set while it is in use.
//   metadata_start_index
//                       META_SLOTS entries of {connection ID, start index} that
//                       say where a connection's metadata region begins.
// A connection's metadata region is META_BLOCKS (24) consecutive blocks.
// Words 0..7 hold the state variables (layout in eunomia_pkg). Word 8 holds
// the absolute master_array address of bitmap block 0. Word 8+x holds
// address(block x) - address(block 0) for x > 0. Block x is found at
// base + (value at index x), modulo NUM_BLOCKS.
//
// Allocation policy, as the paper describes it:
//   MC_INIT   searches from the tail backwards for META_BLOCKS consecutive
//             free blocks; the highest such start is taken.
//   MC_ALLOC  takes the first free block searching from the head (lowest
//             index). The block is cleared, because freeing does not erase
//             data. Its address is then recorded.
//   MC_FREE   clears the allocation bits of the metadata region and of the
//             first 'idx' bitmap blocks. Data is not erased.
// Both searches are combinational priority encoders over the allocation
// bitmap, so an allocation decides in one cycle.
//
// Interface: req_valid/req_ready handshake (one request at a time;
// req_ready is high only in the idle state). rsp_valid is a one-cycle pulse
// with rsp.ok and rsp.data. Reset is synchronous and active low. The
// master array has one port with a
// registered read.
// Latency, from the cycle the request is taken to rsp_valid, in cycles:
// INIT and WR_STATE 2; RD_STATE 3; ALLOC 3 for block 0 and 4 for other
// blocks; WR_BM 4 (block 0) or 5; RD_BM and SET_BIT 5 (block 0) or 6;
// FREE 3 + number of bitmap blocks.
// An operation on a connection with no metadata region answers ok=0.
// The operation set, the word layout and the cycle timing are this
// design's own choices; the paper gives the arrays, their sizes and the
// search and reset policies.
module eunomia_mem_ctrl
  import eunomia_pkg::*;
#(
  parameter int unsigned NUM_BLOCKS   = 1024, // master_array blocks (power of two)
  parameter int unsigned META_BLOCKS  = 24,   // blocks of metadata per connection
  parameter int unsigned META_SLOTS   = 42    // entries of metadata_start_index
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    req_valid,
  output logic    req_ready,
  input  mc_req_t req,
  output logic    rsp_valid,
  output mc_rsp_t rsp,
  output logic [$clog2(NUM_BLOCKS):0] used_blocks,   // blocks currently allocated
  output logic [$clog2(META_SLOTS+1)-1:0] used_slots // connections holding metadata
);

  localparam int unsigned AW = $clog2(NUM_BLOCKS);
  localparam int unsigned SW = (META_SLOTS > 1) ? $clog2(META_SLOTS) : 1;
  typedef logic [AW-1:0] addr_t;

  // ---------------------------------------------------------------- storage
  word_t                 master_array [NUM_BLOCKS];
  logic [NUM_BLOCKS-1:0] block_alloc_bitmap;
  logic [META_SLOTS-1:0] slot_valid;
  conn_t                 slot_conn  [META_SLOTS];
  addr_t                 slot_start [META_SLOTS];

  // single master_array port
  logic  mem_we, mem_re;
  addr_t mem_addr;
  word_t mem_wdata, mem_q;

  always_ff @(posedge clk) begin
    if (mem_we) master_array[mem_addr] <= mem_wdata;
    if (mem_re) mem_q <= master_array[mem_addr];
  end

  // ---------------------------------------------------------------- FSM
  typedef enum logic [3:0] {
    S_IDLE, S_DISPATCH, S_RD_WAIT, S_ALLOC_RDB, S_ALLOC_WREL,
    S_BM_BASE, S_BM_REL, S_BM_ACCESS, S_BM_RDW, S_FREE_BASE, S_FREE_REL, S_FREE_META
  } state_e;

  state_e  state;
  mc_req_t r;          // latched request
  logic [SW-1:0] r_slot;
  addr_t   r_start;    // start of the connection's metadata region
  addr_t   base;       // absolute address of bitmap block 0
  addr_t   bm_addr;    // resolved address of the addressed bitmap block
  addr_t   new_blk;    // block just allocated
  row_t    cnt;

  // connection lookup in metadata_start_index
  logic          hit;
  logic [SW-1:0] hit_slot;
  always_comb begin
    hit = 1'b0;
    hit_slot = '0;
    for (int s = META_SLOTS-1; s >= 0; s--) begin
      if (slot_valid[s] && slot_conn[s] == r.conn) begin
        hit = 1'b1;
        hit_slot = SW'(s);
      end
    end
  end

  logic          slot_free;
  logic [SW-1:0] free_slot;
  always_comb begin
    slot_free = 1'b0;
    free_slot = '0;
    for (int s = META_SLOTS-1; s >= 0; s--) begin
      if (!slot_valid[s]) begin
        slot_free = 1'b1;
        free_slot = SW'(s);
      end
    end
  end

  // first free block from the head (lowest index)
  logic  blk_found;
  addr_t blk_idx;
  always_comb begin
    blk_found = 1'b0;
    blk_idx = '0;
    for (int i = NUM_BLOCKS-1; i >= 0; i--) begin
      if (!block_alloc_bitmap[i]) begin
        blk_found = 1'b1;
        blk_idx = AW'(i);
      end
    end
  end

  // META_BLOCKS consecutive free blocks, searched from the tail backwards:
  // count free blocks walking down from the top; the first index at which the
  // count reaches META_BLOCKS is the highest start of a free run.
  logic  run_found;
  addr_t run_idx;
  always_comb begin
    int unsigned len;
    run_found = 1'b0;
    run_idx = '0;
    len = 0;
    for (int i = NUM_BLOCKS-1; i >= 0; i--) begin
      len = block_alloc_bitmap[i] ? 0 : len + 1;
      if (!run_found && len >= META_BLOCKS) begin
        run_found = 1'b1;
        run_idx = AW'(i);
      end
    end
  end

  // master_array port control
  always_comb begin
    mem_we = 1'b0;
    mem_re = 1'b0;
    mem_addr = '0;
    mem_wdata = '0;
    unique case (state)
      S_DISPATCH: begin
        unique case (r.op)
          MC_ALLOC: begin
            mem_we = hit && blk_found;
            mem_addr = blk_idx;          // clear the new bitmap block
          end
          MC_RD_STATE: begin
            mem_re = hit;
            mem_addr = slot_start[hit_slot] + AW'(r.idx);
          end
          MC_WR_STATE: begin
            mem_we = hit;
            mem_addr = slot_start[hit_slot] + AW'(r.idx);
            mem_wdata = r.data;
          end
          MC_RD_BM, MC_WR_BM, MC_SET_BIT: begin
            mem_re = hit;
            mem_addr = slot_start[hit_slot] + AW'(ADDR_BASE);
          end
          MC_FREE: begin
            mem_re = hit && (r.idx != '0);
            mem_addr = slot_start[hit_slot] + AW'(ADDR_BASE);
          end
          default: ;
        endcase
      end
      S_ALLOC_RDB: begin
        if (r.idx == '0) begin
          mem_we = 1'b1;
          mem_addr = r_start + AW'(ADDR_BASE);
          mem_wdata = WORD_W'(new_blk);
        end else begin
          mem_re = 1'b1;
          mem_addr = r_start + AW'(ADDR_BASE);
        end
      end
      S_ALLOC_WREL: begin
        mem_we = 1'b1;
        mem_addr = r_start + AW'(ADDR_BASE) + AW'(r.idx);
        mem_wdata = WORD_W'(addr_t'(new_blk - mem_q[AW-1:0]));
      end
      S_BM_BASE: begin
        mem_re = (r.idx != '0);
        mem_addr = r_start + AW'(ADDR_BASE) + AW'(r.idx);
      end
      S_BM_ACCESS: begin
        mem_we = (r.op == MC_WR_BM);
        mem_re = (r.op != MC_WR_BM);
        mem_addr = bm_addr;
        mem_wdata = r.data;
      end
      S_BM_RDW: begin
        mem_we = (r.op == MC_SET_BIT);
        mem_addr = bm_addr;
        mem_wdata = mem_q | (WORD_W'(1) << r.bitpos[$clog2(WORD_W)-1:0]);
      end
      S_FREE_BASE, S_FREE_REL: begin
        // fetch the relative address of block cnt+1
        mem_re = ((cnt + 1'b1) < r.idx);
        mem_addr = r_start + AW'(ADDR_BASE) + AW'(cnt) + AW'(1);
      end
      default: ;
    endcase
  end

  assign req_ready = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      r <= '0;
      r_slot <= '0;
      r_start <= '0;
      base <= '0;
      bm_addr <= '0;
      new_blk <= '0;
      cnt <= '0;
      rsp_valid <= 1'b0;
      rsp <= '0;
      block_alloc_bitmap <= '0;
      slot_valid <= '0;
      used_blocks <= '0;
      used_slots <= '0;
      for (int s = 0; s < META_SLOTS; s++) begin
        slot_conn[s] <= '0;
        slot_start[s] <= '0;
      end
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (req_valid) begin
            r <= req;
            state <= S_DISPATCH;
          end
        end

        S_DISPATCH: begin
          r_slot <= hit_slot;
          r_start <= slot_start[hit_slot];
          rsp.data <= '0;
          if (!hit && r.op != MC_INIT) begin
            rsp.ok <= 1'b0;
            rsp_valid <= 1'b1;
            state <= S_IDLE;
          end else begin
            unique case (r.op)
              MC_INIT: begin
                if (hit) begin
                  rsp.ok <= 1'b1;                 // region already exists
                end else if (slot_free && run_found) begin
                  for (int i = 0; i < META_BLOCKS; i++)
                    block_alloc_bitmap[int'(run_idx) + i] <= 1'b1;
                  slot_valid[free_slot] <= 1'b1;
                  slot_conn[free_slot]  <= r.conn;
                  slot_start[free_slot] <= run_idx;
                  used_blocks <= used_blocks + ($clog2(NUM_BLOCKS)+1)'(META_BLOCKS);
                  used_slots <= used_slots + 1'b1;
                  rsp.ok <= 1'b1;
                end else begin
                  rsp.ok <= 1'b0;
                end
                rsp_valid <= 1'b1;
                state <= S_IDLE;
              end
              MC_ALLOC: begin
                if (blk_found) begin
                  block_alloc_bitmap[blk_idx] <= 1'b1;
                  used_blocks <= used_blocks + 1'b1;
                  new_blk <= blk_idx;
                  state <= S_ALLOC_RDB;
                end else begin
                  rsp.ok <= 1'b0;
                  rsp_valid <= 1'b1;
                  state <= S_IDLE;
                end
              end
              MC_RD_STATE: state <= S_RD_WAIT;
              MC_WR_STATE: begin
                rsp.ok <= 1'b1;
                rsp_valid <= 1'b1;
                state <= S_IDLE;
              end
              MC_RD_BM, MC_WR_BM, MC_SET_BIT: state <= S_BM_BASE;
              MC_FREE: begin
                cnt <= '0;
                state <= (r.idx == '0) ? S_FREE_META : S_FREE_BASE;
              end
              default: state <= S_IDLE;
            endcase
          end
        end

        S_RD_WAIT: begin
          rsp.ok <= 1'b1;
          rsp.data <= mem_q;
          rsp_valid <= 1'b1;
          state <= S_IDLE;
        end

        S_ALLOC_RDB: begin
          if (r.idx == '0) begin
            rsp.ok <= 1'b1;
            rsp_valid <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_ALLOC_WREL;
          end
        end

        S_ALLOC_WREL: begin
          rsp.ok <= 1'b1;
          rsp_valid <= 1'b1;
          state <= S_IDLE;
        end

        S_BM_BASE: begin
          base <= mem_q[AW-1:0];
          if (r.idx == '0) begin
            bm_addr <= mem_q[AW-1:0];
            state <= S_BM_ACCESS;
          end else begin
            state <= S_BM_REL;
          end
        end

        S_BM_REL: begin
          bm_addr <= base + mem_q[AW-1:0];
          state <= S_BM_ACCESS;
        end

        S_BM_ACCESS: begin
          if (r.op == MC_WR_BM) begin
            rsp.ok <= 1'b1;
            rsp_valid <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_BM_RDW;
          end
        end

        S_BM_RDW: begin
          rsp.ok <= 1'b1;
          rsp.data <= mem_q;
          rsp_valid <= 1'b1;
          state <= S_IDLE;
        end

        S_FREE_BASE: begin
          base <= mem_q[AW-1:0];
          block_alloc_bitmap[mem_q[AW-1:0]] <= 1'b0;
          used_blocks <= used_blocks - 1'b1;
          cnt <= 8'd1;
          state <= (r.idx > 8'd1) ? S_FREE_REL : S_FREE_META;
        end

        S_FREE_REL: begin
          block_alloc_bitmap[addr_t'(base + mem_q[AW-1:0])] <= 1'b0;
          used_blocks <= used_blocks - 1'b1;
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 >= r.idx) state <= S_FREE_META;
        end

        S_FREE_META: begin
          for (int i = 0; i < META_BLOCKS; i++)
            block_alloc_bitmap[int'(r_start) + i] <= 1'b0;
          slot_valid[r_slot] <= 1'b0;
          used_blocks <= used_blocks - ($clog2(NUM_BLOCKS)+1)'(META_BLOCKS);
          used_slots <= used_slots - 1'b1;
          rsp.ok <= 1'b1;
          rsp_valid <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // A request is only offered while the controller is idle or held until accepted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid);

endmodule

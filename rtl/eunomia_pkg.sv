// eunomia_pkg -- types and constants shared by the Eunomia ordering layer.
//
// Eunomia lets an RDMA NIC accept packets out of order. The sender tags each
// data packet with 33 bits of metadata (the first sequence number of the
// connection and a "last packet" flag). The receiver tracks out-of-order
// packets of a connection in a hybrid circular/linear bitmap that grows in
// 16-bit blocks. All per-connection state lives in one memory controller.
//
// Fixed by the paper: 32-bit sequence numbers and 33 bits of metadata. The
// master array is made of 2-byte blocks, and one 2-byte block holds one
// bitmap row. Connection IDs are 1 byte. Each connection's metadata takes
// 24 blocks: 16 bytes of state variables, then the absolute address of
// bitmap block 0 and the relative addresses of blocks 1..15.
// This design's own choices: the exact word layout of the state variables,
// the operation codes of the memory controller and the field widths of the
// acknowledgement.
package eunomia_pkg;

  localparam int unsigned SEQ_W      = 32;  // 4-byte sequence numbers (Table 2)
  localparam int unsigned CONN_W     = 8;   // 1-byte connection ID (metadata_start_index)
  localparam int unsigned WORD_W     = 16;  // master_array block = 2 bytes
  localparam int unsigned BLOCK_BITS = 16;  // bitmap block size in bits (one master_array block)
  localparam int unsigned STATE_WORDS = 8;  // 16 bytes of state variables
  localparam int unsigned ROW_W      = 8;   // Head BM ID, Circular BM Size, Dynamic Size: 1 byte each
  localparam int unsigned BIT_W      = 8;   // Head BM Index: 1 byte

  typedef logic [SEQ_W-1:0]  seq_t;
  typedef logic [CONN_W-1:0] conn_t;
  typedef logic [WORD_W-1:0] word_t;
  typedef logic [ROW_W-1:0]  row_t;
  typedef logic [BIT_W-1:0]  bit_t;

  // State word layout inside a connection's metadata region (word offsets):
  //   0/1 Head low/high, 2/3 Tail low/high, 4/5 Last Seq low/high,
  //   6 {Head BM ID, Head BM Index}, 7 {Circular BM Size, Dynamic Size}
  //   (sizes counted in blocks); word 8 on holds the bitmap block addresses.
  localparam int unsigned ADDR_BASE  = 8;  // absolute address of bitmap block 0, then relative ones

  // Value of Last Seq while the last packet has not been seen yet.
  localparam seq_t LAST_UNKNOWN = '1;

  // Data packet as it travels between the NICs: RDMA sequence number plus the
  // 33 bits of metadata added by the sender-side agent.
  typedef struct packed {
    conn_t conn;
    seq_t  seq;
    seq_t  first_seq;  // metadata: first sequence number of the connection ("Head")
    logic  last;       // metadata: last packet of the connection
  } pkt_t;

  // Outgoing data packet as the RDMA transport hands it to the sender-side agent.
  typedef struct packed {
    conn_t conn;
    seq_t  seq;
    logic  last;       // last packet of the connection
    logic  write;      // the connection is a one-sided WRITE
  } tx_desc_t;

  typedef enum logic [1:0] {
    ACK_NONE = 2'd0,
    ACK_ACK  = 2'd1,   // in-order (or duplicate) delivery
    ACK_SACK = 2'd2,   // out of order, tracked in the HD bitmap
    ACK_NACK = 2'd3    // out of order, could not be tracked: dropped
  } ack_kind_e;

  // Acknowledgement from the receiver-side agent back to the sender.
  typedef struct packed {
    ack_kind_e kind;
    conn_t     conn;
    seq_t      expected;  // next in-order sequence number expected
    seq_t      seq;       // sequence number of the packet being answered
  } ack_t;

  // Memory controller operations.
  typedef enum logic [2:0] {
    MC_INIT     = 3'd0,  // allocate the 24-block metadata region of a connection
    MC_ALLOC    = 3'd1,  // allocate bitmap block number idx of a connection (cleared)
    MC_RD_STATE = 3'd2,  // read state word idx
    MC_WR_STATE = 3'd3,  // write state word idx
    MC_RD_BM    = 3'd4,  // read bitmap block idx
    MC_WR_BM    = 3'd5,  // write bitmap block idx
    MC_SET_BIT  = 3'd6,  // set bit 'bitpos' of bitmap block idx
    MC_FREE     = 3'd7   // release metadata and the first idx bitmap blocks
  } mc_op_e;

  typedef struct packed {
    mc_op_e op;
    conn_t  conn;
    row_t   idx;
    bit_t   bitpos;
    word_t  data;
  } mc_req_t;

  typedef struct packed {
    logic  ok;    // operation succeeded (allocation found space, connection known)
    word_t data;  // read data
  } mc_rsp_t;

  // Request from the packet driver to an HD bitmap module.
  typedef struct packed {
    pkt_t pkt;
    logic create;     // first out-of-order packet: build the bitmap
    logic term;       // connection terminated: free its bitmap (pkt.conn only)
    seq_t init_head;  // head for a new bitmap
  } hd_req_t;

  // Result of an HD bitmap module for one packet.
  typedef struct packed {
    ack_kind_e kind;
    conn_t     conn;
    seq_t      seq;
    seq_t      head;      // first missing sequence number after this packet
    logic      complete;  // everything up to Last Seq received in order
    logic      freed;     // bitmap and metadata released (garbage collection)
  } hd_rsp_t;

endpackage

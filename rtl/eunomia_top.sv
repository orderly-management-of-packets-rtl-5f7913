// eunomia_top -- the Eunomia ordering layer of one RDMA NIC.
//
// Eunomia lets RoCEv2 traffic arrive out of order. It tracks each reordered
// connection in a small bitmap that grows on demand, instead of giving every
// connection a large fixed one. A NIC both sends and receives, so this top
// holds both halves:
//   transmit  eunomia_sender_agent tags outgoing packets with the 33-bit
//             metadata, holds back the final packet of a WRITE, and turns the
//             peer's ACK/SACK/NACK into hooks for the transport's recovery.
//   receive   eunomia_pkt_driver classifies every arriving packet. It answers
//             in-order packets at once. It hands out-of-order ones, and
//             everything that follows them on the same connection, to one of
//             NUM_HDBM eunomia_hd_bitmap engines. The engines keep their data
//             in one eunomia_mem_ctrl, reached through eunomia_mc_arbiter.
//             The driver emits ACK/SACK/NACK for the peer and completion
//             notifications (CN) for the host.
// The RDMA transport, the host memory and the wire are outside. Their
// connections are this module's ports: tx_in/tx_out, ack_in (from the peer),
// rx_pkt (from the wire), ack_out (to the peer), cn (to the host), term
// (the host ends a connection early) and the recovery hooks.
// Data placement is implied by the answer: the payload of an ACKed or
// SACKed packet is written to application memory, and a NACKed packet is
// dropped.
// The configuration matches the paper's FPGA build: one packet driver, one
// memory controller, one HD bitmap engine. Master array of 1024 2-byte
// blocks; 16-bit bitmap blocks, capped at 16 blocks (256 bits) per
// connection; 24 blocks of metadata per connection.
// Timing: in-order packets pass at one per cycle. A packet of a reordered
// connection occupies an engine for about 60 cycles.
module eunomia_top
  import eunomia_pkg::*;
#(
  parameter int unsigned NUM_CONN      = 256,
  parameter int unsigned NUM_HDBM      = 1,
  parameter int unsigned NUM_BLOCKS    = 1024,
  parameter int unsigned META_BLOCKS   = 24,
  parameter int unsigned META_SLOTS    = 42,
  parameter int unsigned MAX_BM_BLOCKS = 16,
  parameter int unsigned HOLD_SLOTS    = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  // ---- transmit side
  input  logic     tx_in_valid,
  output logic     tx_in_ready,
  input  tx_desc_t tx_in,
  output logic     tx_out_valid,
  input  logic     tx_out_ready,
  output pkt_t     tx_out,
  input  logic     ack_in_valid,
  input  ack_t     ack_in,
  output logic     ack_fwd_valid,
  output conn_t    ack_fwd_conn,
  output seq_t     ack_fwd_expected,
  output logic     sack_valid,
  output conn_t    sack_conn,
  output seq_t     sack_seq,
  output logic     recover_valid,
  output conn_t    recover_conn,
  output seq_t     recover_seq,
  output logic [$clog2(HOLD_SLOTS+1)-1:0] held_count,
  // ---- receive side
  input  logic     rx_valid,
  output logic     rx_ready,
  input  pkt_t     rx_pkt,
  input  logic     term_valid,     // host terminates a connection
  output logic     term_ready,
  input  conn_t    term_conn,
  output logic     ack_out_valid,
  output ack_t     ack_out,
  output logic     cn_valid,
  output conn_t    cn_conn,
  output logic [$clog2(NUM_BLOCKS):0] used_blocks,
  output logic [$clog2(META_SLOTS+1)-1:0] used_slots
);

  eunomia_sender_agent #(.NUM_CONN(NUM_CONN), .HOLD_SLOTS(HOLD_SLOTS)) u_sender (
    .clk, .rst_n,
    .tx_in_valid, .tx_in_ready, .tx_in,
    .tx_out_valid, .tx_out_ready, .tx_out,
    .ack_valid(ack_in_valid), .ack(ack_in),
    .ack_fwd_valid, .ack_fwd_conn, .ack_fwd_expected,
    .sack_valid, .sack_conn, .sack_seq,
    .recover_valid, .recover_conn, .recover_seq,
    .held_count
  );

  logic    [NUM_HDBM-1:0] hd_req_valid, hd_req_ready, hd_rsp_valid, hd_rsp_ready;
  hd_req_t                hd_req;
  hd_rsp_t [NUM_HDBM-1:0] hd_rsp;

  eunomia_pkt_driver #(.NUM_CONN(NUM_CONN), .NUM_HDBM(NUM_HDBM)) u_driver (
    .clk, .rst_n,
    .pkt_valid(rx_valid), .pkt_ready(rx_ready), .pkt(rx_pkt),
    .term_valid, .term_ready, .term_conn,
    .hd_req_valid, .hd_req_ready, .hd_req,
    .hd_rsp_valid, .hd_rsp_ready, .hd_rsp,
    .ack_valid(ack_out_valid), .ack(ack_out),
    .cn_valid, .cn_conn
  );

  logic    [NUM_HDBM-1:0] m_req_valid, m_req_ready, m_rsp_valid;
  mc_req_t [NUM_HDBM-1:0] m_req;
  mc_rsp_t                m_rsp;

  for (genvar g = 0; g < NUM_HDBM; g++) begin : g_hdbm
    eunomia_hd_bitmap #(.MAX_BM_BLOCKS(MAX_BM_BLOCKS)) u_hdbm (
      .clk, .rst_n,
      .req_valid(hd_req_valid[g]), .req_ready(hd_req_ready[g]), .req(hd_req),
      .rsp_valid(hd_rsp_valid[g]), .rsp_ready(hd_rsp_ready[g]), .rsp(hd_rsp[g]),
      .mc_req_valid(m_req_valid[g]), .mc_req_ready(m_req_ready[g]), .mc_req(m_req[g]),
      .mc_rsp_valid(m_rsp_valid[g]), .mc_rsp(m_rsp)
    );
  end

  logic    s_req_valid, s_req_ready, s_rsp_valid;
  mc_req_t s_req;
  mc_rsp_t s_rsp;

  eunomia_mc_arbiter #(.NUM_M(NUM_HDBM)) u_arb (
    .clk, .rst_n,
    .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp,
    .s_req_valid, .s_req_ready, .s_req, .s_rsp_valid, .s_rsp
  );

  eunomia_mem_ctrl #(.NUM_BLOCKS(NUM_BLOCKS), .META_BLOCKS(META_BLOCKS),
                     .META_SLOTS(META_SLOTS)) u_mc (
    .clk, .rst_n,
    .req_valid(s_req_valid), .req_ready(s_req_ready), .req(s_req),
    .rsp_valid(s_rsp_valid), .rsp(s_rsp),
    .used_blocks, .used_slots
  );

endmodule

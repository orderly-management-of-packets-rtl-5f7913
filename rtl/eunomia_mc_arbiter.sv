// eunomia_mc_arbiter -- shares the memory controller among HD bitmap engines.
//
// Several HD bitmap engines can run side by side, one per connection being
// processed. They all keep their data in the single memory controller. This
// arbiter grants the controller's request port to one engine at a time, in
// round-robin order. It keeps the grant until the controller has answered,
// because the controller takes one request at a time. The response is then
// steered back to the engine that asked.
//
// Interface: NUM_M master ports (valid/ready request, valid response pulse)
// and one slave port with the same signals. Reset is synchronous, active low.
// Timing: no added latency on the request (it is combinational from the
// masters' valid bits). A new grant can be issued in the cycle after a
// response.
// The paper says several HD bitmap modules may be deployed. How they share
// the controller is not described; this arbiter is this design's choice.
module eunomia_mc_arbiter
  import eunomia_pkg::*;
#(
  parameter int unsigned NUM_M = 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    [NUM_M-1:0] m_req_valid,
  output logic    [NUM_M-1:0] m_req_ready,
  input  mc_req_t [NUM_M-1:0] m_req,
  output logic    [NUM_M-1:0] m_rsp_valid,
  output mc_rsp_t m_rsp,
  output logic    s_req_valid,
  input  logic    s_req_ready,
  output mc_req_t s_req,
  input  logic    s_rsp_valid,
  input  mc_rsp_t s_rsp
);

  localparam int unsigned IW = (NUM_M > 1) ? $clog2(NUM_M) : 1;

  logic          busy;
  logic [IW-1:0] owner;     // master whose request is outstanding
  logic [IW-1:0] last;      // last master granted (round-robin pointer)
  logic [IW-1:0] sel;
  logic          any;

  // round robin: first requesting master after 'last'
  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int k = 1; k <= int'(NUM_M); k++) begin
      int unsigned m;
      m = (int'(last) + k) % NUM_M;
      if (!any && m_req_valid[m]) begin
        any = 1'b1;
        sel = IW'(m);
      end
    end
  end

  assign s_req_valid = !busy && any;
  assign s_req       = m_req[sel];
  assign m_rsp       = s_rsp;

  always_comb begin
    m_req_ready = '0;
    m_rsp_valid = '0;
    if (!busy && any) m_req_ready[sel] = s_req_ready;
    if (busy) m_rsp_valid[owner] = s_rsp_valid;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      owner <= '0;
      last  <= IW'(NUM_M - 1);
    end else if (!busy) begin
      if (any && s_req_ready) begin
        busy  <= 1'b1;
        owner <= sel;
        last  <= sel;
      end
    end else if (s_rsp_valid) begin
      busy <= 1'b0;
    end
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(m_req_ready));

endmodule

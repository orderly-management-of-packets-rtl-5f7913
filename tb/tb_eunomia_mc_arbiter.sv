// tb_eunomia_mc_arbiter -- self-checking test of the memory-controller arbiter.
//
// Three masters issue requests at random. A slave model in the testbench
// accepts a request only when idle and answers after a random delay with
// data = request data + 1 and ok = 1. Checks: each master gets exactly the
// answer to its own request; the slave never sees a second request while
// one is outstanding; grants rotate (a waiting master is served within
// NUM_M grants).
module tb_eunomia_mc_arbiter;
  import eunomia_pkg::*;
  localparam int N = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    [N-1:0] m_req_valid, m_req_ready, m_rsp_valid;
  mc_req_t [N-1:0] m_req;
  mc_rsp_t         m_rsp;
  logic    s_req_valid, s_req_ready, s_rsp_valid;
  mc_req_t s_req;
  mc_rsp_t s_rsp;

  eunomia_mc_arbiter #(.NUM_M(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // slave model
  logic    s_busy;
  int      s_delay;
  word_t   s_data;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_busy <= 0; s_rsp_valid <= 0; s_delay <= 0; s_data <= '0; s_rsp <= '0;
    end else begin
      s_rsp_valid <= 0;
      if (!s_busy && s_req_valid) begin
        s_busy <= 1; s_delay <= $urandom_range(0, 4); s_data <= s_req.data;
      end else if (s_busy) begin
        if (s_delay == 0) begin
          s_busy <= 0; s_rsp_valid <= 1; s_rsp <= '{ok: 1'b1, data: s_data + 1'b1};
        end else s_delay <= s_delay - 1;
      end
    end
  end
  assign s_req_ready = !s_busy;

  // masters
  int    waiting [N];
  int    grants_since [N];
  logic  [N-1:0] outstanding;
  word_t sent [N];
  int    served [N];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_req_valid <= '0; outstanding <= '0;
      for (int i = 0; i < N; i++) begin
        m_req[i] <= '0; grants_since[i] <= 0; served[i] <= 0; sent[i] <= '0;
      end
    end else begin
      for (int i = 0; i < N; i++) begin
        if (m_req_valid[i] && m_req_ready[i]) begin
          m_req_valid[i] <= 0; outstanding[i] <= 1; sent[i] <= m_req[i].data;
          for (int j = 0; j < N; j++) if (j != i && m_req_valid[j]) grants_since[j] <= grants_since[j] + 1;
          grants_since[i] <= 0;
        end
        if (m_rsp_valid[i]) begin
          check(outstanding[i], $sformatf("master %0d answered without a request", i));
          check(m_rsp.data == sent[i] + 1'b1, $sformatf("master %0d gets its own answer", i));
          outstanding[i] <= 0;
          served[i] <= served[i] + 1;
        end
        if (!m_req_valid[i] && !outstanding[i] && !m_rsp_valid[i] && $urandom_range(0, 3) == 0) begin
          m_req_valid[i] <= 1;
          m_req[i].data <= word_t'($urandom);
          m_req[i].op <= MC_RD_STATE;
        end
        if (grants_since[i] > N - 1) check(0, $sformatf("master %0d starved", i));
      end
    end
  end

  // slave sees one request at a time
  always @(posedge clk) if (rst_n && s_busy && s_rsp_valid) check(0, "overlap");

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    for (int i = 0; i < N; i++) check(served[i] > 100, $sformatf("master %0d served %0d times", i, served[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

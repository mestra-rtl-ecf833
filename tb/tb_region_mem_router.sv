// tb_region_mem_router: self-checking test of the region memory router.
// Five masters, each with at most one request outstanding, issue random reads and writes
// to random addresses in the TCDM window and in global memory. Global memory is a
// behavioural model with random latency and back-pressure, the TCDM is the real block.
// Every read must return the value a reference model predicts, every response must reach
// the master that issued it, and the arbiter must serve all masters.
module tb_region_mem_router;
  import mestra_pkg::*;
  localparam int NM = 5;
  logic clk = 0, rst_n = 0;
  logic     m_req_valid [NM];
  logic     m_req_ready [NM];
  mem_req_t m_req       [NM];
  logic     m_rsp_valid [NM];
  mem_rsp_t m_rsp       [NM];
  logic t_req_valid, t_req_ready, t_rsp_valid, g_req_valid, g_req_ready, g_rsp_valid;
  mem_req_t t_req, g_req;
  mem_rsp_t t_rsp, g_rsp;
  int checks = 0, failures = 0;

  region_mem_router #(.NM(NM)) dut (.clk, .rst_n, .m_req_valid, .m_req_ready, .m_req,
    .m_rsp_valid, .m_rsp, .t_req_valid, .t_req_ready, .t_req, .t_rsp_valid, .t_rsp,
    .g_req_valid, .g_req_ready, .g_req, .g_rsp_valid, .g_rsp);
  tcdm #(.WORDS(64)) u_tcdm (.clk, .rst_n, .req_valid(t_req_valid), .req_ready(t_req_ready),
    .req(t_req), .rsp_valid(t_rsp_valid), .rsp(t_rsp));
  mem_model #(.AW(6)) u_g (.clk, .rst_n, .req_valid(g_req_valid), .req_ready(g_req_ready),
    .req(g_req), .rsp_valid(g_rsp_valid), .rsp(g_rsp));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // master m owns words [m*8, m*8+8) in each target, so its reads are predictable
  logic [DATA_W-1:0] ref_t [64], ref_g [64];
  logic pend [NM];
  logic [DATA_W-1:0] exp_d [NM];
  logic exp_we [NM];
  int served [NM], done_cnt [NM];

  initial begin
    for (int m = 0; m < NM; m++) begin
      m_req_valid[m] = 0; m_req[m] = '0; pend[m] = 0; served[m] = 0; done_cnt[m] = 0;
    end
    for (int a = 0; a < 64; a++) begin ref_t[a] = 0; ref_g[a] = 0; u_g.mem[a] = 0; u_tcdm.mem[a] = 0; end
  end

  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (m_rsp_valid[m]) begin
        check(pend[m], $sformatf("master %0d: response without request", m));
        check(m_rsp[m].we == exp_we[m] && (exp_we[m] || m_rsp[m].rdata == exp_d[m]),
              $sformatf("master %0d: response data %h exp %h we %0d", m, m_rsp[m].rdata, exp_d[m], exp_we[m]));
        pend[m] <= 0;
        done_cnt[m]++;
      end
      if (m_req_valid[m] && m_req_ready[m]) begin
        logic [5:0] a;
        a = m_req[m].addr[5:0];
        pend[m] <= 1;
        served[m]++;
        exp_we[m] <= m_req[m].we;
        if (m_req[m].addr[31]) begin
          exp_d[m] <= ref_t[a];
          if (m_req[m].we) ref_t[a] = m_req[m].wdata;
        end else begin
          exp_d[m] <= ref_g[a];
          if (m_req[m].we) ref_g[a] = m_req[m].wdata;
        end
      end
    end
  end

  // masters: new random request once the previous one has been answered
  always @(negedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (m_req_valid[m] && !pend[m]) ;  // still waiting for grant
      else if (!pend[m] && !m_req_valid[m] && ($urandom % 3 != 0) && served[m] < 200) begin
        m_req_valid[m] = 1;
        m_req[m].we    = $urandom % 2;
        m_req[m].addr  = {($urandom % 2 == 1), 25'd0, 6'(m * 8 + $urandom % 8)};
        m_req[m].wdata = $urandom;
        m_req[m].tag   = '0;
      end
    end
  end
  always @(posedge clk) for (int m = 0; m < NM; m++)
    if (m_req_valid[m] && m_req_ready[m]) m_req_valid[m] <= 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    begin
      int guard = 0;
      bit all;
      do begin
        @(posedge clk); guard++;
        all = 1;
        for (int m = 0; m < NM; m++) if (done_cnt[m] < 200) all = 0;
      end while (!all && guard < 50000);
    end
    for (int m = 0; m < NM; m++)
      check(done_cnt[m] == 200, $sformatf("master %0d served %0d of 200", m, done_cnt[m]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

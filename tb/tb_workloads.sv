// tb_workloads: runs loop-nest kernels of the evaluated kinds on one region at small sizes,
// with a behavioural global memory. Both use the 3-level AGUs with zero strides for
// operand reuse and the RF0 accumulator:
//   gemm  C[i][j] = sum_k A[i][k] * B[k][j]        (N x N x N loop nest, here N = 8)
//   mvt   x[i]    = sum_j A[i][j] * y[j]            (N x N, here N = 16)
// Mapping: LS6 loads A (strides k:1, j:0, i:N), LS8 loads B (k:N, j:1, i:0) or y; PE7
// multiplies, PE12 accumulates N products in RF0, PE11 returns the sum to LS6, which
// stores C / x linearly. Every output word is checked against a reference computed here.
module tb_workloads;
  import mestra_pkg::*;
  import tb_kernels_pkg::*;
  localparam logic [31:0] CFG = 32'h0100, AB = 32'h1000, BB = 32'h2000, CB = 32'h3000;

  logic clk = 0, rst_n = 0, h_valid = 0, h_we = 0;
  logic [3:0] h_addr = 0;
  logic [DATA_W-1:0] h_wdata = 0, h_rdata;
  logic g_req_valid, g_req_ready, g_rsp_valid;
  mem_req_t g_req;
  mem_rsp_t g_rsp;
  token_t edge_in_tok [16];
  logic   edge_in_valid [16];
  logic   edge_in_ready [16];
  token_t edge_out_tok [16];
  logic   edge_out_valid [16];
  logic   edge_out_ready [16];
  rstate_e state;
  int checks = 0, failures = 0;

  vcgra_region dut (.clk, .rst_n, .h_valid, .h_we, .h_addr, .h_wdata, .h_rdata,
    .g_req_valid, .g_req_ready, .g_req, .g_rsp_valid, .g_rsp,
    .edge_in_tok, .edge_in_valid, .edge_in_ready, .edge_out_tok, .edge_out_valid,
    .edge_out_ready, .state);
  mem_model #(.AW(14)) u_g (.clk, .rst_n, .req_valid(g_req_valid), .req_ready(g_req_ready),
    .req(g_req), .rsp_valid(g_rsp_valid), .rsp(g_rsp));

  always_comb for (int e = 0; e < 16; e++) begin
    edge_in_tok[e] = '0; edge_in_valid[e] = 1'b0; edge_out_ready[e] = 1'b0;
  end

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); h_valid = 1; h_we = 1; h_addr = a; h_wdata = d;
    @(negedge clk); h_valid = 0; h_we = 0;
  endtask

  task automatic wait_state(input rstate_e s);
    logic [31:0] st;
    int cyc;
    cyc = 0;
    do begin
      @(negedge clk); h_valid = 1; h_we = 0; h_addr = 4; #1 st = h_rdata;
      @(negedge clk); h_valid = 0; cyc += 2;
    end while (!(st[2:0] == s && !st[3]) && cyc < 100000);
    check(st[2:0] == s && !st[3], $sformatf("reached %s", s.name()));
  endtask

  // descriptor word layout: base, stride0..2, bound0..2 (level 0 innermost)
  function automatic void desc3(ref logic [31:0] cfg [15][16], input int p, input int w0,
                                input logic [31:0] base, input int s0, input int s1,
                                input int s2, input int b0, input int b1, input int b2);
    cfg[p][w0] = base; cfg[p][w0+1] = s0; cfg[p][w0+2] = s1; cfg[p][w0+3] = s2;
    cfg[p][w0+4] = b0; cfg[p][w0+5] = b1; cfg[p][w0+6] = b2;
  endfunction

  // out[i][j] = sum_k A[i*N+k] * B[k*sb_k + j*sb_j], for i < ni, j < nj
  task automatic run_mac(input string name, input int n, input int ni, input int nj,
                         input int sb_k, input int sb_j);
    logic [31:0] cfg [15][16];
    img_t none, img;
    logic [31:0] e;
    int cycles;
    blank(cfg);
    cfg[6][0] = ls_word(4'b0010, DIR_S, 1, 1);
    desc3(cfg, 6, 1, AB, 1, 0, n, n, nj, ni);
    desc3(cfg, 6, 8, CB, 1, 0, 0, ni * nj, 1, 1);
    cfg[8][0] = ls_word(4'b1000, DIR_N, 0, 1);
    desc3(cfg, 8, 1, BB, sb_k, sb_j, 0, n, nj, ni);
    cfg[7][0]  = fc_word(OP_MUL, SRC_W, SRC_E, 4'b0100);
    cfg[12][0] = fc_word(OP_ADD, SRC_N, SRC_RF0, 4'b1000, 0, 1, n);
    cfg[11][0] = fc_word(OP_PASS, SRC_E, SRC_E, 4'b0001);
    img = pack(cfg, none);
    foreach (img[i]) u_g.mem[CFG + i] = img[i];
    for (int i = 0; i < ni * nj; i++) u_g.mem[CB + i] = 32'hFFFF_FFFF;
    wr(1, CFG); wr(3, 32'h0000_0001);
    wr(0, CMD_CONFIGURE);
    wait_state(RS_CONFIGURED);
    cycles = 0;
    wr(0, CMD_EXECUTE);
    fork
      wait_state(RS_DONE);
      forever begin @(posedge clk); cycles++; end
    join_any
    disable fork;
    $display("%s: %0d outputs, %0d MACs in %0d cycles", name, ni * nj, ni * nj * n, cycles);
    for (int i = 0; i < ni; i++)
      for (int j = 0; j < nj; j++) begin
        e = 0;
        for (int k = 0; k < n; k++) e += u_g.mem[AB + i*n + k] * u_g.mem[BB + k*sb_k + j*sb_j];
        check(u_g.mem[CB + i*nj + j] == e, $sformatf("%s out[%0d][%0d]", name, i, j));
      end
    wr(0, CMD_RESET);
    wait_state(RS_IDLE);
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) begin
      u_g.mem[AB + i] = $urandom % 64;
      u_g.mem[BB + i] = $urandom % 64;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_mac("gemm N=8", 8, 8, 8, 8, 1);     // B[k][j] at k*N + j
    run_mac("mvt N=16", 16, 16, 1, 1, 0);   // y[j] at j
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

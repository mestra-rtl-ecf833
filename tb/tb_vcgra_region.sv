// tb_vcgra_region: end-to-end test of one region through its host registers.
// Runs an in-place SAXPY (Y = a*X + Y, X preloaded into the TCDM by CONFIGURE) on a
// 3x5 region backed by a behavioural global memory with random latency. The kernel is
// halted in mid-run, snapshotted, the region is released, configured again with restore
// from the snapshot and resumed; the final Y must equal a*X + Y0 for every element, which
// holds only if no token, partial result or store was lost or repeated (the kernel
// overwrites its own input, so it cannot simply be restarted). A dot-product kernel then
// exercises accumulation. Also checked: illegal commands set the flag, the state field
// walks IDLE -> CONFIGURED -> EXECUTING -> HALTED -> SNAPSHOT -> HALTED -> IDLE -> ... -> DONE,
// and PROGRESS grows while running and freezes while halted.
module tb_vcgra_region;
  import mestra_pkg::*;
  import tb_kernels_pkg::*;
  localparam int N = 48, NEDGE = 16;
  localparam logic [31:0] CFG = 32'h1000, YB = 32'h2000, SNAP = 32'h3000;
  localparam logic [31:0] CFG2 = 32'h0800, XB = 32'h0400, OB = 32'h0600;

  logic clk = 0, rst_n = 0, h_valid = 0, h_we = 0;
  logic [3:0] h_addr = 0;
  logic [DATA_W-1:0] h_wdata = 0, h_rdata;
  logic g_req_valid, g_req_ready, g_rsp_valid;
  mem_req_t g_req;
  mem_rsp_t g_rsp;
  token_t edge_in_tok [NEDGE];
  logic   edge_in_valid [NEDGE];
  logic   edge_in_ready [NEDGE];
  token_t edge_out_tok [NEDGE];
  logic   edge_out_valid [NEDGE];
  logic   edge_out_ready [NEDGE];
  rstate_e state;
  int checks = 0, failures = 0;

  vcgra_region dut (.clk, .rst_n, .h_valid, .h_we, .h_addr, .h_wdata, .h_rdata,
    .g_req_valid, .g_req_ready, .g_req, .g_rsp_valid, .g_rsp,
    .edge_in_tok, .edge_in_valid, .edge_in_ready, .edge_out_tok, .edge_out_valid,
    .edge_out_ready, .state);
  mem_model #(.AW(14)) u_g (.clk, .rst_n, .req_valid(g_req_valid), .req_ready(g_req_ready),
    .req(g_req), .rsp_valid(g_rsp_valid), .rsp(g_rsp));

  always_comb for (int e = 0; e < NEDGE; e++) begin
    edge_in_tok[e] = '0; edge_in_valid[e] = 1'b0; edge_out_ready[e] = 1'b0;
  end

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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

  task automatic rd(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); h_valid = 1; h_we = 0; h_addr = a; #1 d = h_rdata;
    @(negedge clk); h_valid = 0;
  endtask

  task automatic wait_state(input rstate_e s, output int cyc);
    logic [31:0] st;
    cyc = 0;
    do begin rd(4, st); cyc += 2; end while (!(st[2:0] == s && !st[3]) && cyc < 100000);
    check(st[2:0] == s && !st[3], $sformatf("reached state %s", s.name()));
  endtask

  initial begin
    img_t x, img;
    logic [31:0] y0 [N];
    logic [31:0] a, st, p1, p2;
    int cyc, ok;
    a = 32'd3;
    for (int i = 0; i < N; i++) begin
      x.push_back($urandom % 1000);
      y0[i] = $urandom % 1000;
      u_g.mem[YB + i] = y0[i];
    end
    img = saxpy(a, x, YB);
    foreach (img[i]) u_g.mem[CFG + i] = img[i];
    repeat (3) @(posedge clk);
    rst_n = 1;

    rd(4, st);
    check(st[2:0] == RS_IDLE && st[5], "IDLE and available after reset");
    wr(0, CMD_EXECUTE);
    rd(4, st);
    check(st[4], "EXECUTE in IDLE flagged illegal");

    wr(1, CFG); wr(2, SNAP); wr(3, 32'h0000_0042);
    wr(0, CMD_CONFIGURE);
    wait_state(RS_CONFIGURED, cyc);
    rd(4, st);
    check(!st[4] && !st[5] && st[31:16] == 16'h42, "configured: flag clear, busy region, kernel id");

    wr(0, CMD_EXECUTE);
    do rd(5, p1); while (p1 < N / 3);
    wr(0, CMD_HALT);
    wait_state(RS_HALTED, cyc);
    rd(5, p1);
    repeat (50) @(negedge clk);
    rd(5, p2);
    check(p1 == p2 && p1 < N && p1 > 0, $sformatf("progress frozen while halted (%0d)", p1));
    wr(0, CMD_SNAPSHOT);
    rd(4, st);
    check(st[2:0] == RS_SNAPSHOT || st[2:0] == RS_HALTED, "snapshot state visible");
    wait_state(RS_HALTED, cyc);
    wr(0, CMD_RESET);
    wait_state(RS_IDLE, cyc);

    wr(3, 32'h0001_0042);              // restore from SNAP
    wr(0, CMD_CONFIGURE);
    wait_state(RS_CONFIGURED, cyc);
    rd(5, p2);
    check(p2 == p1, "progress restored");
    wr(0, CMD_EXECUTE);
    wait_state(RS_DONE, cyc);
    rd(5, p2);
    check(p2 == N, "progress reaches N");
    ok = 0;
    for (int i = 0; i < N; i++) begin
      check(u_g.mem[YB + i] == a * x[i] + y0[i], $sformatf("Y[%0d] = %0d, expected %0d", i, u_g.mem[YB + i], a * x[i] + y0[i]));
      if (u_g.mem[YB + i] == a * x[i] + y0[i]) ok++;
    end
    wr(0, CMD_HALT);
    rd(4, st);
    check(st[4], "HALT in DONE flagged illegal");
    wr(0, CMD_RESET);
    wait_state(RS_IDLE, cyc);

    // dot products of length 4 through the RF0 accumulator
    begin
      int nd = 32, len = 4;
      logic [31:0] xv [32], yv [32];
      img_t img2;
      for (int i = 0; i < nd; i++) begin
        xv[i] = $urandom % 100; yv[i] = $urandom % 100;
        u_g.mem[XB + i] = xv[i]; u_g.mem[YB + i] = yv[i];
      end
      img2 = dot(XB, YB, OB, nd, len);
      foreach (img2[i]) u_g.mem[CFG2 + i] = img2[i];
      wr(1, CFG2); wr(3, 32'h0000_0007);
      wr(0, CMD_CONFIGURE);
      wait_state(RS_CONFIGURED, cyc);
      wr(0, CMD_EXECUTE);
      wait_state(RS_DONE, cyc);
      for (int g = 0; g < nd / len; g++) begin
        logic [31:0] e;
        e = 0;
        for (int k = 0; k < len; k++) e += xv[g*len + k] * yv[g*len + k];
        check(u_g.mem[OB + g] == e, $sformatf("dot %0d", g));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cgra_fabric: checks region merging in a 2x2 fabric (parameter override; the full
// 4x4 fabric is exercised by the top-level test). A two-region relu kernel is mapped
// over the vertically adjacent regions 0 (upper) and 2 (lower): region 0 loads X from its
// memory port and sends the values south across the region boundary; region 2 compares
// with zero (predicate), selects x or 0 under the predicate and stores Y = max(X, 0)
// through its own memory port. With the boundary closed no token may cross (region 2 makes
// no progress, region 0 stalls); after the merge bit is set the kernel completes and every
// Y is checked. Regions 1 and 3 stay idle and their memory ports must stay silent.
module tb_cgra_fabric;
  import mestra_pkg::*;
  import tb_kernels_pkg::*;
  localparam int RR = 2, RC = 2, NR = 4, N = 40;
  localparam logic [31:0] CFG = 32'h1000, XB = 32'h2000, YB = 32'h3000;

  logic clk = 0, rst_n = 0;
  logic rh_valid [NR];
  logic rh_we = 0;
  logic [3:0] rh_addr = 0;
  logic [DATA_W-1:0] rh_wdata = 0;
  logic [DATA_W-1:0] rh_rdata [NR];
  rstate_e r_state [NR];
  logic [RR*(RC-1)-1:0] merge_h = '0;
  logic [(RR-1)*RC-1:0] merge_v = '0;
  logic r_req_valid [NR], r_req_ready [NR], r_rsp_valid [NR];
  mem_req_t r_req [NR];
  mem_rsp_t r_rsp [NR];
  int checks = 0, failures = 0;
  int idle_reqs = 0;

  cgra_fabric #(.RR(RR), .RC(RC)) dut (.clk, .rst_n, .rh_valid, .rh_we, .rh_addr, .rh_wdata,
    .rh_rdata, .r_state, .merge_h, .merge_v, .r_req_valid, .r_req_ready, .r_req,
    .r_rsp_valid, .r_rsp);

  for (genvar q = 0; q < NR; q++) begin : g_mem
    mem_model #(.AW(14)) u_m (.clk, .rst_n, .req_valid(r_req_valid[q]),
      .req_ready(r_req_ready[q]), .req(r_req[q]), .rsp_valid(r_rsp_valid[q]), .rsp(r_rsp[q]));
  end

  always #5 clk = ~clk;

  always @(posedge clk) if (r_req_valid[1] || r_req_valid[3]) idle_reqs++;

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

  task automatic wr(input int q, input logic [3:0] a, input logic [31:0] d);
    @(negedge clk);
    foreach (rh_valid[i]) rh_valid[i] = (i == q);
    rh_we = 1; rh_addr = a; rh_wdata = d;
    @(negedge clk);
    foreach (rh_valid[i]) rh_valid[i] = 0;
    rh_we = 0;
  endtask

  task automatic rd(input int q, input logic [3:0] a, output logic [31:0] d);
    @(negedge clk);
    foreach (rh_valid[i]) rh_valid[i] = (i == q);
    rh_we = 0; rh_addr = a; #1 d = rh_rdata[q];
    @(negedge clk);
    foreach (rh_valid[i]) rh_valid[i] = 0;
  endtask

  task automatic wait_state(input int q, input rstate_e s);
    logic [31:0] st;
    int cyc;
    cyc = 0;
    do begin rd(q, 4, st); cyc += 2; end while (!(st[2:0] == s && !st[3]) && cyc < 50000);
    check(st[2:0] == s && !st[3], $sformatf("region %0d reached %s", q, s.name()));
  endtask

  initial begin
    img_t i0, i2;
    logic [31:0] x [N];
    logic [31:0] p, st;
    foreach (rh_valid[i]) rh_valid[i] = 0;
    for (int i = 0; i < N; i++) begin
      x[i] = $urandom_range(0, 2000) - 1000;
      g_mem[0].u_m.mem[XB + i] = x[i];
    end
    i0 = relu_src(XB, N);
    i2 = relu_dst(YB, N);
    foreach (i0[i]) g_mem[0].u_m.mem[CFG + i] = i0[i];
    foreach (i2[i]) g_mem[2].u_m.mem[CFG + i] = i2[i];
    repeat (3) @(posedge clk);
    rst_n = 1;

    wr(0, 1, CFG); wr(0, 0, CMD_CONFIGURE);
    wr(2, 1, CFG); wr(2, 0, CMD_CONFIGURE);
    wait_state(0, RS_CONFIGURED);
    wait_state(2, RS_CONFIGURED);
    wr(2, 0, CMD_EXECUTE);
    wr(0, 0, CMD_EXECUTE);
    repeat (2000) @(posedge clk);
    rd(2, 5, p);
    check(p == 0, "closed boundary: no data reaches the lower region");
    check(r_state[0] == RS_EXECUTING, "closed boundary: upper region stalls");
    rd(0, 5, p);

    merge_v[0] = 1'b1;                // join region 0 (row 0) and region 2 (row 1)
    wait_state(2, RS_DONE);
    wait_state(0, RS_DONE);
    rd(2, 5, p);
    check(p == N, "lower region stored N words");
    for (int i = 0; i < N; i++) begin
      logic [31:0] e;
      e = ($signed(x[i]) > 0) ? x[i] : 32'd0;
      check(g_mem[2].u_m.mem[YB + i] == e, $sformatf("Y[%0d]=%0d expected %0d", i, $signed(g_mem[2].u_m.mem[YB + i]), $signed(e)));
    end
    check(idle_reqs == 0, "idle regions issued no memory requests");
    check(r_state[1] == RS_IDLE && r_state[3] == RS_IDLE, "idle regions stay IDLE");
    merge_v[0] = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

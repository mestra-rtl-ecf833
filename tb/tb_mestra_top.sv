// tb_mestra_top: full-size (4x4 regions of 3x5 PEs, default parameters) system test of the
// accelerator through its host register port, with a behavioural DDR model (random
// latency and back-pressure) on the memory port. Several kernels run concurrently so the
// shell's memory arbiter is contended:
//   region 0  in-place SAXPY, halted mid-run and snapshotted; the region is released and
//             the kernel resumes on region 9 from the snapshot (stateful migration).
//   regions 1+5 (vertical merge) relu with predication, halted mid-run and released; the
//             kernel restarts from scratch on regions 2+6 (stateless migration).
//   region 15 dot products through the RF0 accumulator.
//   region 10 scale-and-copy with a forked token stream.
// Also: shell INFO/FREE/MERGE registers, illegal commands. Every mechanism is counted when
// it is observed with a correct result; the test fails if any count stays at zero.
module tb_mestra_top;
  import mestra_pkg::*;
  import tb_kernels_pkg::*;
  localparam int N = 64;
  localparam logic [31:0] SAX_CFG = 32'h1000, SAX_Y = 32'h1400, SAX_SNAP = 32'h1800;
  localparam logic [31:0] REL_CFG_A = 32'h2000, REL_CFG_B = 32'h2200, REL_X = 32'h2400,
                          REL_Y = 32'h2800;
  localparam logic [31:0] DOT_CFG = 32'h3000, DOT_X = 32'h3400, DOT_Y = 32'h3500,
                          DOT_O = 32'h3600;
  localparam logic [31:0] SC_CFG = 32'h4000, SC_X = 32'h4400, SC_Y = 32'h4500, SC_Z = 32'h4600;

  logic clk = 0, rst_n = 0, h_valid = 0, h_we = 0;
  logic [8:0] h_addr = 0;
  logic [DATA_W-1:0] h_wdata = 0, h_rdata;
  logic ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
  mem_req_t ddr_req;
  mem_rsp_t ddr_rsp;
  int checks = 0, failures = 0;

  typedef enum int {M_CONFIGURE, M_EXECUTE, M_DONE, M_HALT, M_SNAPSHOT, M_STATEFUL,
                    M_STATELESS, M_ILLEGAL, M_MERGE, M_PRED, M_ACCUM, M_FORK, M_CONTENTION,
                    M_COUNT} mech_e;
  int mech [M_COUNT];

  mestra_top dut (.clk, .rst_n, .h_valid, .h_we, .h_addr, .h_wdata, .h_rdata,
    .ddr_req_valid, .ddr_req_ready, .ddr_req, .ddr_rsp_valid, .ddr_rsp);
  mem_model #(.AW(16)) u_ddr (.clk, .rst_n, .req_valid(ddr_req_valid),
    .req_ready(ddr_req_ready), .req(ddr_req), .rsp_valid(ddr_rsp_valid), .rsp(ddr_rsp));

  always #5 clk = ~clk;

  // requests from several regions in a row = the arbiter interleaves concurrent kernels
  logic [3:0] last_region;
  always @(posedge clk)
    if (ddr_req_valid && ddr_req_ready) begin
      if (ddr_req.tag[7:4] != last_region) mech[M_CONTENTION]++;
      last_region <= ddr_req.tag[7:4];
    end

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

  // one host access at a time: the kernel threads share the register port
  semaphore port = new(1);

  task automatic wr(input logic [8:0] a, input logic [31:0] d);
    port.get();
    @(negedge clk); h_valid = 1; h_we = 1; h_addr = a; h_wdata = d;
    @(negedge clk); h_valid = 0; h_we = 0;
    port.put();
  endtask

  task automatic rd(input logic [8:0] a, output logic [31:0] d);
    port.get();
    @(negedge clk); h_valid = 1; h_we = 0; h_addr = a; #1 d = h_rdata;
    @(negedge clk); h_valid = 0;
    port.put();
  endtask

  function automatic logic [8:0] ra(int q, int r);
    return 9'(q * 16 + r);
  endfunction

  task automatic cmd(input int q, input cmd_e c);
    logic [31:0] st;
    wr(ra(q, 0), 32'(c));
    rd(ra(q, 4), st);
    if (st[4]) mech[M_ILLEGAL]++;
    else case (c)
      CMD_CONFIGURE: mech[M_CONFIGURE]++;
      CMD_EXECUTE:   mech[M_EXECUTE]++;
      CMD_HALT:      mech[M_HALT]++;
      CMD_SNAPSHOT:  mech[M_SNAPSHOT]++;
      default: ;
    endcase
  endtask

  task automatic wait_state(input int q, input rstate_e s);
    logic [31:0] st;
    int cyc;
    cyc = 0;
    do begin rd(ra(q, 4), st); repeat (8) @(negedge clk); cyc += 10; end
    while (!(st[2:0] == s && !st[3]) && cyc < 40000);
    check(st[2:0] == s && !st[3], $sformatf("region %0d reached %s", q, s.name()));
    if (s == RS_DONE && st[2:0] == s) mech[M_DONE]++;
  endtask

  task automatic configure(input int q, input logic [31:0] cfg, input logic [31:0] snap,
                           input logic [15:0] kid, input bit restore);
    wr(ra(q, 1), cfg);
    wr(ra(q, 2), snap);
    wr(ra(q, 3), {15'd0, restore, kid});
    cmd(q, CMD_CONFIGURE);
    wait_state(q, RS_CONFIGURED);
  endtask

  task automatic wait_progress(input int q, input int n);
    logic [31:0] p;
    do begin rd(ra(q, 5), p); repeat (4) @(negedge clk); end while (p < n);
  endtask

  // ---------------- SAXPY with stateful migration 0 -> 9
  task automatic run_saxpy();
    img_t x, img;
    logic [31:0] y0 [N];
    logic [31:0] a, p;
    int ok;
    a = 32'd7;
    for (int i = 0; i < N; i++) begin
      x.push_back($urandom % 5000);
      y0[i] = $urandom % 5000;
      u_ddr.mem[SAX_Y + i] = y0[i];
    end
    img = saxpy(a, x, SAX_Y);
    foreach (img[i]) u_ddr.mem[SAX_CFG + i] = img[i];
    configure(0, SAX_CFG, SAX_SNAP, 16'h5A, 0);
    cmd(0, CMD_EXECUTE);
    wait_progress(0, N / 3);
    cmd(0, CMD_HALT);
    wait_state(0, RS_HALTED);
    rd(ra(0, 5), p);
    check(p < N, "saxpy halted before the end");
    cmd(0, CMD_SNAPSHOT);
    wait_state(0, RS_HALTED);
    cmd(0, CMD_RESET);
    wait_state(0, RS_IDLE);
    configure(9, SAX_CFG, SAX_SNAP, 16'h5A, 1);
    cmd(9, CMD_EXECUTE);
    wait_state(9, RS_DONE);
    ok = 0;
    for (int i = 0; i < N; i++) begin
      check(u_ddr.mem[SAX_Y + i] == a * x[i] + y0[i], $sformatf("saxpy Y[%0d]", i));
      if (u_ddr.mem[SAX_Y + i] == a * x[i] + y0[i]) ok++;
    end
    if (ok == N && p > 0) mech[M_STATEFUL]++;
    cmd(9, CMD_RESET);
    wait_state(9, RS_IDLE);
  endtask

  // ---------------- relu over two merged regions, stateless migration 1+5 -> 2+6
  task automatic run_relu();
    img_t ia, ib;
    logic [31:0] x [N];
    logic [31:0] v;
    int ok, zeros;
    for (int i = 0; i < N; i++) begin
      x[i] = $urandom_range(0, 2000) - 1000;
      u_ddr.mem[REL_X + i] = x[i];
    end
    ia = relu_src(REL_X, N);
    ib = relu_dst(REL_Y, N);
    foreach (ia[i]) u_ddr.mem[REL_CFG_A + i] = ia[i];
    foreach (ib[i]) u_ddr.mem[REL_CFG_B + i] = ib[i];
    wr(9'h101, 32'h0000_0002);          // merge region 1 with region 5 below it
    rd(9'h101, v);
    check(v == 32'h2, "MERGE_V read back");
    configure(1, REL_CFG_A, 0, 16'h11, 0);
    configure(5, REL_CFG_B, 0, 16'h11, 0);
    cmd(5, CMD_EXECUTE);
    cmd(1, CMD_EXECUTE);
    wait_progress(5, N / 4);
    cmd(1, CMD_HALT);
    cmd(5, CMD_HALT);
    wait_state(1, RS_HALTED);
    wait_state(5, RS_HALTED);
    cmd(1, CMD_RESET);
    cmd(5, CMD_RESET);
    wait_state(1, RS_IDLE);
    wait_state(5, RS_IDLE);
    wr(9'h101, 32'h0000_0004);          // move to regions 2 and 6
    for (int i = 0; i < N; i++) u_ddr.mem[REL_Y + i] = 32'hFFFF_FFFF;
    configure(2, REL_CFG_A, 0, 16'h11, 0);
    configure(6, REL_CFG_B, 0, 16'h11, 0);
    cmd(6, CMD_EXECUTE);
    cmd(2, CMD_EXECUTE);
    wait_state(6, RS_DONE);
    wait_state(2, RS_DONE);
    ok = 0; zeros = 0;
    for (int i = 0; i < N; i++) begin
      logic [31:0] e;
      e = ($signed(x[i]) > 0) ? x[i] : 32'd0;
      check(u_ddr.mem[REL_Y + i] == e, $sformatf("relu Y[%0d]", i));
      if (u_ddr.mem[REL_Y + i] == e) begin
        ok++;
        if ($signed(x[i]) < 0) zeros++;
      end
    end
    if (ok == N) begin mech[M_STATELESS]++; mech[M_MERGE]++; end
    if (ok == N && zeros > 0) mech[M_PRED]++;
    cmd(2, CMD_RESET);
    cmd(6, CMD_RESET);
    wait_state(2, RS_IDLE);
    wait_state(6, RS_IDLE);
    wr(9'h101, 32'h0);
  endtask

  // ---------------- dot products (accumulation) on region 15
  task automatic run_dot();
    img_t img;
    int len = 8, ok = 0;
    logic [31:0] xv [N], yv [N];
    for (int i = 0; i < N; i++) begin
      xv[i] = $urandom % 300; yv[i] = $urandom % 300;
      u_ddr.mem[DOT_X + i] = xv[i]; u_ddr.mem[DOT_Y + i] = yv[i];
    end
    img = dot(DOT_X, DOT_Y, DOT_O, N, len);
    foreach (img[i]) u_ddr.mem[DOT_CFG + i] = img[i];
    configure(15, DOT_CFG, 0, 16'hD0, 0);
    cmd(15, CMD_EXECUTE);
    wait_state(15, RS_DONE);
    for (int g = 0; g < N / len; g++) begin
      logic [31:0] e;
      e = 0;
      for (int k = 0; k < len; k++) e += xv[g*len + k] * yv[g*len + k];
      check(u_ddr.mem[DOT_O + g] == e, $sformatf("dot %0d", g));
      if (u_ddr.mem[DOT_O + g] == e) ok++;
    end
    if (ok == N / len) mech[M_ACCUM]++;
    cmd(15, CMD_RESET);
  endtask

  // ---------------- scale and copy (fork) on region 10
  task automatic run_scopy();
    img_t img;
    logic [31:0] xv [N];
    int ok = 0;
    for (int i = 0; i < N; i++) begin
      xv[i] = $urandom;
      u_ddr.mem[SC_X + i] = xv[i];
    end
    img = scopy(32'd5, SC_X, SC_Y, SC_Z, N);
    foreach (img[i]) u_ddr.mem[SC_CFG + i] = img[i];
    configure(10, SC_CFG, 0, 16'h5C, 0);
    cmd(10, CMD_EXECUTE);
    wait_state(10, RS_DONE);
    for (int i = 0; i < N; i++) begin
      check(u_ddr.mem[SC_Y + i] == 5 * xv[i], $sformatf("scopy Y[%0d]", i));
      check(u_ddr.mem[SC_Z + i] == xv[i], $sformatf("scopy Z[%0d]", i));
      if (u_ddr.mem[SC_Y + i] == 5 * xv[i] && u_ddr.mem[SC_Z + i] == xv[i]) ok++;
    end
    if (ok == N) mech[M_FORK]++;
    cmd(10, CMD_RESET);
  endtask

  initial begin
    logic [31:0] v;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd(9'h102, v);
    check(v == 32'h0404, "INFO reports 4x4 regions");
    rd(9'h103, v);
    check(v == 32'hFFFF, "all regions free after reset");
    wr(9'h100, 32'h0000_0FFF);
    rd(9'h100, v);
    check(v == 32'h0FFF, "MERGE_H read back");
    wr(9'h100, 32'h0);
    cmd(3, CMD_EXECUTE);                // not configured
    rd(ra(3, 4), v);
    check(v[4] && v[2:0] == RS_IDLE, "EXECUTE on an idle region is illegal");
    fork
      run_saxpy();
      run_relu();
      run_dot();
      run_scopy();
    join
    rd(9'h103, v);
    check(v == 32'hFFFF, "all regions free at the end");
    for (int m = 0; m < M_COUNT; m++) begin
      check(mech[m] > 0, $sformatf("mechanism %s occurred", mech_e'(m)));
      $display("mechanism %-13s %0d", mech_e'(m), mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

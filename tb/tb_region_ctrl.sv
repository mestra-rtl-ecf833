// tb_region_ctrl: self-checking test of the tightly coupled controller.
// The controller talks to a behavioural global memory and a real TCDM through the
// region memory router; the PEs are modelled here as arrays of configuration and state
// words. The test walks the command FSM through every legal transition and several
// illegal commands, and checks the data moved at each step:
//   CONFIGURE copies the configuration image into the PE arrays and the TCDM image into
//   the TCDM; HALT waits for the LS PEs to drain; SNAPSHOT writes every PE state word and
//   the TCDM contents to the snapshot buffer; CONFIGURE with restore writes the saved
//   state back and reloads the TCDM from the snapshot; completion moves EXECUTING to DONE.
// It also reports the cycles spent on configuration and on the state part of a snapshot.
module tb_region_ctrl;
  import mestra_pkg::*;
  localparam int NPE = 15, TL = 6;
  localparam int CFG = 32'h100, SNAP = 32'h800;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, arg_restore = 0;
  cmd_e cmd = CMD_NONE;
  logic [ADDR_W-1:0] arg_cfg_addr = CFG, arg_snap_addr = SNAP;
  logic [15:0] arg_kernel_id = 16'h00AB;
  rstate_e state;
  logic busy, illegal, available;
  logic [15:0] kernel_id;
  logic [3:0] region_id, cfg_pe, cfg_addr, st_pe;
  logic pe_clear, pe_run, cfg_we, st_we;
  logic [2:0] st_addr;
  logic [DATA_W-1:0] cfg_wdata, st_rdata, st_wdata;
  logic ls_done = 0, ls_quiet = 1;
  int checks = 0, failures = 0;

  logic     m_req_valid [2];
  logic     m_req_ready [2];
  mem_req_t m_req       [2];
  logic     m_rsp_valid [2];
  mem_rsp_t m_rsp       [2];
  logic t_req_valid, t_req_ready, t_rsp_valid, g_req_valid, g_req_ready, g_rsp_valid;
  mem_req_t t_req, g_req;
  mem_rsp_t t_rsp, g_rsp;

  region_ctrl #(.NPE(NPE), .REGION_ID(7)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .arg_cfg_addr, .arg_snap_addr, .arg_restore,
    .arg_kernel_id, .state, .busy, .illegal, .available, .kernel_id, .region_id,
    .pe_clear, .pe_run, .cfg_we, .cfg_pe, .cfg_addr, .cfg_wdata, .st_pe, .st_addr,
    .st_rdata, .st_we, .st_wdata, .ls_done, .ls_quiet,
    .req_valid(m_req_valid[0]), .req_ready(m_req_ready[0]), .req(m_req[0]),
    .rsp_valid(m_rsp_valid[0]), .rsp(m_rsp[0]));

  assign m_req_valid[1] = 1'b0;
  assign m_req[1] = '0;

  region_mem_router #(.NM(2)) u_router (.clk, .rst_n, .m_req_valid, .m_req_ready, .m_req,
    .m_rsp_valid, .m_rsp, .t_req_valid, .t_req_ready, .t_req, .t_rsp_valid, .t_rsp,
    .g_req_valid, .g_req_ready, .g_req, .g_rsp_valid, .g_rsp);
  tcdm #(.WORDS(64)) u_tcdm (.clk, .rst_n, .req_valid(t_req_valid), .req_ready(t_req_ready),
    .req(t_req), .rsp_valid(t_rsp_valid), .rsp(t_rsp));
  mem_model #(.AW(12)) u_g (.clk, .rst_n, .req_valid(g_req_valid), .req_ready(g_req_ready),
    .req(g_req), .rsp_valid(g_rsp_valid), .rsp(g_rsp));

  // PE model
  logic [DATA_W-1:0] pe_cfg [NPE][CFG_WORDS];
  logic [DATA_W-1:0] pe_st  [NPE][STATE_WORDS];
  int clears = 0;
  assign st_rdata = pe_st[st_pe][st_addr];
  always @(posedge clk) begin
    if (cfg_we) pe_cfg[cfg_pe][cfg_addr] <= cfg_wdata;
    if (st_we)  pe_st[st_pe][st_addr]    <= st_wdata;
    if (pe_clear) clears++;
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

  task automatic issue(input cmd_e c, input bit expect_legal);
    @(negedge clk); cmd_valid = 1; cmd = c;
    @(negedge clk); cmd_valid = 0;
    check(illegal == !expect_legal, $sformatf("%s legal=%0d in state %s", c.name(), expect_legal, state.name()));
  endtask

  task automatic wait_idle(output int cyc);
    cyc = 0;
    while (busy && cyc < 20000) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int t_cfg, t_snap, t_rest;
    logic [DATA_W-1:0] tc_saved [TL];
    for (int p = 0; p < NPE; p++) for (int w = 0; w < STATE_WORDS; w++) pe_st[p][w] = $urandom;
    for (int a = 0; a < 64; a++) u_tcdm.mem[a] = 0;
    // configuration image: header, NPE*CFG_WORDS words, TL TCDM words
    u_g.mem[CFG] = TL;
    for (int i = 0; i < NPE * CFG_WORDS + TL; i++) u_g.mem[CFG + 1 + i] = 32'hC0000000 + i;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == RS_IDLE && available && region_id == 7, "reset: IDLE, available, id");

    // illegal commands in IDLE
    issue(CMD_EXECUTE, 0);  issue(CMD_HALT, 0);  issue(CMD_SNAPSHOT, 0);  issue(CMD_RESET, 0);
    check(state == RS_IDLE, "still IDLE after illegal commands");

    // CONFIGURE
    issue(CMD_CONFIGURE, 1);
    check(busy && !available, "busy while configuring");
    issue(CMD_EXECUTE, 0);   // refused while busy
    wait_idle(t_cfg);
    check(state == RS_CONFIGURED && kernel_id == 16'h00AB, "CONFIGURED with kernel id");
    check(clears == 1, "PEs cleared once at CONFIGURE");
    for (int p = 0; p < NPE; p++) for (int w = 0; w < CFG_WORDS; w++)
      check(pe_cfg[p][w] == 32'hC0000000 + p * CFG_WORDS + w, $sformatf("cfg pe %0d word %0d", p, w));
    for (int j = 0; j < TL; j++)
      check(u_tcdm.mem[j] == 32'hC0000000 + NPE * CFG_WORDS + j, $sformatf("TCDM init %0d", j));
    issue(CMD_CONFIGURE, 0);

    // EXECUTE, HALT with a slow drain
    issue(CMD_EXECUTE, 1);
    check(state == RS_EXECUTING && pe_run, "EXECUTING, PEs run");
    ls_quiet = 0;
    issue(CMD_HALT, 1);
    check(!pe_run && state == RS_EXECUTING, "halting: PEs stopped, waiting for drain");
    repeat (5) @(negedge clk);
    check(state == RS_EXECUTING && busy, "still draining");
    ls_quiet = 1;
    @(negedge clk); @(negedge clk);
    check(state == RS_HALTED && !busy && !pe_run, "HALTED after drain");

    // SNAPSHOT
    for (int j = 0; j < TL; j++) begin tc_saved[j] = $urandom; u_tcdm.mem[j] = tc_saved[j]; end
    issue(CMD_SNAPSHOT, 1);
    check(state == RS_SNAPSHOT, "SNAPSHOT state while saving");
    wait_idle(t_snap);
    check(state == RS_HALTED, "back to HALTED after SNAPSHOT");
    for (int p = 0; p < NPE; p++) for (int w = 0; w < STATE_WORDS; w++)
      check(u_g.mem[SNAP + p * STATE_WORDS + w] == pe_st[p][w], $sformatf("snap pe %0d word %0d", p, w));
    for (int j = 0; j < TL; j++)
      check(u_g.mem[SNAP + NPE * STATE_WORDS + j] == tc_saved[j], $sformatf("snap TCDM %0d", j));

    // resume, then halt again and release the region
    issue(CMD_EXECUTE, 1);
    check(state == RS_EXECUTING, "resumed from HALTED");
    issue(CMD_HALT, 1);
    @(negedge clk);
    check(state == RS_HALTED, "halted again");
    issue(CMD_RESET, 1);
    check(state == RS_IDLE && available, "RESET from HALTED releases the region");

    // CONFIGURE with restore (stateful migration target)
    for (int p = 0; p < NPE; p++) for (int w = 0; w < STATE_WORDS; w++) pe_st[p][w] = 0;
    for (int j = 0; j < TL; j++) u_tcdm.mem[j] = 0;
    arg_restore = 1; arg_kernel_id = 16'h0CD;
    issue(CMD_CONFIGURE, 1);
    wait_idle(t_rest);
    check(state == RS_CONFIGURED && kernel_id == 16'h0CD, "restored and CONFIGURED");
    for (int p = 0; p < NPE; p++) for (int w = 0; w < STATE_WORDS; w++)
      check(pe_st[p][w] == u_g.mem[SNAP + p * STATE_WORDS + w], $sformatf("restore pe %0d word %0d", p, w));
    for (int j = 0; j < TL; j++)
      check(u_tcdm.mem[j] == tc_saved[j], $sformatf("TCDM restored %0d", j));

    // run to completion
    issue(CMD_EXECUTE, 1);
    @(negedge clk);
    check(state == RS_EXECUTING, "executing before completion");
    ls_done = 1;
    @(negedge clk); @(negedge clk);
    check(state == RS_DONE && pe_run, "DONE when the LS PEs finish; PEs keep draining");
    issue(CMD_HALT, 0);  issue(CMD_EXECUTE, 0);  issue(CMD_SNAPSHOT, 0);
    issue(CMD_RESET, 1);
    check(state == RS_IDLE && available, "IDLE after RESET");
    ls_done = 0;

    $display("configure (header, %0d cfg words, %0d TCDM words): %0d cycles", NPE * CFG_WORDS, TL, t_cfg);
    $display("snapshot (%0d state words, %0d TCDM words): %0d cycles", NPE * STATE_WORDS, TL, t_snap);
    $display("configure with restore: %0d cycles", t_rest);
    check(t_cfg > NPE * CFG_WORDS && t_snap > NPE * STATE_WORDS, "copy cycle counts plausible");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

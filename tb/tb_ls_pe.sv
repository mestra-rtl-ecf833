// tb_ls_pe: self-checking test of the load/store PE.
// The load AGU walks a 3-level loop nest over a memory filled with known values; the
// loaded tokens leave east and south (fork) under random back-pressure and are checked
// against the reference addresses. At the same time a token stream entering from the
// west is stored through the store AGU to a second memory and checked there. Memories
// answer with random latency and back-pressure. Also covered: HALT (no new requests,
// outstanding ones complete, `quiet`), save and restore of the progression registers
// after a clear, `done`, and the committed-store progress count.
module tb_ls_pe;
  import mestra_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, clear = 0, run = 0, st_we = 0;
  logic [3:0] cfg_addr = 0;
  logic [DATA_W-1:0] cfg_wdata = 0, st_wdata = 0, st_rdata, progress;
  logic [2:0] st_addr = 0;
  logic done, quiet;
  token_t in_tok [4];
  logic [3:0] in_valid, in_ready, out_valid, out_ready;
  token_t out_tok [4];
  logic ld_req_valid, ld_req_ready, ld_rsp_valid, sr_req_valid, sr_req_ready, sr_rsp_valid;
  mem_req_t ld_req, sr_req;
  mem_rsp_t ld_rsp, sr_rsp;
  int checks = 0, failures = 0;

  ls_pe dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .clear, .run,
             .st_addr, .st_rdata, .st_we, .st_wdata, .done, .quiet, .progress,
             .in_tok, .in_valid, .in_ready, .out_tok, .out_valid, .out_ready,
             .ld_req_valid, .ld_req_ready, .ld_req, .ld_rsp_valid, .ld_rsp,
             .sr_req_valid, .sr_req_ready, .sr_req, .sr_rsp_valid, .sr_rsp);

  mem_model #(.AW(12)) u_ldmem (.clk, .rst_n, .req_valid(ld_req_valid), .req_ready(ld_req_ready),
                                .req(ld_req), .rsp_valid(ld_rsp_valid), .rsp(ld_rsp));
  mem_model #(.AW(12)) u_srmem (.clk, .rst_n, .req_valid(sr_req_valid), .req_ready(sr_req_ready),
                                .req(sr_req), .rsp_valid(sr_rsp_valid), .rsp(sr_rsp));

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

  token_t src_q [$];
  token_t snk_e [$], snk_s [$];

  always_ff @(posedge clk) begin
    if (in_valid[DIR_W] && in_ready[DIR_W]) void'(src_q.pop_front());
    if (out_valid[DIR_E] && out_ready[DIR_E]) snk_e.push_back(out_tok[DIR_E]);
    if (out_valid[DIR_S] && out_ready[DIR_S]) snk_s.push_back(out_tok[DIR_S]);
  end

  always @(negedge clk) begin
    in_valid  = '0;
    in_valid[DIR_W] = (src_q.size() > 0) && ($urandom % 4 != 0);
    for (int p = 0; p < 4; p++) in_tok[p] = (src_q.size() > 0) ? src_q[0] : '0;
    out_ready = 4'($urandom);
  end

  task automatic cfg(input logic [3:0] a, input logic [DATA_W-1:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // load nest: base 100, strides (1, 16, 256), bounds (4, 3, 2) -> 24 elements
  // store nest: base 2000, strides (2, 0, 0), bounds (24, 1, 1)
  localparam int NL = 24;

  function automatic int ld_a(input int n);
    int i, j, k;
    i = n % 4; j = (n / 4) % 3; k = n / 12;
    return 100 + i + 16 * j + 256 * k;
  endfunction

  initial begin
    ls_cfg_t c;
    logic [DATA_W-1:0] saved [STATE_WORDS];
    logic [DATA_W-1:0] wr [NL];
    int n_e, n_s, got;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 4096; a++) u_ldmem.mem[a] = 32'hA000_0000 + a;
    c = '{rsvd: '0, out_mask: 4'b0110, st_src: DIR_W, st_en: 1'b1, ld_en: 1'b1};
    cfg(0, DATA_W'(c));
    cfg(1, 100); cfg(2, 1); cfg(3, 16); cfg(4, 256); cfg(5, 4); cfg(6, 3); cfg(7, 2);
    cfg(8, 2000); cfg(9, 2); cfg(10, 0); cfg(11, 0); cfg(12, NL); cfg(13, 1); cfg(14, 1);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < NL; i++) begin
      wr[i] = $urandom;
      src_q.push_back('{data: wr[i], pred: 1'b1});
    end
    check(!done, "not done before running");
    run = 1;
    repeat (60) @(negedge clk);
    // HALT
    run = 0;
    @(negedge clk);
    check(!ld_req_valid && !sr_req_valid && in_ready == 0 && out_valid == 0,
          "halted: no requests, no tokens");
    repeat (20) @(negedge clk);
    check(quiet, "outstanding requests completed while halted");
    // save progression registers, clear, restore
    for (int w = 0; w < STATE_WORDS; w++) begin st_addr = 3'(w); #1 saved[w] = st_rdata; end
    got = saved[0][15:0] + 4 * saved[0][31:16] + 12 * saved[1][15:0];
    check(snk_e.size() - got inside {0, 1} && snk_s.size() - got inside {0, 1},
          "load progress counts tokens handed out (one may be half-forked)");
    check(progress == saved[4][15:0], "progress equals committed stores");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    st_addr = 0; #1 check(st_rdata == 0, "clear resets load counters");
    for (int w = 0; w < STATE_WORDS; w++) begin
      @(negedge clk); st_we = 1; st_addr = 3'(w); st_wdata = saved[w];
    end
    @(negedge clk); st_we = 0;
    // resume
    run = 1;
    begin
      int guard = 0;
      while (!done && guard < 4000) begin @(negedge clk); guard++; end
    end
    repeat (5) @(negedge clk);
    check(done, "done after all loads and stores");
    check(progress == NL, "progress counts all stores");
    n_e = snk_e.size(); n_s = snk_s.size();
    check(n_e == NL && n_s == NL, $sformatf("loaded tokens: east %0d south %0d", n_e, n_s));
    for (int n = 0; n < NL && n < n_e && n < n_s; n++) begin
      check(snk_e[n].data == 32'hA000_0000 + ld_a(n), $sformatf("load east %0d", n));
      check(snk_s[n].data == 32'hA000_0000 + ld_a(n) && snk_s[n].pred, $sformatf("load south %0d", n));
    end
    for (int n = 0; n < NL; n++)
      check(u_srmem.mem[2000 + 2 * n] == wr[n], $sformatf("store %0d", n));
    check(!ld_req_valid && !sr_req_valid, "no requests after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

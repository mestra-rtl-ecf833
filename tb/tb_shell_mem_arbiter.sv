// tb_shell_mem_arbiter: self-checking test of the DDR arbiter.
// Four region ports stream random reads and writes (each to its own address range, tag
// low bits random) into a behavioural DDR with random latency and back-pressure. Every
// response must reach the region that issued it with its own low tag bits and the data a
// reference model predicts; while all regions request, grants must rotate round-robin.
module tb_shell_mem_arbiter;
  import mestra_pkg::*;
  localparam int NR = 4, NPER = 150;
  logic clk = 0, rst_n = 0;
  logic     r_req_valid [NR];
  logic     r_req_ready [NR];
  mem_req_t r_req       [NR];
  logic     r_rsp_valid [NR];
  mem_rsp_t r_rsp       [NR];
  logic d_req_valid, d_req_ready, d_rsp_valid;
  mem_req_t d_req;
  mem_rsp_t d_rsp;
  int checks = 0, failures = 0;

  shell_mem_arbiter #(.NR(NR)) dut (.clk, .rst_n, .r_req_valid, .r_req_ready, .r_req,
    .r_rsp_valid, .r_rsp, .d_req_valid, .d_req_ready, .d_req, .d_rsp_valid, .d_rsp);
  mem_model #(.AW(8), .BP_PCT(10)) u_ddr (.clk, .rst_n, .req_valid(d_req_valid),
    .req_ready(d_req_ready), .req(d_req), .rsp_valid(d_rsp_valid), .rsp(d_rsp));

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

  typedef struct { logic we; logic [DATA_W-1:0] d; logic [3:0] tag; } exp_t;
  exp_t exp_q [NR][$];
  logic [DATA_W-1:0] ref_m [256];
  int issued [NR], answered [NR];
  int last_g = -1, rot_checks = 0;

  initial begin
    for (int a = 0; a < 256; a++) begin ref_m[a] = 0; u_ddr.mem[a] = 0; end
    for (int k = 0; k < NR; k++) begin r_req_valid[k] = 0; r_req[k] = '0; issued[k] = 0; answered[k] = 0; end
  end

  always @(posedge clk) if (rst_n) begin
    bit all_req;
    all_req = 1;
    for (int k = 0; k < NR; k++) if (!r_req_valid[k]) all_req = 0;
    for (int k = 0; k < NR; k++) begin
      if (r_rsp_valid[k]) begin
        exp_t e;
        check(exp_q[k].size() > 0, $sformatf("region %0d: unexpected response", k));
        if (exp_q[k].size() > 0) begin
          e = exp_q[k].pop_front();
          check(r_rsp[k].we == e.we && r_rsp[k].tag[3:0] == e.tag && (e.we || r_rsp[k].rdata == e.d),
                $sformatf("region %0d response", k));
        end
        answered[k]++;
      end
      if (r_req_valid[k] && r_req_ready[k]) begin
        exp_t e;
        e.we = r_req[k].we; e.tag = r_req[k].tag[3:0]; e.d = ref_m[r_req[k].addr[7:0]];
        if (r_req[k].we) ref_m[r_req[k].addr[7:0]] = r_req[k].wdata;
        exp_q[k].push_back(e);
        check(d_req.tag[7:4] == 4'(k) && d_req.addr == r_req[k].addr, "forwarded request carries region index");
        if (all_req && last_g >= 0) begin
          check(k == (last_g + 1) % NR, "round-robin rotation");
          rot_checks++;
        end
        last_g = k;
        issued[k]++;
      end
    end
  end

  always @(negedge clk) if (rst_n) begin
    for (int k = 0; k < NR; k++) begin
      if (!r_req_valid[k] && issued[k] < NPER && ($urandom % 8 != 0)) begin
        r_req_valid[k] = 1;
        r_req[k].we    = $urandom % 2;
        r_req[k].addr  = ADDR_W'(k * 64 + $urandom % 64);
        r_req[k].wdata = $urandom;
        r_req[k].tag   = 8'($urandom % 16);
      end
    end
  end
  always @(posedge clk) for (int k = 0; k < NR; k++)
    if (r_req_valid[k] && r_req_ready[k]) r_req_valid[k] <= 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    begin
      int guard = 0;
      bit all;
      do begin
        @(posedge clk); guard++;
        all = 1;
        for (int k = 0; k < NR; k++) if (answered[k] < NPER) all = 0;
      end while (!all && guard < 50000);
    end
    for (int k = 0; k < NR; k++)
      check(answered[k] == NPER, $sformatf("region %0d: %0d of %0d answered", k, answered[k], NPER));
    check(rot_checks > 20, $sformatf("rotation observed %0d times", rot_checks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_shell: self-checking test of the shell at its default 4x4 size.
// Host writes must reach exactly the addressed region's register port, reads must return
// that region's data, the merge registers must read back and drive merge_h/merge_v, INFO
// must report the array size, FREE must mirror which regions are IDLE, and every region's
// global-memory request must come back to it through the DDR arbiter.
module tb_shell;
  import mestra_pkg::*;
  localparam int NR = 16;
  logic clk = 0, rst_n = 0, h_valid = 0, h_we = 0;
  logic [8:0] h_addr = 0;
  logic [DATA_W-1:0] h_wdata = 0, h_rdata;
  logic rh_valid [NR];
  logic rh_we;
  logic [3:0] rh_addr;
  logic [DATA_W-1:0] rh_wdata;
  logic [DATA_W-1:0] rh_rdata [NR];
  rstate_e r_state [NR];
  logic [11:0] merge_h, merge_v;
  logic     r_req_valid [NR];
  logic     r_req_ready [NR];
  mem_req_t r_req       [NR];
  logic     r_rsp_valid [NR];
  mem_rsp_t r_rsp       [NR];
  logic d_req_valid, d_req_ready, d_rsp_valid;
  mem_req_t d_req;
  mem_rsp_t d_rsp;
  int checks = 0, failures = 0;

  shell dut (.clk, .rst_n, .h_valid, .h_we, .h_addr, .h_wdata, .h_rdata, .rh_valid, .rh_we,
    .rh_addr, .rh_wdata, .rh_rdata, .r_state, .merge_h, .merge_v, .r_req_valid, .r_req_ready,
    .r_req, .r_rsp_valid, .r_rsp, .d_req_valid, .d_req_ready, .d_req, .d_rsp_valid, .d_rsp);
  mem_model #(.AW(8)) u_ddr (.clk, .rst_n, .req_valid(d_req_valid), .req_ready(d_req_ready),
    .req(d_req), .rsp_valid(d_rsp_valid), .rsp(d_rsp));

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

  int got [NR];
  always @(posedge clk) for (int q = 0; q < NR; q++) begin
    if (r_rsp_valid[q]) begin
      check(r_rsp[q].rdata == 32'h5000 + q && r_rsp[q].tag[3:0] == 4'(q), $sformatf("region %0d memory response", q));
      got[q]++;
    end
    if (r_req_valid[q] && r_req_ready[q]) r_req_valid[q] <= 0;
  end

  initial begin
    logic [15:0] free_exp;
    for (int q = 0; q < NR; q++) begin
      rh_rdata[q] = 32'hAB00 + q; r_state[q] = RS_IDLE;
      r_req_valid[q] = 0; r_req[q] = '0; got[q] = 0;
    end
    for (int a = 0; a < 256; a++) u_ddr.mem[a] = 32'h5000 + a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int q = 0; q < NR; q++) begin
      @(negedge clk); h_valid = 1; h_we = 1; h_addr = {1'b0, 4'(q), 4'd2}; h_wdata = 32'(q);
      #1;
      for (int k = 0; k < NR; k++) check(rh_valid[k] == (k == q), $sformatf("write to region %0d selects only it", q));
      check(rh_we && rh_addr == 2 && rh_wdata == q, "forwarded write fields");
      h_we = 0; #1 check(h_rdata == 32'hAB00 + q, $sformatf("read region %0d", q));
    end
    @(negedge clk); h_valid = 1; h_we = 1; h_addr = 9'h100; h_wdata = 32'h0A5C;
    @(negedge clk); h_addr = 9'h101; h_wdata = 32'h0F03;
    @(negedge clk); h_we = 0; h_addr = 9'h100;
    #1 check(h_rdata == 32'h0A5C && merge_h == 12'hA5C, "MERGE_H");
    h_addr = 9'h101; #1 check(h_rdata == 32'h0F03 && merge_v == 12'hF03, "MERGE_V");
    for (int q = 0; q < NR; q++) check(!rh_valid[q], "shell register access reaches no region");
    h_addr = 9'h102; #1 check(h_rdata == 32'h0404, "INFO 4x4");
    for (int t = 0; t < 8; t++) begin
      free_exp = 16'($urandom);
      for (int q = 0; q < NR; q++) r_state[q] = free_exp[q] ? RS_IDLE : rstate_e'(3'(1 + $urandom % 5));
      h_addr = 9'h103; #1 check(h_rdata == 32'(free_exp), "FREE map");
    end
    @(negedge clk); h_valid = 0;
    // every region reads its own word through the arbiter
    for (int q = 0; q < NR; q++) begin
      r_req_valid[q] = 1; r_req[q] = '{we: 1'b0, addr: ADDR_W'(q), wdata: '0, tag: 8'(q)};
    end
    repeat (300) @(negedge clk);
    for (int q = 0; q < NR; q++) check(got[q] == 1, $sformatf("region %0d got its response", q));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

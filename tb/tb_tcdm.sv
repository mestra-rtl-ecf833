// tb_tcdm: self-checking test of the region TCDM.
// Random reads and writes against a reference array; every response must come exactly
// one cycle after its request, with the request's tag, and reads return the last write.
module tb_tcdm;
  import mestra_pkg::*;
  localparam int W = 256;
  logic clk = 0, rst_n = 0, req_valid = 0, req_ready, rsp_valid;
  mem_req_t req = '0;
  mem_rsp_t rsp;
  int checks = 0, failures = 0;
  logic [DATA_W-1:0] ref_mem [W];

  tcdm #(.WORDS(W)) dut (.clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp);

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

  initial begin
    logic              exp_v, exp_we;
    logic [DATA_W-1:0] exp_d;
    logic [TAG_W-1:0]  exp_t;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialise both memories
    for (int a = 0; a < W; a++) begin
      @(negedge clk);
      req_valid = 1; req = '{we: 1'b1, addr: ADDR_W'(a) | 32'h8000_0000, wdata: $urandom, tag: 8'(a)};
      ref_mem[a] = req.wdata;
    end
    @(negedge clk); req_valid = 0;
    @(negedge clk);
    exp_v = 0; exp_we = 0; exp_d = 0; exp_t = 0;
    for (int n = 0; n < 2000; n++) begin
      // check the response to the previous cycle's request
      check(rsp_valid == exp_v, $sformatf("rsp_valid %0d", n));
      if (exp_v) check(rsp.tag == exp_t && rsp.we == exp_we && (exp_we || rsp.rdata == exp_d),
                       $sformatf("rsp %0d", n));
      check(req_ready, "always ready");
      req_valid = ($urandom % 4) != 0;
      req.we    = $urandom % 2;
      req.addr  = ADDR_W'($urandom % W);
      req.wdata = $urandom;
      req.tag   = 8'($urandom);
      exp_v = req_valid; exp_we = req.we; exp_t = req.tag; exp_d = ref_mem[req.addr];
      if (req_valid && req.we) ref_mem[req.addr] = req.wdata;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

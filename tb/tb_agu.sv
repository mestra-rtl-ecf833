// tb_agu: self-checking test of the three-level address generator.
// Walks several random loop descriptors element by element and compares every address
// with a reference loop nest, checks `count` and `done`, the behaviour of extra steps,
// restore of a saved counter set, and `clear`.
module tb_agu;
  import mestra_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, step = 0, st_we = 0;
  logic st_idx = 0;
  logic [DATA_W-1:0] st_rdata;
  logic [DATA_W-1:0] st_wdata = 0;
  agu_desc_t desc;
  logic [ADDR_W-1:0] addr;
  logic done;
  logic [ITER_W-1:0] idx [3];
  logic [DATA_W-1:0] count;
  int checks = 0, failures = 0;

  agu dut (.clk, .rst_n, .clear, .step, .desc, .st_we, .st_idx, .st_wdata, .st_rdata,
           .addr, .done, .idx, .count);

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
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int b0, b1, b2, n;
    logic [ADDR_W-1:0] exp_addr;
    desc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      b0 = 1 + $urandom % 5; b1 = 1 + $urandom % 4; b2 = 1 + $urandom % 3;
      desc.base      = $urandom;
      desc.stride[0] = $urandom % 16;
      desc.stride[1] = $urandom % 256;
      desc.stride[2] = $urandom;
      desc.bound[0]  = ITER_W'(b0);
      desc.bound[1]  = ITER_W'(b1);
      desc.bound[2]  = (t == 0) ? '0 : ITER_W'(b2);   // bound 0 behaves as 1
      if (t == 0) b2 = 1;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      n = 0;
      for (int k = 0; k < b2; k++)
        for (int j = 0; j < b1; j++)
          for (int i = 0; i < b0; i++) begin
            exp_addr = desc.base + i * desc.stride[0] + j * desc.stride[1] + k * desc.stride[2];
            check(addr == exp_addr, $sformatf("addr %0d/%0d/%0d: %h vs %h", i, j, k, addr, exp_addr));
            check(count == n && !done, "count before step");
            // hold step low for a random number of cycles: nothing may move
            repeat ($urandom % 2) @(negedge clk);
            check(addr == exp_addr, "addr stable without step");
            step = 1; @(negedge clk); step = 0;
            n++;
          end
      check(done, "done after last element");
      st_idx = 1; #1 check(st_rdata[16] == 1'b1, "done in state word 1");
      check(count == b0 * b1 * b2, "count at end");
      step = 1; @(negedge clk); step = 0;
      check(done && count == b0 * b1 * b2, "step after done ignored");
      // restore a counter set and check the address it names
      if (b0 > 1 && b1 > 1) begin
        st_we = 1; st_idx = 0; st_wdata = 32'h0001_0001; @(negedge clk);
        st_idx = 1; st_wdata = 0; @(negedge clk);
        st_we = 0;
        check(!done && addr == desc.base + desc.stride[0] + desc.stride[1], "restored address");
        check(count == b0 + 1, "restored count");
        check(idx[0] == 1 && idx[1] == 1 && idx[2] == 0, "restored counters read back");
        st_idx = 0; #1 check(st_rdata == 32'h0001_0001, "state word 0");
        st_idx = 1; #1 check(st_rdata == 32'h0, "state word 1");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

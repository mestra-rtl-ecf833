// tb_ffa_rf: self-checking test of the region register file.
// Writes and reads back the argument registers, checks that writing CMD produces exactly
// one command pulse carrying the code and the current arguments, and that STATUS and
// PROGRESS show the controller's metadata in the documented bit positions.
module tb_ffa_rf;
  import mestra_pkg::*;
  logic clk = 0, rst_n = 0, h_valid = 0, h_we = 0;
  logic [3:0] h_addr = 0;
  logic [DATA_W-1:0] h_wdata = 0, h_rdata;
  logic cmd_valid, arg_restore;
  cmd_e cmd;
  logic [ADDR_W-1:0] arg_cfg_addr, arg_snap_addr;
  logic [15:0] arg_kernel_id;
  rstate_e state = RS_IDLE;
  logic busy = 0, illegal = 0, available = 0;
  logic [3:0] region_id = 0;
  logic [15:0] kernel_id = 0;
  logic [DATA_W-1:0] progress = 0;
  int checks = 0, failures = 0, pulses = 0;

  ffa_rf dut (.clk, .rst_n, .h_valid, .h_we, .h_addr, .h_wdata, .h_rdata, .cmd_valid, .cmd,
              .arg_cfg_addr, .arg_snap_addr, .arg_restore, .arg_kernel_id, .state, .busy,
              .illegal, .available, .region_id, .kernel_id, .progress);

  always #5 clk = ~clk;
  always @(posedge clk) if (cmd_valid) pulses++;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [3:0] a, input logic [DATA_W-1:0] d);
    @(negedge clk); h_valid = 1; h_we = 1; h_addr = a; h_wdata = d;
    @(negedge clk); h_valid = 0; h_we = 0;
  endtask

  initial begin
    logic [DATA_W-1:0] c, s, k;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      c = $urandom; s = $urandom; k = $urandom;
      wr(1, c); wr(2, s); wr(3, k);
      h_addr = 1; #1 check(h_rdata == c, "CFG_ADDR read back");
      h_addr = 2; #1 check(h_rdata == s, "SNAP_ADDR read back");
      h_addr = 3; #1 check(h_rdata == {15'd0, k[16:0]}, "KERNEL read back");
      check(arg_cfg_addr == c && arg_snap_addr == s && arg_kernel_id == k[15:0] &&
            arg_restore == k[16], "arguments presented");
      // command pulse
      @(negedge clk); h_valid = 1; h_we = 1; h_addr = 0; h_wdata = 32'(1 + t % 5);
      #1 check(cmd_valid && cmd == cmd_e'(3'(1 + t % 5)), "command pulse with code");
      @(negedge clk); h_valid = 0; h_we = 0;
      #1 check(!cmd_valid, "pulse lasts one cycle");
      h_addr = 0; #1 check(h_rdata == 32'(1 + t % 5), "CMD read back");
      // a read of CMD issues nothing
      @(negedge clk); h_valid = 1; h_we = 0; h_addr = 0;
      #1 check(!cmd_valid, "read issues no command");
      @(negedge clk); h_valid = 0;
      // status
      state = rstate_e'(3'(t % 6)); busy = t[0]; illegal = t[1]; available = t[2];
      region_id = 4'(t); kernel_id = 16'($urandom); progress = $urandom;
      h_addr = 4; #1
      check(h_rdata[2:0] == 3'(t % 6) && h_rdata[3] == t[0] && h_rdata[4] == t[1] &&
            h_rdata[5] == t[2] && h_rdata[11:8] == 4'(t) && h_rdata[31:16] == kernel_id,
            "STATUS fields");
      h_addr = 5; #1 check(h_rdata == progress, "PROGRESS");
    end
    check(pulses == 20, $sformatf("%0d command pulses for 20 commands", pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

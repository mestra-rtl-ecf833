// tb_fc_pe: self-checking test of the function-compute PE.
// Random token streams with random gaps enter on the mesh ports, the outputs see random
// back-pressure, and every emitted token is compared with a reference computed here.
// Covered: two-operand ops from two ports, an immediate operand, the output fork to two
// directions, accumulation through RF0, compare-to-predicate and predicated forwarding,
// HALT (run low), snapshot/restore of the state-critical registers in mid-stream, and the
// steady-state rate of one result every two cycles.
module tb_fc_pe;
  import mestra_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, clear = 0, run = 0, st_we = 0;
  logic [3:0] cfg_addr = 0;
  logic [DATA_W-1:0] cfg_wdata = 0, st_wdata = 0, st_rdata;
  logic [2:0] st_addr = 0;
  token_t in_tok [4];
  logic [3:0] in_valid, in_ready, out_valid, out_ready;
  token_t out_tok [4];
  int checks = 0, failures = 0;

  fc_pe dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .clear, .run,
             .st_addr, .st_rdata, .st_we, .st_wdata,
             .in_tok, .in_valid, .in_ready, .out_tok, .out_valid, .out_ready);

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

  // ---------------- sources and sinks ----------------
  token_t src_q [4][$];
  token_t snk_q [4][$];
  int     gap_pct = 30, bp_pct = 30;

  always_ff @(posedge clk) begin
    for (int p = 0; p < 4; p++) begin
      if (in_valid[p] && in_ready[p]) void'(src_q[p].pop_front());
      if (out_valid[p] && out_ready[p]) snk_q[p].push_back(out_tok[p]);
    end
  end

  always @(negedge clk) begin
    for (int p = 0; p < 4; p++) begin
      in_valid[p] = (src_q[p].size() > 0) && (($urandom % 100) >= gap_pct);
      in_tok[p]   = (src_q[p].size() > 0) ? src_q[p][0] : '0;
      out_ready[p] = ($urandom % 100) >= bp_pct;
    end
  end

  task automatic cfg(input logic [3:0] a, input logic [DATA_W-1:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic setup(input fc_op_e op, input logic [2:0] sa, input logic [2:0] sb,
                       input logic [3:0] mask, input bit pred_en, input bit acc_en,
                       input int acc_len, input logic [DATA_W-1:0] rf0,
                       input logic [DATA_W-1:0] rf1);
    fc_cfg_t c;
    run = 0;
    c = '{acc_len: 16'(acc_len), acc_en: acc_en, pred_en: pred_en, out_mask: mask,
          src_b: sb, src_a: sa, op: op};
    cfg(4'd0, DATA_W'(c));
    cfg(4'd1, rf0);
    cfg(4'd2, rf1);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int p = 0; p < 4; p++) begin src_q[p].delete(); snk_q[p].delete(); end
  endtask

  task automatic wait_out(input int dir, input int n);
    int guard = 0;
    while (snk_q[dir].size() < n && guard < 5000) begin @(posedge clk); guard++; end
  endtask

  function automatic logic [DATA_W-1:0] rnd();
    return $urandom % 2000 - 1000;
  endfunction

  initial begin
    localparam int N = 24;
    logic [DATA_W-1:0] a [N], b [N];
    logic              pa [N];
    int t0, t1, acc;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1) ADD: A from west, B from north, result to east
    setup(OP_ADD, SRC_W, SRC_N, 4'b0010, 0, 0, 0, 0, 0);
    for (int i = 0; i < N; i++) begin
      a[i] = rnd(); b[i] = rnd();
      src_q[DIR_W].push_back('{data: a[i], pred: 1'b1});
      src_q[DIR_N].push_back('{data: b[i], pred: 1'b1});
    end
    run = 1;
    wait_out(DIR_E, N);
    check(snk_q[DIR_E].size() == N, "ADD: token count");
    for (int i = 0; i < N && i < snk_q[DIR_E].size(); i++)
      check(snk_q[DIR_E][i].data == a[i] + b[i], $sformatf("ADD %0d", i));

    // 2) MUL by immediate, forked to east and south
    setup(OP_MUL, SRC_S, SRC_RF1, 4'b0110, 0, 0, 0, 0, 32'd7);
    for (int i = 0; i < N; i++) begin
      a[i] = rnd();
      src_q[DIR_S].push_back('{data: a[i], pred: 1'b1});
    end
    run = 1;
    wait_out(DIR_E, N); wait_out(DIR_S, N);
    check(snk_q[DIR_E].size() == N && snk_q[DIR_S].size() == N, "MUL fork: token counts");
    for (int i = 0; i < N && i < snk_q[DIR_S].size() && i < snk_q[DIR_E].size(); i++) begin
      check(snk_q[DIR_E][i].data == a[i] * 7, $sformatf("MUL east %0d", i));
      check(snk_q[DIR_S][i].data == a[i] * 7, $sformatf("MUL south %0d", i));
    end

    // 3) accumulation through RF0: emit the sum of every 4 inputs, starting from 5
    setup(OP_ADD, SRC_E, SRC_RF0, 4'b0001, 0, 1, 4, 32'd5, 0);
    for (int i = 0; i < N; i++) begin
      a[i] = rnd();
      src_q[DIR_E].push_back('{data: a[i], pred: 1'b1});
    end
    run = 1;
    wait_out(DIR_N, N / 4);
    check(snk_q[DIR_N].size() == N / 4, "ACC: token count");
    for (int g = 0; g < N / 4 && g < snk_q[DIR_N].size(); g++) begin
      acc = 5;
      for (int k = 0; k < 4; k++) acc += a[4*g + k];
      check(snk_q[DIR_N][g].data == DATA_W'(acc), $sformatf("ACC group %0d", g));
    end

    // 4a) compare: data passes, predicate = A > 0
    setup(OP_GT, SRC_W, SRC_RF1, 4'b0010, 0, 0, 0, 0, 0);
    for (int i = 0; i < N; i++) begin
      a[i] = rnd();
      src_q[DIR_W].push_back('{data: a[i], pred: 1'b1});
    end
    run = 1;
    wait_out(DIR_E, N);
    for (int i = 0; i < N && i < snk_q[DIR_E].size(); i++)
      check(snk_q[DIR_E][i].data == a[i] && snk_q[DIR_E][i].pred == ($signed(a[i]) > 0),
            $sformatf("GT %0d", i));

    // 4b) predicated SUB: A - B where A's predicate is 1, else B
    setup(OP_SUB, SRC_W, SRC_N, 4'b0100, 1, 0, 0, 0, 0);
    for (int i = 0; i < N; i++) begin
      a[i] = rnd(); b[i] = rnd(); pa[i] = $urandom % 2;
      src_q[DIR_W].push_back('{data: a[i], pred: pa[i]});
      src_q[DIR_N].push_back('{data: b[i], pred: 1'b1});
    end
    run = 1;
    wait_out(DIR_S, N);
    for (int i = 0; i < N && i < snk_q[DIR_S].size(); i++)
      check(snk_q[DIR_S][i].data == (pa[i] ? a[i] - b[i] : b[i]) &&
            snk_q[DIR_S][i].pred == pa[i], $sformatf("PRED %0d", i));

    // 5) HALT mid-stream, snapshot the state words, clear, restore, resume
    setup(OP_ADD, SRC_W, SRC_RF0, 4'b0010, 0, 1, 3, 32'd0, 0);
    for (int i = 0; i < N; i++) begin
      a[i] = rnd();
      src_q[DIR_W].push_back('{data: a[i], pred: 1'b1});
    end
    run = 1;
    repeat (9) @(negedge clk);
    run = 0;
    begin
      logic [DATA_W-1:0] saved [STATE_WORDS];
      int n_before;
      @(negedge clk);
      check(in_ready == 4'b0 && out_valid == 4'b0, "halted PE neither takes nor offers tokens");
      n_before = snk_q[DIR_E].size();
      repeat (5) @(negedge clk);
      check(snk_q[DIR_E].size() == n_before, "no output while halted");
      for (int w = 0; w < STATE_WORDS; w++) begin st_addr = 3'(w); #1 saved[w] = st_rdata; end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      st_addr = 0; #1;
      check(st_rdata[0] == 0 && st_rdata[2] == 0 && st_rdata[4] == 0, "clear empties operand and result registers");
      for (int w = 0; w < STATE_WORDS; w++) begin
        @(negedge clk); st_we = 1; st_addr = 3'(w); st_wdata = saved[w];
      end
      @(negedge clk); st_we = 0;
      for (int w = 0; w < STATE_WORDS; w++) begin
        st_addr = 3'(w); #1 check(st_rdata == saved[w], $sformatf("state word %0d restored", w));
      end
      run = 1;
      wait_out(DIR_E, N / 3);
      check(snk_q[DIR_E].size() == N / 3, "resumed accumulation: token count");
      for (int g = 0; g < N / 3 && g < snk_q[DIR_E].size(); g++)
        check(snk_q[DIR_E][g].data == a[3*g] + a[3*g+1] + a[3*g+2],
              $sformatf("resumed ACC group %0d", g));
    end

    // 6) rate: no gaps, no back-pressure -> one result every two cycles
    gap_pct = 0; bp_pct = 0;
    setup(OP_XOR, SRC_N, SRC_RF1, 4'b1000, 0, 0, 0, 0, 32'h5a5a);
    for (int i = 0; i < 40; i++) src_q[DIR_N].push_back('{data: DATA_W'(i), pred: 1'b1});
    @(negedge clk);
    run = 1; t0 = $time;
    wait_out(DIR_W, 40);
    t1 = $time;
    check((t1 - t0) / 10 >= 80 && (t1 - t0) / 10 <= 84,
          $sformatf("rate: 40 results in %0d cycles", (t1 - t0) / 10));
    for (int i = 0; i < 40 && i < snk_q[DIR_W].size(); i++)
      check(snk_q[DIR_W][i].data == (i ^ 32'h5a5a), $sformatf("XOR %0d", i));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

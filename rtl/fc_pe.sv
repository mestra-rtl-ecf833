// fc_pe: function-compute PE of the CGRA mesh.
//
// The PE is a streaming pipeline stage. Its input crossbar takes operand tokens from the
// four mesh neighbours into operand registers A and B; the ALU combines them and the
// result goes to register R, from which the output crossbar offers the token to every
// direction set in the configuration (an eager fork: each neighbour takes it once, R is
// free when all have). An operand may also come from the local register file: RF1 and
// RF2 hold immediate constants, RF3 the previous result and RF0 the accumulator. With
// accumulation on, every result is written to RF0 and only each acc_len-th result is
// emitted, after which RF0 returns to its initial value (so a MAC is a MUL PE feeding an
// ADD PE that reads RF0 as operand B). Basic predication: compare ops put their result on
// the token's predicate bit, and a PE with pred_en forwards operand B in place of its
// result when A's predicate is 0.
//
// Interface: mesh links are valid/ready per direction; a transfer happens when both are
// high at a clock edge. `in_ready` depends only on registers (an operand register accepts
// a token only when empty), which keeps the mesh free of combinational loops; a PE
// therefore fires at most every second cycle on a steady stream. `run` low freezes the
// PE: no token is consumed or produced (HALT). Configuration words are written through
// cfg_we/cfg_addr; `clear` empties the pipeline registers. The state-critical registers
// (A, B, R with their valid and predicate bits, the fork progress, RF0..RF3 and the
// accumulation count) are read through st_addr/st_rdata and written through st_we for
// snapshot and restore (layout in mestra_pkg).
//
// From the paper: configuration memory, register file for constants and previous results,
// accumulation through register-file feedback, 32-bit integer add/multiply, shadow
// predicate, A/B/R as the state-critical elements. Own choices: op set and encodings,
// operand sources, the predication rule and the fork/handshake scheme.
// Tool notes: the predicate of operand B is not read (only A's predicate steers a
// predicated select). The reset also appears in the disable condition of an assertion,
// which lint reports as a net used both synchronously and asynchronously; it is not a
// circuit path.
module fc_pe
  import mestra_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  logic [3:0]        cfg_addr,
  input  logic [DATA_W-1:0] cfg_wdata,
  input  logic              clear,
  input  logic              run,
  // state read-back and restore
  input  logic [2:0]        st_addr,
  output logic [DATA_W-1:0] st_rdata,
  input  logic              st_we,
  input  logic [DATA_W-1:0] st_wdata,
  // mesh
  input  token_t            in_tok   [4],
  input  logic [3:0]        in_valid,
  output logic [3:0]        in_ready,
  output token_t            out_tok  [4],
  output logic [3:0]        out_valid,
  input  logic [3:0]        out_ready
);

  logic [DATA_W-1:0] cfg_mem [CFG_WORDS];
  fc_cfg_t           cfg;

  token_t            a_q, b_q, r_q;
  logic              a_v, b_v, r_v;
  logic [3:0]        sent_q;
  logic [DATA_W-1:0] rf [4];
  logic [15:0]       acc_cnt;

  assign cfg = fc_cfg_t'(cfg_mem[0]);

  // ---------------- operand selection ----------------
  logic   a_net, b_net, b_needed, active;
  token_t a_op, b_op;
  logic   a_ok, b_ok;

  function automatic logic [DATA_W-1:0] rf_read(input logic [2:0] src,
                                                input logic [DATA_W-1:0] r [4]);
    case (src)
      SRC_RF1: return r[1];
      SRC_RF2: return r[2];
      SRC_RF3: return r[3];
      default: return r[0];
    endcase
  endfunction

  always_comb begin
    active   = run && (cfg.op != OP_NOP);
    a_net    = (cfg.src_a < 3'd4);
    b_needed = (cfg.op != OP_PASS) || cfg.pred_en;
    b_net    = (cfg.src_b < 3'd4) && b_needed;
    a_op     = a_net ? a_q : '{data: rf_read(cfg.src_a, rf), pred: 1'b1};
    b_op     = b_net ? b_q : '{data: rf_read(cfg.src_b, rf), pred: 1'b1};
    a_ok     = !a_net || a_v;
    b_ok     = !b_net || b_v;
  end

  // ---------------- ALU ----------------
  token_t alu_out;
  always_comb begin
    alu_out.pred = a_op.pred;
    alu_out.data = a_op.data;
    unique case (cfg.op)
      OP_ADD:  alu_out.data = a_op.data + b_op.data;
      OP_SUB:  alu_out.data = a_op.data - b_op.data;
      OP_MUL:  alu_out.data = a_op.data * b_op.data;
      OP_AND:  alu_out.data = a_op.data & b_op.data;
      OP_OR:   alu_out.data = a_op.data | b_op.data;
      OP_XOR:  alu_out.data = a_op.data ^ b_op.data;
      OP_SHL:  alu_out.data = a_op.data << b_op.data[4:0];
      OP_SRA:  alu_out.data = $unsigned($signed(a_op.data) >>> b_op.data[4:0]);
      OP_MIN:  alu_out.data = ($signed(a_op.data) < $signed(b_op.data)) ? a_op.data : b_op.data;
      OP_MAX:  alu_out.data = ($signed(a_op.data) > $signed(b_op.data)) ? a_op.data : b_op.data;
      OP_LT:   alu_out.pred = ($signed(a_op.data) < $signed(b_op.data));
      OP_GT:   alu_out.pred = ($signed(a_op.data) > $signed(b_op.data));
      OP_EQ:   alu_out.pred = (a_op.data == b_op.data);
      default: ;
    endcase
    if (cfg.pred_en && !a_op.pred) alu_out = '{data: b_op.data, pred: 1'b0};
  end

  // ---------------- firing and output fork ----------------
  logic [3:0] sent_next;
  logic       r_drain, r_free, fire, emit;

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      out_tok[d]   = r_q;
      out_valid[d] = run && r_v && cfg.out_mask[d] && !sent_q[d];
    end
  end

  always_comb begin
    sent_next = sent_q | (out_valid & out_ready);
    r_drain   = r_v && ((sent_next & cfg.out_mask) == cfg.out_mask);
    r_free    = !r_v || r_drain;
    fire      = active && a_ok && b_ok && r_free;
    emit      = fire && (!cfg.acc_en || (32'(acc_cnt) + 32'd1 >= 32'(cfg.acc_len)));
  end

  // operand registers accept a token only when empty (registered ready)
  always_comb begin
    for (int p = 0; p < 4; p++)
      in_ready[p] = active && ((a_net && cfg.src_a[1:0] == p[1:0] && !a_v) ||
                               (b_net && cfg.src_b[1:0] == p[1:0] && !b_v));
  end

  // ---------------- registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < CFG_WORDS; w++) cfg_mem[w] <= '0;
      for (int k = 0; k < 4; k++) rf[k] <= '0;
      a_q <= '0; b_q <= '0; r_q <= '0;
      a_v <= 1'b0; b_v <= 1'b0; r_v <= 1'b0;
      sent_q  <= '0;
      acc_cnt <= '0;
    end else begin
      if (cfg_we) begin
        cfg_mem[cfg_addr] <= cfg_wdata;
        if (cfg_addr >= 4'd1 && cfg_addr <= 4'd4) rf[cfg_addr[1:0] - 2'd1] <= cfg_wdata;
      end
      if (clear) begin
        a_v <= 1'b0; b_v <= 1'b0; r_v <= 1'b0;
        sent_q  <= '0;
        acc_cnt <= '0;
      end else if (st_we) begin
        unique case (st_addr)
          3'd0: begin
            a_v <= st_wdata[0]; a_q.pred <= st_wdata[1];
            b_v <= st_wdata[2]; b_q.pred <= st_wdata[3];
            r_v <= st_wdata[4]; r_q.pred <= st_wdata[5];
            sent_q  <= st_wdata[9:6];
            acc_cnt <= st_wdata[31:16];
          end
          3'd1: a_q.data <= st_wdata;
          3'd2: b_q.data <= st_wdata;
          3'd3: r_q.data <= st_wdata;
          default: rf[st_addr[1:0]] <= st_wdata;
        endcase
      end else begin
        // operand capture
        for (int p = 0; p < 4; p++) begin
          if (in_valid[p] && in_ready[p]) begin
            if (a_net && cfg.src_a[1:0] == p[1:0] && !a_v) begin a_q <= in_tok[p]; a_v <= 1'b1; end
            if (b_net && cfg.src_b[1:0] == p[1:0] && !b_v) begin b_q <= in_tok[p]; b_v <= 1'b1; end
          end
        end
        if (fire) begin
          if (a_net) a_v <= 1'b0;
          if (b_net) b_v <= 1'b0;
          rf[3] <= alu_out.data;
          if (cfg.acc_en) begin
            if (emit) begin
              rf[0]   <= cfg_mem[1];
              acc_cnt <= '0;
            end else begin
              rf[0]   <= alu_out.data;
              acc_cnt <= acc_cnt + 16'd1;
            end
          end
        end
        // output register and fork bookkeeping
        if (emit) begin
          r_q    <= alu_out;
          r_v    <= 1'b1;
          sent_q <= '0;
        end else if (r_drain) begin
          r_v    <= 1'b0;
          sent_q <= '0;
        end else begin
          sent_q <= sent_next & cfg.out_mask;
        end
      end
    end
  end

  always_comb begin
    unique case (st_addr)
      3'd0: st_rdata = {acc_cnt, 6'd0, sent_q, r_q.pred, r_v, b_q.pred, b_v, a_q.pred, a_v};
      3'd1: st_rdata = a_q.data;
      3'd2: st_rdata = b_q.data;
      3'd3: st_rdata = r_q.data;
      default: st_rdata = rf[st_addr[1:0]];
    endcase
  end

  // A and B must not take the same mesh port (each token has one consumer).
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(a_net && b_net && cfg.src_a == cfg.src_b && active))
    else $error("fc_pe: operands A and B select the same input port");

endmodule

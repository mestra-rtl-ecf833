// ls_pe: load/store PE of the CGRA mesh.
//
// The LS PE moves data between the mesh and memory so that compute PEs never spend cycles
// on addresses. It holds two affine address generators, one for loads and one for
// stores, each driven by a three-level loop descriptor from the PE's configuration
// memory, and two memory master ports (load and store), so that loads and stores can be
// in flight at the same time (full duplex).
//
// Load path: while running and not finished, the PE reads the word at the load AGU's
// address, places it in its output register (predicate 1) and offers it to every
// direction in out_mask. The load AGU steps only when all those neighbours have taken
// the token, so its counters always name the oldest load not yet handed to the mesh.
// Store path: when a token is waiting on the selected input port, the PE issues a write
// to the store AGU's address and accepts the token in the same cycle; the store AGU
// steps when the write response returns, so its counters name the latest committed
// store. Each path keeps at most one request outstanding.
//
// HALT (`run` low): no new request is issued and no token is taken or offered; requests
// already issued complete. `quiet` is high when nothing is outstanding, `done` when every
// enabled path has finished and nothing is outstanding. The progression registers of
// both AGUs, the output register and its fork progress are read and restored through the
// st_* port (layout in mestra_pkg), so a token already handed to some but not all of its
// consumers is neither lost nor duplicated by a migration.
//
// From the paper: AGU per direction, three-level descriptors, full duplex, halt
// behaviour, AGU progression registers as the LS PE's snapshot state. Own choices: the
// memory port protocol (valid/ready request, one tagged response per request), one
// outstanding request per path, and commit points of the counters.
// Tool notes: the AGUs' loop-counter outputs (idx) are left unconnected because the LS
// PE needs only the address, done flag and count; the response tag and write flag are not
// read because each path has at most one request outstanding, and the store response
// carries no data (its valid alone commits the store). Config bits above 7 are reserved.
module ls_pe
  import mestra_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [3:0]        cfg_addr,
  input  logic [DATA_W-1:0] cfg_wdata,
  input  logic              clear,
  input  logic              run,
  input  logic [2:0]        st_addr,
  output logic [DATA_W-1:0] st_rdata,
  input  logic              st_we,
  input  logic [DATA_W-1:0] st_wdata,
  output logic              done,
  output logic              quiet,
  output logic [DATA_W-1:0] progress,   // committed stores
  // mesh
  input  token_t            in_tok   [4],
  input  logic [3:0]        in_valid,
  output logic [3:0]        in_ready,
  output token_t            out_tok  [4],
  output logic [3:0]        out_valid,
  input  logic [3:0]        out_ready,
  // memory: load port
  output logic              ld_req_valid,
  input  logic              ld_req_ready,
  output mem_req_t          ld_req,
  input  logic              ld_rsp_valid,
  input  mem_rsp_t          ld_rsp,
  // memory: store port
  output logic              sr_req_valid,
  input  logic              sr_req_ready,
  output mem_req_t          sr_req,
  input  logic              sr_rsp_valid,
  input  mem_rsp_t          sr_rsp
);

  logic [DATA_W-1:0] cfg_mem [CFG_WORDS];
  ls_cfg_t           cfg;
  agu_desc_t         ld_desc, sr_desc;

  assign cfg = ls_cfg_t'(cfg_mem[0]);

  function automatic agu_desc_t desc_at(input int unsigned w0, input logic [DATA_W-1:0] m [CFG_WORDS]);
    agu_desc_t d;
    d.base = m[w0];
    for (int k = 0; k < 3; k++) begin
      d.stride[k] = m[w0 + 1 + k];
      d.bound[k]  = m[w0 + 4 + k][ITER_W-1:0];
    end
    return d;
  endfunction

  assign ld_desc = desc_at(1, cfg_mem);
  assign sr_desc = desc_at(8, cfg_mem);

  // ---------------- AGUs ----------------
  logic [ADDR_W-1:0] ld_addr, sr_addr;
  logic              ld_done, sr_done, ld_step, sr_step;
  logic [DATA_W-1:0] ld_count, sr_count;

  logic [DATA_W-1:0] ld_st_rdata, sr_st_rdata;

  agu u_ld_agu (
    .clk, .rst_n, .clear, .step(ld_step), .desc(ld_desc),
    .st_we(st_we && st_addr[2:1] == 2'd0), .st_idx(st_addr[0]), .st_wdata,
    .st_rdata(ld_st_rdata), .addr(ld_addr), .done(ld_done), .idx(), .count(ld_count)
  );

  agu u_sr_agu (
    .clk, .rst_n, .clear, .step(sr_step), .desc(sr_desc),
    .st_we(st_we && st_addr[2:1] == 2'd2), .st_idx(st_addr[0]), .st_wdata,
    .st_rdata(sr_st_rdata), .addr(sr_addr), .done(sr_done), .idx(), .count(sr_count)
  );

  // ---------------- load path ----------------
  logic       ld_pend, ld_out_v;
  token_t     ld_out;
  logic [3:0] sent_q, sent_next;
  logic       ld_drain;

  assign ld_req_valid = run && cfg.ld_en && !ld_done && !ld_pend && !ld_out_v;
  assign ld_req       = '{we: 1'b0, addr: ld_addr, wdata: '0, tag: '0};

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      out_tok[d]   = ld_out;
      out_valid[d] = run && ld_out_v && cfg.out_mask[d] && !sent_q[d];
    end
  end

  always_comb begin
    sent_next = sent_q | (out_valid & out_ready);
    ld_drain  = ld_out_v && ((sent_next & cfg.out_mask) == cfg.out_mask);
    ld_step   = ld_drain;
  end

  // ---------------- store path ----------------
  logic sr_pend;

  always_comb begin
    sr_req_valid = run && cfg.st_en && !sr_done && !sr_pend && in_valid[cfg.st_src];
    sr_req       = '{we: 1'b1, addr: sr_addr, wdata: in_tok[cfg.st_src].data, tag: '0};
  end

  always_comb begin
    in_ready = '0;
    in_ready[cfg.st_src] = sr_req_valid && sr_req_ready;
  end

  assign sr_step = sr_pend && sr_rsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < CFG_WORDS; w++) cfg_mem[w] <= '0;
      ld_pend  <= 1'b0;
      ld_out_v <= 1'b0;
      ld_out   <= '0;
      sent_q   <= '0;
      sr_pend  <= 1'b0;
    end else begin
      if (cfg_we) cfg_mem[cfg_addr] <= cfg_wdata;
      if (ld_req_valid && ld_req_ready)   ld_pend <= 1'b1;
      else if (ld_pend && ld_rsp_valid)  ld_pend <= 1'b0;
      if (sr_req_valid && sr_req_ready)   sr_pend <= 1'b1;
      else if (sr_step)                   sr_pend <= 1'b0;
      if (clear) begin
        ld_out_v <= 1'b0;
        sent_q   <= '0;
      end else if (st_we) begin
        if (st_addr == 3'd2) ld_out.data <= st_wdata;
        if (st_addr == 3'd3) begin
          ld_out_v    <= st_wdata[0];
          ld_out.pred <= st_wdata[1];
          sent_q      <= st_wdata[5:2];
        end
      end else begin
        if (ld_pend && ld_rsp_valid) begin
          ld_out_v <= 1'b1;
          ld_out   <= '{data: ld_rsp.rdata, pred: 1'b1};
          sent_q   <= '0;
        end else if (ld_drain) begin
          ld_out_v <= 1'b0;
          sent_q   <= '0;
        end else begin
          sent_q <= sent_next & cfg.out_mask;
        end
      end
    end
  end

  assign quiet    = !ld_pend && !sr_pend;
  assign done     = quiet && (!cfg.ld_en || ld_done) && (!cfg.st_en || sr_done);
  assign progress = sr_count;

  always_comb begin
    unique case (st_addr)
      3'd0, 3'd1: st_rdata = ld_st_rdata;
      3'd2:       st_rdata = ld_out.data;
      3'd3:       st_rdata = DATA_W'({sent_q, ld_out.pred, ld_out_v});
      3'd4, 3'd5: st_rdata = sr_st_rdata;
      default:    st_rdata = '0;
    endcase
  end

  // A response only ever arrives for an outstanding request.
  assert property (@(posedge clk) disable iff (!rst_n) ld_rsp_valid |-> ld_pend)
    else $error("ls_pe: load response without request");
  assert property (@(posedge clk) disable iff (!rst_n) sr_rsp_valid |-> sr_pend)
    else $error("ls_pe: store response without request");

endmodule

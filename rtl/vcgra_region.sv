// vcgra_region: one virtualized CGRA region, the unit the runtime allocates.
//
// A region is a PE_ROWS x PE_COLS grid of PEs on an elastic 2D mesh. Load/store PEs sit
// in the middle row at the odd columns (for 3x5: row 1, columns 1 and 3, two LS and
// thirteen FC PEs); all other positions are function-compute PEs. Each mesh link is a
// token (32-bit data + predicate bit) with valid/ready, one link per direction between
// neighbours. Links that leave the grid become the region's edge ports, numbered
// N[0..C-1], E[0..R-1], S[0..C-1], W[0..R-1]; the fabric joins them to the next region
// when two regions are merged.
//
// Besides the PEs, the region has its FFA register file (host commands and status), its
// tightly coupled controller, a TCDM, and a memory router that lets the controller and
// the LS PEs' load and store ports reach the TCDM or the region's global-memory port.
// The controller addresses PEs row-major (index r*PE_COLS + c) on a broadcast
// configuration bus and a state read-back/restore bus, so a region's configuration image
// and snapshot are laid out PE by PE.
//
// From the paper: the 3x5 region with two LS PEs in the middle row, the mesh, the
// per-region FFA-RF, controller and TCDM, configuration and control distributed per
// region. Own choices: the rule placing LS PEs for other sizes, link and memory protocols.
module vcgra_region
  import mestra_pkg::*;
#(
  parameter int unsigned PE_ROWS    = 3,
  parameter int unsigned PE_COLS    = 5,
  parameter int unsigned TCDM_WORDS = 1024,
  parameter int unsigned REGION_ID  = 0,
  localparam int unsigned NEDGE     = 2 * (PE_ROWS + PE_COLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host register access to this region's FFA-RF
  input  logic              h_valid,
  input  logic              h_we,
  input  logic [3:0]        h_addr,
  input  logic [DATA_W-1:0] h_wdata,
  output logic [DATA_W-1:0] h_rdata,
  // global memory
  output logic              g_req_valid,
  input  logic              g_req_ready,
  output mem_req_t          g_req,
  input  logic              g_rsp_valid,
  input  mem_rsp_t          g_rsp,
  // mesh edge links
  input  token_t            edge_in_tok    [NEDGE],
  input  logic              edge_in_valid  [NEDGE],
  output logic              edge_in_ready  [NEDGE],
  output token_t            edge_out_tok   [NEDGE],
  output logic              edge_out_valid [NEDGE],
  input  logic              edge_out_ready [NEDGE],
  // observation
  output rstate_e           state
);

  localparam int unsigned NPE = PE_ROWS * PE_COLS;
  localparam int unsigned NLS = PE_COLS / 2;
  localparam int unsigned NM  = 1 + 2 * NLS;
  localparam int unsigned LSR = PE_ROWS / 2;

  function automatic bit is_ls(input int unsigned r, input int unsigned c);
    return (r == LSR) && (c % 2 == 1);
  endfunction

  // edge index helpers
  function automatic int unsigned e_n(input int unsigned c); return c;                         endfunction
  function automatic int unsigned e_e(input int unsigned r); return PE_COLS + r;               endfunction
  function automatic int unsigned e_s(input int unsigned c); return PE_COLS + PE_ROWS + c;     endfunction
  function automatic int unsigned e_w(input int unsigned r); return 2 * PE_COLS + PE_ROWS + r; endfunction

  // ---------------- controller and FFA-RF ----------------
  logic              cmd_valid, arg_restore, busy, illegal, available;
  cmd_e              cmd;
  logic [ADDR_W-1:0] arg_cfg_addr, arg_snap_addr;
  logic [15:0]       arg_kernel_id, kernel_id;
  logic [3:0]        region_id;
  logic              pe_clear, pe_run, cfg_we, st_we;
  logic [3:0]        cfg_pe, cfg_addr, st_pe;
  logic [2:0]        st_addr;
  logic [DATA_W-1:0] cfg_wdata, st_wdata, st_rdata, progress;
  logic              ls_done, ls_quiet;

  logic     m_req_valid [NM];
  logic     m_req_ready [NM];
  mem_req_t m_req       [NM];
  logic     m_rsp_valid [NM];
  mem_rsp_t m_rsp       [NM];

  ffa_rf u_ffa (
    .clk, .rst_n, .h_valid, .h_we, .h_addr, .h_wdata, .h_rdata,
    .cmd_valid, .cmd, .arg_cfg_addr, .arg_snap_addr, .arg_restore, .arg_kernel_id,
    .state, .busy, .illegal, .available, .region_id, .kernel_id, .progress
  );

  region_ctrl #(.NPE(NPE), .REGION_ID(REGION_ID)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd, .arg_cfg_addr, .arg_snap_addr, .arg_restore, .arg_kernel_id,
    .state, .busy, .illegal, .available, .kernel_id, .region_id,
    .pe_clear, .pe_run, .cfg_we, .cfg_pe, .cfg_addr, .cfg_wdata,
    .st_pe, .st_addr, .st_rdata, .st_we, .st_wdata,
    .ls_done, .ls_quiet,
    .req_valid(m_req_valid[0]), .req_ready(m_req_ready[0]), .req(m_req[0]),
    .rsp_valid(m_rsp_valid[0]), .rsp(m_rsp[0])
  );

  // ---------------- memory ----------------
  logic     t_req_valid, t_req_ready, t_rsp_valid;
  mem_req_t t_req;
  mem_rsp_t t_rsp;

  region_mem_router #(.NM(NM)) u_router (
    .clk, .rst_n,
    .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp,
    .t_req_valid, .t_req_ready, .t_req, .t_rsp_valid, .t_rsp,
    .g_req_valid, .g_req_ready, .g_req, .g_rsp_valid, .g_rsp
  );

  tcdm #(.WORDS(TCDM_WORDS)) u_tcdm (
    .clk, .rst_n,
    .req_valid(t_req_valid), .req_ready(t_req_ready), .req(t_req),
    .rsp_valid(t_rsp_valid), .rsp(t_rsp)
  );

  // ---------------- PE grid ----------------
  token_t            pe_in_tok    [NPE][4];
  logic [3:0]        pe_in_valid  [NPE];
  logic [3:0]        pe_in_ready  [NPE];
  token_t            pe_out_tok   [NPE][4];
  logic [3:0]        pe_out_valid [NPE];
  logic [3:0]        pe_out_ready [NPE];
  logic [DATA_W-1:0] pe_st_rdata  [NPE];
  logic [NLS-1:0]    lsd, lsq;
  logic [DATA_W-1:0] lsp [NLS];

  for (genvar r = 0; r < PE_ROWS; r++) begin : g_row
    for (genvar c = 0; c < PE_COLS; c++) begin : g_col
      localparam int unsigned P = r * PE_COLS + c;
      logic pe_cfg_we, pe_st_we;
      assign pe_cfg_we = cfg_we && (cfg_pe == 4'(P));
      assign pe_st_we  = st_we && (st_pe == 4'(P));
      if (is_ls(r, c)) begin : g_ls
        localparam int unsigned K = c / 2;
        ls_pe u_pe (
          .clk, .rst_n, .cfg_we(pe_cfg_we), .cfg_addr, .cfg_wdata, .clear(pe_clear),
          .run(pe_run), .st_addr, .st_rdata(pe_st_rdata[P]), .st_we(pe_st_we), .st_wdata,
          .done(lsd[K]), .quiet(lsq[K]), .progress(lsp[K]),
          .in_tok(pe_in_tok[P]), .in_valid(pe_in_valid[P]), .in_ready(pe_in_ready[P]),
          .out_tok(pe_out_tok[P]), .out_valid(pe_out_valid[P]), .out_ready(pe_out_ready[P]),
          .ld_req_valid(m_req_valid[1 + 2*K]), .ld_req_ready(m_req_ready[1 + 2*K]),
          .ld_req(m_req[1 + 2*K]), .ld_rsp_valid(m_rsp_valid[1 + 2*K]), .ld_rsp(m_rsp[1 + 2*K]),
          .sr_req_valid(m_req_valid[2 + 2*K]), .sr_req_ready(m_req_ready[2 + 2*K]),
          .sr_req(m_req[2 + 2*K]), .sr_rsp_valid(m_rsp_valid[2 + 2*K]), .sr_rsp(m_rsp[2 + 2*K])
        );
      end else begin : g_fc
        fc_pe u_pe (
          .clk, .rst_n, .cfg_we(pe_cfg_we), .cfg_addr, .cfg_wdata, .clear(pe_clear),
          .run(pe_run), .st_addr, .st_rdata(pe_st_rdata[P]), .st_we(pe_st_we), .st_wdata,
          .in_tok(pe_in_tok[P]), .in_valid(pe_in_valid[P]), .in_ready(pe_in_ready[P]),
          .out_tok(pe_out_tok[P]), .out_valid(pe_out_valid[P]), .out_ready(pe_out_ready[P])
        );
      end
    end
  end

  assign st_rdata = pe_st_rdata[st_pe];
  assign ls_done  = &lsd;
  assign ls_quiet = &lsq;

  always_comb begin
    progress = '0;
    for (int k = 0; k < int'(NLS); k++) progress = progress + lsp[k];
  end

  // mesh wiring, forward (token and valid): input d of a PE comes from output
  // opposite(d) of its neighbour
  always_comb begin
    for (int r = 0; r < int'(PE_ROWS); r++) begin
      for (int c = 0; c < int'(PE_COLS); c++) begin
        automatic int p = r * PE_COLS + c;
        // north
        if (r > 0) begin
          pe_in_tok[p][DIR_N]      = pe_out_tok[p - PE_COLS][DIR_S];
          pe_in_valid[p][DIR_N]    = pe_out_valid[p - PE_COLS][DIR_S];
        end else begin
          pe_in_tok[p][DIR_N]      = edge_in_tok[e_n(c)];
          pe_in_valid[p][DIR_N]    = edge_in_valid[e_n(c)];
        end
        // south
        if (r < int'(PE_ROWS) - 1) begin
          pe_in_tok[p][DIR_S]      = pe_out_tok[p + PE_COLS][DIR_N];
          pe_in_valid[p][DIR_S]    = pe_out_valid[p + PE_COLS][DIR_N];
        end else begin
          pe_in_tok[p][DIR_S]      = edge_in_tok[e_s(c)];
          pe_in_valid[p][DIR_S]    = edge_in_valid[e_s(c)];
        end
        // east
        if (c < int'(PE_COLS) - 1) begin
          pe_in_tok[p][DIR_E]      = pe_out_tok[p + 1][DIR_W];
          pe_in_valid[p][DIR_E]    = pe_out_valid[p + 1][DIR_W];
        end else begin
          pe_in_tok[p][DIR_E]      = edge_in_tok[e_e(r)];
          pe_in_valid[p][DIR_E]    = edge_in_valid[e_e(r)];
        end
        // west
        if (c > 0) begin
          pe_in_tok[p][DIR_W]      = pe_out_tok[p - 1][DIR_E];
          pe_in_valid[p][DIR_W]    = pe_out_valid[p - 1][DIR_E];
        end else begin
          pe_in_tok[p][DIR_W]      = edge_in_tok[e_w(r)];
          pe_in_valid[p][DIR_W]    = edge_in_valid[e_w(r)];
        end
      end
    end
    for (int c = 0; c < int'(PE_COLS); c++) begin
      edge_out_tok[e_n(c)]   = pe_out_tok[c][DIR_N];
      edge_out_valid[e_n(c)] = pe_out_valid[c][DIR_N];
      edge_out_tok[e_s(c)]   = pe_out_tok[(PE_ROWS - 1) * PE_COLS + c][DIR_S];
      edge_out_valid[e_s(c)] = pe_out_valid[(PE_ROWS - 1) * PE_COLS + c][DIR_S];
    end
    for (int r = 0; r < int'(PE_ROWS); r++) begin
      edge_out_tok[e_e(r)]   = pe_out_tok[r * PE_COLS + PE_COLS - 1][DIR_E];
      edge_out_valid[e_e(r)] = pe_out_valid[r * PE_COLS + PE_COLS - 1][DIR_E];
      edge_out_tok[e_w(r)]   = pe_out_tok[r * PE_COLS][DIR_W];
      edge_out_valid[e_w(r)] = pe_out_valid[r * PE_COLS][DIR_W];
    end
  end

  // mesh wiring, backward (ready)
  always_comb begin
    for (int r = 0; r < int'(PE_ROWS); r++) begin
      for (int c = 0; c < int'(PE_COLS); c++) begin
        automatic int p = r * PE_COLS + c;
        // north
        if (r > 0) begin
          pe_out_ready[p][DIR_N]   = pe_in_ready[p - PE_COLS][DIR_S];
        end else begin
          pe_out_ready[p][DIR_N]   = edge_out_ready[e_n(c)];
        end
        // south
        if (r < int'(PE_ROWS) - 1) begin
          pe_out_ready[p][DIR_S]   = pe_in_ready[p + PE_COLS][DIR_N];
        end else begin
          pe_out_ready[p][DIR_S]   = edge_out_ready[e_s(c)];
        end
        // east
        if (c < int'(PE_COLS) - 1) begin
          pe_out_ready[p][DIR_E]   = pe_in_ready[p + 1][DIR_W];
        end else begin
          pe_out_ready[p][DIR_E]   = edge_out_ready[e_e(r)];
        end
        // west
        if (c > 0) begin
          pe_out_ready[p][DIR_W]   = pe_in_ready[p - 1][DIR_E];
        end else begin
          pe_out_ready[p][DIR_W]   = edge_out_ready[e_w(r)];
        end
      end
    end
    for (int c = 0; c < int'(PE_COLS); c++) begin
      edge_in_ready[e_n(c)]  = pe_in_ready[c][DIR_N];
      edge_in_ready[e_s(c)]  = pe_in_ready[(PE_ROWS - 1) * PE_COLS + c][DIR_S];
    end
    for (int r = 0; r < int'(PE_ROWS); r++) begin
      edge_in_ready[e_e(r)]  = pe_in_ready[r * PE_COLS + PE_COLS - 1][DIR_E];
      edge_in_ready[e_w(r)]  = pe_in_ready[r * PE_COLS][DIR_W];
    end
  end

endmodule

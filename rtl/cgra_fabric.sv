// cgra_fabric: the array of vCGRA regions and the links between them.
//
// RR x RC regions (4 x 4 of 3 x 5 PEs, 240 PEs, by default) are placed on a grid; region
// q = row*RC + col. Each region's mesh edge links face the matching links of its
// neighbour. A boundary between two adjacent regions is closed unless its merge bit is
// set: a closed boundary presents valid = 0 and ready = 0 on both sides, so no token can
// leave a region. Setting merge bits joins adjacent regions into one larger rectangular
// region whose mesh is continuous across the boundary; each joined region is still
// configured and started through its own controller. The outer edges of the array are
// always closed. Configuration, control and memory access stay per region, so one region
// can be reconfigured while the others run.
//
// From the paper: k homogeneous regions in a 4x4 grid, merging of adjacent regions into
// rectangles, distributed per-region configuration and control. Own choice: merging as
// per-boundary link switches set by the host.
module cgra_fabric
  import mestra_pkg::*;
#(
  parameter int unsigned RR         = 4,
  parameter int unsigned RC         = 4,
  parameter int unsigned PE_ROWS    = 3,
  parameter int unsigned PE_COLS    = 5,
  parameter int unsigned TCDM_WORDS = 1024,
  localparam int unsigned NR = RR * RC,
  localparam int unsigned NH = (RC > 1) ? RR * (RC - 1) : 1,
  localparam int unsigned NV = (RR > 1) ? (RR - 1) * RC : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rh_valid [NR],
  input  logic              rh_we,
  input  logic [3:0]        rh_addr,
  input  logic [DATA_W-1:0] rh_wdata,
  output logic [DATA_W-1:0] rh_rdata [NR],
  output rstate_e           r_state  [NR],
  input  logic [NH-1:0]     merge_h,
  input  logic [NV-1:0]     merge_v,
  output logic              r_req_valid [NR],
  input  logic              r_req_ready [NR],
  output mem_req_t          r_req       [NR],
  input  logic              r_rsp_valid [NR],
  input  mem_rsp_t          r_rsp       [NR]
);

  localparam int unsigned NEDGE = 2 * (PE_ROWS + PE_COLS);
  localparam int unsigned EN = 0;                          // first north edge link
  localparam int unsigned EE = PE_COLS;                    // first east edge link
  localparam int unsigned ES = PE_COLS + PE_ROWS;          // first south edge link
  localparam int unsigned EW = 2 * PE_COLS + PE_ROWS;      // first west edge link

  token_t e_in_tok    [NR][NEDGE];
  logic   e_in_valid  [NR][NEDGE];
  logic   e_in_ready  [NR][NEDGE];
  token_t e_out_tok   [NR][NEDGE];
  logic   e_out_valid [NR][NEDGE];
  logic   e_out_ready [NR][NEDGE];

  for (genvar q = 0; q < NR; q++) begin : g_region
    vcgra_region #(
      .PE_ROWS(PE_ROWS), .PE_COLS(PE_COLS), .TCDM_WORDS(TCDM_WORDS), .REGION_ID(q)
    ) u_region (
      .clk, .rst_n,
      .h_valid(rh_valid[q]), .h_we(rh_we), .h_addr(rh_addr), .h_wdata(rh_wdata),
      .h_rdata(rh_rdata[q]),
      .g_req_valid(r_req_valid[q]), .g_req_ready(r_req_ready[q]), .g_req(r_req[q]),
      .g_rsp_valid(r_rsp_valid[q]), .g_rsp(r_rsp[q]),
      .edge_in_tok(e_in_tok[q]), .edge_in_valid(e_in_valid[q]), .edge_in_ready(e_in_ready[q]),
      .edge_out_tok(e_out_tok[q]), .edge_out_valid(e_out_valid[q]),
      .edge_out_ready(e_out_ready[q]),
      .state(r_state[q])
    );
  end

  // is the boundary on side d of region (r,c) open?
  function automatic logic open_side(input int r, input int c, input int d,
                                     input logic [NH-1:0] mh, input logic [NV-1:0] mv);
    case (d)
      0:       return (r > 0)           && mv[(r - 1) * RC + c];
      2:       return (r < int'(RR) - 1) && mv[r * RC + c];
      1:       return (c < int'(RC) - 1) && mh[r * (RC - 1) + c];
      default: return (c > 0)           && mh[r * (RC - 1) + c - 1];
    endcase
  endfunction

  // forward: tokens and valids
  always_comb begin
    for (int r = 0; r < int'(RR); r++) begin
      for (int c = 0; c < int'(RC); c++) begin
        automatic int q = r * RC + c;
        for (int k = 0; k < int'(PE_COLS); k++) begin
          e_in_tok[q][EN + k]   = '0;
          e_in_valid[q][EN + k] = 1'b0;
          e_in_tok[q][ES + k]   = '0;
          e_in_valid[q][ES + k] = 1'b0;
          if (open_side(r, c, 0, merge_h, merge_v)) begin
            e_in_tok[q][EN + k]   = e_out_tok[q - RC][ES + k];
            e_in_valid[q][EN + k] = e_out_valid[q - RC][ES + k];
          end
          if (open_side(r, c, 2, merge_h, merge_v)) begin
            e_in_tok[q][ES + k]   = e_out_tok[q + RC][EN + k];
            e_in_valid[q][ES + k] = e_out_valid[q + RC][EN + k];
          end
        end
        for (int k = 0; k < int'(PE_ROWS); k++) begin
          e_in_tok[q][EE + k]   = '0;
          e_in_valid[q][EE + k] = 1'b0;
          e_in_tok[q][EW + k]   = '0;
          e_in_valid[q][EW + k] = 1'b0;
          if (open_side(r, c, 1, merge_h, merge_v)) begin
            e_in_tok[q][EE + k]   = e_out_tok[q + 1][EW + k];
            e_in_valid[q][EE + k] = e_out_valid[q + 1][EW + k];
          end
          if (open_side(r, c, 3, merge_h, merge_v)) begin
            e_in_tok[q][EW + k]   = e_out_tok[q - 1][EE + k];
            e_in_valid[q][EW + k] = e_out_valid[q - 1][EE + k];
          end
        end
      end
    end
  end

  // backward: readies
  always_comb begin
    for (int r = 0; r < int'(RR); r++) begin
      for (int c = 0; c < int'(RC); c++) begin
        automatic int q = r * RC + c;
        for (int k = 0; k < int'(PE_COLS); k++) begin
          e_out_ready[q][EN + k] = open_side(r, c, 0, merge_h, merge_v) && e_in_ready[q - RC][ES + k];
          e_out_ready[q][ES + k] = open_side(r, c, 2, merge_h, merge_v) && e_in_ready[q + RC][EN + k];
        end
        for (int k = 0; k < int'(PE_ROWS); k++) begin
          e_out_ready[q][EE + k] = open_side(r, c, 1, merge_h, merge_v) && e_in_ready[q + 1][EW + k];
          e_out_ready[q][EW + k] = open_side(r, c, 3, merge_h, merge_v) && e_in_ready[q - 1][EE + k];
        end
      end
    end
  end

endmodule

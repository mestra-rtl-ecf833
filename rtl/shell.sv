// shell: host-facing side of the accelerator.
//
// The shell decodes the host's register accesses (arriving over PCIe through the DMA
// bridge) and forwards them to the FFA register file of the addressed region, holds the
// region-merge registers that open mesh links between adjacent regions, exposes a map of
// free regions for the hypervisor's placement scan, and arbitrates the regions' accesses
// to the global-memory buffer in DDR.
//
// Host address map (word registers, 9-bit address):
//   0x000-0x0FF  region registers: [7:4] region index (row-major), [3:0] FFA-RF register
//   0x100 MERGE_H  RW: bit r*(RC-1)+b joins region (r,b) with (r,b+1)
//   0x101 MERGE_V  RW: bit b*RC+c   joins region (b,c) with (b+1,c)
//   0x102 INFO     R:  [7:0] region rows, [15:8] region columns
//   0x103 FREE     R:  bit q set when region q is IDLE (the runtime's resource map)
// Register reads are combinational, writes take effect at the clock edge.
//
// The paper's shell provides host control of the regions, data exchange and DDR; the
// XDMA core and DDR controller it uses are vendor IP and lie outside this module. The
// address map and the merge registers are this design's own.
module shell
  import mestra_pkg::*;
#(
  parameter int unsigned RR = 4,
  parameter int unsigned RC = 4,
  localparam int unsigned NR = RR * RC,
  localparam int unsigned NH = (RC > 1) ? RR * (RC - 1) : 1,
  localparam int unsigned NV = (RR > 1) ? (RR - 1) * RC : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // host register port
  input  logic              h_valid,
  input  logic              h_we,
  input  logic [8:0]        h_addr,
  input  logic [DATA_W-1:0] h_wdata,
  output logic [DATA_W-1:0] h_rdata,
  // per-region register ports
  output logic              rh_valid [NR],
  output logic              rh_we,
  output logic [3:0]        rh_addr,
  output logic [DATA_W-1:0] rh_wdata,
  input  logic [DATA_W-1:0] rh_rdata [NR],
  input  rstate_e           r_state  [NR],
  // merge control to the fabric
  output logic [NH-1:0]     merge_h,
  output logic [NV-1:0]     merge_v,
  // per-region global-memory ports
  input  logic              r_req_valid [NR],
  output logic              r_req_ready [NR],
  input  mem_req_t          r_req       [NR],
  output logic              r_rsp_valid [NR],
  output mem_rsp_t          r_rsp       [NR],
  // DDR port
  output logic              d_req_valid,
  input  logic              d_req_ready,
  output mem_req_t          d_req,
  input  logic              d_rsp_valid,
  input  mem_rsp_t          d_rsp
);

  logic [NH-1:0] mh_q;
  logic [NV-1:0] mv_q;
  logic          shell_sel;
  logic [3:0]    rsel;
  logic [NR-1:0] free_map;

  assign shell_sel = h_addr[8];
  assign rsel      = h_addr[7:4];
  assign rh_we     = h_we;
  assign rh_addr   = h_addr[3:0];
  assign rh_wdata  = h_wdata;

  always_comb begin
    for (int q = 0; q < NR; q++) begin
      rh_valid[q] = h_valid && !shell_sel && (rsel == 4'(q));
      free_map[q] = (r_state[q] == RS_IDLE);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mh_q <= '0;
      mv_q <= '0;
    end else if (h_valid && h_we && shell_sel) begin
      if (h_addr[3:0] == 4'd0) mh_q <= h_wdata[NH-1:0];
      if (h_addr[3:0] == 4'd1) mv_q <= h_wdata[NV-1:0];
    end
  end

  assign merge_h = mh_q;
  assign merge_v = mv_q;

  always_comb begin
    h_rdata = '0;
    if (shell_sel) begin
      unique case (h_addr[3:0])
        4'd0:    h_rdata = DATA_W'(mh_q);
        4'd1:    h_rdata = DATA_W'(mv_q);
        4'd2:    h_rdata = {16'd0, 8'(RC), 8'(RR)};
        4'd3:    h_rdata = DATA_W'(free_map);
        default: h_rdata = '0;
      endcase
    end else if (int'(rsel) < int'(NR)) begin
      h_rdata = rh_rdata[rsel];
    end
  end

  shell_mem_arbiter #(.NR(NR)) u_mem_arb (
    .clk, .rst_n,
    .r_req_valid, .r_req_ready, .r_req, .r_rsp_valid, .r_rsp,
    .d_req_valid, .d_req_ready, .d_req, .d_rsp_valid, .d_rsp
  );

endmodule

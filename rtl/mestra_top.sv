// mestra_top: the virtualized CGRA accelerator, shell plus region fabric.
//
// A 4x4 array of 3x5-PE regions (240 PEs) that several tenants share: the host runtime
// allocates free regions (joining adjacent ones for larger kernels), configures and
// starts each through its region's command registers, and can halt a running kernel,
// snapshot its state to global memory and resume it in another region (stateful
// migration) or simply restart it elsewhere (stateless migration).
//
// Ports: the host register port (as delivered by the PCIe DMA bridge; address map in
// `shell`) and one global-memory port towards the DDR controller (valid/ready request,
// tagged response, any latency). Both the bridge and the DDR controller are external.
// Tool note: the reset is also used in the disable condition of assertions in the PEs;
// lint reports this as a net used both synchronously and asynchronously. Assertions are not
// synthesized, so no circuit path is involved.
module mestra_top
  import mestra_pkg::*;
#(
  parameter int unsigned RR         = 4,
  parameter int unsigned RC         = 4,
  parameter int unsigned PE_ROWS    = 3,
  parameter int unsigned PE_COLS    = 5,
  parameter int unsigned TCDM_WORDS = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // host register port
  input  logic              h_valid,
  input  logic              h_we,
  input  logic [8:0]        h_addr,
  input  logic [DATA_W-1:0] h_wdata,
  output logic [DATA_W-1:0] h_rdata,
  // global memory (DDR) port
  output logic              ddr_req_valid,
  input  logic              ddr_req_ready,
  output mem_req_t          ddr_req,
  input  logic              ddr_rsp_valid,
  input  mem_rsp_t          ddr_rsp
);

  localparam int unsigned NR = RR * RC;
  localparam int unsigned NH = (RC > 1) ? RR * (RC - 1) : 1;
  localparam int unsigned NV = (RR > 1) ? (RR - 1) * RC : 1;

  logic              rh_valid [NR];
  logic              rh_we;
  logic [3:0]        rh_addr;
  logic [DATA_W-1:0] rh_wdata;
  logic [DATA_W-1:0] rh_rdata [NR];
  rstate_e           r_state  [NR];
  logic [NH-1:0]     merge_h;
  logic [NV-1:0]     merge_v;
  logic              r_req_valid [NR];
  logic              r_req_ready [NR];
  mem_req_t          r_req       [NR];
  logic              r_rsp_valid [NR];
  mem_rsp_t          r_rsp       [NR];

  shell #(.RR(RR), .RC(RC)) u_shell (
    .clk, .rst_n,
    .h_valid, .h_we, .h_addr, .h_wdata, .h_rdata,
    .rh_valid, .rh_we, .rh_addr, .rh_wdata, .rh_rdata, .r_state,
    .merge_h, .merge_v,
    .r_req_valid, .r_req_ready, .r_req, .r_rsp_valid, .r_rsp,
    .d_req_valid(ddr_req_valid), .d_req_ready(ddr_req_ready), .d_req(ddr_req),
    .d_rsp_valid(ddr_rsp_valid), .d_rsp(ddr_rsp)
  );

  cgra_fabric #(
    .RR(RR), .RC(RC), .PE_ROWS(PE_ROWS), .PE_COLS(PE_COLS), .TCDM_WORDS(TCDM_WORDS)
  ) u_fabric (
    .clk, .rst_n,
    .rh_valid, .rh_we, .rh_addr, .rh_wdata, .rh_rdata, .r_state,
    .merge_h, .merge_v,
    .r_req_valid, .r_req_ready, .r_req, .r_rsp_valid, .r_rsp
  );

endmodule

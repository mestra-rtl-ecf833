// region_mem_router: memory interconnect of one vCGRA region.
//
// The region's memory masters (the controller and the load and store ports of each LS
// PE) share two targets: the region's TCDM and the region's port to global memory. A
// round-robin arbiter picks one requesting master per cycle; bit TCDM_SEL_BIT of the word
// address selects the target, and the transfer happens when that target is ready. The
// router writes the master's index into the low tag bits, so responses return to their
// master by tag; because every master keeps at most one request outstanding, a TCDM
// response and a global response arriving in the same cycle always belong to different
// masters and never collide.
//
// The paper shows an AXI4 port on each LS PE and names the TCDM and the global DDR buffer;
// this simple valid/ready request / tagged response protocol, one request per cycle and
// the address-bit target select are this design's own.
module region_mem_router
  import mestra_pkg::*;
#(
  parameter int unsigned NM = 5
) (
  input  logic     clk,
  input  logic     rst_n,
  // masters
  input  logic     m_req_valid [NM],
  output logic     m_req_ready [NM],
  input  mem_req_t m_req       [NM],
  output logic     m_rsp_valid [NM],
  output mem_rsp_t m_rsp       [NM],
  // TCDM target
  output logic     t_req_valid,
  input  logic     t_req_ready,
  output mem_req_t t_req,
  input  logic     t_rsp_valid,
  input  mem_rsp_t t_rsp,
  // global-memory target
  output logic     g_req_valid,
  input  logic     g_req_ready,
  output mem_req_t g_req,
  input  logic     g_rsp_valid,
  input  mem_rsp_t g_rsp
);

  localparam int unsigned IW = $clog2(NM);

  logic [NM-1:0] req_vec, gnt;
  logic [IW-1:0] gidx;
  logic          any, to_tcdm, xfer;
  mem_req_t      sel;

  always_comb begin
    for (int m = 0; m < NM; m++) req_vec[m] = m_req_valid[m];
  end

  rr_arbiter #(.N(NM)) u_arb (
    .clk, .rst_n, .req(req_vec), .advance(xfer), .gnt, .gnt_idx(gidx), .any
  );

  always_comb begin
    sel         = m_req[gidx];
    sel.tag     = TAG_W'(gidx);
    to_tcdm     = sel.addr[TCDM_SEL_BIT];
    t_req       = sel;
    g_req       = sel;
    t_req_valid = any && to_tcdm;
    g_req_valid = any && !to_tcdm;
  end

  assign xfer = any && (to_tcdm ? t_req_ready : g_req_ready);

  always_comb begin
    for (int m = 0; m < NM; m++) m_req_ready[m] = xfer && gnt[m];
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_rsp_valid[m] = (t_rsp_valid && t_rsp.tag[3:0] == 4'(m)) ||
                       (g_rsp_valid && g_rsp.tag[3:0] == 4'(m));
      m_rsp[m]       = (t_rsp_valid && t_rsp.tag[3:0] == 4'(m)) ? t_rsp : g_rsp;
    end
  end

  // Two responses in one cycle must go to different masters.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (t_rsp_valid && g_rsp_valid) |-> (t_rsp.tag[3:0] != g_rsp.tag[3:0]))
    else $error("region_mem_router: response collision");

endmodule

// shell_mem_arbiter: shares the global-memory (DDR) port among the regions.
//
// Every region has one global-memory port. A round-robin arbiter forwards one region's
// request per cycle to the DDR port when it is ready, writing the region's index into
// tag bits [7:4] (the region's router has already put the requesting master in bits
// [3:0]). Responses, which the memory returns with the request's tag, go back to the
// region named in tag[7:4]. The memory may answer in any order and at any latency.
//
// The paper puts a single global buffer in on-board DDR, shared by all regions, and
// reports that co-running kernels contend for its bandwidth; the arbitration scheme is
// this design's own.
module shell_mem_arbiter
  import mestra_pkg::*;
#(
  parameter int unsigned NR = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     r_req_valid [NR],
  output logic     r_req_ready [NR],
  input  mem_req_t r_req       [NR],
  output logic     r_rsp_valid [NR],
  output mem_rsp_t r_rsp       [NR],
  output logic     d_req_valid,
  input  logic     d_req_ready,
  output mem_req_t d_req,
  input  logic     d_rsp_valid,
  input  mem_rsp_t d_rsp
);

  localparam int unsigned IW = (NR > 1) ? $clog2(NR) : 1;

  logic [NR-1:0] req_vec, gnt;
  logic [IW-1:0] gidx;
  logic          any;

  always_comb begin
    for (int k = 0; k < NR; k++) req_vec[k] = r_req_valid[k];
  end

  rr_arbiter #(.N(NR)) u_arb (
    .clk, .rst_n, .req(req_vec), .advance(d_req_ready), .gnt, .gnt_idx(gidx), .any
  );

  always_comb begin
    d_req_valid  = any;
    d_req        = r_req[gidx];
    d_req.tag    = {4'(gidx), r_req[gidx].tag[3:0]};
  end

  always_comb begin
    for (int k = 0; k < NR; k++) begin
      r_req_ready[k] = d_req_ready && gnt[k];
      r_rsp_valid[k] = d_rsp_valid && (d_rsp.tag[7:4] == 4'(k));
      r_rsp[k]       = d_rsp;
    end
  end

endmodule

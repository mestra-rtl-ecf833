// tcdm: tightly coupled data memory of one vCGRA region.
//
// A single-port word memory, written as an array so that synthesis can map it to block
// RAM. A request is accepted every cycle (req_ready is always high); one cycle later the
// response carries the read word (or an acknowledge for a write) and the request's tag.
// The controller preloads it at CONFIGURE, saves it at SNAPSHOT and reloads it at a
// stateful restore; LS PEs reach it through the region's memory router.
//
// The paper names the TCDM and the migration costs of moving its contents; its size,
// port count and timing are this design's choices (default 1024 words of 32 bits).
module tcdm
  import mestra_pkg::*;
#(
  parameter int unsigned WORDS = 1024
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [DATA_W-1:0] mem [WORDS];
  logic [AW-1:0]     a;

  assign a         = req.addr[AW-1:0];
  assign req_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (req_valid && req.we) mem[a] <= req.wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      rsp_valid <= req_valid;
      if (req_valid) begin
        rsp.we    <= req.we;
        rsp.tag   <= req.tag;
        rsp.rdata <= req.we ? req.wdata : mem[a];
      end
    end
  end

endmodule

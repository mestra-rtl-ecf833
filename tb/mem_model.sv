// mem_model: behavioural word memory for testbenches (stands in for the DDR buffer).
// Accepts a request when req_ready is high (randomly low BP_PCT percent of the time),
// answers every request in order after LAT cycles plus a random 0..JIT extra, with the
// request's tag. Word address bits above AW are ignored. `mem` may be read and written
// hierarchically by the testbench.
module mem_model
  import mestra_pkg::*;
#(
  parameter int unsigned AW     = 16,
  parameter int unsigned LAT    = 4,
  parameter int unsigned JIT    = 3,
  parameter int unsigned BP_PCT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);
  logic [DATA_W-1:0] mem [2**AW];
  typedef struct { mem_rsp_t r; longint due; } pend_t;
  pend_t  q [$];
  longint cyc = 0;
  int unsigned n_req = 0;

  initial for (int i = 0; i < 2**AW; i++) mem[i] = '0;

  always @(negedge clk) req_ready = ($urandom % 100) >= BP_PCT;

  always @(posedge clk) begin
    cyc++;
    rsp_valid <= 1'b0;
    if (rst_n) begin
      if (q.size() > 0 && q[0].due <= cyc) begin
        rsp_valid <= 1'b1;
        rsp       <= q[0].r;
        void'(q.pop_front());
      end
      if (req_valid && req_ready) begin
        pend_t p;
        n_req++;
        p.r.we    = req.we;
        p.r.tag   = req.tag;
        p.r.rdata = mem[req.addr[AW-1:0]];
        if (req.we) mem[req.addr[AW-1:0]] = req.wdata;
        p.due = cyc + LAT + ($urandom % (JIT + 1));
        if (q.size() > 0 && p.due < q[$].due) p.due = q[$].due;
        q.push_back(p);
      end
    end
  end
endmodule

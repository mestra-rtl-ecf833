// rr_arbiter: round-robin arbiter.
//
// Grants one of N requesters (one-hot `gnt`, index `gnt_idx`) combinationally. The search
// starts one past the requester granted last; the pointer moves only when `advance` is
// high (the granted transfer took place), so a grant stays put while the target stalls.
// Tool note: only the low bits of the loop index used for the wrap-around search are read.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx,
  output logic                 any
);

  logic [$clog2(N)-1:0] last_q;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    any     = 1'b0;
    for (int k = 1; k <= int'(N); k++) begin
      int unsigned c;
      c = (int'(last_q) + k) % N;
      if (!any && req[c]) begin
        any     = 1'b1;
        gnt[c]  = 1'b1;
        gnt_idx = c[$clog2(N)-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              last_q <= $clog2(N)'(N - 1);
    else if (advance && any) last_q <= gnt_idx;
  end

endmodule

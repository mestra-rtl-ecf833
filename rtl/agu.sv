// agu: three-level affine address generator of a load/store PE.
//
// A loop descriptor (base, one stride and one bound per loop level) makes the generator
// walk a loop nest of up to three levels; dimension 0 is the innermost. The current
// address is base + i0*stride0 + i1*stride1 + i2*stride2, computed combinationally from
// the loop counters. A pulse on `step` commits the current element and advances the
// counters; after the last element `done` rises and further steps are ignored. The
// counters plus `done` are the progression register that a snapshot reads (`st_rdata`)
// and that a restore writes back (`st_we`): word 0 = {i1, i0}, word 1 = {done, i2}
// (16-bit fields, done in bit 16).
// `clear` returns to the first element. A bound of 0 counts as 1.
//
// From the paper: three nested loop levels, base address, per-dimension stride,
// iteration bounds, progression registers exposed for snapshots. Own choices: counter
// width, computing the address by multiplication rather than by running sums (so a
// restored counter set yields its address at once), and `count`, the number of
// elements already committed, used as the iteration progress reported to the host.
module agu
  import mestra_pkg::*;
#(
  parameter int unsigned IW = ITER_W   // at most 16 (two counters share a state word)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              step,
  input  agu_desc_t         desc,
  input  logic              st_we,
  input  logic              st_idx,
  input  logic [DATA_W-1:0] st_wdata,
  output logic [DATA_W-1:0] st_rdata,
  output logic [ADDR_W-1:0] addr,
  output logic              done,
  output logic [IW-1:0]     idx [3],
  output logic [DATA_W-1:0] count
);

  logic [IW-1:0] bnd [3];
  logic [IW-1:0] i_q [3];
  logic          done_q;

  always_comb begin
    for (int d = 0; d < 3; d++) bnd[d] = (desc.bound[d] == '0) ? IW'(1) : desc.bound[d][IW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < 3; d++) i_q[d] <= '0;
      done_q <= 1'b0;
    end else if (clear) begin
      for (int d = 0; d < 3; d++) i_q[d] <= '0;
      done_q <= 1'b0;
    end else if (st_we) begin
      if (st_idx) begin
        i_q[2] <= st_wdata[IW-1:0];
        done_q <= st_wdata[16];
      end else begin
        i_q[0] <= st_wdata[IW-1:0];
        i_q[1] <= st_wdata[16 +: IW];
      end
    end else if (step && !done_q) begin
      if (i_q[0] + IW'(1) < bnd[0]) begin
        i_q[0] <= i_q[0] + IW'(1);
      end else begin
        i_q[0] <= '0;
        if (i_q[1] + IW'(1) < bnd[1]) begin
          i_q[1] <= i_q[1] + IW'(1);
        end else begin
          i_q[1] <= '0;
          if (i_q[2] + IW'(1) < bnd[2]) i_q[2] <= i_q[2] + IW'(1);
          else begin
            i_q[2] <= '0;
            done_q <= 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    addr = desc.base
         + ADDR_W'(i_q[0]) * desc.stride[0]
         + ADDR_W'(i_q[1]) * desc.stride[1]
         + ADDR_W'(i_q[2]) * desc.stride[2];
    if (done_q)
      count = DATA_W'(bnd[0]) * DATA_W'(bnd[1]) * DATA_W'(bnd[2]);
    else
      count = (DATA_W'(i_q[2]) * DATA_W'(bnd[1]) + DATA_W'(i_q[1])) * DATA_W'(bnd[0])
            + DATA_W'(i_q[0]);
  end

  assign st_rdata = st_idx ? DATA_W'({15'd0, done_q, 16'(i_q[2])})
                           : {16'(i_q[1]), 16'(i_q[0])};
  assign done = done_q;
  assign idx  = i_q;

endmodule

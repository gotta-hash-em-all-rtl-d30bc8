// fast_div: division of a field element by one of the fixed Bars bases s_i,
// without a divider.
//
// The reciprocals D/s_i with D = 2^508 are precomputed (rounded up) into a
// lookup table indexed by i. Then
//   q = (x * ceil(2^508 / s_i)) >> 508,   r = x - q * s_i
// which is exact for every x < 2^254 because the rounding error of the
// reciprocal stays below 2^-254. Two pipeline stages:
//   stage 1  q = high bits of x * recip[i]
//   stage 2  r = x - q * s_i
// Interface: in_valid/x/idx in, out_valid/q/r out two cycles later, one
// division per cycle. The method and the 508-bit scale are the paper's; the
// pipeline cut is this design's.
module fast_div
  import hash_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  fe_t        x,
  input  logic [4:0] idx,
  output logic       out_valid,
  output fe_t        q,
  output chunk_t     r
);
  logic [FW+RW-1:0] prod;
  fe_t              x1, q1;
  logic [4:0]       idx1;
  logic             v1;
  logic [FW-1:0]    rem;

  always_comb begin
    prod = (FW+RW)'(x) * (FW+RW)'(RC_RECIP[idx]);
    rem  = x1 - FW'(q1 * FW'(RC_S[idx1]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    x1   <= x;
    idx1 <= idx;
    q1   <= FW'(prod[FW+RW-1:DIV_K]);
    q    <= q1;
    r    <= chunk_t'(rem);
  end

  a_rem: assert property (@(posedge clk) disable iff (!rst_n) v1 |-> rem < FW'(RC_S[idx1]))
    else $error("fast_div: remainder out of range");
endmodule

// modmul: pipelined modular multiplier over the BN254 scalar field.
//
// y = a * b mod p, one new operation per cycle, fixed latency of
// MODMUL_LAT = 4 cycles from the in_valid cycle to the out_valid cycle.
// Reduction is Barrett's method with mu = floor(2^508 / p):
//   stage 1  x  = a * b                               (508 bits)
//   stage 2  q  = ((x >> 253) * mu) >> 255            (quotient estimate)
//   stage 3  r  = x - q * p  (low 256 bits, r < 3p)
//   stage 4  y  = r reduced by at most two subtractions of p
// A tag of TAGW bits travels with each operation so that the engines that
// interleave a batch through the pipeline know where to write each result.
// The paper reuses an existing pipelined multiplier and does not describe it;
// the Barrett structure and the 4-cycle depth are this design's choice.
// Inputs must be reduced (a, b < p).
module modmul
  import hash_pkg::*;
#(
  parameter int unsigned TAGW = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  fe_t             a,
  input  fe_t             b,
  input  logic [TAGW-1:0] tag_in,
  output logic            out_valid,
  output fe_t             y,
  output logic [TAGW-1:0] tag_out
);
  localparam logic [255:0] P256 = {2'b00, P};

  logic [507:0]    x1;
  logic [255:0]    x2;
  logic [254:0]    q2;
  logic [255:0]    r3;
  logic [2:0]      v;
  logic [TAGW-1:0] t1, t2, t3;

  logic [509:0] qmu;  // only the quotient bits [509:255] are used
  logic [255:0] r_full;
  logic [255:0] r_c1;

  always_comb begin
    qmu    = 510'(x1[507:253]) * 510'(MU);
    r_full = x2 - 256'(q2 * P);
    r_c1   = (r3 >= P256) ? r3 - P256 : r3;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v         <= '0;
      out_valid <= 1'b0;
    end else begin
      v         <= {v[1:0], in_valid};
      out_valid <= v[2];
    end
  end

  always_ff @(posedge clk) begin
    x1      <= 508'(a) * 508'(b);
    t1      <= tag_in;
    x2      <= x1[255:0];
    q2      <= qmu[509:255];
    t2      <= t1;
    r3      <= r_full;
    t3      <= t2;
    y       <= (r_c1 >= P256) ? fe_t'(r_c1 - P256) : fe_t'(r_c1);
    tag_out <= t3;
  end
endmodule

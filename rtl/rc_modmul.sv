// rc_modmul: reconfigurable modular multiplier for Reinforced Concrete.
//
// One pipelined unit with three modes, chosen per operation by `mode`:
//   RCM_MULT       y = a * b mod p                       (Bricks)
//   RCM_DECOMPOSE  y = a div s_idx, r = a mod s_idx      (Decomp step of Bar)
//                  by the reciprocal-table divider fast_div
//   RCM_COMPOSE    y = a * s_idx + z, reduced mod p only when fin = 1
//                  (Horner step of Comp; the partial sums stay far below p,
//                  so earlier steps skip the reduction)
// Every mode has the same latency, MODMUL_LAT = 4 cycles, so operations of
// different modes may follow each other on consecutive cycles and come out in
// order. A tag travels with each operation.
// The three modes and the idea of skipping reduction while composing are
// the paper's. The paper composes with three multipliers in parallel; here
// one chunk is composed per operation, which is this design's simplification.
module rc_modmul
  import hash_pkg::*;
#(
  parameter int unsigned TAGW = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  rcm_mode_t       mode,
  input  fe_t             a,
  input  fe_t             b,
  input  logic [4:0]      idx,
  input  chunk_t          z,
  input  logic            fin,
  input  logic [TAGW-1:0] tag_in,
  output logic            out_valid,
  output fe_t             y,
  output chunk_t          r,
  output logic [TAGW-1:0] tag_out
);
  localparam logic [255:0] P256 = {2'b00, P};

  // MULT path
  logic mm_v;
  fe_t  mm_y;
  logic mm_tag;
  modmul #(.TAGW(1)) u_mm (
    .clk, .rst_n, .in_valid(in_valid && mode == RCM_MULT), .a, .b, .tag_in(1'b0),
    .out_valid(mm_v), .y(mm_y), .tag_out(mm_tag));

  // DECOMPOSE path: fast_div (2 cycles) + 2 alignment registers
  logic   dv_v;
  fe_t    dv_q, dv_q3, dv_q4;
  chunk_t dv_r, dv_r3, dv_r4;
  fast_div u_div (
    .clk, .rst_n, .in_valid(in_valid && mode == RCM_DECOMPOSE), .x(a), .idx,
    .out_valid(dv_v), .q(dv_q), .r(dv_r));

  // COMPOSE path
  logic [255:0] cp1, cp2, cp3, cp_red1;
  fe_t          cp4;
  logic         fin1, fin2, fin3;
  always_comb cp_red1 = (cp3 >= P256) ? cp3 - P256 : cp3;

  // control pipeline
  rcm_mode_t       md [MODMUL_LAT];
  logic            vv [MODMUL_LAT];
  logic [TAGW-1:0] tg [MODMUL_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MODMUL_LAT; i++) vv[i] <= 1'b0;
    end else begin
      vv[0] <= in_valid;
      for (int i = 1; i < MODMUL_LAT; i++) vv[i] <= vv[i-1];
    end
  end

  always_ff @(posedge clk) begin
    md[0] <= mode;
    tg[0] <= tag_in;
    for (int i = 1; i < MODMUL_LAT; i++) begin
      md[i] <= md[i-1];
      tg[i] <= tg[i-1];
    end
    dv_q3 <= dv_q;  dv_r3 <= dv_r;
    dv_q4 <= dv_q3; dv_r4 <= dv_r3;
    cp1   <= 256'(a) * 256'(RC_S[idx]) + 256'(z);
    fin1  <= fin;
    cp2   <= cp1;  fin2 <= fin1;
    cp3   <= cp2;  fin3 <= fin2;
    cp4   <= fin3 ? ((cp_red1 >= P256) ? fe_t'(cp_red1 - P256) : fe_t'(cp_red1)) : fe_t'(cp3);
  end

  always_comb begin
    out_valid = vv[MODMUL_LAT-1];
    tag_out   = tg[MODMUL_LAT-1];
    r         = dv_r4;
    case (md[MODMUL_LAT-1])
      RCM_MULT:      y = mm_y;
      RCM_DECOMPOSE: y = dv_q4;
      default:       y = cp4;
    endcase
  end

  // the sub-units must agree with the control pipeline
  a_mult_step: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && md[MODMUL_LAT-1] == RCM_MULT |-> mm_v)
    else $error("rc_modmul: MULT path out of step");
  a_div_step: assert property (@(posedge clk) disable iff (!rst_n)
    vv[1] && md[1] == RCM_DECOMPOSE |-> dv_v)
    else $error("rc_modmul: DECOMPOSE path out of step");
endmodule

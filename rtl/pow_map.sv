// pow_map: batch-interleaved power map y_j = x_j ^ e mod p for j = 0..BATCH-1.
//
// Square-and-multiply, scanning the exponent from its least significant bit
// (the paper's Algorithm 1): per bit, result <- result*base when the bit is
// set, then base <- base*base, until the remaining exponent is zero.
// The BATCH elements are interleaved through pipelined multipliers: a "slot"
// lasts BATCH cycles and issues one operation per element per multiplier, so
// that a result is back before the same element is issued again
// (needs BATCH > MODMUL_LAT).
//   NMUL = 2 (latency-optimised): square and multiply run on two multipliers
//            in the same slot, one slot per exponent bit.
//   NMUL = 1 (area-optimised): one multiplier, one slot for each square and
//            one more for each set bit.
// Interface: pulse start with exp_i and x_i valid; x_i is captured on that
// cycle. done_o pulses once when all results are in y_o, which holds them
// until the next start. busy_o is high in between.
// Timing: slots = bitlen(e) (NMUL=2) or bitlen(e)+popcount(e) (NMUL=1);
// done_o rises at the clock edge slots*BATCH + MODMUL_LAT + 2 edges after the one
// that samples start.
// The one- and two-multiplier options and the batch of 13 are the paper's;
// the slot schedule is this design's.
module pow_map
  import hash_pkg::*;
#(
  parameter int unsigned NB   = BATCH,
  parameter int unsigned NMUL = 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  fe_t     exp_i,
  input  fe_t     x_i [NB],
  output fe_t     y_o [NB],
  output logic    done_o,
  output logic    busy_o
);
  localparam int unsigned IW   = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned TAGW = IW + 1;      // {dest, element}
  localparam logic DST_RES  = 1'b0;
  localparam logic DST_BASE = 1'b1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} st_t;
  st_t st;

  fe_t           base [NB];
  fe_t           res  [NB];
  fe_t           e;
  logic          sq_step;        // NMUL=1: 1 = squaring slot, 0 = multiply slot
  logic [IW-1:0] j;
  logic [3:0]    drain;

  // multiplier ports
  logic            m_v   [2];
  fe_t             m_a   [2];
  fe_t             m_b   [2];
  logic [TAGW-1:0] m_t   [2];
  logic            r_v   [2];
  fe_t             r_y   [2];
  logic [TAGW-1:0] r_t   [2];

  for (genvar k = 0; k < NMUL; k++) begin : g_mul
    modmul #(.TAGW(TAGW)) u_mul (
      .clk, .rst_n, .in_valid(m_v[k]), .a(m_a[k]), .b(m_b[k]), .tag_in(m_t[k]),
      .out_valid(r_v[k]), .y(r_y[k]), .tag_out(r_t[k]));
  end
  if (NMUL < 2) begin : g_nomul1
    assign r_v[1] = 1'b0;
    assign r_y[1] = '0;
    assign r_t[1] = '0;
  end

  // issue logic
  always_comb begin
    for (int k = 0; k < 2; k++) begin
      m_v[k] = 1'b0;
      m_a[k] = base[j];
      m_b[k] = base[j];
      m_t[k] = {DST_BASE, j};
    end
    if (st == S_RUN) begin
      if (NMUL >= 2) begin
        m_v[0] = 1'b1;                      // base * base
        m_v[1] = e[0];                      // res * base
        m_a[1] = res[j];
        m_t[1] = {DST_RES, j};
      end else begin
        m_v[0] = 1'b1;
        if (!sq_step) begin
          m_a[0] = res[j];
          m_t[0] = {DST_RES, j};
        end
      end
    end
  end

  fe_t e_next;
  assign e_next = e >> 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      j       <= '0;
      e       <= '0;
      sq_step <= 1'b0;
      drain   <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          e       <= exp_i;
          sq_step <= !exp_i[0];
          j       <= '0;
          drain   <= '0;
          st      <= (exp_i == '0) ? S_DRAIN : S_RUN;
        end
        S_RUN: begin
          if (j == IW'(NB - 1)) begin
            j <= '0;
            if (NMUL >= 2 || sq_step) begin
              e       <= e_next;
              sq_step <= !e_next[0];
              if (e_next == '0) st <= S_DRAIN;
            end else begin
              sq_step <= 1'b1;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 4'(MODMUL_LAT)) begin
            done_o <= 1'b1;
            st     <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // operand arrays: load on start, write back multiplier results by tag
  always_ff @(posedge clk) begin
    if (st == S_IDLE && start) begin
      for (int i = 0; i < NB; i++) begin
        base[i] <= x_i[i];
        res[i]  <= fe_t'(1);
      end
    end else begin
      for (int k = 0; k < 2; k++) begin
        if (r_v[k]) begin
          if (r_t[k][TAGW-1] == DST_BASE) base[r_t[k][IW-1:0]] <= r_y[k];
          else                            res[r_t[k][IW-1:0]]  <= r_y[k];
        end
      end
    end
  end

  assign y_o    = res;
  assign busy_o = (st != S_IDLE);

  initial assert (NB > MODMUL_LAT) else $error("pow_map: NB must exceed the multiplier latency");
  initial assert (NMUL == 1 || NMUL == 2) else $error("pow_map: NMUL must be 1 or 2");
endmodule

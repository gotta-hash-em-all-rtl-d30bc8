// griffin_perm: Griffin permutation over BN254, state of 3, applied to a batch
// of NB states with two pipelined multipliers.
//
// Structure: an initial MDS, then 14 rounds of
//   y0 = x0^(1/5), y1 = x1^5, y2 = x2 * (L^2 + alpha*L + beta), L = y0 + y1,
//   MDS, then round constants c^(r) for every round but the last.
// The inverse power map dominates: multiplier 0 squares the base on every
// slot; multiplier 1 multiplies the result on slots whose exponent bit is 1.
// On slots whose bit is 0 multiplier 1 would be idle, so it computes
// y1 = x1^5 there (x1^2, x1^4, x1^5: three idle slots), as the paper
// describes. Two more slots then evaluate the quadratic: (L*L, alpha*L) on
// both multipliers, then x2 * (L^2 + alpha*L + beta). A linear pass of NB
// cycles applies MDS and constants and reloads the power-map operands.
// Slots last NB cycles and hold one operation per state (NB > MODMUL_LAT).
// Interface: pulse start with x_i valid (captured that cycle); done_o pulses
// when y_o holds the result; y_o holds until the next start.
// Timing: NB * (1 + 14 * (254 + 2 + 1)) cycles plus a few, about 46.8k for
// NB = 13.
// The nonlinear layer, the use of the idle multiplier and the MDS-first round
// structure are the paper's. alpha, beta, the matrix circ(2,1,1) and the
// constants are placeholders chosen here; the paper gives no values.
module griffin_perm
  import hash_pkg::*;
#(
  parameter int unsigned NB     = BATCH,
  parameter int unsigned NROUND = ROUNDS
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  state_t x_i [NB],
  output state_t y_o [NB],
  output logic   done_o,
  output logic   busy_o
);
  localparam int unsigned IW   = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned TAGW = IW + 3;

  // write-back destinations
  typedef enum logic [2:0] {D_BASE, D_RES, D_T, D_U, D_V, D_W} dst_t;

  typedef enum logic [2:0] {S_IDLE, S_LIN0, S_INV, S_G1, S_G2, S_LIN, S_DONE} st_t;
  st_t st;

  state_t        s    [NB];
  fe_t           base [NB];
  fe_t           res  [NB];
  fe_t           t    [NB];   // x1 chain -> y1
  fe_t           u    [NB];   // L^2
  fe_t           v    [NB];   // alpha * L
  fe_t           w    [NB];   // y2
  fe_t           e;
  logic [1:0]    aux;         // x1^5 steps done this round
  logic [4:0]    rnd;
  logic [IW-1:0] j;

  logic            m_v [2];
  fe_t             m_a [2];
  fe_t             m_b [2];
  dst_t            m_d [2];
  logic            r_v [2];
  fe_t             r_y [2];
  logic [TAGW-1:0] m_t [2];
  logic [TAGW-1:0] r_t [2];

  for (genvar k = 0; k < 2; k++) begin : g_mul
    assign m_t[k] = {m_d[k], j};
    modmul #(.TAGW(TAGW)) u_mul (
      .clk, .rst_n, .in_valid(m_v[k]), .a(m_a[k]), .b(m_b[k]), .tag_in(m_t[k]),
      .out_valid(r_v[k]), .y(r_y[k]), .tag_out(r_t[k]));
  end

  fe_t l_sum;
  assign l_sum = add_mod(res[j], t[j]);

  always_comb begin
    for (int k = 0; k < 2; k++) begin
      m_v[k] = 1'b0;
      m_a[k] = base[j];
      m_b[k] = base[j];
      m_d[k] = D_BASE;
    end
    case (st)
      S_INV: begin
        m_v[0] = 1'b1;                              // base <- base^2
        if (e[0]) begin                             // res <- res * base
          m_v[1] = 1'b1;
          m_a[1] = res[j];
          m_d[1] = D_RES;
        end else if (aux != 2'd3) begin             // idle slot: x1^5
          m_v[1] = 1'b1;
          m_d[1] = D_T;
          case (aux)
            2'd0:    begin m_a[1] = s[j][1]; m_b[1] = s[j][1]; end
            2'd1:    begin m_a[1] = t[j];    m_b[1] = t[j];    end
            default: begin m_a[1] = t[j];    m_b[1] = s[j][1]; end
          endcase
        end
      end
      S_G1: begin
        m_v[0] = 1'b1; m_a[0] = l_sum;    m_b[0] = l_sum; m_d[0] = D_U;
        m_v[1] = 1'b1; m_a[1] = GR_ALPHA; m_b[1] = l_sum; m_d[1] = D_V;
      end
      S_G2: begin
        m_v[0] = 1'b1; m_a[0] = s[j][2];
        m_b[0] = add_mod(add_mod(u[j], v[j]), GR_BETA);
        m_d[0] = D_W;
      end
      default: ;
    endcase
  end

  // linear layer of state j
  state_t nl_out, lin_out, rc;
  always_comb begin
    if (st == S_LIN0) nl_out = s[j];
    else              nl_out = '{res[j], t[j], w[j]};
    for (int l = 0; l < STATE; l++)
      rc[l] = (st == S_LIN && rnd != 5'(NROUND - 1)) ? GR_C[32'(rnd) * STATE + l] : '0;
    lin_out = add_state(mds3(nl_out), rc);
  end

  fe_t e_next;
  assign e_next = e >> 1;
  logic last_el;
  assign last_el = (j == IW'(NB - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      j      <= '0;
      e      <= '0;
      aux    <= '0;
      rnd    <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      j <= last_el ? '0 : j + 1'b1;
      case (st)
        S_IDLE: begin
          j <= '0;
          if (start) begin
            rnd <= '0;
            st  <= S_LIN0;
          end
        end
        S_LIN0: if (last_el) begin
          e   <= D_INV;
          aux <= '0;
          st  <= S_INV;
        end
        S_INV: if (last_el) begin
          e <= e_next;
          if (!e[0] && aux != 2'd3) aux <= aux + 1'b1;
          if (e_next == '0) st <= S_G1;
        end
        S_G1: if (last_el) st <= S_G2;
        S_G2: if (last_el) st <= S_LIN;
        S_LIN: if (last_el) begin
          if (rnd == 5'(NROUND - 1)) st <= S_DONE;
          else begin
            rnd <= rnd + 1'b1;
            e   <= D_INV;
            aux <= '0;
            st  <= S_INV;
          end
        end
        S_DONE: begin
          j      <= '0;
          done_o <= 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == S_IDLE && start) s <= x_i;
    else begin
      if (st == S_LIN0 || st == S_LIN) begin
        s[j]    <= lin_out;
        base[j] <= lin_out[0];
        res[j]  <= fe_t'(1);
      end
      for (int k = 0; k < 2; k++) begin
        if (r_v[k]) begin
          case (dst_t'(r_t[k][TAGW-1:IW]))
            D_BASE:  base[r_t[k][IW-1:0]] <= r_y[k];
            D_RES:   res[r_t[k][IW-1:0]]  <= r_y[k];
            D_T:     t[r_t[k][IW-1:0]]    <= r_y[k];
            D_U:     u[r_t[k][IW-1:0]]    <= r_y[k];
            D_V:     v[r_t[k][IW-1:0]]    <= r_y[k];
            default: w[r_t[k][IW-1:0]]    <= r_y[k];
          endcase
        end
      end
    end
  end

  assign y_o    = s;
  assign busy_o = (st != S_IDLE);

  // x1^5 must be complete before the quadratic uses it
  a_aux_done: assert property (@(posedge clk) disable iff (!rst_n) st == S_G1 |-> aux == 2'd3)
    else $error("griffin_perm: x1^5 not finished");
endmodule

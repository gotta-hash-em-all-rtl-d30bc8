// rc_perm: Reinforced Concrete permutation over BN254, state of 3, applied to
// a batch of NB states with three reconfigurable multipliers (one per lane).
//
// Layer order (7 rounds, 8 Concrete layers):
//   Concrete0, Bricks, Concrete1, Bricks, Concrete2, Bricks, Concrete3,
//   Bars,
//   Concrete4, Bricks, Concrete5, Bricks, Concrete6, Bricks, Concrete7
// Concrete:  x <- M x + c^(k), a linear pass of NB cycles (one state/cycle).
// Bricks:    (x1^5, x2 (x1^2 + a1 x1 + b1), x3 (x2^2 + a2 x2 + b2)) in three
//            MULT slots:  1: x1*x1, x2*x2, a1*x1
//                         2: (x1^2)^2, x2*(x1^2+a1 x1+b1), a2*x2
//                         3: x1^4*x1, -, x3*(x2^2+a2 x2+b2)
// Bars:      per element, 27 DECOMPOSE slots peel chunks off the least
//            significant end (z_i = x mod s_i, x = x div s_i), each chunk
//            passes the S-box on write-back, then 27 COMPOSE slots rebuild
//            x = (...(z_0 s_1 + z_1) s_2 + ...) s_26 + z_26, reduced mod p at
//            the last step.
// A slot lasts NB cycles and issues one operation per state and lane.
// Interface: pulse start with x_i valid (captured that cycle); done_o pulses
// when y_o holds the result; y_o holds until the next start.
// Timing: NB * (8 + 18 + 27 + 27) cycles plus a few, 1040 + 3 for NB = 13.
// The layer order (Fig. 4 of the paper), the three reconfigurable units and
// the mode switch to DECOMPOSE for Bars are the paper's. The paper reaches
// about 28 cycles per hash; this schedule (one chunk per slot) takes 80, see
// the accompanying documentation. Matrix, constants, s_i and the S-box are
// placeholders chosen here.
module rc_perm
  import hash_pkg::*;
#(
  parameter int unsigned NB = BATCH
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
  localparam int unsigned TAGW = 2 + 5 + IW;

  typedef enum logic [1:0] {D_S, D_U, D_V, D_SZ} dst_t;
  typedef enum logic [2:0] {S_IDLE, S_CONC, S_BRK, S_DEC, S_CMP, S_DONE} st_t;
  st_t st;

  state_t        s [NB];
  state_t        u [NB];
  state_t        v [NB];
  chunk_t        z [NB][STATE][RC_N];
  logic [2:0]    kc;       // Concrete layer
  logic [1:0]    bstep;    // Bricks slot
  logic [4:0]    ci;       // Bars slot
  logic [IW-1:0] j;

  logic            m_v [STATE];
  rcm_mode_t       m_m [STATE];
  fe_t             m_a [STATE];
  fe_t             m_b [STATE];
  logic [4:0]      m_i [STATE];
  chunk_t          m_z [STATE];
  logic            m_f [STATE];
  dst_t            m_d [STATE];
  logic [TAGW-1:0] m_t [STATE];
  logic            r_v [STATE];
  fe_t             r_y [STATE];
  chunk_t          r_r [STATE];
  chunk_t          r_s [STATE];
  logic [TAGW-1:0] r_t [STATE];

  for (genvar l = 0; l < STATE; l++) begin : g_unit
    assign m_t[l] = {m_d[l], m_i[l], j};
    rc_modmul #(.TAGW(TAGW)) u_rcm (
      .clk, .rst_n, .in_valid(m_v[l]), .mode(m_m[l]), .a(m_a[l]), .b(m_b[l]),
      .idx(m_i[l]), .z(m_z[l]), .fin(m_f[l]), .tag_in(m_t[l]),
      .out_valid(r_v[l]), .y(r_y[l]), .r(r_r[l]), .tag_out(r_t[l]));
    rc_sbox u_sbox (.z(r_r[l]), .y(r_s[l]));
  end

  always_comb begin
    for (int l = 0; l < STATE; l++) begin
      m_v[l] = 1'b0;
      m_m[l] = RCM_MULT;
      m_a[l] = s[j][l];
      m_b[l] = s[j][l];
      m_i[l] = '0;
      m_z[l] = '0;
      m_f[l] = 1'b0;
      m_d[l] = D_S;
    end
    case (st)
      S_BRK: begin
        case (bstep)
          2'd0: begin
            m_v[0] = 1'b1; m_d[0] = D_U;                                    // x1^2
            m_v[1] = 1'b1; m_d[1] = D_U;                                    // x2^2
            m_v[2] = 1'b1; m_d[2] = D_U; m_a[2] = RC_ALPHA1; m_b[2] = s[j][0]; // a1 x1
          end
          2'd1: begin
            m_v[0] = 1'b1; m_d[0] = D_V; m_a[0] = u[j][0]; m_b[0] = u[j][0]; // x1^4
            m_v[1] = 1'b1; m_d[1] = D_S;                                     // y2
            m_b[1] = add_mod(add_mod(u[j][0], u[j][2]), RC_BETA1);
            m_v[2] = 1'b1; m_d[2] = D_V; m_a[2] = RC_ALPHA2; m_b[2] = s[j][1]; // a2 x2
          end
          default: begin
            m_v[0] = 1'b1; m_d[0] = D_S; m_a[0] = v[j][0];                  // y1 = x1^5
            m_v[2] = 1'b1; m_d[2] = D_S;                                    // y3
            m_b[2] = add_mod(add_mod(u[j][1], v[j][2]), RC_BETA2);
          end
        endcase
      end
      S_DEC: begin
        for (int l = 0; l < STATE; l++) begin
          m_v[l] = 1'b1;
          m_m[l] = RCM_DECOMPOSE;
          m_i[l] = 5'(RC_N - 1) - ci;
          m_d[l] = D_SZ;
        end
      end
      S_CMP: begin
        for (int l = 0; l < STATE; l++) begin
          m_v[l] = 1'b1;
          m_m[l] = RCM_COMPOSE;
          m_a[l] = (ci == 5'd0) ? '0 : s[j][l];
          m_i[l] = ci;
          m_z[l] = z[j][l][ci];
          m_f[l] = (ci == 5'(RC_N - 1));
          m_d[l] = D_S;
        end
      end
      default: ;
    endcase
  end

  // Concrete layer of state j
  state_t cc, lin_out;
  always_comb begin
    for (int l = 0; l < STATE; l++) cc[l] = RC_C[32'(kc) * STATE + l];
    lin_out = add_state(mds3(s[j]), cc);
  end

  logic last_el;
  assign last_el = (j == IW'(NB - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      j      <= '0;
      kc     <= '0;
      bstep  <= '0;
      ci     <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      j <= last_el ? '0 : j + 1'b1;
      case (st)
        S_IDLE: begin
          j <= '0;
          if (start) begin
            kc <= '0;
            st <= S_CONC;
          end
        end
        S_CONC: if (last_el) begin
          bstep <= '0;
          ci    <= '0;
          if (kc == 3'(RC_NCONC - 1)) st <= S_DONE;
          else if (kc == 3'd3)        st <= S_DEC;
          else                        st <= S_BRK;
        end
        S_BRK: if (last_el) begin
          bstep <= bstep + 1'b1;
          if (bstep == 2'd2) begin
            kc <= kc + 1'b1;
            st <= S_CONC;
          end
        end
        S_DEC: if (last_el) begin
          ci <= ci + 1'b1;
          if (ci == 5'(RC_N - 1)) begin
            ci <= '0;
            st <= S_CMP;
          end
        end
        S_CMP: if (last_el) begin
          ci <= ci + 1'b1;
          if (ci == 5'(RC_N - 1)) begin
            kc <= kc + 1'b1;
            st <= S_CONC;
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
      if (st == S_CONC) s[j] <= lin_out;
      for (int l = 0; l < STATE; l++) begin
        if (r_v[l]) begin
          case (dst_t'(r_t[l][TAGW-1 -: 2]))
            D_S: s[r_t[l][IW-1:0]][l] <= r_y[l];
            D_U: u[r_t[l][IW-1:0]][l] <= r_y[l];
            D_V: v[r_t[l][IW-1:0]][l] <= r_y[l];
            default: begin
              s[r_t[l][IW-1:0]][l] <= r_y[l];
              z[r_t[l][IW-1:0]][l][r_t[l][IW +: 5]] <= r_s[l];
            end
          endcase
        end
      end
    end
  end

  assign y_o    = s;
  assign busy_o = (st != S_IDLE);
endmodule

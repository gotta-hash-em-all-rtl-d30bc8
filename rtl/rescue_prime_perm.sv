// rescue_prime_perm: Rescue-Prime permutation over BN254, state of 3,
// applied to a batch of NB states at once.
//
// One round (14 rounds in all):
//   S-box x -> x^5 on every element, MDS, add 3 round constants,
//   inverse S-box x -> x^(1/5), MDS, add 3 round constants.
// Each state lane (0..2) has its own pow_map, so the three elements of a state
// are exponentiated in parallel and the NB states are interleaved through the
// multiplier pipelines. NMUL selects the variant: 2 multipliers per power map
// (latency-optimised, 6 in all) or 1 (area-optimised, 3 in all).
// After each power map a linear pass of NB cycles applies MDS and constants
// to one state per cycle.
// Interface: pulse start with x_i valid (captured that cycle); done_o pulses
// when y_o holds the permuted batch; y_o holds until the next start.
// Timing (NMUL=2): 14 * ((3 + 254) * NB + 2 * NB + 2 * (MODMUL_LAT + 2)) cycles
// plus a few, about 47.5k cycles for NB = 13.
// The round structure, the per-lane power maps and the 3/6 multiplier counts
// follow the paper. The MDS matrix (circ(2,1,1)) and the round constants are
// this design's placeholders, as the paper gives neither.
module rescue_prime_perm
  import hash_pkg::*;
#(
  parameter int unsigned NB     = BATCH,
  parameter int unsigned NMUL   = 2,
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
  localparam int unsigned IW = (NB > 1) ? $clog2(NB) : 1;

  typedef enum logic [2:0] {S_IDLE, S_PM_START, S_PM_WAIT, S_LIN, S_DONE} st_t;
  st_t st;

  state_t        s [NB];
  logic [4:0]    rnd;
  logic          half;           // 0: forward S-box, 1: inverse S-box
  logic [IW-1:0] j;

  fe_t  pm_x    [STATE][NB];
  fe_t  pm_y    [STATE][NB];
  logic pm_done [STATE];
  logic pm_busy [STATE];
  logic pm_start;
  fe_t  pm_exp;

  assign pm_exp = half ? D_INV : D_FWD;

  for (genvar l = 0; l < STATE; l++) begin : g_lane
    for (genvar i = 0; i < NB; i++) begin : g_el
      assign pm_x[l][i] = s[i][l];
    end
    pow_map #(.NB(NB), .NMUL(NMUL)) u_pm (
      .clk, .rst_n, .start(pm_start), .exp_i(pm_exp), .x_i(pm_x[l]),
      .y_o(pm_y[l]), .done_o(pm_done[l]), .busy_o(pm_busy[l]));
  end

  assign pm_start = (st == S_PM_START);

  // linear layer of state j: MDS then constants of (round, half)
  state_t sb_out, lin_out, rc;
  always_comb begin
    for (int l = 0; l < STATE; l++) begin
      sb_out[l] = pm_y[l][j];
      rc[l]     = RP_C[(32'(rnd) * 2 + 32'(half)) * STATE + l];
    end
    lin_out = add_state(mds3(sb_out), rc);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      rnd    <= '0;
      half   <= 1'b0;
      j      <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          rnd  <= '0;
          half <= 1'b0;
          st   <= S_PM_START;
        end
        S_PM_START: st <= S_PM_WAIT;
        S_PM_WAIT: if (pm_done[0]) begin
          j  <= '0;
          st <= S_LIN;
        end
        S_LIN: begin
          if (j == IW'(NB - 1)) begin
            j <= '0;
            if (half) begin
              half <= 1'b0;
              if (rnd == 5'(NROUND - 1)) st <= S_DONE;
              else begin
                rnd <= rnd + 1'b1;
                st  <= S_PM_START;
              end
            end else begin
              half <= 1'b1;
              st   <= S_PM_START;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        S_DONE: begin
          done_o <= 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == S_IDLE && start) s <= x_i;
    else if (st == S_LIN) s[j] <= lin_out;
  end

  assign y_o    = s;
  assign busy_o = (st != S_IDLE);

  // the three lane power maps run in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    pm_done[0] == pm_done[1] && pm_done[0] == pm_done[2] && pm_busy[0] == pm_busy[1])
    else $error("rescue_prime_perm: lane power maps out of step");
endmodule

// sponge: sponge-mode hashing of a batch of LANES messages with an external
// batched permutation.
//
// The state of each lane is 3 field elements, split into a rate of 2 and a
// capacity of 1, all zero at the start (zero IV). For each message block
// (2 elements per lane) the block is added (field addition) into the rate
// part and the permutation is applied to the whole batch. After the block
// marked last, the first state element of each lane is output as that lane's
// digest (one squeezed element) and the state returns to zero.
// Message interface: valid/ready handshake, one block of every lane per
// transfer; msg_last marks the final block. The caller pads messages to whole
// blocks. Digest: dig_valid pulses for one cycle; digest holds until the next
// digest. Permutation interface: perm_start pulses with perm_x valid;
// perm_done pulses when perm_y holds the result.
// Timing: a block is accepted when the engine is idle; the digest appears one
// cycle after the last permutation's perm_done.
// The absorb/squeeze structure and the zero IV are those of the paper's sponge
// figure; the rate/capacity split, field addition for absorption, padding
// left to the caller and a single squeezed element are this design's choices.
module sponge
  import hash_pkg::*;
#(
  parameter int unsigned LANES = BATCH,
  parameter int unsigned RATE  = 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   msg_valid,
  output logic   msg_ready,
  input  logic   msg_last,
  input  fe_t    msg [LANES][RATE],
  output logic   dig_valid,
  output fe_t    digest [LANES],
  output logic   busy_o,
  output logic   perm_start,
  output state_t perm_x [LANES],
  input  logic   perm_done,
  input  state_t perm_y [LANES]
);
  typedef enum logic [1:0] {S_READY, S_START, S_WAIT} st_t;
  st_t    st;
  state_t state [LANES];
  logic   last_q;
  logic   mid;      // inside a message: blocks absorbed, last not yet seen

  assign msg_ready  = (st == S_READY);
  assign perm_start = (st == S_START);
  assign perm_x     = state;
  assign busy_o     = (st != S_READY) || mid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_READY;
      last_q    <= 1'b0;
      mid       <= 1'b0;
      dig_valid <= 1'b0;
      for (int i = 0; i < LANES; i++) begin
        state[i]  <= '{default: '0};
        digest[i] <= '0;
      end
    end else begin
      dig_valid <= 1'b0;
      case (st)
        S_READY: if (msg_valid) begin
          for (int i = 0; i < LANES; i++)
            for (int k = 0; k < RATE; k++)
              state[i][k] <= add_mod(state[i][k], msg[i][k]);
          last_q <= msg_last;
          mid    <= !msg_last;
          st     <= S_START;
        end
        S_START: st <= S_WAIT;
        S_WAIT: if (perm_done) begin
          st <= S_READY;
          if (last_q) begin
            for (int i = 0; i < LANES; i++) begin
              digest[i] <= perm_y[i][0];
              state[i]  <= '{default: '0};
            end
            dig_valid <= 1'b1;
          end else begin
            state <= perm_y;
          end
        end
        default: st <= S_READY;
      endcase
    end
  end

  initial assert (RATE < STATE) else $error("sponge: rate must leave a capacity");
endmodule

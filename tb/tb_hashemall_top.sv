// tb_hashemall_top: end-to-end test of the whole accelerator at its default
// sizes (Rescue-Prime batch 13 with 6 multipliers, Griffin 3 x 13 lanes,
// Reinforced Concrete 2 x 13 lanes).
// Sequence: a 2-block RC message batch whose second block is offered while
// the first is still being permuted (the handshake stalls), a 1-block Griffin
// batch, a 1-block Rescue-Prime batch, and a 1-block RC batch after switching
// back. Every lane's digest is checked against a reference sponge built on
// the reference permutations, unused lanes must read 0, and each mechanism
// (mode switch, multi-block absorb, handshake stall, each of the three
// hashes) is counted and must have happened.
module tb_hashemall_top;
  import hash_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned LMAX = 39;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  hash_sel_t sel;
  logic      msg_valid, msg_ready, msg_last, dig_valid, busy;
  fe_t       msg [LMAX][2];
  fe_t       digest [LMAX];
  int checks = 0, failures = 0;
  int n_stall = 0, n_switch = 0, n_multiblock = 0;
  int n_hash [3] = '{0, 0, 0};

  hashemall_top dut (.*);

  always @(posedge clk) if (rst_n && msg_valid && !msg_ready) n_stall++;

  function automatic int lanes_of(hash_sel_t h);
    case (h)
      HASH_RESCUE:  return 13;
      HASH_GRIFFIN: return 39;
      default:      return 26;
    endcase
  endfunction

  function automatic state_t ref_perm(hash_sel_t h, state_t x);
    case (h)
      HASH_RESCUE:  return ref_rescue(x, ROUNDS);
      HASH_GRIFFIN: return ref_griffin(x, ROUNDS);
      default:      return ref_rc(x);
    endcase
  endfunction

  task automatic hash_batch(hash_sel_t h, int nblk);
    state_t st [LMAX];
    fe_t    m [2][LMAX][2];
    int     nl;
    nl = lanes_of(h);
    @(negedge clk);
    if (sel != h) n_switch++;
    sel = h;
    for (int i = 0; i < LMAX; i++) st[i] = '{default: '0};
    for (int bk = 0; bk < nblk; bk++)
      for (int i = 0; i < LMAX; i++) begin
        m[bk][i][0] = rand_fe();
        m[bk][i][1] = rand_fe();
        if (i < nl) begin
          st[i][0] = ref_add(st[i][0], m[bk][i][0]);
          st[i][1] = ref_add(st[i][1], m[bk][i][1]);
          st[i]    = ref_perm(h, st[i]);
        end
      end
    for (int bk = 0; bk < nblk; bk++) begin
      @(negedge clk);
      msg_valid = 1'b1; msg_last = (bk == nblk - 1); msg = m[bk];
      do @(posedge clk); while (!msg_ready);
      @(negedge clk) msg_valid = 1'b0;
    end
    if (nblk > 1) n_multiblock++;
    @(posedge clk iff dig_valid);
    @(negedge clk);
    for (int i = 0; i < LMAX; i++) begin
      checks++;
      if (digest[i] !== ((i < nl) ? st[i][0] : '0)) begin
        failures++;
        if (failures < 8) $display("FAIL hash %0d lane %0d", h, i);
      end
    end
    n_hash[h]++;
    @(negedge clk);
    checks++;
    if (busy) failures++;
  endtask

  initial begin
    sel = HASH_RC; msg_valid = 1'b0; msg_last = 1'b0;
    for (int i = 0; i < LMAX; i++) begin msg[i][0] = '0; msg[i][1] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    hash_batch(HASH_RC, 2);
    hash_batch(HASH_GRIFFIN, 1);
    hash_batch(HASH_RESCUE, 1);
    hash_batch(HASH_RC, 1);
    $display("mechanisms: stall=%0d switch=%0d multiblock=%0d rescue=%0d griffin=%0d rc=%0d",
             n_stall, n_switch, n_multiblock, n_hash[0], n_hash[1], n_hash[2]);
    checks += 6;
    if (n_stall == 0)      begin failures++; $display("FAIL no handshake stall"); end
    if (n_switch < 3)      begin failures++; $display("FAIL too few mode switches"); end
    if (n_multiblock == 0) begin failures++; $display("FAIL no multi-block message"); end
    for (int h = 0; h < 3; h++)
      if (n_hash[h] == 0)  begin failures++; $display("FAIL hash %0d never ran", h); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (150000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sponge: drives the sponge with messages of 1 to 3 blocks over 4 lanes,
// with idle gaps between blocks, and serves its permutation port with a
// simple stand-in permutation (state -> M*state + (lane-independent)
// constant, computed here) answered after a random delay. Checks each digest
// against a sponge computed in the testbench, that msg_ready is low while a
// permutation is running, and that a second message starts from a zero state.
module tb_sponge;
  import hash_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned L = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic   msg_valid, msg_ready, msg_last, dig_valid, busy_o, perm_start, perm_done;
  fe_t    msg [L][2];
  fe_t    digest [L];
  state_t perm_x [L];
  state_t perm_y [L];
  int checks = 0, failures = 0, nperm = 0, nstall = 0;

  sponge #(.LANES(L)) dut (.*);

  function automatic state_t stand_in(state_t x);
    state_t y;
    y = ref_mds(x);
    y[0] = ref_mul(y[0], y[1]);
    y[2] = ref_add(y[2], fe_t'(7));
    return y;
  endfunction

  // stand-in permutation with a random latency
  initial begin
    perm_done = 1'b0;
    forever begin
      @(negedge clk);
      if (perm_start) begin
        state_t xs [L];
        xs = perm_x;
        nperm++;
        repeat ($urandom_range(2, 9)) begin
          @(negedge clk);
          if (msg_ready) begin failures++; $display("FAIL ready during permutation"); end
          nstall++;
        end
        @(negedge clk);
        for (int i = 0; i < L; i++) perm_y[i] = stand_in(xs[i]);
        perm_done = 1'b1;
        @(negedge clk) perm_done = 1'b0;
      end
    end
  end

  task automatic hash_msg(int nblk);
    state_t st [L];
    fe_t    m [3][L][2];
    for (int i = 0; i < L; i++) st[i] = '{default: '0};
    for (int bk = 0; bk < nblk; bk++)
      for (int i = 0; i < L; i++) begin
        m[bk][i][0] = rand_fe();
        m[bk][i][1] = rand_fe();
        st[i][0] = ref_add(st[i][0], m[bk][i][0]);
        st[i][1] = ref_add(st[i][1], m[bk][i][1]);
        st[i]    = stand_in(st[i]);
      end
    for (int bk = 0; bk < nblk; bk++) begin
      @(negedge clk);
      repeat ($urandom_range(0, 3)) @(negedge clk);
      msg_valid = 1'b1; msg_last = (bk == nblk - 1); msg = m[bk];
      do @(posedge clk); while (!msg_ready);
      @(negedge clk) msg_valid = 1'b0;
      if (bk != nblk - 1) begin
        @(posedge clk iff dut.st == 2'd0);   // wait for the permutation to return
      end
    end
    @(posedge clk iff dig_valid);
    @(negedge clk);
    for (int i = 0; i < L; i++) begin
      checks++;
      if (digest[i] !== st[i][0]) begin failures++; $display("FAIL lane %0d (%0d blocks)", i, nblk); end
    end
  endtask

  initial begin
    msg_valid = 1'b0; msg_last = 1'b0;
    for (int i = 0; i < L; i++) begin msg[i][0] = '0; msg[i][1] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    hash_msg(1);
    hash_msg(3);
    hash_msg(2);
    hash_msg(1);
    checks++;
    if (nperm != 7 || nstall == 0) begin failures++; $display("FAIL nperm=%0d", nperm); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

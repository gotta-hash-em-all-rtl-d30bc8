// tb_griffin_perm: runs two full 14-round Griffin permutations on batches of
// 13 random states (the first includes the all-zero state) and checks every
// output state against the reference permutation and the cycle count against
// the schedule 13 * (1 + 14 * (254 + 2 + 1)) + 2.
module tb_griffin_perm;
  import hash_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NB = 13;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic   start;
  state_t x_i [NB];
  state_t y_o [NB];
  logic   done_o, busy_o;
  int     checks = 0, failures = 0;

  griffin_perm #(.NB(NB)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int EXP_CYC = NB * (1 + 14 * (254 + 2 + 1)) + 2;

  task automatic run(int pass);
    state_t expv [NB];
    int c0, t = -1;
    for (int i = 0; i < NB; i++) begin
      for (int k = 0; k < 3; k++) x_i[i][k] = (pass == 0 && i == 0) ? '0 : rand_fe();
      expv[i] = ref_griffin(x_i[i], ROUNDS);
    end
    @(negedge clk);
    start = 1'b1; c0 = cyc;
    @(negedge clk) start = 1'b0;
    while (t < 0) begin
      @(posedge clk);
      if (done_o) t = cyc - c0;
    end
    @(negedge clk);
    for (int i = 0; i < NB; i++)
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (y_o[i][k] !== expv[i][k]) begin failures++; $display("FAIL state %0d[%0d]", i, k); end
      end
    checks++;
    if (t != EXP_CYC) begin failures++; $display("FAIL cycles %0d expected %0d", t, EXP_CYC); end
    checks++;
    if (busy_o) failures++;
  endtask

  initial begin
    start = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

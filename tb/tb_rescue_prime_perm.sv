// tb_rescue_prime_perm: runs full 14-round Rescue-Prime permutations on
// batches of 13 random states with the latency-optimised (2 multipliers per
// power map) and the area-optimised (1 multiplier) engines side by side.
// Every output state is checked against the reference permutation, and the
// cycle counts against the schedule:
//   NMUL=2: 14 * (257 * 13 + 2 * 13 + 2 * (MODMUL_LAT + 3)) + 2
//   NMUL=1: 14 * (395 * 13 + 2 * 13 + 2 * (MODMUL_LAT + 3)) + 2
// (257 = bit lengths of 5 and 1/5; 395 adds their set bits).
module tb_rescue_prime_perm;
  import hash_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NB = 13;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic   start;
  state_t x_i [NB];
  state_t yl [NB], ya [NB];
  logic   donel, donea, busyl, busya;
  int     checks = 0, failures = 0;

  rescue_prime_perm #(.NB(NB), .NMUL(2)) dut_l (.clk, .rst_n, .start, .x_i, .y_o(yl), .done_o(donel), .busy_o(busyl));
  rescue_prime_perm #(.NB(NB), .NMUL(1)) dut_a (.clk, .rst_n, .start, .x_i, .y_o(ya), .done_o(donea), .busy_o(busya));

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int EXP_L = 14 * (257 * NB + 2 * NB + 2 * (MODMUL_LAT + 3)) + 2;
  localparam int EXP_A = 14 * (395 * NB + 2 * NB + 2 * (MODMUL_LAT + 3)) + 2;

  initial begin
    state_t expv [NB];
    int c0, tl = -1, ta = -1;
    start = 1'b0;
    for (int i = 0; i < NB; i++) begin
      for (int k = 0; k < 3; k++) x_i[i][k] = (i == 0) ? fe_t'(k) : rand_fe();
      expv[i] = ref_rescue(x_i[i], ROUNDS);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1; c0 = cyc;
    @(negedge clk) start = 1'b0;
    while (tl < 0 || ta < 0) begin
      @(posedge clk);
      if (donel) tl = cyc - c0;
      if (donea) ta = cyc - c0;
    end
    @(negedge clk);
    for (int i = 0; i < NB; i++)
      for (int k = 0; k < 3; k++) begin
        checks += 2;
        if (yl[i][k] !== expv[i][k]) begin failures++; $display("FAIL L state %0d[%0d]", i, k); end
        if (ya[i][k] !== expv[i][k]) begin failures++; $display("FAIL A state %0d[%0d]", i, k); end
      end
    checks += 2;
    if (tl != EXP_L) begin failures++; $display("FAIL cycles L %0d expected %0d", tl, EXP_L); end
    if (ta != EXP_A) begin failures++; $display("FAIL cycles A %0d expected %0d", ta, EXP_A); end
    $display("cycles: L=%0d A=%0d", tl, ta);
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

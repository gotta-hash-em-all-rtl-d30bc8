// tb_pow_map: exponentiates batches of 13 random field elements with the
// one-multiplier and the two-multiplier power map, for e = 5, e = 1/5 mod
// (p-1), e = 0 and random exponents. Checks every result against a
// reference power and the cycle count against
//   slots * 13 + MODMUL_LAT + 2,
// slots = bitlen(e) for two multipliers, bitlen(e) + popcount(e) for one.
module tb_pow_map;
  import hash_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NB = 13;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start;
  fe_t  exp_i;
  fe_t  x_i [NB];
  fe_t  y2 [NB], y1 [NB];
  logic done2, done1, busy2, busy1;
  int   checks = 0, failures = 0;

  pow_map #(.NB(NB), .NMUL(2)) dut2 (.clk, .rst_n, .start, .exp_i, .x_i, .y_o(y2), .done_o(done2), .busy_o(busy2));
  pow_map #(.NB(NB), .NMUL(1)) dut1 (.clk, .rst_n, .start, .exp_i, .x_i, .y_o(y1), .done_o(done1), .busy_o(busy1));

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int bitlen(fe_t e);
    for (int i = FW - 1; i >= 0; i--) if (e[i]) return i + 1;
    return 0;
  endfunction

  task automatic run(fe_t e);
    int c0, t2 = -1, t1 = -1, n;
    fe_t expv [NB];
    for (int i = 0; i < NB; i++) begin
      x_i[i]  = rand_fe();
      expv[i] = ref_pow(x_i[i], e);
    end
    @(negedge clk);
    exp_i = e; start = 1'b1; c0 = cyc;
    @(negedge clk) start = 1'b0;
    while (t2 < 0 || t1 < 0) begin
      @(posedge clk);
      if (done2) t2 = cyc - c0;
      if (done1) t1 = cyc - c0;
    end
    @(negedge clk);
    for (int i = 0; i < NB; i++) begin
      checks += 2;
      if (y2[i] !== expv[i]) begin failures++; $display("FAIL NMUL=2 el %0d", i); end
      if (y1[i] !== expv[i]) begin failures++; $display("FAIL NMUL=1 el %0d", i); end
    end
    n = bitlen(e);
    checks += 2;
    if (t2 != n * NB + MODMUL_LAT + 2) begin
      failures++; $display("FAIL cycles NMUL=2: %0d expected %0d", t2, n * NB + MODMUL_LAT + 2);
    end
    if (t1 != (n + $countones(e)) * NB + MODMUL_LAT + 2) begin
      failures++; $display("FAIL cycles NMUL=1: %0d expected %0d", t1, (n + $countones(e)) * NB + MODMUL_LAT + 2);
    end
  endtask

  initial begin
    start = 1'b0; exp_i = '0;
    for (int i = 0; i < NB; i++) x_i[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(D_FWD);
    run(fe_t'(0));
    run(fe_t'(1));
    run(fe_t'(254'hdead_beef_1234));
    run(D_INV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

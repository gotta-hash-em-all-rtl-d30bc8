// tb_fast_div: divides random field elements, boundary values and small
// values by every base s_i, one division per cycle, and checks quotient and
// remainder against integer division and the two-cycle latency.
module tb_fast_div;
  import hash_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       in_valid, out_valid;
  fe_t        x, q;
  logic [4:0] idx;
  chunk_t     r;
  int checks = 0, failures = 0;

  fast_div dut (.*);

  localparam int N = 400;
  fe_t        xs [N];
  logic [4:0] is [N];
  int cyc = 0, ic [N], got = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [255:0] s;
      s = 256'(RC_S[is[got]]);
      checks++;
      if (256'(q) != 256'(xs[got]) / s || 256'(r) != 256'(xs[got]) % s || cyc - ic[got] != 2) begin
        failures++;
        if (failures < 5) $display("FAIL %0d: x=%h s=%0d q=%h r=%0d", got, xs[got], s, q, r);
      end
      got++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      is[i] = 5'(i % RC_N);
      case (i % 5)
        0: xs[i] = P - fe_t'(i / 5);
        1: xs[i] = fe_t'($urandom_range(0, 5000));
        2: xs[i] = fe_t'({254{1'b1}});
        default: xs[i] = rand_fe();
      endcase
    end
    in_valid = 1'b0; x = '0; idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = 1'b1; x = xs[i]; idx = is[i]; ic[i] = cyc;
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (got != N) failures++;
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

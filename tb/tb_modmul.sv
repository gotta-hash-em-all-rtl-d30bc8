// tb_modmul: random and corner-case products through the pipelined modular
// multiplier, one issued per cycle; each result is checked against a % based
// reference, its tag and its arrival exactly MODMUL_LAT cycles after issue.
module tb_modmul;
  import hash_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       in_valid, out_valid;
  fe_t        a, b, y;
  logic [7:0] tag_in, tag_out;
  int checks = 0, failures = 0;

  modmul #(.TAGW(8)) dut (.*);

  localparam int N = 300;
  fe_t  ea [N];
  fe_t  eb [N];
  int   cyc = 0, issue_cyc [N];

  always @(posedge clk) cyc <= cyc + 1;

  // checker: results arrive in order with their tag
  int got = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (y !== ref_mul(ea[tag_out], eb[tag_out]) || tag_out != 8'(got) ||
          cyc - issue_cyc[tag_out] != MODMUL_LAT) begin
        failures++;
        if (failures < 5) $display("FAIL tag=%0d got=%h", tag_out, y);
      end
      got++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      case (i)
        0: begin ea[i] = '0;        eb[i] = rand_fe(); end
        1: begin ea[i] = P - 1;     eb[i] = P - 1;     end
        2: begin ea[i] = fe_t'(1);  eb[i] = P - 1;     end
        3: begin ea[i] = P - 2;     eb[i] = P - 3;     end
        default: begin ea[i] = rand_fe(); eb[i] = rand_fe(); end
      endcase
    end
    in_valid = 1'b0; a = '0; b = '0; tag_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      in_valid = 1'b1; a = ea[i]; b = eb[i]; tag_in = 8'(i);
      issue_cyc[i] = cyc;
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (got != 256) failures++;
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

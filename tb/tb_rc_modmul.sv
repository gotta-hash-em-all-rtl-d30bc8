// tb_rc_modmul: issues a random mix of MULT, DECOMPOSE and COMPOSE operations,
// one per cycle with the mode changing from cycle to cycle, and checks each
// result against modular multiplication, integer division/remainder and
// a*s_i + z (reduced mod p when fin is set), arriving in order after exactly
// MODMUL_LAT cycles.
module tb_rc_modmul;
  import hash_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       in_valid, out_valid, fin;
  rcm_mode_t  mode;
  fe_t        a, b, y;
  logic [4:0] idx;
  chunk_t     z, r;
  logic [7:0] tag_in, tag_out;
  int checks = 0, failures = 0;

  rc_modmul #(.TAGW(8)) dut (.*);

  localparam int N = 240;
  rcm_mode_t  ms [N];
  fe_t        as [N], bs [N];
  logic [4:0] is [N];
  chunk_t     zs [N];
  logic       fs [N];
  int cyc = 0, ic [N], got = 0;
  int nmode [3] = '{0, 0, 0};
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [255:0] s, e;
      logic ok;
      s = 256'(RC_S[is[got]]);
      case (ms[got])
        RCM_MULT:      ok = (y == ref_mul(as[got], bs[got]));
        RCM_DECOMPOSE: ok = (256'(y) == 256'(as[got]) / s) && (256'(r) == 256'(as[got]) % s);
        default: begin
          e  = 256'(as[got]) * s + 256'(zs[got]);
          if (fs[got]) e = e % 256'(P);
          ok = (256'(y) == e);
        end
      endcase
      checks++;
      if (!ok || tag_out != 8'(got) || cyc - ic[got] != MODMUL_LAT) begin
        failures++;
        if (failures < 5) $display("FAIL op %0d mode %0d", got, ms[got]);
      end
      got++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      ms[i] = rcm_mode_t'(i % 3 == 0 ? $urandom_range(0, 2) : (i % 3) - 1);
      is[i] = 5'($urandom_range(0, RC_N - 1));
      zs[i] = chunk_t'($urandom_range(0, 600));
      fs[i] = i[1];
      bs[i] = rand_fe();
      if (ms[i] == RCM_COMPOSE)
        as[i] = fs[i] ? fe_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, 21'($urandom)})
                      : fe_t'({$urandom, $urandom, $urandom});
      else
        as[i] = rand_fe();
      nmode[ms[i]]++;
    end
    in_valid = 1'b0; mode = RCM_MULT; a = '0; b = '0; idx = '0; z = '0; fin = 1'b0; tag_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = 1'b1; mode = ms[i]; a = as[i]; b = bs[i]; idx = is[i]; z = zs[i];
      fin = fs[i]; tag_in = 8'(i); ic[i] = cyc;
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (8) @(posedge clk);
    checks++;
    if (got != N || nmode[0] == 0 || nmode[1] == 0 || nmode[2] == 0) failures++;
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

// tb_rc_sbox: checks every 10-bit chunk value against the S-box definition
// (inverse in F_659 below 659, identity above) and that the map restricted to
// [0, 659) is a permutation.
module tb_rc_sbox;
  import hash_pkg::*;
  import tb_ref_pkg::*;

  chunk_t z, y;
  int checks = 0, failures = 0;
  bit seen [1024];

  rc_sbox dut (.z, .y);

  initial begin
    for (int v = 0; v < 1024; v++) begin
      z = chunk_t'(v);
      #1;
      checks++;
      if (int'(y) != int'(ref_sbox(v))) begin
        failures++;
        if (failures < 5) $display("FAIL z=%0d y=%0d", v, y);
      end
      if (v < int'(RC_V)) begin
        checks++;
        if (y >= chunk_t'(RC_V) || seen[y]) failures++;
        seen[y] = 1'b1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

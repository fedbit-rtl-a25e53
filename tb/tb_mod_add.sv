// tb_mod_add: (a + b) mod q for random residues and the corner cases 0 and q-1, on each
// limb modulus, plus the cases a + b = q and a = b. The reference is 64-bit integer
// arithmetic.
module tb_mod_add;
  import fedbit_pkg::*;
  logic [W-1:0] a, b, q, r;
  int checks = 0, failures = 0;
  mod_add dut (.a, .b, .q, .r);
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int l = 0; l < QNUM; l++) begin
      q = Q[l];
      for (int i = 0; i < 3000; i++) begin
        a = (i % 7 == 0) ? q - 1 : (i % 11 == 0) ? 0 : $urandom_range(q - 1);
        b = (i % 5 == 0) ? q - 1 : (i % 13 == 0) ? 0 : $urandom_range(q - 1);
        if (i % 17 == 3 && a != 0) b = q - a;
        if (i % 19 == 4) b = a;
        #1;
        checks++;
        if (64'(r) != (64'(a) + 64'(b)) % 64'(q)) begin
          failures++;
          if (failures < 5) $display("%0d + %0d mod %0d = %0d", a, b, q, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

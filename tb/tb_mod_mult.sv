// tb_mod_mult: random and corner-case operands on every RNS limb modulus. Each result is
// compared with (a*b) % q, computed in 64-bit integer arithmetic.
module tb_mod_mult;
  import fedbit_pkg::*;
  logic [W-1:0] a, b, q, r;
  logic [W:0]   mu;
  int checks = 0, failures = 0;
  mod_mult dut (.a, .b, .q, .mu, .r);
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int l = 0; l < QNUM; l++) begin
      q = Q[l]; mu = MU[l];
      for (int i = 0; i < 3000; i++) begin
        unique case (i)
          0: begin a = q - 1; b = q - 1; end
          1: begin a = 0;     b = q - 1; end
          2: begin a = 1;     b = q - 1; end
          default: begin a = $urandom_range(q - 1); b = $urandom_range(q - 1); end
        endcase
        #1;
        checks++;
        if (r != 32'((64'(a) * 64'(b)) % 64'(q))) begin
          failures++;
          if (failures < 5) $display("%0d * %0d mod %0d = %0d", a, b, q, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

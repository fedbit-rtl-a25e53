// tb_barrett_reduce: x mod q for random products x < q^2, and for the corner cases 0, q-1,
// q, q^2-1, on each limb modulus. The reference is the 64-bit % operator.
module tb_barrett_reduce;
  import fedbit_pkg::*;
  logic [2*W-1:0] x;
  logic [W-1:0]   q, r;
  logic [W:0]     mu;
  int checks = 0, failures = 0;
  barrett_reduce dut (.x, .q, .mu, .r);
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int l = 0; l < QNUM; l++) begin
      q = Q[l]; mu = MU[l];
      for (int i = 0; i < 4000; i++) begin
        unique case (i)
          0: x = 0;
          1: x = 64'(q) - 1;
          2: x = 64'(q);
          3: x = 64'(q) * 64'(q) - 1;
          default: x = 64'($urandom_range(q - 1)) * 64'($urandom_range(q - 1)) + 64'($urandom_range(q - 1));
        endcase
        if (x >= 64'(q) * 64'(q)) x = 64'(q) * 64'(q) - 1;
        #1;
        checks++;
        if (64'(r) != x % 64'(q)) begin
          failures++;
          if (failures < 5) $display("%0d mod %0d = %0d", x, q, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_twiddle_mem: after reset, `ready` must rise after N cycles (+2). Then, for every address
// and limb, FWD[k] must equal psi^bitrev(k) and INV[k] must equal psi^-bitrev(k). The
// reference powers come from 64-bit modular arithmetic in the testbench. The check also
// confirms psi^N = -1 and psi * psi^-1 = 1.
module tb_twiddle_mem;
  import fedbit_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic ready;
  caddr_t rd_addr = '0;
  word_data_t fwd, inv;
  int checks = 0, failures = 0;
  logic [31:0] pw [QNUM][N];
  logic [31:0] pwi [QNUM][N];

  twiddle_mem dut (.clk, .rst_n, .ready, .rd_addr, .fwd, .inv);

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc = 0, bad = 0;
    for (int l = 0; l < QNUM; l++) begin
      pw[l][0] = 1; pwi[l][0] = 1;
      for (int i = 1; i < N; i++) begin
        pw[l][i]  = 32'((64'(pw[l][i-1])  * 64'(PSI[l]))     % 64'(Q[l]));
        pwi[l][i] = 32'((64'(pwi[l][i-1]) * 64'(PSI_INV[l])) % 64'(Q[l]));
      end
      checks++;
      if (32'((64'(pw[l][N-1]) * 64'(PSI[l])) % 64'(Q[l])) != Q[l] - 1) failures++;
      checks++;
      if (32'((64'(PSI[l]) * 64'(PSI_INV[l])) % 64'(Q[l])) != 1) failures++;
    end
    @(negedge clk); rst_n = 1'b1;
    while (!ready) begin @(negedge clk); cyc++; end
    $display("ready after %0d cycles", cyc);
    checks++; if (cyc < N || cyc > N + 2) failures++;
    for (int k = 0; k < N; k++) begin
      rd_addr = caddr_t'(k);
      @(negedge clk);
      for (int l = 0; l < QNUM; l++) begin
        if (fwd[l] != pw[l][bitrev(caddr_t'(k))])  bad++;
        if (inv[l] != pwi[l][bitrev(caddr_t'(k))]) bad++;
      end
    end
    checks++; if (bad != 0) begin failures++; $display("%0d table words wrong", bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

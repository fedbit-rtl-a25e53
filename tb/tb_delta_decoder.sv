// tb_delta_decoder: the divide-by-DELTA step of decryption on a full buffer.
// Coefficients are x = DELTA*m + e mod q, with random m < t and e in [-200, 200]. The first
// words hold the edge cases m = 0 with e < 0 and m = t-1 with e > 0. The testbench writes
// the RNS limbs x mod q_i, worked out with 128-bit arithmetic from DELTA and q. After the
// run every limb must hold m. The run must take 35*N cycles (+3).
module tb_delta_decoder;
  import fedbit_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  buf_req_t breq;
  row_data_t rrow;
  word_data_t rword;
  int checks = 0, failures = 0;
  logic [31:0] m_ref [N];

  poly_buffer   u_buf (.clk, .req(breq), .rrow, .rword);
  delta_decoder dut   (.clk, .rst_n, .start, .busy, .done, .breq, .rword);

  initial begin : watchdog
    repeat (400_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, bad;
    cyc = 1; bad = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int c = 0; c < N; c++) begin
      automatic int e = int'($urandom_range(400)) - 200;
      automatic logic [127:0] x;
      m_ref[c] = $urandom_range(T_PLAIN - 1);
      if (c == 0) begin m_ref[c] = 0; e = -200; end
      if (c == 1) begin m_ref[c] = T_PLAIN - 1; e = 200; end
      if (c == 2) begin m_ref[c] = 0; e = 0; end
      x = 128'(DELTA) * 128'(m_ref[c]);
      if (e >= 0) x = (x + 128'(e)) % 128'(Q_FULL);
      else        x = (x + 128'(Q_FULL) - 128'(-e)) % 128'(Q_FULL);
      for (int l = 0; l < QNUM; l++) u_buf.mem[l][c % NBANK][c / NBANK] = 32'(x % 128'(Q[l]));
    end
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("decoder: %0d cycles", cyc);
    checks++; if (cyc < 35*N || cyc > 35*N + 3) failures++;
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++)
        if (u_buf.mem[l][c % NBANK][c / NBANK] != m_ref[c]) begin
          if (bad < 3) $display("limb %0d c %0d: %0d vs %0d", l, c, u_buf.mem[l][c % NBANK][c / NBANK], m_ref[c]);
          bad++;
        end
    checks++; if (bad != 0) begin failures++; $display("%0d words wrong", bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ntt_unit: the NTT/INTT unit with a polynomial buffer and the twiddle memory.
// Forward: a random polynomial is transformed. Then 16 outputs per limb are compared with
// the definition A_k = sum_j a_j * psi^((2k+1)j) mod q, found at position bitrev(k).
// Inverse: the INTT must return the original polynomial in every word.
// Cycle counts: forward 4*(N/2)*log2(N) cycles plus at most 8. Inverse adds 2*N.
module tb_ntt_unit;
  import fedbit_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start = 1'b0, inverse = 1'b0, busy, done, tw_ready;
  buf_req_t   breq;
  row_data_t  rrow;
  word_data_t rword, tw_fwd, tw_inv;
  caddr_t     tw_addr;
  int checks = 0, failures = 0;
  logic [31:0] orig [QNUM][N];

  poly_buffer u_buf (.clk, .req(breq), .rrow, .rword);
  twiddle_mem u_tw  (.clk, .rst_n, .ready(tw_ready), .rd_addr(tw_addr), .fwd(tw_fwd), .inv(tw_inv));
  ntt_unit    dut   (.clk, .rst_n, .start, .inverse, .busy, .done, .breq, .rword,
                     .tw_addr, .tw_fwd, .tw_inv);

  function automatic logic [31:0] mulm(logic [31:0] x, logic [31:0] y, logic [31:0] q);
    return 32'((64'(x) * 64'(y)) % 64'(q));
  endfunction

  task automatic run(logic inv, output int cyc);
    @(negedge clk); start = 1'b1; inverse = inv;
    @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin : watchdog
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        orig[l][c] = $urandom_range(Q[l] - 1);
        u_buf.mem[l][c % NBANK][c / NBANK] = orig[l][c];
      end
    wait (tw_ready);
    run(1'b0, cyc);
    $display("forward NTT: %0d cycles", cyc);
    checks++; if (cyc < 4*(N/2)*LOGN || cyc > 4*(N/2)*LOGN + 8) failures++;
    for (int l = 0; l < QNUM; l++)
      for (int t = 0; t < 16; t++) begin
        automatic int unsigned k = (t < 2) ? t * (N - 1) : $urandom_range(N - 1);
        logic [31:0] root, pw, acc, got;
        int unsigned pos;
        root = 1;
        for (int i = 0; i < 2*k + 1; i++) root = mulm(root, PSI[l], Q[l]);
        pw = 1; acc = 0;
        for (int j = 0; j < N; j++) begin
          acc = 32'((64'(acc) + 64'(mulm(orig[l][j], pw, Q[l]))) % 64'(Q[l]));
          pw  = mulm(pw, root, Q[l]);
        end
        pos = bitrev(caddr_t'(k));
        got = u_buf.mem[l][pos % NBANK][pos / NBANK];
        checks++;
        if (got != acc) begin
          failures++;
          if (failures < 4) $display("limb %0d k %0d: got %0d expected %0d", l, k, got, acc);
        end
      end
    run(1'b1, cyc);
    $display("inverse NTT: %0d cycles", cyc);
    checks++; if (cyc < 4*(N/2)*LOGN + 2*N || cyc > 4*(N/2)*LOGN + 2*N + 8) failures++;
    begin
      automatic int bad = 0;
      for (int l = 0; l < QNUM; l++)
        for (int c = 0; c < N; c++) if (u_buf.mem[l][c % NBANK][c / NBANK] != orig[l][c]) bad++;
      checks++; if (bad != 0) begin failures++; $display("round trip: %0d words differ", bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

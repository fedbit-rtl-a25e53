// tb_crypto_engine: the crypto engine with its buffers filled directly, for one client
// round without DMA.
//   PREP with B0 = a, B1 = s (binary), B2 = e: B1 must equal a*s + e. The reference is a
//        schoolbook negacyclic product.
//   NTT on a copy of s, then ENC with m: B2 = c0.
//   DEC with B0 = c1, B1 = c0, B2 = NTT(s): B1 must equal m in every limb and coefficient.
// It also checks the PREP cycle count: 2 NTTs + 1 INTT + 2 vector passes + step overhead.
module tb_crypto_engine;
  import fedbit_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      ready, start = 1'b0, busy, done;
  eng_op_e   op;
  bufsel_t   buf_id;
  buf_req_t  dma_req;
  row_data_t dma_rrow;
  int checks = 0, failures = 0;

  logic [31:0] a_p [QNUM][N];
  logic [31:0] e_p [QNUM][N];
  logic [31:0] s_p [N];
  logic [31:0] m_p [N];
  int          e_i [N];
  logic [31:0] ns_p [QNUM][N];
  logic [31:0] c0_p [QNUM][N];
  logic [31:0] c1_p [QNUM][N];

  crypto_engine dut (.clk, .rst_n, .ready, .start, .op, .buf_id, .busy, .done,
                     .dma_active(1'b0), .dma_buf(2'd0), .dma_req, .dma_rrow);
  assign dma_req = BUF_IDLE;

  function automatic logic [31:0] rd(int b, int l, int c);
    unique case (b)
      0: return dut.g_buf[0].u_buf.mem[l][c % NBANK][c / NBANK];
      1: return dut.g_buf[1].u_buf.mem[l][c % NBANK][c / NBANK];
      default: return dut.g_buf[2].u_buf.mem[l][c % NBANK][c / NBANK];
    endcase
  endfunction
  task automatic wr(int b, int l, int c, logic [31:0] v);
    unique case (b)
      0: dut.g_buf[0].u_buf.mem[l][c % NBANK][c / NBANK] = v;
      1: dut.g_buf[1].u_buf.mem[l][c % NBANK][c / NBANK] = v;
      default: dut.g_buf[2].u_buf.mem[l][c % NBANK][c / NBANK] = v;
    endcase
  endtask

  task automatic run(eng_op_e o, bufsel_t b, output int cyc);
    @(negedge clk); start = 1'b1; op = o; buf_id = b;
    @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, bad;
    for (int c = 0; c < N; c++) begin
      s_p[c] = $urandom_range(1);
      m_p[c] = $urandom_range(T_PLAIN - 1);
      e_i[c] = int'($urandom_range(6)) - 3;   // one small integer, the same in every limb
    end
    // The buffers are filled only once reset is over, so no request left over from
    // power-up can overwrite them.
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ready);
    @(negedge clk);
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        automatic int ev = e_i[c];
        a_p[l][c] = $urandom_range(Q[l] - 1);
        e_p[l][c] = (ev < 0) ? Q[l] - 32'(-ev) : 32'(ev);
        wr(0, l, c, a_p[l][c]); wr(1, l, c, s_p[c]); wr(2, l, c, e_p[l][c]);
      end

    run(EOP_PREP, 2'd0, cyc);
    $display("PREP: %0d cycles", cyc);
    checks++; if (cyc > 2*98305 + 106497 + 2*130 + 20) failures++;
    bad = 0;
    for (int l = 0; l < QNUM; l++)
      for (int k = 0; k < N; k++) begin
        automatic logic [63:0] acc = 64'(e_p[l][k]);
        for (int j = 0; j < N; j++) if (s_p[j] == 1) begin
          if (k >= j) acc = (acc + 64'(a_p[l][k-j])) % 64'(Q[l]);
          else        acc = (acc + 64'(Q[l]) - 64'(a_p[l][k-j+N])) % 64'(Q[l]);
        end
        if (rd(1, l, k) != 32'(acc)) begin
          if (bad < 3) $display("as+e limb %0d k %0d: %0d vs %0d", l, k, rd(1, l, k), acc);
          bad++;
        end
      end
    checks++; if (bad != 0) begin failures++; $display("as+e: %0d words wrong", bad); end

    // NTT(s): keep NTT(-a) and as+e aside, transform s in B2, save it
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        c1_p[l][c] = rd(0, l, c); c0_p[l][c] = rd(1, l, c); wr(2, l, c, s_p[c]);
      end
    run(EOP_NTT, 2'd2, cyc);
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        ns_p[l][c] = rd(2, l, c); wr(2, l, c, m_p[c]);
      end
    run(EOP_ENC, 2'd0, cyc);
    $display("ENC: %0d cycles", cyc);
    checks++; if (cyc > 2*130 + 10) failures++;
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        c0_p[l][c] = rd(2, l, c);
        wr(1, l, c, c0_p[l][c]); wr(2, l, c, ns_p[l][c]);
      end
    run(EOP_DEC, 2'd0, cyc);
    $display("DEC: %0d cycles", cyc);
    checks++; if (cyc > 130 + 106497 + 130 + 35*N + 20) failures++;
    bad = 0;
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) if (rd(1, l, c) != m_p[c]) begin
        if (bad < 3) $display("m limb %0d c %0d: %0d vs %0d", l, c, rd(1, l, c), m_p[c]);
        bad++;
      end
    checks++; if (bad != 0) begin failures++; $display("decrypt: %0d words wrong", bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

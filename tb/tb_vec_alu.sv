// tb_vec_alu: the element-wise unit with three polynomial buffers. The buffers are filled
// with random residues. Each operation (ADD, MUL, NEG, SCALE, MULNEG) runs once, and every
// word it writes is compared with 64-bit integer arithmetic on a copy of the inputs. Each
// pass must take 2*NBANK cycles (+2).
module tb_vec_alu;
  import fedbit_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      start = 1'b0, busy, done;
  vop_e      op;
  bufsel_t   src_a, src_b, dst;
  buf_req_t  breq [3];
  row_data_t rrow [3];
  word_data_t rword [3];
  int checks = 0, failures = 0;
  logic [31:0] ref_a [QNUM][N];
  logic [31:0] ref_b [QNUM][N];

  for (genvar b = 0; b < 3; b++) begin : g_buf
    poly_buffer u_buf (.clk, .req(breq[b]), .rrow(rrow[b]), .rword(rword[b]));
  end
  vec_alu dut (.clk, .rst_n, .start, .op, .src_a, .src_b, .dst, .busy, .done, .breq, .rrow);

  function automatic logic [31:0] rd(int b, int l, int c);
    unique case (b)
      0: return g_buf[0].u_buf.mem[l][c % NBANK][c / NBANK];
      1: return g_buf[1].u_buf.mem[l][c % NBANK][c / NBANK];
      default: return g_buf[2].u_buf.mem[l][c % NBANK][c / NBANK];
    endcase
  endfunction

  task automatic fill();
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        ref_a[l][c] = $urandom_range(Q[l] - 1);
        ref_b[l][c] = (c == 0) ? 32'd0 : $urandom_range(Q[l] - 1);
        g_buf[0].u_buf.mem[l][c % NBANK][c / NBANK] = ref_a[l][c];
        g_buf[1].u_buf.mem[l][c % NBANK][c / NBANK] = ref_b[l][c];
        g_buf[2].u_buf.mem[l][c % NBANK][c / NBANK] = 32'hdead;
      end
  endtask

  task automatic run(vop_e o, bufsel_t a, bufsel_t b, bufsel_t d);
    automatic int cyc = 1;
    @(negedge clk); start = 1'b1; op = o; src_a = a; src_b = b; dst = d;
    @(negedge clk); start = 1'b0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++; if (cyc > 2*NBANK + 2 || cyc < 2*NBANK) begin failures++; $display("cycles %0d", cyc); end
  endtask

  task automatic expect_buf(int b, int o, string name);
    automatic int bad = 0;
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        automatic logic [63:0] x = 64'(ref_a[l][c]), y = 64'(ref_b[l][c]), qq = 64'(Q[l]);
        logic [31:0] e;
        unique case (o)
          0: e = 32'((x + y) % qq);
          1: e = 32'((x * y) % qq);
          2: e = 32'((qq - x) % qq);
          default: e = 32'((x * 64'(DELTA_MOD[l])) % qq);
        endcase
        if (rd(b, l, c) != e) bad++;
      end
    checks++;
    if (bad != 0) begin failures++; $display("%s: %0d words wrong", name, bad); end
  endtask

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fill(); run(VOP_ADD,   2'd0, 2'd1, 2'd2); expect_buf(2, 0, "ADD");
    fill(); run(VOP_MUL,   2'd0, 2'd1, 2'd2); expect_buf(2, 1, "MUL");
    fill(); run(VOP_NEG,   2'd0, 2'd0, 2'd2); expect_buf(2, 2, "NEG");
    fill(); run(VOP_SCALE, 2'd0, 2'd0, 2'd2); expect_buf(2, 3, "SCALE");
    fill(); run(VOP_ADD,   2'd0, 2'd1, 2'd1); expect_buf(1, 0, "ADD in place");
    fill(); run(VOP_MULNEG,2'd0, 2'd1, 2'd1); expect_buf(1, 1, "MULNEG product");
    expect_buf(0, 2, "MULNEG negation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

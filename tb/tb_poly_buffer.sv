// tb_poly_buffer: row writes, word writes with a limb mask, row reads and word reads, all
// checked against a testbench copy of the buffer contents. Read data must appear exactly
// one cycle after the request.
module tb_poly_buffer;
  import fedbit_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  buf_req_t   req = '0;
  row_data_t  rrow;
  word_data_t rword;
  int checks = 0, failures = 0;
  logic [31:0] model [QNUM][N];

  poly_buffer dut (.clk, .req, .rrow, .rword);

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad;
    bad = 0;
    // fill by row writes, one limb at a time
    for (int l = 0; l < QNUM; l++)
      for (int r = 0; r < NBANK; r++) begin
        @(negedge clk);
        req = '0; req.row_mode = 1'b1; req.addr = caddr_t'(r * NBANK); req.we[l] = 1'b1;
        for (int b = 0; b < NBANK; b++) begin
          req.wdata[l][b] = $urandom;
          model[l][r*NBANK + b] = req.wdata[l][b];
        end
      end
    // word writes to random coefficients, random limb masks
    for (int i = 0; i < 500; i++) begin
      automatic int c = $urandom_range(N - 1);
      @(negedge clk);
      req = '0; req.addr = caddr_t'(c); req.we = QNUM'($urandom_range((1 << QNUM) - 1));
      for (int l = 0; l < QNUM; l++) begin
        req.wdata[l][0] = $urandom;
        if (req.we[l]) model[l][c] = req.wdata[l][0];
      end
    end
    // word reads
    for (int i = 0; i < 1000; i++) begin
      automatic int c = $urandom_range(N - 1);
      @(negedge clk);
      req = '0; req.addr = caddr_t'(c);
      @(negedge clk);
      req = '0; req.addr = caddr_t'($urandom_range(N - 1));  // next request must not disturb
      #1;
      for (int l = 0; l < QNUM; l++) if (rword[l] != model[l][c]) bad++;
    end
    checks++; if (bad != 0) begin failures++; $display("word reads: %0d wrong", bad); end
    bad = 0;
    // row reads
    for (int r = 0; r < NBANK; r++) begin
      @(negedge clk);
      req = '0; req.row_mode = 1'b1; req.addr = caddr_t'(r * NBANK);
      @(negedge clk);
      for (int l = 0; l < QNUM; l++)
        for (int b = 0; b < NBANK; b++) if (rrow[l][b] != model[l][r*NBANK + b]) bad++;
    end
    checks++; if (bad != 0) begin failures++; $display("row reads: %0d wrong", bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dma_engine: the DMA engine between the DDR model (random grant stalls, 4-cycle read
// latency) and a polynomial buffer. A random polynomial is loaded from DDR, and every
// buffer word is checked. The buffer is then stored to another DDR region, and every DDR
// word is checked. Each transfer must take at least QNUM*N cycles and no more than twice
// that. At least one grant stall must have happened.
module tb_dma_engine;
  import fedbit_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  localparam int unsigned PS = QNUM * N;

  logic start = 1'b0, store, busy, done, active;
  bufsel_t buf_id = 2'd1, buf_sel;
  logic [DDR_AW-1:0] ddr_addr;
  buf_req_t breq;
  row_data_t rrow;
  word_data_t rword;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [DDR_AW-1:0] mem_addr;
  logic [W-1:0] mem_wdata, mem_rdata;
  int unsigned stalls;
  int checks = 0, failures = 0;

  dma_engine dut (.*);
  poly_buffer u_buf (.clk, .req(breq), .rrow, .rword);
  ddr_model #(.DEPTH(1 << 16)) u_ddr (.*);

  task automatic xfer(logic st, int unsigned base, output int cyc);
    @(negedge clk); start = 1'b1; store = st; ddr_addr = DDR_AW'(base);
    @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, bad = 0;
    for (int i = 0; i < PS; i++) u_ddr.mem[1000 + i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    xfer(1'b0, 1000, cyc);
    $display("load: %0d cycles", cyc);
    checks++; if (cyc < PS || cyc > 2*PS) failures++;
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++)
        if (u_buf.mem[l][c % NBANK][c / NBANK] != u_ddr.mem[1000 + l*N + c]) bad++;
    checks++; if (bad != 0) begin failures++; $display("load: %0d words wrong", bad); end
    bad = 0;
    xfer(1'b1, 30000, cyc);
    $display("store: %0d cycles", cyc);
    checks++; if (cyc < PS || cyc > 2*PS) failures++;
    for (int i = 0; i < PS; i++) if (u_ddr.mem[30000 + i] != u_ddr.mem[1000 + i]) bad++;
    checks++; if (bad != 0) begin failures++; $display("store: %0d words wrong", bad); end
    checks++; if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

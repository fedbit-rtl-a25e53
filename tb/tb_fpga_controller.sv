// tb_fpga_controller: the command controller with behavioural DMA and engine stand-ins.
// It sends 12 commands back to back, without waiting. Then it checks four things: every
// command reaches the right unit with its buffer, address and op, in the order sent; the
// FIFO pushes back when full; no engine command starts before eng_ready; and done_count
// ends at 12.
module tb_fpga_controller;
  import fedbit_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid = 1'b0, cmd_ready, cmd_done, idle;
  host_cmd_t cmd;
  logic [15:0] done_count;
  logic dma_start, dma_store, dma_done = 1'b0;
  bufsel_t dma_buf, eng_buf;
  logic [DDR_AW-1:0] dma_addr;
  logic eng_ready = 1'b0, eng_start, eng_done = 1'b0;
  eng_op_e eng_op;
  int checks = 0, failures = 0, full_cycles = 0, early = 0;
  string log_s;

  fpga_controller dut (.*);

  task automatic respond(ref logic d);
    repeat ($urandom_range(2, 20)) @(posedge clk);
    d <= 1'b1;
    @(posedge clk);
    d <= 1'b0;
  endtask
  always @(posedge clk) begin
    if (dma_start) begin
      log_s = {log_s, $sformatf("%s%0d@%0d ", dma_store ? "S" : "L", dma_buf, dma_addr)};
      fork respond(dma_done); join_none
    end
    if (eng_start) begin
      if (!eng_ready) early++;
      log_s = {log_s, $sformatf("E%0d/%0d ", eng_op, eng_buf)};
      fork respond(eng_done); join_none
    end
  end

  task automatic send(cmd_op_e o, bufsel_t b, int unsigned a);
    cmd.op = o; cmd.buf_id = b; cmd.ddr_addr = a;
    cmd_valid = 1'b1;
    @(posedge clk);
    while (!cmd_ready) begin full_cycles++; @(posedge clk); end
    #1 cmd_valid = 1'b0;
  endtask

  initial begin : watchdog
    repeat (20_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    log_s = "";
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin repeat (100) @(posedge clk); eng_ready = 1'b1; end
    join_none
    @(negedge clk);
    send(CMD_PREP, 2'd0, 0);
    send(CMD_LOAD, 2'd1, 100);
    send(CMD_LOAD, 2'd2, 200);
    send(CMD_STORE, 2'd0, 300);
    send(CMD_ENC, 2'd0, 0);
    send(CMD_DEC, 2'd0, 0);
    send(CMD_NTT, 2'd2, 0);
    send(CMD_INTT, 2'd1, 0);
    send(CMD_LOAD, 2'd0, 400);
    send(CMD_STORE, 2'd1, 500);
    send(CMD_STORE, 2'd2, 600);
    send(CMD_ENC, 2'd0, 0);
    while (!(idle && done_count == 12)) @(posedge clk);
    checks++;
    if (log_s != "E0/0 L1@100 L2@200 S0@300 E1/0 E2/0 E3/2 E4/1 L0@400 S1@500 S2@600 E1/0 ") begin
      failures++; $display("dispatch log: %s", log_s);
    end
    checks++; if (full_cycles == 0) begin failures++; $display("FIFO never full"); end
    checks++; if (early != 0) failures++;
    checks++; if (done_count != 12) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_engine_scheduler: the scheduler with behavioural stand-ins for its three units. Each
// stand-in answers a start with done after a random delay. The testbench logs every start
// (unit, inverse flag, op and buffers) and compares the log of each macro operation with
// the expected step list. It also checks that `done` comes only after the last unit finished.
module tb_engine_scheduler;
  import fedbit_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  eng_op_e op;
  bufsel_t buf_id;
  logic ntt_start, ntt_inverse, ntt_done = 1'b0;
  bufsel_t ntt_buf;
  logic vec_start, vec_done = 1'b0;
  vop_e vec_op;
  bufsel_t vec_a, vec_b, vec_dst;
  logic dec_start, dec_done = 1'b0;
  bufsel_t dec_buf;
  int checks = 0, failures = 0;
  int outstanding = 0;
  string log_s;

  engine_scheduler dut (.*);

  // unit stand-ins: a start loads a random countdown, and done pulses when it runs out
  int cnt_n = 0, cnt_v = 0, cnt_d = 0;
  always @(posedge clk) begin
    ntt_done <= 1'b0; vec_done <= 1'b0; dec_done <= 1'b0;
    if (cnt_n == 1) begin ntt_done <= 1'b1; outstanding--; end
    if (cnt_v == 1) begin vec_done <= 1'b1; outstanding--; end
    if (cnt_d == 1) begin dec_done <= 1'b1; outstanding--; end
    if (cnt_n > 0) cnt_n--;
    if (cnt_v > 0) cnt_v--;
    if (cnt_d > 0) cnt_d--;
    if (ntt_start) begin
      log_s = {log_s, $sformatf("%s%0d ", ntt_inverse ? "I" : "N", ntt_buf)};
      outstanding++; cnt_n = $urandom_range(1, 6);
    end
    if (vec_start) begin
      log_s = {log_s, $sformatf("V%0d:%0d%0d%0d ", vec_op, vec_a, vec_b, vec_dst)};
      outstanding++; cnt_v = $urandom_range(1, 6);
    end
    if (dec_start) begin
      log_s = {log_s, $sformatf("D%0d ", dec_buf)};
      outstanding++; cnt_d = $urandom_range(1, 6);
    end
  end

  task automatic run(eng_op_e o, bufsel_t b, string expect_s);
    log_s = "";
    @(negedge clk); start = 1'b1; op = o; buf_id = b;
    @(negedge clk); start = 1'b0;
    while (!done) begin
      @(negedge clk);
      if (outstanding > 1) begin failures++; $display("two units running at once %0t %s", $time, log_s); end
    end
    checks++;
    if (log_s != expect_s) begin
      failures++;
      $display("op %s: got '%s' expected '%s'", o.name(), log_s, expect_s);
    end
    checks++; if (outstanding != 0) failures++;
  endtask

  initial begin : watchdog
    repeat (20_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(EOP_PREP, 2'd0, "N0 N1 V4:011 I1 V0:121 ");
    run(EOP_ENC,  2'd0, "V3:222 V0:212 ");
    run(EOP_DEC,  2'd0, "V1:022 I2 V0:121 D1 ");
    run(EOP_NTT,  2'd2, "N2 ");
    run(EOP_INTT, 2'd1, "I1 ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

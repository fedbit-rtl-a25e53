// tb_fedbit_workload: one round of secure aggregation in the evaluated configuration,
// through the full-size accelerator (N = 4096, 3 limbs).
//
// M = 5 clients take part. Each holds 8192 quantized 12-bit weights, the contents of one
// plaintext polynomial. The host packs them bit-interleaved into 15-bit slots: 12 weight bits
// plus 3 carry-margin bits, two slots per coefficient, coefficient = w0 + w1 * 2^15. Both
// packing bounds hold:
//   * per slot, 5 * 4095 = 20475 < 2^15, so no carry crosses a slot;
//   * per coefficient, 20475 * (1 + 2^15) < t, so the sum never wraps mod t.
// Each client runs PREP and ENC under the shared secret key. The testbench, acting as server,
// adds the five ciphertexts limb by limb. One client then runs DEC on the sum and unpacks it.
// Checks:
//   * the packing bounds themselves;
//   * every slot of the decrypted sum equals the exact sum of that weight over the five clients;
//   * coefficient 0 carries the worst case, every client at 4095 in both slots, so the slot
//     sums reach 20475 with no carry into the next slot;
//   * the averages the server would form (slot sum / M) for the first coefficients;
//   * the encryption time of one client, from LOAD a to STORE c0. The limit is 400,000
//     cycles, 1.6 ms at a 250 MHz clock. It follows from the unit timings: PREP takes about
//     303,000 cycles (three transforms, two vector passes), ENC 262, and six polynomial
//     transfers about 14,000 each.
// The sizes (12-bit weights, 3-bit margin, 5 clients per round) are those of the evaluation.
// A whole model is many such polynomials, each handled the same way, one after another.
module tb_fedbit_workload;
  import fedbit_pkg::*;

  localparam int unsigned M     = 5;                // clients per aggregation round
  localparam int unsigned BETA  = 12;               // weight bits
  localparam int unsigned DELTA_B = 3;              // carry-margin bits
  localparam int unsigned SLOT  = BETA + DELTA_B;   // 15-bit slots, 2 per coefficient
  localparam int unsigned PS    = QNUM * N;
  localparam int unsigned R_A = 0, R_E = 5, R_S = 10, R_M = 11, R_C0 = 16, R_C1 = 21,
                          R_NS = 26, R_SC0 = 27, R_SC1 = 28, R_OUT = 29;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              cmd_valid, cmd_ready, cmd_done, idle, engine_ready;
  host_cmd_t         cmd;
  logic [15:0]       done_count;
  logic              mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [DDR_AW-1:0] mem_addr;
  logic [W-1:0]      mem_wdata, mem_rdata;
  int unsigned       stalls;

  fedbit_top dut (.*);
  ddr_model #(.DEPTH(1 << 19)) u_ddr (.clk, .rst_n, .mem_req, .mem_we, .mem_addr, .mem_wdata,
                                      .mem_gnt, .mem_rvalid, .mem_rdata, .stalls);

  int checks = 0, failures = 0;
  int unsigned issued = 0;

  logic [BETA-1:0] wt [M][2*N];                     // weights of each client
  logic [31:0]     s_key [N];
  int              e_sm  [M][N];                    // error of each client, one integer per coefficient

  function automatic logic [31:0] modq(longint v, int l);
    automatic longint qq = longint'(Q[l]);
    v = v % qq;
    if (v < 0) v += qq;
    return 32'(v);
  endfunction

  task automatic send(cmd_op_e op, bufsel_t b, int unsigned region);
    // driven on the falling edge; cmd_ready is stable then, so a command offered while
    // it is high is taken at the next rising edge
    @(negedge clk);
    cmd.op = op; cmd.buf_id = b; cmd.ddr_addr = DDR_AW'(region * PS);
    cmd_valid = 1'b1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
    issued++;
  endtask

  task automatic wait_all();
    while (done_count != 16'(issued)) @(posedge clk);
    @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned t0, t1;
    cmd_valid = 1'b0; cmd = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- packing bounds ----
    checks++; if (M * ((1 << BETA) - 1) >= (1 << SLOT)) failures++;
    checks++; if (longint'(M * ((1 << BETA) - 1)) * (1 + (longint'(1) << SLOT)) >= longint'(T_PLAIN))
      failures++;

    // ---- host data: keys, errors, quantized weights, packed plaintexts ----
    for (int c = 0; c < N; c++) s_key[c] = $urandom_range(1);
    for (int u = 0; u < M; u++)
      for (int c = 0; c < N; c++) e_sm[u][c] = int'($urandom_range(6)) - 3;
    for (int u = 0; u < M; u++)
      for (int i = 0; i < 2*N; i++) wt[u][i] = (i < 2) ? '1 : BETA'($urandom);
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        u_ddr.mem[R_S*PS + l*N + c] = s_key[c];
        for (int u = 0; u < M; u++) begin
          u_ddr.mem[(R_A+u)*PS + l*N + c] = $urandom_range(Q[l] - 1);
          u_ddr.mem[(R_E+u)*PS + l*N + c] = modq(longint'(e_sm[u][c]), l);
          u_ddr.mem[(R_M+u)*PS + l*N + c] = 32'(wt[u][2*c]) | (32'(wt[u][2*c+1]) << SLOT);
        end
      end

    // ---- the secret key in the NTT domain, made once ----
    send(CMD_LOAD,  2'd2, R_S);
    send(CMD_NTT,   2'd2, 0);
    send(CMD_STORE, 2'd2, R_NS);
    wait_all();

    // ---- clients ----
    for (int u = 0; u < M; u++) begin
      t0 = longint'($time);
      send(CMD_LOAD,  2'd0, R_A + u);
      send(CMD_LOAD,  2'd1, R_S);
      send(CMD_LOAD,  2'd2, R_E + u);
      send(CMD_PREP,  2'd0, 0);
      send(CMD_LOAD,  2'd2, R_M + u);
      send(CMD_ENC,   2'd0, 0);
      send(CMD_STORE, 2'd0, R_C1 + u);
      send(CMD_STORE, 2'd2, R_C0 + u);
      wait_all();
      t1 = longint'($time);
      $display("client %0d: encryption took %0d cycles", u, (t1 - t0) / 10);
      checks++; if ((t1 - t0) / 10 > 400_000) failures++;
    end

    // ---- server: sum of the ciphertexts ----
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        automatic longint s0 = 0, s1 = 0;
        for (int u = 0; u < M; u++) begin
          s0 += longint'(u_ddr.mem[(R_C0+u)*PS + l*N + c]);
          s1 += longint'(u_ddr.mem[(R_C1+u)*PS + l*N + c]);
        end
        u_ddr.mem[R_SC0*PS + l*N + c] = 32'(s0 % longint'(Q[l]));
        u_ddr.mem[R_SC1*PS + l*N + c] = 32'(s1 % longint'(Q[l]));
      end

    // ---- decryption and unpacking ----
    send(CMD_LOAD,  2'd0, R_SC1);
    send(CMD_LOAD,  2'd1, R_SC0);
    send(CMD_LOAD,  2'd2, R_NS);
    send(CMD_DEC,   2'd0, 0);
    send(CMD_STORE, 2'd1, R_OUT);
    wait_all();

    begin : chk_slots
      automatic int bad = 0;
      for (int c = 0; c < N; c++) begin
        automatic logic [31:0] v = u_ddr.mem[R_OUT*PS + c];
        for (int k = 0; k < 2; k++) begin
          automatic int unsigned sum = 0;
          for (int u = 0; u < M; u++) sum += 32'(wt[u][2*c+k]);
          if (32'((v >> (k*SLOT)) & ((1 << SLOT) - 1)) != sum) begin
            if (bad < 5) $display("coefficient %0d slot %0d: %0d, expected %0d", c, k,
                                  (v >> (k*SLOT)) & ((1 << SLOT) - 1), sum);
            bad++;
          end
        end
        if ((v >> (2*SLOT)) != 0) bad++;
      end
      checks++; if (bad != 0) begin failures++; $display("%0d slots wrong", bad); end
    end

    begin : chk_limbs
      automatic int bad = 0;
      for (int l = 1; l < QNUM; l++)
        for (int c = 0; c < N; c++)
          if (u_ddr.mem[R_OUT*PS + l*N + c] != u_ddr.mem[R_OUT*PS + c]) bad++;
      checks++; if (bad != 0) begin failures++; $display("limbs disagree at %0d words", bad); end
    end

    begin : chk_avg
      automatic logic [31:0] v0 = u_ddr.mem[R_OUT*PS + 0];
      $display("coefficient 0 = %0d -> slot sums %0d, %0d -> averages %0d, %0d", v0,
               v0[SLOT-1:0], v0[2*SLOT-1:SLOT], 32'(v0[SLOT-1:0]) / M, 32'(v0[2*SLOT-1:SLOT]) / M);
      checks++; if (v0[SLOT-1:0] != 20475 || v0[2*SLOT-1:SLOT] != 20475) failures++;
      checks++; if (32'(v0[SLOT-1:0]) / M != 4095) failures++;
      for (int c = 1; c < 4; c++) begin
        automatic logic [31:0] v = u_ddr.mem[R_OUT*PS + c];
        automatic int unsigned sum = 0;
        for (int u = 0; u < M; u++) sum += 32'(wt[u][2*c]);
        checks++; if (32'(v[SLOT-1:0]) / M != sum / M) failures++;
      end
    end

    $display("ddr stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

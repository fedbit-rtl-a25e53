// tb_fedbit_top: end-to-end test of the accelerator at its full size (N = 4096, 3 limbs).
//
// Three clients share one binary secret key s. Each has its own uniform a and a small error
// e in [-3, 3]. Each encrypts a plaintext polynomial whose coefficients hold two weights,
// bit-interleaved: 8-bit weights in 10-bit slots, coefficient = w0 + w1 * 2^10. The first
// two coefficients are the worked example of three 2x2 weight matrices. The rest are
// random weights.
// For every client the testbench, acting as host, runs LOAD/PREP/STORE/LOAD/ENC/STORE.
// Once it makes NTT(s). Acting as server, it then adds the three ciphertexts limb by limb
// mod q_i, runs DEC and reads m' back.
// Checks:
//   * as+e of client 0 equals a schoolbook negacyclic product a*s plus e, in every limb.
//   * every coefficient of m' equals the sum of the three plaintexts mod t, in every limb.
//   * coefficient 0 unpacks to 279 and 360, averaging to 93 and 120. Coefficient 1
//     unpacks to the averages 162 and 166.
//   * a mechanism count: every command kind, DDR grant stalls, a full command FIFO and
//     a command held back until the twiddle tables were ready. Each must occur at least once.
// The testbench issues commands without waiting for completion, so the FIFO fills.
module tb_fedbit_top;
  import fedbit_pkg::*;

  localparam int unsigned U    = 3;
  localparam int unsigned PS   = QNUM * N;          // words per polynomial in DDR
  // DDR regions (in polynomials)
  localparam int unsigned R_A = 0, R_E = 3, R_S = 6, R_M = 7, R_NA = 10, R_ASE = 13,
                          R_C0 = 16, R_C1 = 19, R_NS = 22, R_SC0 = 23, R_SC1 = 24, R_OUT = 25;

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
  int unsigned n_cmd [8];
  int unsigned fifo_full = 0, tw_wait = 0;

  logic [31:0] s_key [N];
  int          e_sm  [U][N];
  logic [31:0] m_pt  [U][N];

  function automatic logic [31:0] modq(longint v, int l);
    automatic longint qq = longint'(Q[l]);
    v = v % qq;
    if (v < 0) v += qq;
    return 32'(v);
  endfunction

  task automatic send(cmd_op_e op, bufsel_t b, int unsigned region);
    cmd.op = op; cmd.buf_id = b; cmd.ddr_addr = DDR_AW'(region * PS);
    cmd_valid = 1'b1;
    @(posedge clk);
    while (!cmd_ready) begin
      fifo_full++;
      @(posedge clk);
    end
    cmd_valid = 1'b0;
    issued++;
    n_cmd[op]++;
  endtask

  task automatic wait_all();
    while (done_count != 16'(issued)) @(posedge clk);
    @(posedge clk);
  endtask

  // count cycles where a command waits only because the twiddle tables are not ready
  always @(posedge clk) if (rst_n && !engine_ready && !idle) tw_wait++;

  initial begin : watchdog
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned w0, w1;
    cmd_valid = 1'b0; cmd = '0;
    foreach (n_cmd[i]) n_cmd[i] = 0;
    // ---- host data ----
    for (int c = 0; c < N; c++) s_key[c] = $urandom_range(1);
    for (int u = 0; u < U; u++)
      for (int c = 0; c < N; c++) begin
        e_sm[u][c] = int'($urandom_range(6)) - 3;
        w0 = $urandom_range(255); w1 = $urandom_range(255);
        m_pt[u][c] = w0 + (w1 << 10);
      end
    // worked example: client matrices [63 111;255 129], [216 240;9 234], [0 9;222 135]
    m_pt[0][0] = 63  + (111 << 10); m_pt[0][1] = 255 + (129 << 10);
    m_pt[1][0] = 216 + (240 << 10); m_pt[1][1] = 9   + (234 << 10);
    m_pt[2][0] = 0   + (9   << 10); m_pt[2][1] = 222 + (135 << 10);
    checks++; if (m_pt[0][0] != 113727 || m_pt[2][0] != 9216 || m_pt[2][1] != 138462) failures++;

    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        u_ddr.mem[R_S*PS + l*N + c] = s_key[c];
        for (int u = 0; u < U; u++) begin
          u_ddr.mem[(R_A+u)*PS + l*N + c] = $urandom_range(Q[l] - 1);
          u_ddr.mem[(R_E+u)*PS + l*N + c] = modq(e_sm[u][c], l);
          u_ddr.mem[(R_M+u)*PS + l*N + c] = m_pt[u][c];
        end
      end

    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // ---- clients: preparation and encryption ----
    for (int u = 0; u < U; u++) begin
      send(CMD_LOAD,  2'd0, R_A + u);
      send(CMD_LOAD,  2'd1, R_S);
      send(CMD_LOAD,  2'd2, R_E + u);
      send(CMD_PREP,  2'd0, 0);
      send(CMD_STORE, 2'd0, R_NA + u);
      send(CMD_STORE, 2'd1, R_ASE + u);
      send(CMD_LOAD,  2'd2, R_M + u);
      send(CMD_ENC,   2'd0, 0);
      send(CMD_STORE, 2'd0, R_C1 + u);
      send(CMD_STORE, 2'd2, R_C0 + u);
    end
    send(CMD_LOAD,  2'd2, R_S);
    send(CMD_NTT,   2'd2, 0);
    send(CMD_STORE, 2'd2, R_NS);
    // a round trip NTT -> INTT must give s back
    send(CMD_INTT,  2'd2, 0);
    send(CMD_STORE, 2'd2, R_OUT);
    wait_all();
    $display("encryption of %0d clients done at %0t", U, $time);

    begin : chk_s
      automatic int bad = 0;
      for (int l = 0; l < QNUM; l++)
        for (int c = 0; c < N; c++) if (u_ddr.mem[R_OUT*PS + l*N + c] != s_key[c]) bad++;
      checks++; if (bad != 0) begin failures++; $display("INTT(NTT(s)) != s at %0d words", bad); end
    end

    // ---- reference: as+e of client 0, schoolbook negacyclic product ----
    begin : chk_ase
      automatic int bad = 0;
      for (int l = 0; l < QNUM; l++) begin
        automatic longint qq = longint'(Q[l]);
        for (int k = 0; k < N; k++) begin
          automatic longint acc = longint'(modq(e_sm[0][k], l));
          for (int j = 0; j < N; j++) if (s_key[j] == 1) begin
            // a_i * s_j lands on X^(i+j); for i+j >= N it wraps with a minus sign
            automatic int i = k - j;
            if (i >= 0) acc += longint'(u_ddr.mem[R_A*PS + l*N + i]);
            else        acc += qq - longint'(u_ddr.mem[R_A*PS + l*N + i + N]);
            acc = acc % qq;
          end
          if (32'(acc) != u_ddr.mem[R_ASE*PS + l*N + k]) bad++;
        end
      end
      checks++; if (bad != 0) begin failures++; $display("as+e mismatch at %0d words", bad); end
    end

    // ---- server: homomorphic sum of the U ciphertexts ----
    for (int l = 0; l < QNUM; l++)
      for (int c = 0; c < N; c++) begin
        automatic longint s0 = 0, s1 = 0;
        for (int u = 0; u < U; u++) begin
          s0 += longint'(u_ddr.mem[(R_C0+u)*PS + l*N + c]);
          s1 += longint'(u_ddr.mem[(R_C1+u)*PS + l*N + c]);
        end
        u_ddr.mem[R_SC0*PS + l*N + c] = 32'(s0 % longint'(Q[l]));
        u_ddr.mem[R_SC1*PS + l*N + c] = 32'(s1 % longint'(Q[l]));
      end

    // ---- client: decryption of the aggregate ----
    send(CMD_LOAD,  2'd0, R_SC1);
    send(CMD_LOAD,  2'd1, R_SC0);
    send(CMD_LOAD,  2'd2, R_NS);
    send(CMD_DEC,   2'd0, 0);
    send(CMD_STORE, 2'd1, R_OUT);
    wait_all();
    $display("decryption done at %0t", $time);

    begin : chk_m
      automatic int bad = 0;
      for (int l = 0; l < QNUM; l++)
        for (int c = 0; c < N; c++) begin
          automatic longint exp_m = 0;
          for (int u = 0; u < U; u++) exp_m += longint'(m_pt[u][c]);
          exp_m = exp_m % longint'(T_PLAIN);
          if (u_ddr.mem[R_OUT*PS + l*N + c] != 32'(exp_m)) begin
            if (bad < 5) $display("m'[%0d][%0d] = %0d, expected %0d", l, c,
                                  u_ddr.mem[R_OUT*PS + l*N + c], exp_m);
            bad++;
          end
        end
      checks++; if (bad != 0) begin failures++; $display("m' mismatch at %0d words", bad); end
    end

    begin : chk_unpack
      logic [31:0] c0v, c1v;
      c0v = u_ddr.mem[R_OUT*PS + 0];
      c1v = u_ddr.mem[R_OUT*PS + 1];
      $display("aggregated coefficient 0 = %0d -> slots %0d, %0d -> averages %0d, %0d",
               c0v, c0v[9:0], c0v[19:10], c0v[9:0] / U, c0v[19:10] / U);
      checks++; if (c0v != 368919) failures++;
      checks++; if (c0v[9:0] != 279 || c0v[19:10] != 360) failures++;
      checks++; if (c0v[9:0] / U != 93 || c0v[19:10] / U != 120) failures++;
      checks++; if (c1v[9:0] / U != 162 || c1v[19:10] / U != 166) failures++;
    end

    // ---- mechanisms ----
    $display("commands: LOAD=%0d STORE=%0d PREP=%0d ENC=%0d DEC=%0d NTT=%0d INTT=%0d",
             n_cmd[CMD_LOAD], n_cmd[CMD_STORE], n_cmd[CMD_PREP], n_cmd[CMD_ENC],
             n_cmd[CMD_DEC], n_cmd[CMD_NTT], n_cmd[CMD_INTT]);
    $display("ddr stalls=%0d fifo-full cycles=%0d twiddle-wait cycles=%0d", stalls, fifo_full, tw_wait);
    for (int i = 0; i <= int'(CMD_INTT); i++) begin
      checks++; if (n_cmd[i] == 0) failures++;
    end
    checks++; if (stalls == 0) failures++;
    checks++; if (fifo_full == 0) failures++;
    checks++; if (tw_wait == 0) failures++;
    checks++; if (done_count != 16'(issued)) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

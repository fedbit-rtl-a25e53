// vec_alu: element-wise modular arithmetic over whole polynomials, one buffer row per pass.
//
// These are the additions, multiplications, negations and DELTA-scalings of the BFV dataflow.
// Examples: as+e, -a, a*s in the NTT domain, DELTA*m, and c0 + (-a's). The unit reads a row
// (NBANK coefficients per limb) from source buffers A and B. Then it writes the result row
// to buffer `dst`. That is NBANK*QNUM lanes, one modular multiplier and one adder per lane.
// VOP_MULNEG writes A*B to dst and -A back into A in the same pass. This matches the third
// step of the preparation dataflow, where BRAM0 becomes -a while BRAM1 becomes a*s.
//
// Timing: two cycles per row (read, then write), because each bank has one port and the
// destination may also be a source. A whole polynomial takes 2*NBANK = 128 cycles.
// `done` pulses one cycle after the last write. The lane count equal to the bank count is
// this design's choice. The source says only that the banks allow simultaneous access.
module vec_alu
  import fedbit_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  vop_e      op,
  input  bufsel_t   src_a,
  input  bufsel_t   src_b,
  input  bufsel_t   dst,
  output logic      busy,
  output logic      done,
  output buf_req_t  breq [3],
  input  row_data_t rrow [3]
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_WR} state_e;
  state_e  state;
  vop_e    op_q;
  bufsel_t a_q, b_q, d_q;
  raddr_t  row;

  row_data_t opa, opb, res, neg;

  assign opa = rrow[a_q];
  assign opb = rrow[b_q];

  for (genvar l = 0; l < QNUM; l++) begin : g_limb
    for (genvar b = 0; b < NBANK; b++) begin : g_lane
      coeff_t m_b, prod, sum;
      assign m_b = (op_q == VOP_SCALE) ? DELTA_MOD[l] : opb[l][b];
      mod_mult u_mul (.a(opa[l][b]), .b(m_b), .q(Q[l]), .mu(MU[l]), .r(prod));
      mod_add  u_add (.a(opa[l][b]), .b(opb[l][b]), .q(Q[l]), .r(sum));
      mod_sub  u_neg (.a('0), .b(opa[l][b]), .q(Q[l]), .r(neg[l][b]));
      always_comb begin
        unique case (op_q)
          VOP_ADD: res[l][b] = sum;
          VOP_NEG: res[l][b] = neg[l][b];
          default: res[l][b] = prod;      // VOP_MUL, VOP_SCALE, VOP_MULNEG
        endcase
      end
    end
  end

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      breq[i]          = BUF_IDLE;
      breq[i].row_mode = 1'b1;
      breq[i].addr     = {row, {LOGB{1'b0}}};
      if (state == S_WR) begin
        if (bufsel_t'(i) == d_q) begin
          breq[i].we    = '1;
          breq[i].wdata = res;
        end else if (op_q == VOP_MULNEG && bufsel_t'(i) == a_q) begin
          breq[i].we    = '1;
          breq[i].wdata = neg;
        end
      end
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      op_q  <= VOP_ADD;
      a_q   <= '0;
      b_q   <= '0;
      d_q   <= '0;
      row   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          op_q  <= op;
          a_q   <= src_a;
          b_q   <= src_b;
          d_q   <= dst;
          row   <= '0;
          state <= S_RD;
        end
        S_RD: state <= S_WR;
        S_WR: begin
          row <= row + 1'b1;
          if (row == raddr_t'(NBANK - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("vec_alu: start while busy");
  a_mulneg_dst: assert property (@(posedge clk) disable iff (!rst_n)
      (start && op == VOP_MULNEG) |-> (dst != src_a))
    else $error("vec_alu: MULNEG needs dst != src_a");
endmodule

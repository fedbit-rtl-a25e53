// ntt_unit: in-place negacyclic NTT / INTT over one polynomial buffer, all RNS limbs in
// lockstep.
//
// The forward transform is the Cooley-Tukey form with merged psi powers: input in natural
// order, output in bit-reversed order. The inverse is the Gentleman-Sande form: input in
// bit-reversed order, output in natural order, followed by a pass that multiplies every
// coefficient by N^-1. Element-wise products in the NTT domain need no reordering, because
// both operands are in the same bit-reversed order. Each of the QNUM limbs has its own
// butterfly on its own modulus. They share addresses, so one word-mode buffer port serves
// all of them.
//
// Timing: one butterfly takes 4 cycles: read U, read V, write U', write V'. There are
// LOG2(N) stages of N/2 butterflies each, so a forward NTT takes 2*N*LOG2(N) cycles plus a few.
// The INTT adds 2*N cycles for its N^-1 pass. At N = 4096 these are about 98k and 107k
// cycles. `start` is accepted in IDLE. `done` pulses for one cycle at the end.
// The source cites a "conflict-free, high-throughput" pipeline; this unit is simpler.
// It does the same arithmetic with one butterfly per limb, to keep the banked buffers
// single-ported.
module ntt_unit
  import fedbit_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       inverse,
  output logic       busy,
  output logic       done,
  output buf_req_t   breq,
  input  word_data_t rword,
  output caddr_t     tw_addr,
  input  word_data_t tw_fwd,
  input  word_data_t tw_inv
);
  typedef enum logic [2:0] {S_IDLE, S_RDU, S_RDV, S_WRU, S_WRV, S_SC_RD, S_SC_WR} state_e;
  state_e state;

  logic                 inv_q;
  logic [3:0]           stage;          // 0..LOGN-1
  logic [LOGN-2:0]      k;              // butterfly index 0..N/2-1
  caddr_t               cidx;           // coefficient index of the scaling pass
  logic [3:0]           tlog;           // log2 of the butterfly span
  caddr_t               j_lo, j_hi;
  word_data_t           u_q, vout_q;
  word_data_t           uo, vo, vs, sum, dif, dif_s, sc;

  always_comb begin
    tlog    = inv_q ? stage : 4'(LOGN - 1) - stage;
    j_lo    = caddr_t'((caddr_t'(k) >> tlog) << (tlog + 1)) | (caddr_t'(k) & ((caddr_t'(1) << tlog) - 1'b1));
    j_hi    = j_lo | (caddr_t'(1) << tlog);
    tw_addr = inv_q ? ((caddr_t'(1) << (4'(LOGN - 1) - stage)) + (caddr_t'(k) >> stage))
                    : ((caddr_t'(1) << stage) + (caddr_t'(k) >> tlog));
  end

  for (genvar l = 0; l < QNUM; l++) begin : g_limb
    // forward: U' = U + V*S, V' = U - V*S ; inverse: U' = U + V, V' = (U - V)*S
    mod_mult u_vs  (.a(rword[l]), .b(tw_fwd[l]), .q(Q[l]), .mu(MU[l]), .r(vs[l]));
    mod_add  u_add (.a(u_q[l]), .b(inv_q ? rword[l] : vs[l]), .q(Q[l]), .r(sum[l]));
    mod_sub  u_sub (.a(u_q[l]), .b(inv_q ? rword[l] : vs[l]), .q(Q[l]), .r(dif[l]));
    mod_mult u_ds  (.a(dif[l]), .b(tw_inv[l]), .q(Q[l]), .mu(MU[l]), .r(dif_s[l]));
    mod_mult u_sc  (.a(rword[l]), .b(N_INV[l]), .q(Q[l]), .mu(MU[l]), .r(sc[l]));
    assign uo[l] = sum[l];
    assign vo[l] = inv_q ? dif_s[l] : dif[l];
  end

  always_comb begin
    breq = BUF_IDLE;
    unique case (state)
      S_RDU:   breq.addr = j_lo;
      S_RDV:   breq.addr = j_hi;
      S_WRU: begin
        breq.addr = j_lo;
        breq.we   = '1;
        for (int l = 0; l < QNUM; l++) breq.wdata[l][0] = uo[l];
      end
      S_WRV: begin
        breq.addr = j_hi;
        breq.we   = '1;
        for (int l = 0; l < QNUM; l++) breq.wdata[l][0] = vout_q[l];
      end
      S_SC_RD: breq.addr = cidx;
      S_SC_WR: begin
        breq.addr = cidx;
        breq.we   = '1;
        for (int l = 0; l < QNUM; l++) breq.wdata[l][0] = sc[l];
      end
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      inv_q  <= 1'b0;
      stage  <= '0;
      k      <= '0;
      cidx   <= '0;
      done   <= 1'b0;
      u_q    <= '0;
      vout_q <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          inv_q <= inverse;
          stage <= '0;
          k     <= '0;
          cidx  <= '0;
          state <= S_RDU;
        end
        S_RDU: state <= S_RDV;
        S_RDV: begin
          u_q   <= rword;
          state <= S_WRU;
        end
        S_WRU: begin
          vout_q <= vo;
          state  <= S_WRV;
        end
        S_WRV: begin
          k <= k + 1'b1;
          state <= S_RDU;
          if (k == '1) begin
            if (stage == 4'(LOGN - 1)) begin
              if (inv_q) state <= S_SC_RD;
              else begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end else stage <= stage + 1'b1;
          end
        end
        S_SC_RD: state <= S_SC_WR;
        S_SC_WR: begin
          cidx <= cidx + 1'b1;
          if (cidx == caddr_t'(N - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_SC_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("ntt_unit: start while busy");
endmodule

// delta_decoder: the last decryption step, m = round(x / DELTA) mod t, run over one buffer.
//
// Its input is x = c0 + c1*s = DELTA*m + e in RNS form, in the coefficient domain. For each
// coefficient the decoder does three things:
//   1. CRT: x = sum_i [x_i * QSTAR_INV_i]_{q_i} * QSTAR_i  mod q. The sum is below 3q,
//      so at most two subtractions of q finish it.
//   2. A rounding divide by DELTA = floor(q/t): Qt = floor((x + floor(DELTA/2)) / DELTA).
//      This is a 32-step restoring division, one quotient bit per cycle. The quotient
//      stays below 2^32 because x < q < DELTA*(t+1).
//   3. Qt mod t, by one conditional subtraction. The result is written back to every limb
//      of the same coefficient, so any limb of the buffer holds the plaintext.
// The source gives the operation ("divides by DELTA to recover the plaintext"). It does not
// say how the division is done in RNS form. Reconstructing the full value and dividing it
// serially is this design's choice.
//
// Timing: 35 cycles per coefficient (read, CRT, 32 divide steps, write), so 35*N cycles for
// one polynomial. start/busy/done work as in the other units.
module delta_decoder
  import fedbit_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       done,
  output buf_req_t   breq,
  input  word_data_t rword
);
  localparam int unsigned RW = QW - W + 3;      // remainder width, holds 2*DELTA

  typedef enum logic [2:0] {S_IDLE, S_RD, S_CRT, S_DIV, S_WR} state_e;
  state_e state;

  caddr_t          cidx;
  logic [4:0]      bitn;                        // quotient bit being formed
  logic [QW:0]     dvd;                         // x + floor(DELTA/2)
  logic [RW-1:0]   rem;
  logic [31:0]     quo;

  word_data_t      y;
  logic [QW+1:0]   acc, acc1, acc2;
  logic [QW:0]     dvd_nxt;
  logic [RW-1:0]   rem_sh;
  logic [31:0]     mres;

  for (genvar l = 0; l < QNUM; l++) begin : g_limb
    mod_mult u_y (.a(rword[l]), .b(QSTAR_INV[l]), .q(Q[l]), .mu(MU[l]), .r(y[l]));
  end

  always_comb begin
    acc = '0;
    for (int l = 0; l < QNUM; l++)
      acc = acc + (QW+2)'({y[l]} * {QSTAR[l]});
    acc1 = (acc  >= (QW+2)'(Q_FULL)) ? acc  - (QW+2)'(Q_FULL) : acc;
    acc2 = (acc1 >= (QW+2)'(Q_FULL)) ? acc1 - (QW+2)'(Q_FULL) : acc1;
    dvd_nxt = (QW+1)'(acc2) + (QW+1)'(DELTA >> 1);
    rem_sh  = {rem[RW-2:0], dvd[{2'b00, bitn}]};
    mres    = (quo >= T_PLAIN) ? quo - T_PLAIN : quo;
  end

  always_comb begin
    breq = BUF_IDLE;
    breq.addr = cidx;
    if (state == S_WR) begin
      breq.we = '1;
      for (int l = 0; l < QNUM; l++) breq.wdata[l][0] = mres;
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cidx  <= '0;
      bitn  <= '0;
      dvd   <= '0;
      rem   <= '0;
      quo   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cidx  <= '0;
          state <= S_RD;
        end
        S_RD: state <= S_CRT;
        S_CRT: begin
          dvd   <= dvd_nxt;
          rem   <= RW'(dvd_nxt >> 32);
          bitn  <= 5'd31;
          quo   <= '0;
          state <= S_DIV;
        end
        S_DIV: begin
          if (rem_sh >= RW'(DELTA)) begin
            rem       <= rem_sh - RW'(DELTA);
            quo[bitn] <= 1'b1;
          end else rem <= rem_sh;
          bitn <= bitn - 1'b1;
          if (bitn == 5'd0) state <= S_WR;
        end
        S_WR: begin
          cidx <= cidx + 1'b1;
          if (cidx == caddr_t'(N - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("delta_decoder: start while busy");
endmodule

// twiddle_mem: twiddle-factor memory for the negacyclic NTT, one table pair per RNS limb.
//
// For limb l the forward table holds FWD[l][k] = psi_l^bitrev(k) and the inverse table holds
// INV[l][k] = psi_l^-bitrev(k), for k = 0..N-1. These are the bit-reversed powers that an
// in-place Cooley-Tukey NTT and a Gentleman-Sande INTT read. The tables are not loaded from a
// file. After reset a generator walks i = 0..N-1 and writes psi^i and psi^-i at address
// bitrev(i), with one modular multiplication per table per cycle. `ready` rises after N
// cycles. The source lists a "Twiddle Factor Memory" in the function unit but not how it is
// filled; building it on chip is this design's choice.
//
// Read port: present rd_addr in one cycle; fwd/inv for all limbs appear in the next. The
// port returns only valid data once ready is high.
module twiddle_mem
  import fedbit_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  output logic       ready,
  input  caddr_t     rd_addr,
  output word_data_t fwd,
  output word_data_t inv
);
  coeff_t fwd_mem [QNUM][N];
  coeff_t inv_mem [QNUM][N];

  caddr_t     gen_i;
  logic       gen_busy;
  word_data_t pw, pwi;          // psi^i and psi^-i of the current step
  word_data_t pw_nxt, pwi_nxt;

  for (genvar l = 0; l < QNUM; l++) begin : g_limb
    mod_mult u_mf (.a(pw[l]),  .b(PSI[l]),     .q(Q[l]), .mu(MU[l]), .r(pw_nxt[l]));
    mod_mult u_mi (.a(pwi[l]), .b(PSI_INV[l]), .q(Q[l]), .mu(MU[l]), .r(pwi_nxt[l]));

    always_ff @(posedge clk) begin
      if (gen_busy) begin
        fwd_mem[l][bitrev(gen_i)] <= pw[l];
        inv_mem[l][bitrev(gen_i)] <= pwi[l];
      end
      fwd[l] <= fwd_mem[l][rd_addr];
      inv[l] <= inv_mem[l][rd_addr];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen_i    <= '0;
      gen_busy <= 1'b1;
      ready    <= 1'b0;
      for (int l = 0; l < QNUM; l++) begin
        pw[l]  <= 32'd1;
        pwi[l] <= 32'd1;
      end
    end else if (gen_busy) begin
      pw  <= pw_nxt;
      pwi <= pwi_nxt;
      gen_i <= gen_i + 1'b1;
      if (gen_i == caddr_t'(N-1)) begin
        gen_busy <= 1'b0;
        ready    <= 1'b1;
      end
    end
  end
endmodule

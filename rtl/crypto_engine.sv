// crypto_engine: the accelerator's computational core.
//
// It holds three polynomial buffers (BRAM0..BRAM2, each QNUM limbs x NBANK banks x NBANK
// rows), the twiddle-factor memory, the NTT/INTT unit, the element-wise unit (modular add,
// sub and mult, with Barrett reduction), the DELTA divider and the scheduler.
//
// Buffer ports are granted in this order. The DMA engine comes first, when dma_active is
// set and it addresses that buffer. Next comes the NTT unit or the divider, on the buffer
// its step names. The element-wise unit gets every buffer otherwise; when it is idle it
// only issues reads. The controller never runs a DMA transfer and an engine operation at
// once, so no two units ever need one buffer.
//
// Interface: start/op/buf_id begin a macro operation and `done` pulses at its end (see
// engine_scheduler for the step lists). `ready` is low until the twiddle tables are filled
// after reset. The DMA port gives a buffer request and returns the row read data of the
// buffer it selects.
module crypto_engine
  import fedbit_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  output logic      ready,
  input  logic      start,
  input  eng_op_e   op,
  input  bufsel_t   buf_id,
  output logic      busy,
  output logic      done,
  // DMA access to the buffers
  input  logic      dma_active,
  input  bufsel_t   dma_buf,
  input  buf_req_t  dma_req,
  output row_data_t dma_rrow
);
  buf_req_t   breq  [3];
  row_data_t  rrow  [3];
  word_data_t rword [3];

  logic       ntt_start, ntt_inverse, ntt_busy, ntt_done;
  bufsel_t    ntt_buf;
  buf_req_t   ntt_req;
  caddr_t     tw_addr;
  word_data_t tw_fwd, tw_inv;

  logic       vec_start, vec_busy, vec_done;
  vop_e       vec_op;
  bufsel_t    vec_a, vec_b, vec_dst;
  buf_req_t   vec_req [3];

  logic       dec_start, dec_busy, dec_done;
  bufsel_t    dec_buf;
  buf_req_t   dec_req;

  bufsel_t    ntt_buf_q, dec_buf_q;   // buffer held by the unit while it runs

  for (genvar b = 0; b < 3; b++) begin : g_buf
    poly_buffer u_buf (.clk(clk), .req(breq[b]), .rrow(rrow[b]), .rword(rword[b]));
    always_comb begin
      if (dma_active && dma_buf == bufsel_t'(b))      breq[b] = dma_req;
      else if (ntt_busy && ntt_buf_q == bufsel_t'(b)) breq[b] = ntt_req;
      else if (dec_busy && dec_buf_q == bufsel_t'(b)) breq[b] = dec_req;
      else                                            breq[b] = vec_req[b];
    end
  end

  always_comb begin
    dma_rrow = rrow[0];
    if (dma_buf == 2'd1) dma_rrow = rrow[1];
    if (dma_buf == 2'd2) dma_rrow = rrow[2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ntt_buf_q <= '0;
      dec_buf_q <= '0;
    end else begin
      if (ntt_start) ntt_buf_q <= ntt_buf;
      if (dec_start) dec_buf_q <= dec_buf;
    end
  end

  twiddle_mem u_tw (.clk(clk), .rst_n(rst_n), .ready(ready), .rd_addr(tw_addr),
                    .fwd(tw_fwd), .inv(tw_inv));

  ntt_unit u_ntt (.clk(clk), .rst_n(rst_n), .start(ntt_start), .inverse(ntt_inverse),
                  .busy(ntt_busy), .done(ntt_done), .breq(ntt_req), .rword(rword[ntt_buf_q]),
                  .tw_addr(tw_addr), .tw_fwd(tw_fwd), .tw_inv(tw_inv));

  vec_alu u_vec (.clk(clk), .rst_n(rst_n), .start(vec_start), .op(vec_op), .src_a(vec_a),
                 .src_b(vec_b), .dst(vec_dst), .busy(vec_busy), .done(vec_done),
                 .breq(vec_req), .rrow(rrow));

  delta_decoder u_dec (.clk(clk), .rst_n(rst_n), .start(dec_start), .busy(dec_busy),
                       .done(dec_done), .breq(dec_req), .rword(rword[dec_buf_q]));

  engine_scheduler u_sch (.clk(clk), .rst_n(rst_n), .start(start), .op(op), .buf_id(buf_id),
                          .busy(busy), .done(done),
                          .ntt_start(ntt_start), .ntt_inverse(ntt_inverse), .ntt_buf(ntt_buf),
                          .ntt_done(ntt_done),
                          .vec_start(vec_start), .vec_op(vec_op), .vec_a(vec_a), .vec_b(vec_b),
                          .vec_dst(vec_dst), .vec_done(vec_done),
                          .dec_start(dec_start), .dec_buf(dec_buf), .dec_done(dec_done));

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(dma_active && busy))
    else $error("crypto_engine: DMA transfer during an engine operation");
endmodule

// fedbit_top: the client-side BFV encryption/decryption accelerator.
//
// It joins the FPGA controller, the DMA engine and the crypto engine. The host link (PCIe in
// the source) is represented by the command port. The external DDR is represented by a
// word-wide memory port with request/grant handshakes and in-order read returns. Both are
// outside this RTL.
//
// A typical client round, with host commands in order:
//   LOAD a->B0, s->B1, e->B2 ; PREP ; STORE B0 (NTT(-a)), B1 (as+e)
//   LOAD s->B2 ; NTT B2 ; STORE B2 (NTT(s))
//   LOAD NTT(-a)->B0, as+e->B1, m->B2 ; ENC ; STORE B0 (c1), B2 (c0)
//   ... the server adds ciphertexts of several clients ...
//   LOAD sum c1->B0, sum c0->B1, NTT(s)->B2 ; DEC ; STORE B1 (m' = sum of the messages)
// All polynomials sit in DDR as QNUM limbs of N words. A plaintext is stored with the same
// value in every limb. After DEC every limb of B1 holds m'.
module fedbit_top
  import fedbit_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // host command port
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  host_cmd_t         cmd,
  output logic              cmd_done,
  output logic [15:0]       done_count,
  output logic              idle,
  output logic              engine_ready,
  // external DDR port
  output logic              mem_req,
  output logic              mem_we,
  output logic [DDR_AW-1:0] mem_addr,
  output logic [W-1:0]      mem_wdata,
  input  logic              mem_gnt,
  input  logic              mem_rvalid,
  input  logic [W-1:0]      mem_rdata
);
  logic              dma_start, dma_store, dma_done, dma_busy, dma_active;
  bufsel_t           dma_buf, dma_sel;
  logic [DDR_AW-1:0] dma_addr;
  buf_req_t          dma_req;
  row_data_t         dma_rrow;
  logic              eng_start, eng_busy, eng_done;
  eng_op_e           eng_op;
  bufsel_t           eng_buf;

  fpga_controller u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_done, .done_count, .idle,
    .dma_start, .dma_store, .dma_buf, .dma_addr, .dma_done,
    .eng_ready(engine_ready), .eng_start, .eng_op, .eng_buf, .eng_done);

  dma_engine u_dma (
    .clk, .rst_n, .start(dma_start), .store(dma_store), .buf_id(dma_buf),
    .ddr_addr(dma_addr), .busy(dma_busy), .done(dma_done),
    .active(dma_active), .buf_sel(dma_sel), .breq(dma_req), .rrow(dma_rrow),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata);

  crypto_engine u_eng (
    .clk, .rst_n, .ready(engine_ready), .start(eng_start), .op(eng_op), .buf_id(eng_buf),
    .busy(eng_busy), .done(eng_done),
    .dma_active, .dma_buf(dma_sel), .dma_req, .dma_rrow);
endmodule

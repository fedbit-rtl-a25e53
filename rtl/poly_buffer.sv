// poly_buffer: one of the three on-chip polynomial buffers (BRAM0..BRAM2).
//
// It holds one polynomial of N coefficients for each of the QNUM RNS limbs. Each limb is
// striped over NBANK = sqrt(N) independent banks, each NBANK words deep: coefficient c
// sits in bank c % NBANK, at row c / NBANK. The organisation follows the source. The
// striping rule is this design's choice.
//
// Every bank has a single synchronous port, and all banks share one request. A row-mode
// request reads or writes one whole row, NBANK words per limb in one cycle; the element-wise
// unit and the DMA engine use it. A word-mode request touches one coefficient; the NTT unit
// and the divider use it. `we` masks the write per limb. Read data appear one cycle after
// the request. `rrow` returns the whole row. `rword` returns the word that the previous
// word-mode request addressed. A request that writes returns no read data.
module poly_buffer
  import fedbit_pkg::*;
(
  input  logic       clk,
  input  buf_req_t   req,
  output row_data_t  rrow,
  output word_data_t rword
);
  coeff_t mem [QNUM][NBANK][NBANK];   // [limb][bank][row]

  raddr_t row;
  raddr_t bank;
  raddr_t bank_q;                     // bank of the previous request, to pick rword
  assign row  = req.addr[LOGN-1:LOGB];
  assign bank = req.addr[LOGB-1:0];

  for (genvar l = 0; l < QNUM; l++) begin : g_limb
    for (genvar b = 0; b < NBANK; b++) begin : g_bank
      logic bank_en;
      assign bank_en = req.row_mode || (bank == raddr_t'(b));
      always_ff @(posedge clk) begin
        if (bank_en && req.we[l])
          mem[l][b][row] <= req.row_mode ? req.wdata[l][b] : req.wdata[l][0];
        rrow[l][b] <= mem[l][b][row];
      end
    end
    assign rword[l] = rrow[l][bank_q];
  end

  always_ff @(posedge clk) bank_q <= bank;
endmodule

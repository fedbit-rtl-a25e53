// dma_engine: moves whole polynomials between external DDR and the crypto engine's buffers.
//
// One transfer moves QNUM*N words, one 32-bit limb coefficient per DDR word. The DDR
// layout is this design's choice: word ddr_addr + l*N + c holds limb l of coefficient c.
//
// Load (DDR -> buffer): read requests go out back to back, one per cycle while mem_gnt is
//   high. Read data must come back in order, flagged by mem_rvalid. Returned words are
//   gathered into a row. The row is written into the buffer, masked to one limb, in the
//   same cycle as its last word arrives.
// Store (buffer -> DDR): for each row and limb, read the row (2 cycles), then send NBANK
//   write requests.
// `done` pulses once the last word has been written or has come back. The memory port is a
// plain request/grant protocol with in-order read returns. The source only says the DMA
// streams DDR data into on-chip memory; the port and the layout are this design's.
module dma_engine
  import fedbit_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              store,       // 0: DDR -> buffer, 1: buffer -> DDR
  input  bufsel_t           buf_id,
  input  logic [DDR_AW-1:0] ddr_addr,
  output logic              busy,
  output logic              done,
  // buffer side
  output logic              active,
  output bufsel_t           buf_sel,
  output buf_req_t          breq,
  input  row_data_t         rrow,
  // DDR side
  output logic              mem_req,
  output logic              mem_we,
  output logic [DDR_AW-1:0] mem_addr,
  output logic [W-1:0]      mem_wdata,
  input  logic              mem_gnt,
  input  logic              mem_rvalid,
  input  logic [W-1:0]      mem_rdata
);
  localparam int unsigned TOTAL = QNUM * N;
  localparam int unsigned CW    = $clog2(TOTAL) + 1;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_CAP, S_ST_WR} state_e;
  state_e state;

  logic [DDR_AW-1:0] base_q;
  logic [CW-1:0]     issued;     // words requested (load) or written (store)
  logic [CW-1:0]     returned;   // words come back (load)
  coeff_t            gather [NBANK];
  coeff_t            srow   [NBANK];
  raddr_t            lane;

  // word index w = l*N + c : limb = w / N, row = (w % N) / NBANK, lane = w % NBANK
  logic [1:0] ret_limb, iss_limb;
  raddr_t     ret_row,  iss_row;
  assign ret_limb = 2'(returned / CW'(N));
  assign ret_row  = raddr_t'((returned % CW'(N)) / CW'(NBANK));
  assign iss_limb = 2'(issued / CW'(N));
  assign iss_row  = raddr_t'((issued % CW'(N)) / CW'(NBANK));

  assign busy    = (state != S_IDLE);
  assign active  = busy;
  assign buf_sel = buf_id;

  always_comb begin
    mem_req   = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = base_q + DDR_AW'(issued);
    mem_wdata = srow[lane];
    if (state == S_LOAD && issued < CW'(TOTAL)) mem_req = 1'b1;
    if (state == S_ST_WR) begin
      mem_req = 1'b1;
      mem_we  = 1'b1;
    end
  end

  always_comb begin
    breq = BUF_IDLE;
    breq.row_mode = 1'b1;
    if (state == S_LOAD) begin
      breq.addr = {ret_row, {LOGB{1'b0}}};
      if (mem_rvalid && returned[LOGB-1:0] == raddr_t'(NBANK - 1)) begin
        breq.we[ret_limb] = 1'b1;
        for (int b = 0; b < NBANK - 1; b++) breq.wdata[ret_limb][b] = gather[b];
        breq.wdata[ret_limb][NBANK-1] = mem_rdata;
      end
    end else begin
      breq.addr = {iss_row, {LOGB{1'b0}}};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      base_q   <= '0;
      issued   <= '0;
      returned <= '0;
      lane     <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          base_q   <= ddr_addr;
          issued   <= '0;
          returned <= '0;
          lane     <= '0;
          state    <= store ? S_ST_RD : S_LOAD;
        end
        S_LOAD: begin
          if (mem_req && mem_gnt) issued <= issued + 1'b1;
          if (mem_rvalid) begin
            gather[returned[LOGB-1:0]] <= mem_rdata;
            returned <= returned + 1'b1;
            if (returned == CW'(TOTAL - 1)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_ST_RD:  state <= S_ST_CAP;     // row read issued this cycle
        S_ST_CAP: begin
          for (int b = 0; b < NBANK; b++) srow[b] <= rrow[iss_limb][b];
          lane  <= '0;
          state <= S_ST_WR;
        end
        S_ST_WR: if (mem_gnt) begin
          issued <= issued + 1'b1;
          lane   <= lane + 1'b1;
          if (issued == CW'(TOTAL - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (lane == raddr_t'(NBANK - 1)) state <= S_ST_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("dma_engine: start while busy");
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (mem_req && !mem_gnt) |=> (mem_req && $stable(mem_addr) && $stable(mem_we)))
    else $error("dma_engine: request dropped or changed before grant");
endmodule

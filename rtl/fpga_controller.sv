// fpga_controller: takes host commands and hands them, in order, to the DMA engine or the
// crypto engine.
//
// Commands (host_cmd_t) come in on a valid/ready port, the host side of the PCIe link, and
// wait in a FIFO of CMD_DEPTH entries. The controller runs one command at a time. LOAD and
// STORE go to the DMA engine. PREP, ENC, DEC, NTT and INTT go to the crypto engine, but
// not before its twiddle tables are ready. When the unit signals done, the controller
// pulses cmd_done and counts the command. Running one at a time means a DMA transfer never
// overlaps an engine operation, so the buffers need no arbitration. The source says only
// that the controller "manages communication and instruction dispatch". The command set,
// the FIFO and the strict ordering are this design's choices.
module fpga_controller
  import fedbit_pkg::*;
#(
  parameter int unsigned CMD_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // host command port
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  host_cmd_t         cmd,
  output logic              cmd_done,
  output logic [15:0]       done_count,
  output logic              idle,
  // DMA engine
  output logic              dma_start,
  output logic              dma_store,
  output bufsel_t           dma_buf,
  output logic [DDR_AW-1:0] dma_addr,
  input  logic              dma_done,
  // crypto engine
  input  logic              eng_ready,
  output logic              eng_start,
  output eng_op_e           eng_op,
  output bufsel_t           eng_buf,
  input  logic              eng_done
);
  localparam int unsigned PW = (CMD_DEPTH > 1) ? $clog2(CMD_DEPTH) : 1;

  host_cmd_t       fifo [CMD_DEPTH];
  logic [PW-1:0]   wp, rp;
  logic [PW:0]     count;
  logic            push, pop;
  host_cmd_t       head, cur;
  logic            running;

  assign head      = fifo[rp];
  assign cmd_ready = (count != (PW+1)'(CMD_DEPTH));
  assign push      = cmd_valid && cmd_ready;
  assign pop       = !running && (count != '0) &&
                     ((head.op == CMD_LOAD || head.op == CMD_STORE) || eng_ready);
  assign idle      = !running && (count == '0);

  assign dma_start = pop && (head.op == CMD_LOAD || head.op == CMD_STORE);
  assign dma_store = (head.op == CMD_STORE);
  assign dma_buf   = running ? cur.buf_id : head.buf_id;
  assign dma_addr  = head.ddr_addr;
  assign eng_start = pop && !(head.op == CMD_LOAD || head.op == CMD_STORE);
  assign eng_buf   = head.buf_id;

  always_comb begin
    unique case (head.op)
      CMD_PREP: eng_op = EOP_PREP;
      CMD_ENC:  eng_op = EOP_ENC;
      CMD_DEC:  eng_op = EOP_DEC;
      CMD_NTT:  eng_op = EOP_NTT;
      default:  eng_op = EOP_INTT;
    endcase
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wp] <= cmd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp         <= '0;
      rp         <= '0;
      count      <= '0;
      running    <= 1'b0;
      cur        <= '0;
      cmd_done   <= 1'b0;
      done_count <= '0;
    end else begin
      cmd_done <= 1'b0;
      if (push) wp <= (wp == PW'(CMD_DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(CMD_DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
      if (pop) begin
        running <= 1'b1;
        cur     <= head;
      end else if (running && (dma_done || eng_done)) begin
        running    <= 1'b0;
        cmd_done   <= 1'b1;
        done_count <= done_count + 1'b1;
      end
    end
  end

  a_one_at_a_time: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !running)
    else $error("fpga_controller: dispatch while a command runs");
endmodule

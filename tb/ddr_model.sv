// ddr_model: behavioural stand-in for the external DDR memory and its controller, for
// simulation only.
//
// It is a word array behind the accelerator's memory port. A request is taken in a cycle
// where mem_req and mem_gnt are both high. Read data return in order, LAT cycles later,
// flagged by mem_rvalid. When STALL_PCT is non-zero, mem_gnt drops at random in that
// percentage of cycles. That forces the requester to hold its request, and `stalls` counts
// those cycles. The testbench reaches the array directly (mem) to play the host.
module ddr_model
  import fedbit_pkg::*;
#(
  parameter int unsigned DEPTH     = 1 << 19,
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mem_req,
  input  logic              mem_we,
  input  logic [DDR_AW-1:0] mem_addr,
  input  logic [W-1:0]      mem_wdata,
  output logic              mem_gnt,
  output logic              mem_rvalid,
  output logic [W-1:0]      mem_rdata,
  output int unsigned       stalls
);
  logic [W-1:0] mem [DEPTH];
  logic [LAT-1:0]       vpipe;
  logic [W-1:0]         dpipe [LAT];

  always_ff @(posedge clk) begin
    mem_gnt <= ($urandom_range(99) >= STALL_PCT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe  <= '0;
      stalls <= 0;
    end else begin
      if (mem_req && !mem_gnt) stalls <= stalls + 1;
      vpipe[0] <= mem_req && mem_gnt && !mem_we;
      dpipe[0] <= mem[mem_addr % DEPTH];
      for (int i = 1; i < LAT; i++) begin
        vpipe[i] <= vpipe[i-1];
        dpipe[i] <= dpipe[i-1];
      end
      if (mem_req && mem_gnt && mem_we) mem[mem_addr % DEPTH] <= mem_wdata;
    end
  end
  assign mem_rvalid = vpipe[LAT-1];
  assign mem_rdata  = dpipe[LAT-1];
endmodule

// mod_mult: r = (a * b) mod q. A full 32x32 -> 64-bit product goes into barrett_reduce.
// Purely combinational. A pipelined version would register the product ahead of the
// reducer; this design keeps it to one cycle and lets the units that call it register the
// result.
module mod_mult
  import fedbit_pkg::*;
(
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  input  logic [W:0]   mu,
  output logic [W-1:0] r
);
  logic [2*W-1:0] p;
  assign p = {{W{1'b0}}, a} * {{W{1'b0}}, b};
  barrett_reduce u_red (.x(p), .q(q), .mu(mu), .r(r));
endmodule

// mod_sub: r = (a - b) mod q for residues a, b < q. The module subtracts, then adds q back
// when the difference went negative (a < b). Purely combinational.
module mod_sub
  import fedbit_pkg::*;
(
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  output logic [W-1:0] r
);
  always_comb begin
    r = (a >= b) ? (a - b) : (a - b + q);
  end
endmodule

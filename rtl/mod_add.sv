// mod_add: r = (a + b) mod q for residues a, b < q. The adder has one spare bit for the carry,
// and a single conditional subtraction of q follows. Purely combinational.
module mod_add
  import fedbit_pkg::*;
(
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  output logic [W-1:0] r
);
  logic [W:0] s;
  always_comb begin
    s = {1'b0, a} + {1'b0, b};
    r = (s >= {1'b0, q}) ? W'(s - {1'b0, q}) : W'(s);
  end
endmodule

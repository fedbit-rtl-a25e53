// barrett_reduce: r = x mod q for a product x < q^2 of two residues, without a divider.
//
// This is the classic Barrett reduction with base 2 and k = 32, for a modulus with
// 2^31 <= q < 2^32 and the precomputed mu = floor(2^64 / q). The quotient estimate is
// qhat = floor(floor(x / 2^31) * mu / 2^33). It is never more than 2 below the true quotient,
// so r = x - qhat*q is less than 3q. Two conditional subtractions finish it.
// Purely combinational. The modulus and mu are inputs, so one design serves every RNS limb.
// The source asks for "a hardware-optimized Barrett reducer" but does not give its insides;
// the textbook form here is this design's choice.
module barrett_reduce
  import fedbit_pkg::*;
(
  input  logic [2*W-1:0] x,     // x < q^2
  input  logic [W-1:0]   q,
  input  logic [W:0]     mu,    // floor(2^64 / q)
  output logic [W-1:0]   r
);
  logic [W:0]     x_hi;         // floor(x / 2^31), 33 bits
  logic [2*W+1:0] prod;         // x_hi * mu, 66 bits
  logic [W:0]     qhat;
  logic [W+1:0]   rem;          // x - qhat*q < 3q < 2^34
  logic [W+1:0]   rem1;

  always_comb begin
    x_hi = x[2*W-1:W-1];
    prod = {1'b0, x_hi} * {1'b0, mu};
    qhat = prod[2*W+1:W+1];
    // Only the low W+2 bits of x - qhat*q can be non-zero.
    rem  = x[W+1:0] - (W+2)'({1'b0, qhat} * {1'b0, q});
    rem1 = (rem >= {2'b00, q}) ? rem - {2'b00, q} : rem;
    r    = (rem1 >= {2'b00, q}) ? W'(rem1 - {2'b00, q}) : W'(rem1);
  end
endmodule

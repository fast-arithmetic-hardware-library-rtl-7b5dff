// barrett_reduce: classic Barrett reduction r = a mod q, purely combinational.
//
// The factor mu = floor(2^AW / q) is computed once per modulus (he_pkg::barrett_mu)
// and supplied with q, so the reduction itself is two multiplications, a right shift and
// a subtraction, as in the classic algorithm: est = (a * mu) >> AW, t = a - est * q.
// With AW = 2*ceil(log2 q) this is exactly the 4^k form of the algorithm. The quotient
// estimate can be up to two short for an arbitrary AW-bit input, so the final correction
// keeps two compare-and-subtract steps where the textbook listing shows one; for inputs
// below q^2 the second one never fires. Following the bit-width observation of the
// classic design, t is carried on QW+2 bits only: the upper bits of a and est*q cancel.
//
// Interface: a (AW bits, any value below 2^AW), q (QW bits, q > 2^(QW-1)), mu (MUW
// bits). Output r = a mod q. No clock; the caller registers the result.
module barrett_reduce #(
  parameter int unsigned QW  = 30,
  parameter int unsigned AW  = 2 * QW,
  parameter int unsigned MUW = AW - QW + 2
) (
  input  logic [AW-1:0]  a,
  input  logic [QW-1:0]  q,
  input  logic [MUW-1:0] mu,
  output logic [QW-1:0]  r
);
  logic [AW+MUW-1:0] prod;
  logic [MUW-1:0]    est;
  logic [QW+1:0]     t, t1;

  always_comb begin
    prod = a * mu;
    est  = MUW'(prod >> AW);
    // Only the low QW+2 bits of a - est*q are significant (the result is below 3q).
    t    = (QW+2)'(a) - (QW+2)'(est * q);
    t1   = (t >= (QW+2)'(q)) ? t - (QW+2)'(q) : t;
    r    = (t1 >= (QW+2)'(q)) ? QW'(t1 - (QW+2)'(q)) : QW'(t1);
  end
endmodule

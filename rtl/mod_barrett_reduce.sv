// mod_barrett_reduce: single-fold modified Barrett reduction, purely combinational.
//
// For a modulus q of about 2k bits (k = floor(log2(q)/2)) the factor r = ceil(2^(3k)/q)
// has only about k bits. The reduction shifts a right by 2k, multiplies by r, shifts
// right by k to get the quotient estimate t, and returns a - t*q. All multiplications
// are on k- to 2k-bit operands instead of the 2k x 2k products of classic Barrett.
//
// Input range: the single fold is exact to within one q for a < 2^(3k); this is the
// range in which the block is used (the relinearisation inner product feeds it sums of
// at most a few tens of residues). Because r is rounded up and the low 2k bits of a are
// dropped, a - t*q can land one q below zero or one q above the range; the output stage
// therefore keeps one signed correction step. The listing this follows returns a - t*q
// with no check at all; the correction is this design's addition so the output is always
// fully reduced.
//
// Interface: a (AW bits, a < 2^(3k)), q (QW bits), k (the fold exponent), r (RW bits).
// Output res = a mod q. No clock.
module mod_barrett_reduce #(
  parameter int unsigned QW = 30,
  parameter int unsigned AW = 45,
  parameter int unsigned KW = 6,
  parameter int unsigned RW = QW/2 + 3
) (
  input  logic [AW-1:0] a,
  input  logic [QW-1:0] q,
  input  logic [KW-1:0] k,
  input  logic [RW-1:0] r,
  output logic [QW-1:0] res
);
  logic [AW-1:0]        a_hi;
  logic [AW+RW-1:0]     prod;
  logic [AW-1:0]        t;
  logic signed [QW+2:0] rr;

  always_comb begin
    a_hi = a >> (2 * k);             // floor(a / 2^2k)
    prod = a_hi * r;
    t    = AW'(prod >> k);           // floor(floor(a / 2^2k) * r / 2^k)
    rr   = signed'((QW+3)'(a) - (QW+3)'(t * q));
    if (rr < 0)                           rr = rr + signed'((QW+3)'(q));
    else if (rr >= signed'((QW+3)'(q)))   rr = rr - signed'((QW+3)'(q));
    res  = QW'(rr);
  end
endmodule

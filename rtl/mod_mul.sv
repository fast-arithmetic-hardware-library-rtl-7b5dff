// mod_mul: modular multiplication r = a * b mod q for residues below q.
//
// A QW x QW multiplier followed by a classic Barrett reduction (barrett_reduce) with
// the per-modulus factor mu = floor(2^(2*QW) / q). Purely combinational.
//
// Multiply followed by classic Barrett reduction, the modular multiplier every published
// unit uses; no registers is this design's choice.
module mod_mul #(
  parameter int unsigned QW  = 30,
  parameter int unsigned MUW = QW + 2
) (
  input  logic [QW-1:0]  a,
  input  logic [QW-1:0]  b,
  input  logic [QW-1:0]  q,
  input  logic [MUW-1:0] mu,
  output logic [QW-1:0]  r
);
  logic [2*QW-1:0] p;
  assign p = a * b;
  barrett_reduce #(.QW(QW), .AW(2*QW), .MUW(MUW)) u_red (.a(p), .q(q), .mu(mu), .r(r));
endmodule

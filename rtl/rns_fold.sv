// rns_fold: one residue x mod q of a wide coefficient x, by folding and Barrett reduction.
//
// The wide coefficient is cut into NC chunks of QW bits, x = sum_j x_j * 2^(QW*j). With
// the fold constants f_j = 2^(QW*j) mod q (known in advance, supplied by the caller) the
// residue is sum_j x_j * f_j mod q: NC small QW x QW products whose sum is below
// NC * 2^(2*QW), reduced once by a Barrett reduction sized for that sum. Purely
// combinational; the RNS blocks register around it.
//
// This folding reduction is this design's own way of forming x mod q without a 1200-bit
// Barrett multiplier.
module rns_fold #(
  parameter int unsigned QW  = 30,
  parameter int unsigned NC  = 40,
  parameter int unsigned SW  = 2 * QW + $clog2(NC),
  parameter int unsigned MUW = SW - QW + 2
) (
  input  logic [NC*QW-1:0] x,
  input  logic [QW-1:0]    f [NC],
  input  logic [QW-1:0]    q,
  input  logic [MUW-1:0]   mu,
  output logic [QW-1:0]    r
);
  logic [SW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int j = 0; j < NC; j++) sum = sum + SW'(x[j*QW +: QW] * f[j]);
  end
  barrett_reduce #(.QW(QW), .AW(SW), .MUW(MUW)) u_red (.a(sum), .q(q), .mu(mu), .r(r));
endmodule

// crt_lut: LUT-based Chinese remainder theorem, K residues back to one BW-bit coefficient.
//
// All moduli are fixed, so Q, Q_i = Q/q_i, the inverses Q_i^-1 mod q_i and the
// constants c_i = Q_i * Q_i^-1 are computed once, at elaboration (he_pkg::crt_const),
// and held as constants; at run time only crt_combine's multiply-accumulate and final
// reduction remain.
//
// Interface and timing: as crt_combine (in_valid/in_ready, out_valid after QB+1 clocks).
//
// The constant table and the multiply-and-add recombination follow the published
// look-up-table CRT; the constant values come from this design's moduli.
module crt_lut
#(
  parameter int unsigned K  = he_pkg::K,
  parameter int unsigned QW = he_pkg::QW,
  parameter int unsigned BW = K * QW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [QW-1:0] a [K],
  output logic          out_valid,
  output logic [BW-1:0] x
);
  logic [BW-1:0]         cons [K];
  logic [$clog2(K)-1:0]  c_idx;
  for (genvar i = 0; i < K; i++) begin : g_c
    assign cons[i] = BW'(he_pkg::crt_const(i, K));
  end
  crt_combine #(.K(K), .QW(QW), .BW(BW)) u_comb (
    .clk, .rst_n, .in_valid, .in_ready, .a, .c_idx, .c_val(cons[c_idx]),
    .qbig(BW'(he_pkg::big_q(K))),
    .out_valid, .x);
endmodule

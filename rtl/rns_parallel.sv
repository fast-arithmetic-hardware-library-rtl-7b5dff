// rns_parallel: residue number system conversion of one wide coefficient, all moduli at once.
//
// A BW-bit coefficient x (BW = K*QW, 1200 bits by default) is reduced by each of the K
// lane moduli in parallel, giving the K residues x mod q_i that the K lane pipelines
// work on. Each lane has its own folding reduction (rns_fold: chunk-times-constant
// products plus one Barrett reduction) in place of a '%' operator; the moduli, fold
// constants and Barrett factors are elaboration-time constants derived from he_pkg.
//
// Timing: one coefficient per clock; out_valid/res follow in_valid/x after 2 clocks
// (input register, output register).
//
// One reduction unit per modulus, all working at once, follows the published parallel RNS;
// the reduction by folding is this design's choice.
module rns_parallel
#(
  parameter int unsigned K  = he_pkg::K,
  parameter int unsigned QW = he_pkg::QW,
  parameter int unsigned BW = K * QW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [BW-1:0] x,
  output logic          out_valid,
  output logic [QW-1:0] res [K]
);
  localparam int unsigned SW  = 2 * QW + $clog2(K);
  localparam int unsigned MUW = SW - QW + 2;

  logic [BW-1:0] x_r;
  logic          v_r;
  logic [QW-1:0] r_d [K];

  for (genvar i = 0; i < K; i++) begin : g_lane
    localparam logic [QW-1:0]  QI = QW'(he_pkg::Q_TABLE[i]);
    localparam logic [MUW-1:0] MU = MUW'(he_pkg::barrett_mu(64'(he_pkg::Q_TABLE[i]), SW));
    logic [QW-1:0] f [K];
    for (genvar j = 0; j < K; j++) begin : g_f
      assign f[j] = he_pkg::fold_const(64'(he_pkg::Q_TABLE[i]), j);
    end
    rns_fold #(.QW(QW), .NC(K), .SW(SW), .MUW(MUW)) u_fold
      (.x(x_r), .f(f), .q(QI), .mu(MU), .r(r_d[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_r       <= 1'b0;
      x_r       <= '0;
      out_valid <= 1'b0;
      for (int i = 0; i < K; i++) res[i] <= '0;
    end else begin
      v_r       <= in_valid;
      if (in_valid) x_r <= x;
      out_valid <= v_r;
      if (v_r) res <= r_d;
    end
  end
endmodule

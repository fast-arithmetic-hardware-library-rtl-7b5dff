// rns_serial: residue number system conversion, one modulus per step.
//
// The cost-saving variant of rns_parallel: a single folding reduction (rns_fold) is
// shared by all K moduli. A counter i selects modulus q_i, its fold constants and its
// Barrett factor, and the residue is written to slot i of the output vector, so a
// coefficient takes K clocks instead of one.
//
// Interface: in_valid/x accepted when in_ready; out_valid pulses with all K residues
// K+1 clocks after the coefficient was accepted.
//
// One shared reduction unit stepping through the moduli follows the published serial RNS;
// the reduction by folding is this design's choice.
module rns_serial
#(
  parameter int unsigned K  = he_pkg::K,
  parameter int unsigned QW = he_pkg::QW,
  parameter int unsigned BW = K * QW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [BW-1:0] x,
  output logic          out_valid,
  output logic [QW-1:0] res [K]
);
  localparam int unsigned SW  = 2 * QW + $clog2(K);
  localparam int unsigned MUW = SW - QW + 2;
  localparam int unsigned IW  = $clog2(K + 1);

  logic [QW-1:0]  qs  [K];
  logic [MUW-1:0] mus [K];
  logic [QW-1:0]  fs  [K][K];
  for (genvar i = 0; i < K; i++) begin : g_tab
    assign qs[i]  = QW'(he_pkg::Q_TABLE[i]);
    assign mus[i] = MUW'(he_pkg::barrett_mu(64'(he_pkg::Q_TABLE[i]), SW));
    for (genvar j = 0; j < K; j++) begin : g_f
      assign fs[i][j] = he_pkg::fold_const(64'(he_pkg::Q_TABLE[i]), j);
    end
  end

  logic [BW-1:0] x_r;
  logic          run;
  logic [IW-1:0] i;
  logic [QW-1:0] r_d;

  rns_fold #(.QW(QW), .NC(K), .SW(SW), .MUW(MUW)) u_fold
    (.x(x_r), .f(fs[i[$clog2(K)-1:0]]), .q(qs[i[$clog2(K)-1:0]]),
     .mu(mus[i[$clog2(K)-1:0]]), .r(r_d));

  assign in_ready = !run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      i         <= '0;
      x_r       <= '0;
      out_valid <= 1'b0;
      for (int l = 0; l < K; l++) res[l] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!run) begin
        if (in_valid) begin
          run <= 1'b1;
          x_r <= x;
          i   <= '0;
        end
      end else begin
        res[i[$clog2(K)-1:0]] <= r_d;
        if (i == IW'(K - 1)) begin
          run       <= 1'b0;
          out_valid <= 1'b1;
        end
        i <= i + 1'b1;
      end
    end
  end
endmodule

// crt_regular: Chinese remainder theorem with its constants computed on chip.
//
// Instead of holding precomputed CRT constants, this variant derives them after reset
// with a modulo-inverse unit. For each lane i it multiplies up Q_i = prod_{j != i} q_j
// (a BW x QW multiply per clock, which also avoids dividing Q by q_i) together with
// Q_i mod q_i (a Barrett-reduced QW x QW multiply per clock), then obtains
// (Q_i mod q_i)^-1 from the inverse unit (Fermat's little theorem when FERMAT = 1,
// extended Euclid otherwise) and stores c_i = Q_i * inverse. Only the moduli (and, for
// the Fermat unit, their Barrett factors) are constants. The conversions themselves then
// run through crt_combine exactly as in crt_lut.
//
// Timing: after reset, ready rises after about K*(K + t_inv) clocks (t_inv about 60 for
// Fermat, under 45 for Euclid); in_ready is low until then. Afterwards as crt_combine.
//
// Computing the CRT constants on chip with an inverse unit is the published 'regular' CRT;
// the generator's order of steps and the reuse of the look-up datapath are this design's
// choices.
module crt_regular
#(
  parameter int unsigned K      = he_pkg::K,
  parameter int unsigned QW     = he_pkg::QW,
  parameter int unsigned BW     = K * QW,
  parameter bit          FERMAT = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          ready,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [QW-1:0] a [K],
  output logic          out_valid,
  output logic [BW-1:0] x
);
  localparam int unsigned KW  = $clog2(K + 1);
  localparam int unsigned MUW = QW + 2;

  typedef enum logic [1:0] {G_PROD, G_INV, G_WAIT, G_DONE} gen_e;
  gen_e st;

  logic [QW-1:0]  qs  [K];
  logic [MUW-1:0] mus [K];
  for (genvar i = 0; i < K; i++) begin : g_tab
    assign qs[i]  = QW'(he_pkg::Q_TABLE[i]);
    assign mus[i] = MUW'(he_pkg::barrett_mu(64'(he_pkg::Q_TABLE[i]), 2 * QW));
  end

  logic [BW-1:0] cons [K];
  logic [BW-1:0] qi_big, qbig;
  logic [QW-1:0] qi_mod, qi_mod_nx, inv;
  logic [KW-1:0] i, j;
  logic          inv_start, inv_done, inv_busy, cons_we;
  logic [$clog2(K)-1:0] c_idx;
  logic [BW-1:0] cons_wd;
  logic [QW-1:0] qi, qj;
  logic [MUW-1:0] mui;

  assign qi  = qs[i[$clog2(K)-1:0]];
  assign qj  = qs[j[$clog2(K)-1:0]];
  assign mui = mus[i[$clog2(K)-1:0]];

  mod_mul #(.QW(QW), .MUW(MUW)) u_mm
    (.a(qi_mod), .b(qj >= qi ? qj - qi : qj), .q(qi), .mu(mui), .r(qi_mod_nx));

  if (FERMAT) begin : g_fermat
    mod_inv_fermat #(.QW(QW), .MUW(MUW)) u_inv (
      .clk, .rst_n, .start(inv_start), .a(qi_mod), .q(qi), .mu(mui),
      .busy(inv_busy), .done(inv_done), .inv(inv));
  end else begin : g_eea
    mod_inv_eea #(.QW(QW)) u_inv (
      .clk, .rst_n, .start(inv_start), .a(qi_mod), .q(qi),
      .busy(inv_busy), .done(inv_done), .inv(inv));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= G_PROD;
      i         <= '0;
      j         <= '0;
      qi_big    <= BW'(1);
      qi_mod    <= QW'(1);
      qbig      <= BW'(1);
      inv_start <= 1'b0;
    end else begin
      inv_start <= 1'b0;
      case (st)
        G_PROD: begin
          // multiply in every q_j except q_i
          if (j != i) begin
            qi_big <= BW'(qi_big * qj);
            qi_mod <= qi_mod_nx;
          end
          if (i == '0) qbig <= BW'(qbig * qj);
          if (j == KW'(K - 1)) st <= G_INV;
          j <= j + 1'b1;
        end
        G_INV: begin
          inv_start <= 1'b1;
          st        <= G_WAIT;
        end
        G_WAIT: if (inv_done) begin
          qi_big <= BW'(1);
          qi_mod <= QW'(1);
          j      <= '0;
          i      <= i + 1'b1;
          st     <= (i == KW'(K - 1)) ? G_DONE : G_PROD;
        end
        default: st <= G_DONE;
      endcase
    end
  end

  assign ready   = (st == G_DONE);
  assign cons_we = (st == G_WAIT) && inv_done;
  assign cons_wd = BW'(qi_big * inv);

  // constant table: written once per modulus by the generator, read by the combiner
  always_ff @(posedge clk) begin
    if (cons_we) cons[i[$clog2(K)-1:0]] <= cons_wd;
  end

  logic comb_in_ready;
  crt_combine #(.K(K), .QW(QW), .BW(BW)) u_comb (
    .clk, .rst_n, .in_valid(in_valid && ready), .in_ready(comb_in_ready), .a, .c_idx,
    .c_val(cons[c_idx]), .qbig, .out_valid, .x);
  assign in_ready = comb_in_ready && ready;

  logic unused;
  assign unused = inv_busy;
endmodule

// poly_mul: negacyclic polynomial product c = a * b mod (x^N + 1, q) through the NTT.
//
// The negative-wrapped convolution of the library: each input coefficient is first
// weighted by psi^j (psi^2 = omega, psi a primitive 2N-th root of unity), both weighted
// polynomials are transformed by their own forward NTT, multiplied point by point, sent
// through a third NTT instance run with omega^-1 (the inverse transform), and finally
// weighted by psi^-j * N^-1. The weights are not stored: they are running products that
// advance by one modular multiplication per coefficient, so no twiddle or weight table
// beyond the NTTs' own is needed.
//
// Phases and timing (one coefficient per clock everywhere):
//   LOAD   N clocks   in_valid with a_j, b_j in natural order, j = 0..N-1
//   NTT    N*log2 N   both forward transforms in parallel (+N/2 on the first use of a
//                     modulus, for the twiddle tables)
//   PMUL   N clocks   point-wise product into the inverse-transform store
//   INTT   N*log2 N
//   OUT    N clocks   out_valid with c_j, j = 0..N-1
// in_ready is high only in LOAD. The per-modulus constants (q, mu, psi, psi^-1,
// omega, omega^-1, N^-1) are inputs and must be held stable while the block is busy.
module poly_mul #(
  parameter int unsigned N    = 1024,
  parameter int unsigned LOGN = $clog2(N),
  parameter int unsigned QW   = 30,
  parameter int unsigned MUW  = QW + 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [QW-1:0]   q,
  input  logic [MUW-1:0]  mu,
  input  logic [QW-1:0]   psi,
  input  logic [QW-1:0]   psi_inv,
  input  logic [QW-1:0]   omega,
  input  logic [QW-1:0]   omega_inv,
  input  logic [QW-1:0]   n_inv,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [QW-1:0]   in_a,
  input  logic [QW-1:0]   in_b,
  output logic            out_valid,
  output logic [QW-1:0]   out_c,
  output logic            busy
);
  typedef enum logic [2:0] {P_LOAD, P_NTT, P_PMUL, P_INTT, P_OUT} phase_e;
  phase_e phase;

  logic [LOGN-1:0] j;
  logic [QW-1:0]   wgt;          // psi^j during LOAD, psi^-j * N^-1 during OUT
  logic            ntt_start, intt_start, nta_done, ntb_done, nti_done;
  logic            nta_busy, ntb_busy, nti_busy;
  logic [QW-1:0]   a_w, b_w, wgt_next_in, wgt_next_out, pm, ra, rb, ri, c_w;
  logic            ntt_go_seen;

  assign in_ready = (phase == P_LOAD);
  assign busy     = (phase != P_LOAD) || (j != '0);

  mod_mul #(.QW(QW), .MUW(MUW)) u_wa  (.a(in_a), .b(wgt), .q(q), .mu(mu), .r(a_w));
  mod_mul #(.QW(QW), .MUW(MUW)) u_wb  (.a(in_b), .b(wgt), .q(q), .mu(mu), .r(b_w));
  mod_mul #(.QW(QW), .MUW(MUW)) u_wpi (.a(wgt), .b(psi), .q(q), .mu(mu), .r(wgt_next_in));
  mod_mul #(.QW(QW), .MUW(MUW)) u_wpo (.a(wgt), .b(psi_inv), .q(q), .mu(mu), .r(wgt_next_out));
  mod_mul #(.QW(QW), .MUW(MUW)) u_pm  (.a(ra), .b(rb), .q(q), .mu(mu), .r(pm));
  mod_mul #(.QW(QW), .MUW(MUW)) u_out (.a(ri), .b(wgt), .q(q), .mu(mu), .r(c_w));

  ntt #(.N(N), .LOGN(LOGN), .QW(QW), .MUW(MUW)) u_ntt_a (
    .clk, .rst_n, .ld_en(phase == P_LOAD && in_valid), .ld_addr(j), .ld_data(a_w),
    .rd_addr(j), .rd_data(ra), .start(ntt_start), .omega(omega), .q(q), .mu(mu),
    .busy(nta_busy), .done(nta_done));
  ntt #(.N(N), .LOGN(LOGN), .QW(QW), .MUW(MUW)) u_ntt_b (
    .clk, .rst_n, .ld_en(phase == P_LOAD && in_valid), .ld_addr(j), .ld_data(b_w),
    .rd_addr(j), .rd_data(rb), .start(ntt_start), .omega(omega), .q(q), .mu(mu),
    .busy(ntb_busy), .done(ntb_done));
  ntt #(.N(N), .LOGN(LOGN), .QW(QW), .MUW(MUW)) u_intt (
    .clk, .rst_n, .ld_en(phase == P_PMUL), .ld_addr(j), .ld_data(pm),
    .rd_addr(j), .rd_data(ri), .start(intt_start), .omega(omega_inv), .q(q), .mu(mu),
    .busy(nti_busy), .done(nti_done));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= P_LOAD;
      j           <= '0;
      wgt         <= QW'(1);
      ntt_start   <= 1'b0;
      intt_start  <= 1'b0;
      out_valid   <= 1'b0;
      out_c       <= '0;
      ntt_go_seen <= 1'b0;
    end else begin
      ntt_start  <= 1'b0;
      intt_start <= 1'b0;
      out_valid  <= 1'b0;
      case (phase)
        P_LOAD: if (in_valid) begin
          wgt <= wgt_next_in;
          j   <= j + 1'b1;
          if (j == LOGN'(N - 1)) begin
            phase       <= P_NTT;
            ntt_start   <= 1'b1;
            ntt_go_seen <= 1'b0;
          end
        end
        P_NTT: begin
          // both transforms start together and take the same time
          if (nta_done) ntt_go_seen <= 1'b1;
          if (ntt_go_seen && !nta_busy && !ntb_busy) begin
            phase <= P_PMUL;
            j     <= '0;
          end
        end
        P_PMUL: begin
          j <= j + 1'b1;
          if (j == LOGN'(N - 1)) begin
            phase       <= P_INTT;
            intt_start  <= 1'b1;
            ntt_go_seen <= 1'b0;
          end
        end
        P_INTT: begin
          if (nti_done) begin
            phase <= P_OUT;
            j     <= '0;
            wgt   <= n_inv;
          end
        end
        P_OUT: begin
          out_valid <= 1'b1;
          out_c     <= c_w;
          wgt       <= wgt_next_out;
          j         <= j + 1'b1;
          if (j == LOGN'(N - 1)) begin
            phase <= P_LOAD;
            wgt   <= QW'(1);
          end
        end
        default: phase <= P_LOAD;
      endcase
    end
  end

  logic unused;
  assign unused = ntb_done ^ nti_busy;
endmodule

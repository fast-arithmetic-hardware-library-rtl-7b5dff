// he_accel: RNS-based arithmetic accelerator for the FV somewhat-homomorphic scheme.
//
// Ciphertext polynomials have N = 1024 coefficients of BW = 1200 bits. Every operation
// runs in three steps, as a stream of coefficients:
//   1. IN   each input coefficient triple (a_j, b_j, d_j) is split by the RNS converter
//           into K = 40 residues of 30 bits and handed to the K lanes (he_lane);
//           with cmd_enc the d operand is replaced by t*m_j (scalar_mul, t = floor(Q/2)),
//           which is how a message enters a ciphertext;
//   2. EXEC the lanes run the operation independently on their modulus;
//   3. OUT  coefficient by coefficient the K lane results are recombined by the CRT unit
//           into one 1200-bit coefficient and streamed out. With cmd_dec the coefficient
//           is also rounded to a message bit (scalar_div, |u - t| < t/2), and with
//           cmd_divr it is replaced by round(c / 2^DR_SHIFT) (div_round, the scaling step
//           of relinearisation version 2).
// Lane operations (he_pkg::op_e): OP_ADD c = a + d; OP_MAC c = a*b + d in
// Z_Q[x]/(x^N+1); OP_RELIN c = d + sum_i bit_i(a)*rlk[i] (version-1 relinearisation,
// applied per residue); OP_KEYGEN rlk[i] = 2^i * a (a = s^2); OP_KEYMASK
// rlk[pass] += d (adds the -(a_i*s + e_i) part of key i). KEYGEN and KEYMASK have no
// OUT step. The FV operations are sequences of these: homomorphic addition is two
// OP_ADDs, homomorphic multiplication four OP_MACs, decryption an OP_MAC with cmd_dec,
// encryption OP_MACs with noise polynomials as d and cmd_enc on the message step.
// Random polynomials (TRNG, Gaussian noise) are not generated here; they enter as
// ordinary operands on in_b / in_d.
//
// Library variants are chosen by parameters: RNS_SERIAL (one modulus per step instead
// of all at once), CRT_REGULAR (CRT constants computed after reset with a modulo-inverse
// unit instead of elaboration-time constants) and INV_FERMAT (which inverse unit).
//
// Handshake: cmd_valid/cmd_ready starts an operation; in_valid/in_ready carries its N
// input triples; out_valid pulses with each of the N result coefficients, in order;
// done pulses at the end. The output has no back-pressure.
module he_accel
  import he_pkg::op_e;
#(
  parameter int unsigned N           = he_pkg::N,
  parameter int unsigned K           = he_pkg::K,
  parameter int unsigned QW          = he_pkg::QW,
  parameter int unsigned BW          = K * QW,
  parameter int unsigned DR_SHIFT    = 3 * QW,
  parameter bit          RNS_SERIAL  = 1'b0,
  parameter bit          CRT_REGULAR = 1'b0,
  parameter bit          INV_FERMAT  = 1'b0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  op_e                    cmd_op,
  input  logic [$clog2(QW)-1:0]  cmd_pass,
  input  logic                   cmd_enc,
  input  logic                   cmd_dec,
  input  logic                   cmd_divr,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [BW-1:0]          in_a,
  input  logic [BW-1:0]          in_b,
  input  logic [BW-1:0]          in_d,
  input  logic                   in_m,
  output logic                   out_valid,
  output logic [BW-1:0]          out_c,
  output logic                   out_m,
  output logic                   done
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned LW   = $clog2(QW);
  localparam logic [BW-1:0] QBIG = BW'(he_pkg::big_q(K));
  localparam logic [BW-1:0] T    = QBIG >> 1;

  typedef enum logic [2:0] {T_IDLE, T_IN, T_EXEC, T_OUT, T_OUT_WAIT, T_POST} tstate_e;
  tstate_e st;

  op_e             op_r;
  logic [LW-1:0]   pass_r;
  logic            enc_r, dec_r, divr_r;
  logic [LOGN-1:0] j;
  logic [1:0]      sub;        // 0: a, 1: b, 2: d
  logic            rns_pending;
  logic [BW-1:0]   a_r, b_r, d_r;
  logic            m_r;
  logic            in_hold;

  // ---------------------------------------------------------------- encode
  logic          sm_valid;
  logic [BW-1:0] sm_c;
  scalar_mul #(.W(BW)) u_smul (
    .clk, .rst_n, .in_valid(in_valid && in_ready), .m(in_m), .t(T),
    .out_valid(sm_valid), .c(sm_c));

  // ---------------------------------------------------------------- RNS
  logic          rns_in_valid, rns_in_ready, rns_out_valid;
  logic [BW-1:0] rns_x;
  logic [QW-1:0] rns_res [K];
  always_comb begin
    unique case (sub)
      2'd0:    rns_x = a_r;
      2'd1:    rns_x = b_r;
      default: rns_x = d_r;
    endcase
  end
  assign rns_in_valid = (st == T_IN) && !rns_pending && (sub != 2'd3) && in_hold;

  if (RNS_SERIAL) begin : g_rns_s
    rns_serial #(.K(K), .QW(QW), .BW(BW)) u_rns (
      .clk, .rst_n, .in_valid(rns_in_valid), .in_ready(rns_in_ready), .x(rns_x),
      .out_valid(rns_out_valid), .res(rns_res));
  end else begin : g_rns_p
    assign rns_in_ready = 1'b1;
    rns_parallel #(.K(K), .QW(QW), .BW(BW)) u_rns (
      .clk, .rst_n, .in_valid(rns_in_valid), .x(rns_x),
      .out_valid(rns_out_valid), .res(rns_res));
  end

  // ---------------------------------------------------------------- lanes
  logic [QW-1:0]   ra [K], rb [K], rd [K], lane_out [K];
  logic [K-1:0]    lane_ready, lane_done;
  logic            lane_valid;
  logic [LOGN-1:0] out_j;
  for (genvar l = 0; l < K; l++) begin : g_lane
    localparam he_pkg::lane_const_t LC = he_pkg::lane_consts(l, N);
    he_lane #(.N(N), .LOGN(LOGN), .QW(QW), .L(QW), .LW(LW)) u_lane (
      .clk, .rst_n, .c_q(QW'(LC.q)), .c_mu((QW+2)'(LC.mu)), .c_psi(QW'(LC.psi)),
      .c_psi_inv(QW'(LC.psi_inv)), .c_omega(QW'(LC.omega)), .c_omega_inv(QW'(LC.omega_inv)),
      .c_n_inv(QW'(LC.n_inv)), .c_mbr_k(LC.mbr_k), .c_mbr_r((QW/2+3)'(LC.mbr_r)), .op(op_r), .pass(pass_r), .in_valid(lane_valid),
      .in_ready(lane_ready[l]), .in_a(ra[l]), .in_b(rb[l]), .in_d(rd[l]),
      .done(lane_done[l]), .rd_addr(out_j), .rd_data(lane_out[l]));
  end

  // ---------------------------------------------------------------- CRT
  logic          crt_in_valid, crt_in_ready, crt_out_valid, crt_ready;
  logic [BW-1:0] crt_x;
  if (CRT_REGULAR) begin : g_crt_r
    crt_regular #(.K(K), .QW(QW), .BW(BW), .FERMAT(INV_FERMAT)) u_crt (
      .clk, .rst_n, .ready(crt_ready), .in_valid(crt_in_valid), .in_ready(crt_in_ready),
      .a(lane_out), .out_valid(crt_out_valid), .x(crt_x));
  end else begin : g_crt_l
    assign crt_ready = 1'b1;
    crt_lut #(.K(K), .QW(QW), .BW(BW)) u_crt (
      .clk, .rst_n, .in_valid(crt_in_valid), .in_ready(crt_in_ready), .a(lane_out),
      .out_valid(crt_out_valid), .x(crt_x));
  end
  assign crt_in_valid = (st == T_OUT) && crt_in_ready;

  // ---------------------------------------------------------------- decode / scale
  logic          sd_valid, sd_m, dr_valid;
  logic [BW-1:0] dr_y, x_r;
  scalar_div #(.W(BW)) u_sdiv (
    .clk, .rst_n, .in_valid(crt_out_valid), .u(crt_x), .t(T), .out_valid(sd_valid), .m(sd_m));
  div_round #(.W(BW), .SW($clog2(BW))) u_dr (
    .clk, .rst_n, .in_valid(crt_out_valid), .x(crt_x), .s(($clog2(BW))'(DR_SHIFT)),
    .out_valid(dr_valid), .y(dr_y));

  assign cmd_ready  = (st == T_IDLE) && crt_ready;
  assign in_ready   = (st == T_IN) && !in_hold && (&lane_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= T_IDLE;
      op_r        <= he_pkg::OP_ADD;
      pass_r      <= '0;
      enc_r       <= 1'b0;
      dec_r       <= 1'b0;
      divr_r      <= 1'b0;
      j           <= '0;
      out_j       <= '0;
      sub         <= '0;
      rns_pending <= 1'b0;
      in_hold     <= 1'b0;
      a_r         <= '0;
      b_r         <= '0;
      d_r         <= '0;
      m_r         <= 1'b0;
      lane_valid  <= 1'b0;
      out_valid   <= 1'b0;
      out_c       <= '0;
      out_m       <= 1'b0;
      done        <= 1'b0;
      x_r         <= '0;
      for (int l = 0; l < K; l++) begin
        ra[l] <= '0; rb[l] <= '0; rd[l] <= '0;
      end
    end else begin
      lane_valid <= 1'b0;
      out_valid  <= 1'b0;
      done       <= 1'b0;
      case (st)
        T_IDLE: if (cmd_valid && cmd_ready) begin
          op_r   <= cmd_op;
          pass_r <= cmd_pass;
          enc_r  <= cmd_enc;
          dec_r  <= cmd_dec;
          divr_r <= cmd_divr;
          j      <= '0;
          st     <= T_IN;
        end
        T_IN: begin
          if (!in_hold) begin
            if (in_valid && in_ready) begin
              a_r     <= in_a;
              b_r     <= in_b;
              d_r     <= in_d;
              m_r     <= in_m;
              in_hold <= 1'b1;
              sub     <= '0;
            end
          end else begin
            // message encoding result arrives one clock after the triple
            if (sm_valid && enc_r) d_r <= sm_c;
            if (rns_in_valid && rns_in_ready) rns_pending <= 1'b1;
            if (rns_out_valid) begin
              rns_pending <= 1'b0;
              for (int l = 0; l < K; l++) begin
                if (sub == 2'd0) ra[l] <= rns_res[l];
                if (sub == 2'd1) rb[l] <= rns_res[l];
                if (sub == 2'd2) rd[l] <= rns_res[l];
              end
              if (sub == 2'd2) begin
                lane_valid <= 1'b1;
                in_hold    <= 1'b0;
                j          <= j + 1'b1;
                if (j == LOGN'(N - 1)) st <= T_EXEC;
              end
              sub <= (sub == 2'd2) ? 2'd0 : sub + 1'b1;
            end
          end
        end
        T_EXEC: if (lane_done[0]) begin
          out_j <= '0;
          if (op_r == he_pkg::OP_KEYGEN || op_r == he_pkg::OP_KEYMASK) begin
            st   <= T_IDLE;
            done <= 1'b1;
          end else st <= T_OUT;
        end
        T_OUT: if (crt_in_valid) st <= T_OUT_WAIT;
        T_OUT_WAIT: if (crt_out_valid) begin
          x_r <= crt_x;
          st  <= T_POST;
        end
        T_POST: begin
          out_valid <= 1'b1;
          out_c     <= divr_r ? dr_y : x_r;
          out_m     <= dec_r ? sd_m : 1'b0;
          out_j     <= out_j + 1'b1;
          if (out_j == LOGN'(N - 1)) begin
            st   <= T_IDLE;
            done <= 1'b1;
          end else st <= T_OUT;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = sd_valid ^ dr_valid ^ m_r ^ (^lane_done);

  // all lanes run the same schedule
  always @(posedge clk) if (st == T_EXEC)
    assert (lane_done == '0 || lane_done == '1) else $error("he_accel: lanes out of step");
endmodule

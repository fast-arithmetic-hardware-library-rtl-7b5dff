// he_lane: the arithmetic pipeline of one RNS lane (one modulus q_i).
//
// After the RNS conversion every ciphertext operation decomposes into K independent
// lanes. One lane holds everything the cloud-side operations need for its modulus: a
// negacyclic NTT polynomial multiplier, a polynomial adder, the version-1
// relinearisation key store with the powers-of-two generator that fills it, and the
// inner-product unit that applies it. Lane constants (q_i, Barrett and modified-Barrett
// factors, psi, omega, their inverses and N^-1) arrive as static inputs c_* (tied to
// constants by the parent, he_pkg::lane_consts), so one lane design serves every modulus.
//
// An operation has two phases. IN: N residue triples (a_j, b_j, d_j) arrive with in_valid
// in coefficient order and are stored (a and b also go straight into the multiplier for
// OP_MAC, a into the s^2 store for OP_KEYGEN). EXEC starts by itself after the N-th
// triple and ends with a one-clock done pulse:
//   OP_ADD     out_j = a_j + d_j                                  N+2 clocks
//   OP_MAC     out = a * b + d   (mod x^N + 1)                   2N log N + 3N + ...
//   OP_RELIN   out_j = d_j + sum_i bit_i(a_j) * rlk[i][j]         (L+3) N clocks
//   OP_KEYGEN  rlk[i][j] = 2^i * a_j mod q for all i < L          L*N + 2 clocks
//   OP_KEYMASK rlk[pass][j] = rlk[pass][j] + d_j                   N + 2 clocks
// Results of ADD/MAC/RELIN are read back through rd_addr/rd_data (combinational) until
// the next operation's EXEC. op and pass must be held stable for the whole operation.
//
// The set of units per modulus follows the published accelerator; the operation encoding,
// the memories and the sequencing are this design's own.
module he_lane
  import he_pkg::op_e;
#(
  parameter int unsigned N    = 1024,
  parameter int unsigned LOGN = $clog2(N),
  parameter int unsigned QW   = 30,
  parameter int unsigned L    = QW,
  parameter int unsigned LW   = $clog2(L),
  parameter int unsigned MUW  = QW + 2,
  parameter int unsigned RW   = QW/2 + 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [QW-1:0]   c_q,          // modulus q_i
  input  logic [MUW-1:0]  c_mu,         // floor(2^(2QW) / q_i)
  input  logic [QW-1:0]   c_psi,        // primitive 2N-th root of unity
  input  logic [QW-1:0]   c_psi_inv,
  input  logic [QW-1:0]   c_omega,      // psi^2
  input  logic [QW-1:0]   c_omega_inv,
  input  logic [QW-1:0]   c_n_inv,      // N^-1 mod q_i
  input  logic [5:0]      c_mbr_k,      // modified Barrett k
  input  logic [RW-1:0]   c_mbr_r,      // modified Barrett r = ceil(2^(3k) / q_i)
  input  op_e             op,
  input  logic [LW-1:0]   pass,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [QW-1:0]   in_a,
  input  logic [QW-1:0]   in_b,
  input  logic [QW-1:0]   in_d,
  output logic            done,
  input  logic [LOGN-1:0] rd_addr,
  output logic [QW-1:0]   rd_data
);

  typedef enum logic [1:0] {S_IN, S_EXEC} state_e;
  state_e state;

  logic [QW-1:0] amem [N];
  logic [QW-1:0] dmem [N];
  logic [QW-1:0] omem [N];
  logic [QW-1:0] key  [L*N];

  logic [LOGN-1:0] j;            // coefficient counter (IN and EXEC issue side)
  logic [LW-1:0]   i;            // key power counter (KEYGEN)
  logic            issue_done;   // EXEC: all work issued

  // ---------------------------------------------------------------- multiplier
  logic          pm_in_ready, pm_out_valid, pm_busy;
  logic [QW-1:0] pm_out;
  poly_mul #(.N(N), .LOGN(LOGN), .QW(QW), .MUW(MUW)) u_pm (
    .clk, .rst_n, .q(c_q), .mu(c_mu), .psi(c_psi), .psi_inv(c_psi_inv), .omega(c_omega),
    .omega_inv(c_omega_inv), .n_inv(c_n_inv),
    .in_valid(state == S_IN && in_valid && op == he_pkg::OP_MAC), .in_ready(pm_in_ready),
    .in_a, .in_b, .out_valid(pm_out_valid), .out_c(pm_out), .busy(pm_busy));

  // ---------------------------------------------------------------- powers of two
  logic          p2_valid;
  logic [QW-1:0] p2_out;
  logic          p2_rq;
  powers_of2 #(.N(N), .LOGN(LOGN), .QW(QW), .PW(LW), .MUW(MUW)) u_p2 (
    .clk, .rst_n, .q(c_q), .mu(c_mu),
    .ld_en(state == S_IN && in_valid && op == he_pkg::OP_KEYGEN), .ld_addr(j), .ld_data(in_a),
    .rq_valid(p2_rq), .rq_addr(j), .rq_pow(i), .out_valid(p2_valid), .out(p2_out));

  // ---------------------------------------------------------------- inner product
  logic          ip_start, ip_busy, ip_done;
  logic [LW-1:0] ip_kaddr;
  logic [QW-1:0] ip_res;
  inner_product #(.QW(QW), .L(L), .LW(LW), .RW(RW)) u_ip (
    .clk, .rst_n, .start(ip_start), .c2(amem[j]), .q(c_q), .mbr_k(c_mbr_k),
    .mbr_r(c_mbr_r), .key_addr(ip_kaddr), .key_data(key[ip_kaddr * N + j]),
    .busy(ip_busy), .done(ip_done), .res(ip_res));

  // ---------------------------------------------------------------- adder
  logic          pa_in, pa_valid;
  logic [QW-1:0] pa_a, pa_b, pa_c;
  logic [LOGN-1:0] pa_j, wj;
  poly_add #(.W(QW)) u_pa (
    .clk, .rst_n, .in_valid(pa_in), .a(pa_a), .b(pa_b), .q(c_q), .out_valid(pa_valid), .c(pa_c));

  // adder operand selection per operation
  always_comb begin
    pa_in = 1'b0;
    pa_a  = '0;
    pa_b  = dmem[j];
    pa_j  = j;
    if (state == S_EXEC) begin
      unique case (op)
        he_pkg::OP_ADD:     begin pa_in = !issue_done;  pa_a = amem[j]; end
        he_pkg::OP_MAC:     begin pa_in = pm_out_valid; pa_a = pm_out;  end
        he_pkg::OP_RELIN:   begin pa_in = ip_done;      pa_a = ip_res;  end
        he_pkg::OP_KEYMASK: begin pa_in = !issue_done;  pa_a = key[pass * N + j]; end
        default:            begin pa_in = 1'b0; end
      endcase
    end
  end

  assign p2_rq    = (state == S_EXEC) && (op == he_pkg::OP_KEYGEN) && !issue_done;
  assign ip_start = (state == S_EXEC) && (op == he_pkg::OP_RELIN) && !issue_done && !ip_busy && !ip_done;
  assign in_ready = (state == S_IN) && (op != he_pkg::OP_MAC || pm_in_ready);
  assign rd_data  = omem[rd_addr];

  // result write-back (one clock behind the adder / powers-of-two inputs)
  logic            wr_last;
  logic [LOGN-1:0] kj;
  logic [LW-1:0]   ki;
  always_ff @(posedge clk) begin
    if (state == S_IN && in_valid && in_ready) begin
      amem[j] <= in_a;
      dmem[j] <= in_d;
    end
    if (pa_valid) begin
      if (op == he_pkg::OP_KEYMASK) key[pass * N + wj] <= pa_c;
      else                          omem[wj] <= pa_c;
    end
    if (p2_valid) key[ki * N + kj] <= p2_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IN;
      j          <= '0;
      i          <= '0;
      issue_done <= 1'b0;
      done       <= 1'b0;
      wj         <= '0;
      kj         <= '0;
      ki         <= '0;
      wr_last    <= 1'b0;
    end else begin
      done <= 1'b0;
      wj   <= pa_j;
      kj   <= j;
      ki   <= i;
      case (state)
        S_IN: if (in_valid && in_ready) begin
          j <= j + 1'b1;
          if (j == LOGN'(N - 1)) begin
            state      <= S_EXEC;
            issue_done <= 1'b0;
            wr_last    <= 1'b0;
          end
        end
        S_EXEC: begin
          // issue side: advance j (and i for KEYGEN) as work is handed out
          if (!issue_done) begin
            unique case (op)
              he_pkg::OP_ADD, he_pkg::OP_KEYMASK: begin
                j <= j + 1'b1;
                if (j == LOGN'(N - 1)) issue_done <= 1'b1;
              end
              he_pkg::OP_MAC: if (pm_out_valid) begin
                j <= j + 1'b1;
                if (j == LOGN'(N - 1)) issue_done <= 1'b1;
              end
              he_pkg::OP_RELIN: if (ip_done) begin
                j <= j + 1'b1;
                if (j == LOGN'(N - 1)) issue_done <= 1'b1;
              end
              he_pkg::OP_KEYGEN: begin
                j <= j + 1'b1;
                if (j == LOGN'(N - 1)) begin
                  i <= i + 1'b1;
                  if (i == LW'(L - 1)) begin
                    issue_done <= 1'b1;
                    i          <= '0;
                  end
                end
              end
              default: issue_done <= 1'b1;
            endcase
          end else begin
            // one clock for the last write-back, then finish
            wr_last <= 1'b1;
            if (wr_last) begin
              state <= S_IN;
              done  <= 1'b1;
              j     <= '0;
            end
          end
        end
        default: state <= S_IN;
      endcase
    end
  end

  logic unused;
  assign unused = pm_busy;
endmodule

// ntt: in-place iterative number-theoretic transform of one length-N polynomial mod q.
//
// Coefficients are written through the load port in natural order and stored at their
// bit-reversed address, so the transform runs decimation-in-time with the result in
// natural order. On start the block first fills its twiddle table tw[j] = omega^j,
// j < N/2, by repeated modular multiplication (N/2 cycles); the table is kept and that
// step is skipped when the next start uses the same omega and q. It then sweeps
// stage = 0 .. log2(N)-1 and, within each stage, i = 0 .. N-1, one i per clock. The
// partner index and twiddle index are formed with a shift and an XOR only:
//   i_corr = i ^ (1 << stage),   k = ((i << (log2 N - stage)) mod N) >> 1,
// and when bit `stage` of i is 0 the butterfly
//   v = A[i_corr] * tw[k] mod q,   A[i] = A[i] + v mod q,   A[i_corr] = A[i] - v mod q
// is applied (both modular corrections by compare-and-select, as in the listing). The
// transform therefore takes N*log2(N) clocks. The inverse transform is the same block
// run with omega^-1; scaling by N^-1 is left to the caller.
//
// The coefficient store is a register array with two reads and two writes per clock
// (the butterfly pair). This is this design's choice: it makes one butterfly per clock
// possible without the bank organisation a two-port BRAM would need.
//
// Interface: ld_en/ld_addr/ld_data (write, natural order, only while idle), rd_addr ->
// rd_data (combinational read, natural order, valid after done), start (one-clock
// pulse, sampled with omega, q, mu), busy, done (one-clock pulse when finished).
module ntt #(
  parameter int unsigned N    = 1024,
  parameter int unsigned LOGN = $clog2(N),
  parameter int unsigned QW   = 30,
  parameter int unsigned MUW  = QW + 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ld_en,
  input  logic [LOGN-1:0]   ld_addr,
  input  logic [QW-1:0]     ld_data,
  input  logic [LOGN-1:0]   rd_addr,
  output logic [QW-1:0]     rd_data,
  input  logic              start,
  input  logic [QW-1:0]     omega,
  input  logic [QW-1:0]     q,
  input  logic [MUW-1:0]    mu,
  output logic              busy,
  output logic              done
);
  typedef enum logic [1:0] {S_IDLE, S_TW, S_RUN} state_e;
  state_e state;

  logic [QW-1:0] A  [N];
  logic [QW-1:0] tw [N/2];

  logic [LOGN-1:0]     i;
  logic [$clog2(LOGN+1)-1:0] stage;
  logic [QW-1:0]       om_r, q_r, tw_om, tw_q;
  logic [MUW-1:0]      mu_r;
  logic                tw_ok;
  logic [QW-1:0]       tw_cur;

  function automatic logic [LOGN-1:0] bitrev(input logic [LOGN-1:0] x);
    for (int b = 0; b < LOGN; b++) bitrev[b] = x[LOGN-1-b];
  endfunction

  // index computation: shift and xor only
  logic [LOGN-1:0] icorr, kidx;
  logic [LOGN:0]   k0;
  always_comb begin
    icorr = i ^ LOGN'(1 << stage);
    k0    = (stage == 0) ? '0 : (LOGN+1)'({1'b0, i} << (LOGN - stage));
    kidx  = LOGN'(k0[LOGN-1:1]);
  end

  // shared variable v = A[icorr] * w[k] mod q
  logic [2*QW-1:0] vprod, twprod;
  logic [QW-1:0]   v, tw_next;
  always_comb begin
    vprod  = A[icorr] * tw[kidx[LOGN-2:0]];
    twprod = tw_cur * om_r;
  end
  barrett_reduce #(.QW(QW), .AW(2*QW), .MUW(MUW)) u_red_v
    (.a(vprod), .q(q_r), .mu(mu_r), .r(v));
  barrett_reduce #(.QW(QW), .AW(2*QW), .MUW(MUW)) u_red_tw
    (.a(twprod), .q(q_r), .mu(mu_r), .r(tw_next));

  // butterfly
  logic [QW:0]   sum;
  logic [QW-1:0] a_new, c_new, ai;
  always_comb begin
    ai    = A[i];
    sum   = {1'b0, ai} + {1'b0, v};
    a_new = (sum >= {1'b0, q_r}) ? QW'(sum - {1'b0, q_r}) : QW'(sum);
    c_new = (ai >= v) ? ai - v : QW'(({1'b0, ai} + {1'b0, q_r}) - {1'b0, v});
  end

  assign rd_data = A[rd_addr];
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      i      <= '0;
      stage  <= '0;
      done   <= 1'b0;
      tw_ok  <= 1'b0;
      om_r   <= '0;
      q_r    <= '0;
      mu_r   <= '0;
      tw_om  <= '0;
      tw_q   <= '0;
      tw_cur <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          om_r  <= omega;
          q_r   <= q;
          mu_r  <= mu;
          i     <= '0;
          stage <= '0;
          tw_cur <= QW'(1);
          if (tw_ok && tw_om == omega && tw_q == q) state <= S_RUN;
          else                                       state <= S_TW;
        end
        S_TW: begin
          tw_cur          <= tw_next;
          if (i == LOGN'(N/2 - 1)) begin
            i     <= '0;
            tw_ok <= 1'b1;
            tw_om <= om_r;
            tw_q  <= q_r;
            state <= S_RUN;
          end else i <= i + 1'b1;
        end
        S_RUN: begin
          i <= i + 1'b1;
          if (i == LOGN'(N - 1)) begin
            if (stage == LOGN - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
            stage <= stage + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Storage (no reset): load port writes at the bit-reversed address while idle,
  // the butterfly writes its pair while running.
  always_ff @(posedge clk) begin
    if (state == S_IDLE && ld_en) A[bitrev(ld_addr)] <= ld_data;
    if (state == S_RUN && i[stage] == 1'b0) begin
      A[i]     <= a_new;
      A[icorr] <= c_new;
    end
    if (state == S_TW) tw[i[LOGN-2:0]] <= tw_cur;
  end

  initial assert (N == (1 << LOGN)) else $error("ntt: N must be 2^LOGN");
endmodule

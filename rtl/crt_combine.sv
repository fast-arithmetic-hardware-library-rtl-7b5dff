// crt_combine: Chinese-remainder reconstruction datapath x = (sum_i a_i * c_i) mod Q.
//
// The residues are captured on acceptance. One residue per clock is multiplied by its
// CRT constant c_i = Q_i * (Q_i^-1 mod q_i) (a QW x BW multiplier, the constant picked
// from the table by the lane index) and added into an accumulator, so the products take
// K clocks. The sum is below K * q * Q, so the final "mod Q" needs a quotient of only
// QB = QW + log2(K) + 1 bits; it is taken by restoring subtraction, one quotient bit per
// clock (compare with Q << b, subtract when not below). This avoids a full-width divider
// or a 1200 x 1200-bit Barrett multiplier. The multiply-accumulate over a table of
// constants follows the look-up-table CRT of the paper; the sequential reduction is this
// design's choice.
//
// Interface: in_valid with a[K] while in_ready; qbig (= Q) held stable. The constant
// table lives outside: c_idx names the entry needed this clock and c_val must return
// c_{c_idx} combinationally (a ROM or a register file).
// out_valid pulses with x K + QB + 1 clocks after acceptance; one conversion at a time.
module crt_combine #(
  parameter int unsigned K  = 40,
  parameter int unsigned QW = 30,
  parameter int unsigned BW = K * QW,
  parameter int unsigned QB = QW + $clog2(K) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [QW-1:0] a    [K],
  output logic [$clog2(K)-1:0] c_idx,
  input  logic [BW-1:0] c_val,
  input  logic [BW-1:0] qbig,
  output logic          out_valid,
  output logic [BW-1:0] x
);
  localparam int unsigned SW = BW + QB;
  localparam int unsigned IW = $clog2(K + 1);
  localparam int unsigned BB = $clog2(QB);

  typedef enum logic [1:0] {C_IDLE, C_MAC, C_RED} cstate_e;
  cstate_e         st;
  logic [QW-1:0]   a_r [K];
  logic [SW-1:0]   s_r, shifted_q, prod;
  logic [IW-1:0]   i;
  logic [BB-1:0]   b;

  logic [IW-1:0]   isel;
  assign isel      = (i < IW'(K)) ? i : '0;
  assign c_idx     = isel[$clog2(K)-1:0];
  assign prod      = SW'(a_r[c_idx]) * SW'(c_val);
  assign shifted_q = SW'(qbig) << b;
  assign in_ready  = (st == C_IDLE);

  always_ff @(posedge clk) begin
    if (st == C_IDLE && in_valid)
      for (int j = 0; j < K; j++) a_r[j] <= a[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      s_r       <= '0;
      i         <= '0;
      b         <= '0;
      out_valid <= 1'b0;
      x         <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (st)
        C_IDLE: if (in_valid) begin
          st  <= C_MAC;
          s_r <= '0;
          i   <= '0;
        end
        C_MAC: begin
          s_r <= s_r + prod;
          i   <= i + 1'b1;
          if (i == IW'(K - 1)) begin
            st <= C_RED;
            b  <= BB'(QB - 1);
          end
        end
        C_RED: begin
          if (s_r >= shifted_q) s_r <= s_r - shifted_q;
          if (b == '0) begin
            st        <= C_IDLE;
            out_valid <= 1'b1;
            x         <= BW'((s_r >= shifted_q) ? s_r - shifted_q : s_r);
          end
          b <= b - 1'b1;
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule

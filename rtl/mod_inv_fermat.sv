// mod_inv_fermat: modulo inverse a^-1 = a^(q-2) mod q for a prime q (Fermat's little theorem).
//
// The exponent q-2 is walked from its most significant bit down, which is the same as
// visiting the "power factors" y = 1, ..., (q-2)/2, q-2 in increasing order: for each
// factor p is squared, and when the factor is odd p is also multiplied by a. The factors
// are the prefixes of q-2 and need no table. One modular multiplier (QW x QW followed by
// Barrett reduction) is shared between the squaring and the multiply-by-a step, so each
// exponent bit takes two clocks: about 2*QW clocks per inverse.
//
// Interface: start with a (0 < a < q), q and mu (Barrett factor of q). done pulses with
// inv; busy high in between.
//
// The exponentiation a^(q-2) follows the published Fermat inverse; sharing one multiplier
// for squares and multiplies is this design's choice.
module mod_inv_fermat #(
  parameter int unsigned QW  = 30,
  parameter int unsigned MUW = QW + 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [QW-1:0]  a,
  input  logic [QW-1:0]  q,
  input  logic [MUW-1:0] mu,
  output logic           busy,
  output logic           done,
  output logic [QW-1:0]  inv
);
  typedef enum logic [1:0] {F_IDLE, F_SQR, F_MUL} state_e;
  state_e state;

  logic [QW-1:0]         a_r, q_r, e_r, p, op_b, prod;
  logic [MUW-1:0]        mu_r;
  logic [$clog2(QW)-1:0] bit_i;

  assign op_b = (state == F_MUL) ? a_r : p;
  mod_mul #(.QW(QW), .MUW(MUW)) u_mm (.a(p), .b(op_b), .q(q_r), .mu(mu_r), .r(prod));
  assign busy = (state != F_IDLE);

  // position of the leading one of q-2
  function automatic logic [$clog2(QW)-1:0] msb(input logic [QW-1:0] x);
    msb = '0;
    for (int b = 0; b < QW; b++) if (x[b]) msb = ($clog2(QW))'(b);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= F_IDLE;
      a_r   <= '0;
      q_r   <= '0;
      e_r   <= '0;
      mu_r  <= '0;
      p     <= '0;
      bit_i <= '0;
      done  <= 1'b0;
      inv   <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        F_IDLE: if (start) begin
          a_r   <= a;
          q_r   <= q;
          mu_r  <= mu;
          e_r   <= q - QW'(2);
          bit_i <= msb(q - QW'(2));
          p     <= QW'(1);       // power factor y = 1 restarts p at 1
          state <= F_SQR;
        end
        F_SQR: begin
          p     <= prod;           // p = p*p mod q
          state <= e_r[bit_i] ? F_MUL : F_SQR;
          if (!e_r[bit_i]) begin
            if (bit_i == '0) begin
              state <= F_IDLE;
              done  <= 1'b1;
              inv   <= prod;
            end
            bit_i <= bit_i - 1'b1;
          end
        end
        F_MUL: begin
          p <= prod;               // p = a*p mod q (odd power factor)
          if (bit_i == '0) begin
            state <= F_IDLE;
            done  <= 1'b1;
            inv   <= prod;
          end else state <= F_SQR;
          bit_i <= bit_i - 1'b1;
        end
        default: state <= F_IDLE;
      endcase
    end
  end
endmodule

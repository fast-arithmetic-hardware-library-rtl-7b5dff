// mod_inv_eea: modulo inverse by the extended Euclidean algorithm.
//
// Registers tempa/tempb start at (q, a mod q) and the Bezout coefficient of a starts at
// (prev, cur) = (0, 1). Each clock, while tempb != 0, the quotient m = tempa / tempb and
// remainder are formed by a combinational divider and the pair steps
//   (tempa, tempb) <- (tempb, tempa mod tempb),  (prev, cur) <- (cur, prev - m * cur).
// When tempb reaches 0, tempa is gcd(a, q) = 1 and prev is the inverse up to sign;
// it is brought into 0..q-1 by adding q when negative. The number of clocks is the
// number of Euclid steps, O(log q) (at most about 44 for 30-bit operands).
//
// The listing this follows tracks both coefficients and returns the one initialised
// (1, 0), which belongs to q, not a; this block returns the coefficient of a, which is
// the inverse (a*x + q*y = 1). The unused coefficient of q is not kept.
//
// Interface: start with a and q; done pulses with inv; busy high in between.
module mod_inv_eea #(
  parameter int unsigned QW = 30
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [QW-1:0] a,
  input  logic [QW-1:0] q,
  output logic          busy,
  output logic          done,
  output logic [QW-1:0] inv
);
  logic [QW-1:0]        ta, tb, q_r, m, rem;
  logic signed [QW+1:0] prev, cur, nxt;
  logic                 run;
  logic signed [2*QW+3:0] mc;

  always_comb begin
    m   = (tb != '0) ? ta / tb : '0;
    rem = (tb != '0) ? ta % tb : '0;
    mc  = $signed({2'b00, m}) * cur;
    nxt = prev - (QW+2)'(mc);
  end
  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      ta   <= '0;
      tb   <= '0;
      q_r  <= '0;
      prev <= '0;
      cur  <= '0;
      done <= 1'b0;
      inv  <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run  <= 1'b1;
          ta   <= q;
          tb   <= a % q;
          q_r  <= q;
          prev <= '0;
          cur  <= (QW+2)'(1);
        end
      end else if (tb == '0) begin
        run  <= 1'b0;
        done <= 1'b1;
        inv  <= (prev < 0) ? QW'(prev + $signed({2'b00, q_r})) : QW'(prev);
      end else begin
        ta   <= tb;
        tb   <= rem;
        prev <= cur;
        cur  <= nxt;
      end
    end
  end
endmodule

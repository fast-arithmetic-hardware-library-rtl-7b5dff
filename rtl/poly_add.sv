// poly_add: coefficient-wise modular addition of two polynomials, c_j = a_j + b_j mod q.
//
// The polynomials stream through one coefficient per clock. The sum a+b (one bit wider
// than the operands) is compared with q and q is subtracted when the sum is not below it,
// so no modular reduction circuit is needed: both inputs are already reduced. The width
// is a parameter, so the same block adds residues (W = 30, q a lane modulus) or full
// coefficients (W = 1200, q the big modulus Q).
//
// Interface: in_valid with a, b; q held stable. Timing: out_valid/c one clock later.
//
// Compare-and-subtract after the addition follows the published adder; the one-clock
// register stage is this design's choice.
module poly_add #(
  parameter int unsigned W = 30
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  output logic         out_valid,
  output logic [W-1:0] c
);
  logic [W:0]   sum;
  logic [W-1:0] c_d;
  always_comb begin
    sum = {1'b0, a} + {1'b0, b};
    c_d = (sum >= {1'b0, q}) ? W'(sum - {1'b0, q}) : W'(sum);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      c         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) c <= c_d;
    end
  end
endmodule

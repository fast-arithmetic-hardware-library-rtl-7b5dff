// scalar_mul: product t*m of the scaling constant t and a binary message polynomial m.
//
// Because every message coefficient is 0 or 1, the product needs no multiplier: each
// message bit selects either t or 0. One coefficient per clock; W is the width of t
// (the full 1200-bit coefficient by default, since t = floor(Q/2)).
//
// Interface: in_valid with m (one message bit), t held stable. Timing: out_valid/c one
// clock later.
module scalar_mul #(
  parameter int unsigned W = 1200
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         m,
  input  logic [W-1:0] t,
  output logic         out_valid,
  output logic [W-1:0] c
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      c         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) c <= (m == 1'b1) ? t : '0;
    end
  end
endmodule

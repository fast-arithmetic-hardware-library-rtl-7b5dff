// scalar_div: rounds u / t to the nearest binary integer without a divider.
//
// Used in decryption with t = floor(Q/2): a coefficient u decodes to 1 when it lies
// closer to t than half of t, that is when |u - t| < t/2, and to 0 otherwise. The
// absolute difference is formed by comparing u with t and subtracting the smaller from
// the larger; t/2 is a right shift of t. One coefficient per clock.
//
// Interface: in_valid with u, t held stable. Timing: out_valid/m one clock later.
module scalar_div #(
  parameter int unsigned W = 1200
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] u,
  input  logic [W-1:0] t,
  output logic         out_valid,
  output logic         m
);
  logic [W-1:0] distance;
  always_comb distance = (u >= t) ? u - t : t - u;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      m         <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) m <= (distance < (t >> 1));
    end
  end
endmodule

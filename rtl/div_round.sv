// div_round: division by a power of two p = 2^s with rounding to the nearest integer.
//
// Relinearisation version 2 scales c2*rlk down by p; because p is chosen as a power of
// two the division is a right shift by s = log2(p). Rounding to nearest is done by
// adding p/2 before the shift (ties round up); the shown datapath has only the shift,
// the half-add is this design's reading of "divide and round". One value per clock.
//
// Interface: in_valid with x and s (s >= 1). Timing: out_valid/y one clock later.
//
// Rounding division by a power of two p by add-half-and-shift follows the published unit; p
// = 2^s with s an input is this design's choice.
module div_round #(
  parameter int unsigned W  = 1200,
  parameter int unsigned SW = $clog2(W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [W-1:0]  x,
  input  logic [SW-1:0] s,
  output logic          out_valid,
  output logic [W-1:0]  y
);
  logic [W:0] xr;
  always_comb xr = ({1'b0, x} + ((W+1)'(1) << s >> 1)) >> s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= W'(xr);
    end
  end
endmodule

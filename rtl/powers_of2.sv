// powers_of2: generates T^i * s^2 mod q (T = 2) for the version-1 relinearisation keys.
//
// The coefficients of s^2 for one lane are written once into the block's own store.
// Afterwards each request (coefficient index j, power i) returns (s2[j] << i) mod q one
// clock later: the multiplication by 2^i is a left shift, and the shifted value (below
// 2^(2*QW) for i < QW) goes through a Barrett reduction so that every key coefficient
// stays a residue of the lane modulus. The powers are never stored; they are produced
// on demand in whatever order the caller walks i and j.
//
// Interface: ld_en/ld_addr/ld_data write the s^2 store; rq_valid/rq_addr/rq_pow issue a
// request, answered by out_valid/out one clock later. q and mu held stable.
//
// Shifting s^2 left instead of multiplying by 2^i follows the published PowersOf2 unit; the
// request interface and the Barrett reduction after the shift are this design's choices.
module powers_of2 #(
  parameter int unsigned N    = 1024,
  parameter int unsigned LOGN = $clog2(N),
  parameter int unsigned QW   = 30,
  parameter int unsigned PW   = $clog2(QW),
  parameter int unsigned MUW  = QW + 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [QW-1:0]   q,
  input  logic [MUW-1:0]  mu,
  input  logic            ld_en,
  input  logic [LOGN-1:0] ld_addr,
  input  logic [QW-1:0]   ld_data,
  input  logic            rq_valid,
  input  logic [LOGN-1:0] rq_addr,
  input  logic [PW-1:0]   rq_pow,
  output logic            out_valid,
  output logic [QW-1:0]   out
);
  logic [QW-1:0]   s2 [N];
  logic [2*QW-1:0] shifted;
  logic [QW-1:0]   red;

  always_comb shifted = (2*QW)'(s2[rq_addr]) << rq_pow;
  barrett_reduce #(.QW(QW), .AW(2*QW), .MUW(MUW)) u_red (.a(shifted), .q(q), .mu(mu), .r(red));

  always_ff @(posedge clk) if (ld_en) s2[ld_addr] <= ld_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= rq_valid;
      if (rq_valid) out <= red;
    end
  end
endmodule

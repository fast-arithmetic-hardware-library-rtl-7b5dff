// inner_product: sum over i of bit_i(c2) * rlk[i] mod q for one coefficient.
//
// Version-1 relinearisation decomposes c2 in base T = 2, so each decomposed digit is a
// single bit of the c2 residue and "multiplying" it with a key element is a selection
// between the key element and 0. The block walks i = 0..L-1, one key element per clock
// (key_addr/key_data, read combinationally from the caller's key store), accumulates the
// selected elements in a plain adder without reduction, and reduces the accumulated sum
// (below L*q, far below 2^(3k)) once at the end with the modified Barrett reduction.
// The combination is coefficient by coefficient, as the selection datapath implies.
//
// Interface: start with c2 (QW bits); key_addr gives i; done pulses with res after
// L+1 clocks. q, mbr_k and mbr_r (modified-Barrett constants of q) held stable.
//
// Selecting key powers by the bits of c2 and summing them follows the published
// inner-product unit; one key power per clock and a single modified-Barrett reduction at
// the end are this design's choices.
module inner_product #(
  parameter int unsigned QW  = 30,
  parameter int unsigned L   = QW,
  parameter int unsigned LW  = $clog2(L),
  parameter int unsigned AW  = QW + $clog2(L) + 1,
  parameter int unsigned RW  = QW/2 + 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [QW-1:0]   c2,
  input  logic [QW-1:0]   q,
  input  logic [5:0]      mbr_k,
  input  logic [RW-1:0]   mbr_r,
  output logic [LW-1:0]   key_addr,
  input  logic [QW-1:0]   key_data,
  output logic            busy,
  output logic            done,
  output logic [QW-1:0]   res
);
  logic [QW-1:0] c2_r;
  logic [AW-1:0] acc;
  logic [QW-1:0] red;
  logic          run;
  logic [LW:0]   acc_idx;

  assign key_addr = LW'(acc_idx);
  assign busy     = run;

  mod_barrett_reduce #(.QW(QW), .AW(AW), .KW(6), .RW(RW)) u_red
    (.a(acc), .q(q), .k(mbr_k), .r(mbr_r), .res(red));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run     <= 1'b0;
      acc     <= '0;
      acc_idx <= '0;
      c2_r    <= '0;
      done    <= 1'b0;
      res     <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run     <= 1'b1;
          c2_r    <= c2;
          acc     <= '0;
          acc_idx <= '0;
        end
      end else if (acc_idx == (LW+1)'(L)) begin
        run  <= 1'b0;
        done <= 1'b1;
        res  <= red;
      end else begin
        acc     <= acc + ((c2_r[acc_idx[LW-1:0]] == 1'b1) ? AW'(key_data) : '0);
        acc_idx <= acc_idx + 1'b1;
      end
    end
  end
endmodule

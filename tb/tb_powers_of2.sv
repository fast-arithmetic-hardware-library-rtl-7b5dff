// tb_powers_of2: loads random s^2 residues for N = 32 and requests every (j, i) pair,
// i < 30, in a scrambled order; each answer (one clock later) must be 2^i * s2[j] mod q.
module tb_powers_of2;
  localparam int N = 32, LOGN = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            ld_en, rq_valid, out_valid;
  logic [LOGN-1:0] ld_addr, rq_addr;
  logic [4:0]      rq_pow;
  logic [29:0]     q, ld_data, out;
  logic [31:0]     mu;
  powers_of2 #(.N(N), .LOGN(LOGN), .QW(30), .PW(5), .MUW(32)) dut (.clk, .rst_n, .q, .mu,
    .ld_en, .ld_addr, .ld_data, .rq_valid, .rq_addr, .rq_pow, .out_valid, .out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] s2 [N];
  initial begin
    logic [63:0] qq, expv;
    qq = 64'(he_pkg::Q_TABLE[7]);
    q = 30'(qq); mu = 32'(he_pkg::barrett_mu(qq, 60));
    ld_en = 0; rq_valid = 0; ld_addr = 0; rq_addr = 0; rq_pow = 0; ld_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < N; j++) begin
      s2[j] = (j == 0) ? qq - 1 : 64'($urandom % 32'(qq));
      @(negedge clk); ld_en = 1; ld_addr = LOGN'(j); ld_data = 30'(s2[j]);
    end
    @(negedge clk); ld_en = 0;
    for (int i = 0; i < 30; i++)
      for (int jj = 0; jj < N; jj++) begin
        int j;
        j = (jj * 7 + i) % N;
        @(negedge clk); rq_valid = 1; rq_addr = LOGN'(j); rq_pow = 5'(i);
        expv = he_pkg::mulmod64(s2[j], 64'(1) << i, qq);
        @(posedge clk); #1;
        checks++;
        if (!out_valid || 64'(out) != expv) begin
          failures++;
          if (failures < 10) $display("FAIL j=%0d i=%0d got %0d exp %0d", j, i, out, expv);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

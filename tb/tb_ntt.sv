// tb_ntt: N = 16 transform of random polynomials for three moduli, compared with the
// direct sum X_i = sum_k x_k * omega^(ik) mod q. Checks the run time: N/2 + N*log2(N)
// clocks on the first run with a new omega (twiddle fill), N*log2(N) afterwards, and
// that the inverse transform (omega^-1, then * N^-1) returns the input.
module tb_ntt;
  localparam int N = 16, LOGN = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            ld_en, start, busy, done;
  logic [LOGN-1:0] ld_addr, rd_addr;
  logic [29:0]     ld_data, rd_data, omega, q;
  logic [31:0]     mu;
  ntt #(.N(N), .LOGN(LOGN), .QW(30), .MUW(32)) dut (.clk, .rst_n, .ld_en, .ld_addr,
    .ld_data, .rd_addr, .rd_data, .start, .omega, .q, .mu, .busy, .done);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] x [N], xf [N], x0 [N];

  task automatic run(input logic [63:0] om, input int exp_cycles);
    int cyc;
    for (int k = 0; k < N; k++) begin
      @(negedge clk); ld_en = 1; ld_addr = LOGN'(k); ld_data = 30'(x[k]);
    end
    @(negedge clk); ld_en = 0; omega = 30'(om); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != exp_cycles + 1) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", cyc - 1, exp_cycles);
    end
  endtask

  initial begin
    logic [63:0] qq, psi, om, omi, ninv, acc, e;
    ld_en = 0; start = 0; ld_addr = 0; ld_data = 0; rd_addr = 0; omega = 0; q = 0; mu = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      qq   = 64'(he_pkg::Q_TABLE[t * 13]);
      psi  = he_pkg::powmod64(64'(he_pkg::PSI_TABLE[t * 13]), 64'(1024 / N), qq);
      om   = he_pkg::mulmod64(psi, psi, qq);
      omi  = he_pkg::invmod64(om, qq);
      ninv = he_pkg::invmod64(64'(N), qq);
      q = 30'(qq); mu = 32'(he_pkg::barrett_mu(qq, 60));
      for (int k = 0; k < N; k++) x[k] = (t == 0 && k == 0) ? qq - 1 : 64'($urandom % 32'(qq));
      for (int k = 0; k < N; k++) x0[k] = x[k];
      run(om, N / 2 + N * LOGN);
      for (int i = 0; i < N; i++) begin
        acc = 0;
        for (int k = 0; k < N; k++) begin
          e   = he_pkg::powmod64(om, 64'(i * k), qq);
          acc = (acc + he_pkg::mulmod64(x[k], e, qq)) % qq;
        end
        rd_addr = LOGN'(i); #1;
        xf[i] = 64'(rd_data);
        checks++;
        if (64'(rd_data) != acc) begin
          failures++;
          if (failures < 10) $display("FAIL q=%0d X[%0d] got %0d exp %0d", qq, i, rd_data, acc);
        end
      end
      // second forward run with the same omega: no twiddle fill
      run(om, N * LOGN);
      // inverse: transform of the spectrum with omega^-1, scaled by N^-1, is the input
      for (int k = 0; k < N; k++) x[k] = xf[k];
      run(omi, N / 2 + N * LOGN);
      for (int i = 0; i < N; i++) begin
        rd_addr = LOGN'(i); #1;
        checks++;
        if (he_pkg::mulmod64(64'(rd_data), ninv, qq) != x0[i]) begin
          failures++;
          if (failures < 10) $display("FAIL inverse x[%0d]", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_poly_mul: N = 16 negacyclic products of random polynomials (and of x^(N-1) * x,
// which must give -1) for two lane moduli, compared with the schoolbook product mod
// (x^N + 1, q). Also checks the schedule: last output 3N + 2*N*log2(N) clocks after the
// first input (+N for the one-time twiddle fill, + a few clocks of hand-over).
module tb_poly_mul;
  localparam int N = 16, LOGN = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid, in_ready, out_valid, busy;
  logic [29:0] q, psi, psi_inv, omega, omega_inv, n_inv, in_a, in_b, out_c;
  logic [31:0] mu;
  poly_mul #(.N(N), .LOGN(LOGN), .QW(30), .MUW(32)) dut (.clk, .rst_n, .q, .mu, .psi,
    .psi_inv, .omega, .omega_inv, .n_inv, .in_valid, .in_ready, .in_a, .in_b,
    .out_valid, .out_c, .busy);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] a [N], b [N], c [N];

  task automatic run_mul(input logic [63:0] qq, input int exp_cycles);
    int cyc, got;
    logic [63:0] s;
    for (int k = 0; k < N; k++) begin
      c[k] = 0;
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        s = he_pkg::mulmod64(a[i], b[j], qq);
        if (i + j < N) c[i+j]   = (c[i+j] + s) % qq;
        else           c[i+j-N] = (c[i+j-N] + qq - s) % qq;
      end
    cyc = 0; got = 0;
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_a = 30'(a[k]); in_b = 30'(b[k]);
      cyc++;
    end
    @(negedge clk); in_valid = 0;
    while (got < N) begin
      if (out_valid) begin
        checks++;
        if (64'(out_c) != c[got]) begin
          failures++;
          if (failures < 10) $display("FAIL c[%0d] got %0d exp %0d", got, out_c, c[got]);
        end
        got++;
      end
      if (got < N) begin @(negedge clk); cyc++; end
    end
    checks++;
    if (cyc < exp_cycles || cyc > exp_cycles + 8) begin
      failures++;
      $display("FAIL latency %0d expected about %0d", cyc, exp_cycles);
    end
  endtask

  initial begin
    logic [63:0] qq, ps, om;
    in_valid = 0; in_a = 0; in_b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      qq = 64'(he_pkg::Q_TABLE[t * 21]);
      ps = he_pkg::powmod64(64'(he_pkg::PSI_TABLE[t * 21]), 64'(1024 / N), qq);
      om = he_pkg::mulmod64(ps, ps, qq);
      q = 30'(qq); mu = 32'(he_pkg::barrett_mu(qq, 60));
      psi = 30'(ps); psi_inv = 30'(he_pkg::invmod64(ps, qq));
      omega = 30'(om); omega_inv = 30'(he_pkg::invmod64(om, qq));
      n_inv = 30'(he_pkg::invmod64(64'(N), qq));
      for (int r = 0; r < 3; r++) begin
        for (int k = 0; k < N; k++) begin
          a[k] = 64'($urandom % 32'(qq));
          b[k] = 64'($urandom % 32'(qq));
          if (r == 2) begin a[k] = (k == N-1) ? 1 : 0; b[k] = (k == 1) ? 1 : 0; end
        end
        run_mul(qq, 3 * N + 2 * N * LOGN + ((r == 0) ? N : 0));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

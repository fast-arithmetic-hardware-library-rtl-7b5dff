// tb_mod_inv_eea: inverses of random residues (and of 1 and q-1) for all 40 lane
// moduli; the result must satisfy a * inv = 1 mod q and lie below q.
module tb_mod_inv_eea;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, busy, done;
  logic [29:0] a, q, inv;
  logic [31:0] mu;
  mod_inv_eea #(.QW(30)) dut (.clk, .rst_n, .start, .a, .q, .busy, .done, .inv);
  localparam int MAXC = 50;
  logic unused;
  assign unused = ^mu;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] qq;
    int cyc;
    start = 0; a = 0; q = 0; mu = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      qq = 64'(he_pkg::Q_TABLE[n % 40]);
      @(negedge clk);
      q = 30'(qq); mu = 32'(he_pkg::barrett_mu(qq, 60));
      a = (n < 40) ? 30'd1 : (n < 80) ? 30'(qq - 1) : 30'(1 + $urandom % 32'(qq - 1));
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (inv >= q || he_pkg::mulmod64(64'(a), 64'(inv), qq) != 1) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d q=%0d inv=%0d", a, q, inv);
      end
      checks++;
      if (cyc > MAXC) begin
        failures++;
        if (failures < 10) $display("FAIL took %0d clocks", cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

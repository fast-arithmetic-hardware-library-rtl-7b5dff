// tb_crt_lut: random coefficients x < Q (plus 0 and Q-1) are split into residues here
// with '%' and recombined by the CRT unit; the output must equal x, and a conversion
// must take QW + log2(K) + 2 clocks.
module tb_crt_lut;
  localparam int K = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          in_valid, in_ready, out_valid, ready;
  logic [29:0]   a [K];
  logic [1199:0] x;
  crt_lut #(.K(K), .QW(30), .BW(1200)) dut (.clk, .rst_n, .in_valid, .in_ready, .a, .out_valid, .x);
  assign ready = 1'b1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    logic [1199:0] xv, bigq;
    bigq = he_pkg::big_q(K);
    in_valid = 0;
    for (int i = 0; i < K; i++) a[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (!ready) begin @(negedge clk); cyc++; end
    $display("ready after %0d clocks", cyc);
    for (int n = 0; n < 150; n++) begin
      for (int w = 0; w < 37; w++) xv[w*32 +: 32] = $urandom;
      xv[1199:1184] = 16'($urandom);
      xv = xv % bigq;
      if (n == 0) xv = '0;
      if (n == 1) xv = bigq - 1;
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < K; i++) a[i] = 30'(xv % 1200'(he_pkg::Q_TABLE[i]));
      @(negedge clk); in_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (x !== xv) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d", n);
      end
      checks++;
      if (cyc != K + 30 + $clog2(K) + 2) begin
        failures++;
        if (failures < 10) $display("FAIL latency %0d", cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rns_parallel: random 1200-bit coefficients (plus 0, 2^1200-1 and Q-1) converted to the
// 40 residues; each residue is compared with x % q_i. Checks the conversion time:
// 2 clocks per coefficient for the parallel form, K+1 for the serial one.
module tb_rns_parallel;
  localparam int K = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          in_valid, in_ready, out_valid;
  logic [1199:0] x;
  logic [29:0]   res [K];
  rns_parallel #(.K(K), .QW(30), .BW(1200)) dut (.clk, .rst_n, .in_valid, .x, .out_valid, .res);
  assign in_ready = 1'b1;
  localparam int LAT = 2;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    logic [1199:0] xv;
    in_valid = 0; x = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int w = 0; w < 37; w++) xv[w*32 +: 32] = $urandom;
      xv[1199:1184] = 16'($urandom);
      if (n == 0) xv = '0;
      if (n == 1) xv = '1;
      if (n == 2) xv = he_pkg::big_q(K) - 1;
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; x = xv;
      @(negedge clk); in_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      for (int i = 0; i < K; i++) begin
        checks++;
        if (res[i] !== 30'(xv % 1200'(he_pkg::Q_TABLE[i]))) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d lane %0d", n, i);
        end
      end
      checks++;
      if (cyc != LAT) begin
        failures++;
        if (failures < 10) $display("FAIL latency %0d", cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

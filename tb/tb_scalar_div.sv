// tb_scalar_div: decodes coefficients placed at known distances from t = floor(Q/2)
// (noise well inside and well outside t/2, and the two boundaries) and random values,
// comparing with the rounding of 2u/Q computed here by division.
module tb_scalar_div;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          in_valid, out_valid, m;
  logic [1199:0] u, t, bigq;
  scalar_div #(.W(1200)) dut (.clk, .rst_n, .in_valid, .u, .t, .out_valid, .m);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(input logic [1199:0] uv, input logic expv);
    @(negedge clk);
    in_valid = 1; u = uv;
    @(posedge clk); #1;
    checks++;
    if (!out_valid || m !== expv) begin
      failures++;
      if (failures < 10) $display("FAIL u=%0h got %0d exp %0d", uv, m, expv);
    end
  endtask

  initial begin
    logic [1199:0] noise;
    logic [1201:0] r;
    bigq = he_pkg::big_q(40);
    t = bigq >> 1;
    in_valid = 0; u = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    put(t, 1'b1);
    put('0, 1'b0);
    put(bigq - 1, 1'b0);
    put(t + (t >> 1) - 1, 1'b1);
    put(t + (t >> 1), 1'b0);
    put(t - (t >> 1) + 1, 1'b1);
    put(t - (t >> 1), 1'b0);
    for (int n = 0; n < 300; n++) begin
      noise = {$urandom, $urandom, $urandom};
      put(t + noise, 1'b1);
      put(t - noise, 1'b1);
      put(noise, 1'b0);
      put(bigq - 1 - noise, 1'b0);
      // random value: 1 exactly when |u - t| < t/2
      for (int w = 0; w < 37; w++) u[w*32 +: 32] = $urandom;
      u[1199:1184] = 16'($urandom);
      u = u % bigq;
      r = (u >= t) ? u - t : t - u;
      put(u, (r < (t >> 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

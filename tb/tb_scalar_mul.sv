// tb_scalar_mul: random message bits; each output (one clock later) must be t or 0.
module tb_scalar_mul;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            in_valid, m, out_valid;
  logic [1199:0]   t, c;
  scalar_mul #(.W(1200)) dut (.clk, .rst_n, .in_valid, .m, .t, .out_valid, .c);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    t = he_pkg::big_q(40) >> 1;
    in_valid = 0; m = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      in_valid = 1; m = 1'($urandom);
      @(posedge clk); #1;
      checks++;
      if (!out_valid || c !== (m ? t : '0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

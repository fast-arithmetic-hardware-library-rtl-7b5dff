// tb_div_round: compares round(x / 2^s) with (x + 2^(s-1)) / 2^s computed by division,
// for random 1200-bit x and several shifts including the relinearisation shift 90.
module tb_div_round;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          in_valid, out_valid;
  logic [1199:0] x, y;
  logic [10:0]   s;
  div_round #(.W(1200), .SW(11)) dut (.clk, .rst_n, .in_valid, .x, .s, .out_valid, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1200:0] expv, pw;
    in_valid = 0; x = 0; s = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      in_valid = 1;
      for (int w = 0; w < 37; w++) x[w*32 +: 32] = $urandom;
      x[1199:1184] = 16'($urandom);
      s = (n % 3 == 0) ? 11'd90 : 11'(1 + $urandom % 200);
      if (n == 1) x = '1;
      if (n == 2) begin x = 1200'd5; s = 11'd1; end   // 2.5 rounds up to 3
      pw   = 1201'd1 << s;
      expv = ({1'b0, x} + (pw >> 1)) / pw;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || y !== 1200'(expv)) begin
        failures++;
        if (failures < 10) $display("FAIL s=%0d", s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_poly_add: streams random residue pairs through the adder and compares each output
// (one clock later) with (a + b) mod q; also covers sums equal to q and 2q-2.
module tb_poly_add;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid, out_valid;
  logic [29:0] a, b, q, c;
  poly_add #(.W(30)) dut (.clk, .rst_n, .in_valid, .a, .b, .q, .out_valid, .c);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [30:0] expv;
    in_valid = 0; a = 0; b = 0; q = he_pkg::Q_TABLE[3];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = 1;
      case (n)
        0: begin a = q - 1; b = q - 1; end
        1: begin a = q - 1; b = 1; end
        2: begin a = 0; b = 0; end
        default: begin a = $urandom % q; b = $urandom % q; end
      endcase
      expv = ({1'b0, a} + {1'b0, b}) % {1'b0, q};
      @(posedge clk); #1;
      checks++;
      if (!out_valid || c !== 30'(expv)) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d b=%0d got %0d exp %0d", a, b, c, expv);
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

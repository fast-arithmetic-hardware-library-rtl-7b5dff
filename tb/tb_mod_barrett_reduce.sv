// tb_mod_barrett_reduce: checks the single-fold modified Barrett reduction against '%'
// for all lane moduli, over its input range a < 2^(3k) (k = floor(log2 q / 2)).
module tb_mod_barrett_reduce;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [44:0] a;
  logic [29:0] q, res;
  logic [5:0]  k;
  logic [17:0] r;
  mod_barrett_reduce #(.QW(30), .AW(45), .KW(6), .RW(18)) dut (.a, .q, .k, .r, .res);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input logic [44:0] av, input int qi);
    logic [29:0] expv;
    q = he_pkg::Q_TABLE[qi];
    k = 6'(he_pkg::mbr_k(64'(q)));
    r = 18'(he_pkg::mbr_r(64'(q)));
    a = av;
    #1;
    expv = 30'(av % 45'(q));
    checks++;
    if (res !== expv) begin
      failures++;
      if (failures < 10) $display("FAIL a=%0d q=%0d got %0d exp %0d", av, q, res, expv);
    end
  endtask

  initial begin
    for (int qi = 0; qi < 40; qi++) begin
      logic [44:0] lim;
      lim = 45'd1 << (3 * he_pkg::mbr_k(64'(he_pkg::Q_TABLE[qi])));
      try(45'd0, qi);
      try(45'(he_pkg::Q_TABLE[qi]), qi);
      try(45'(he_pkg::Q_TABLE[qi]) - 1, qi);
      try(lim - 1, qi);
      for (int n = 0; n < 1000; n++) try(45'({$urandom, $urandom}) % lim, qi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

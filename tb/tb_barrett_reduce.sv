// tb_barrett_reduce: random and corner-case check of the classic Barrett reduction
// against the '%' operator, for all 40 lane moduli and inputs below q^2, plus the
// widest inputs (2^60 - 1) for which the second correction step matters.
module tb_barrett_reduce;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [59:0] a;
  logic [29:0] q, r;
  logic [31:0] mu;
  barrett_reduce #(.QW(30), .AW(60), .MUW(32)) dut (.a, .q, .mu, .r);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input logic [59:0] av, input int qi);
    logic [29:0] expv;
    q  = he_pkg::Q_TABLE[qi];
    mu = 32'(he_pkg::barrett_mu(64'(q), 60));
    a  = av;
    #1;
    expv = 30'(av % 60'(q));
    checks++;
    if (r !== expv) begin
      failures++;
      if (failures < 10) $display("FAIL a=%0d q=%0d got %0d exp %0d", av, q, r, expv);
    end
  endtask

  initial begin
    for (int qi = 0; qi < 40; qi++) begin
      logic [59:0] qq;
      qq = 60'(he_pkg::Q_TABLE[qi]);
      try(60'd0, qi);
      try(qq - 1, qi);
      try(qq, qi);
      try(qq * qq - 1, qi);
      try({60{1'b1}}, qi);
      for (int n = 0; n < 500; n++)
        try(({$urandom, $urandom} % (qq * qq)), qi);
      for (int n = 0; n < 50; n++) try(60'({$urandom, $urandom}), qi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

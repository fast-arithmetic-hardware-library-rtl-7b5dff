// tb_inner_product: random c2 residues and random 30-element key vectors; the result
// must equal sum_i bit_i(c2) * rlk[i] mod q and arrive L + 1 clocks after start.
module tb_inner_product;
  localparam int L = 30;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, busy, done;
  logic [29:0] c2, q, key_data, res;
  logic [5:0]  mbr_k;
  logic [17:0] mbr_r;
  logic [4:0]  key_addr;
  logic [29:0] key [L];
  inner_product #(.QW(30), .L(L), .LW(5), .RW(18)) dut (.clk, .rst_n, .start, .c2, .q,
    .mbr_k, .mbr_r, .key_addr, .key_data, .busy, .done, .res);
  assign key_data = key[key_addr];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] qq, expv;
    int cyc;
    start = 0; c2 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      qq = 64'(he_pkg::Q_TABLE[n % 40]);
      q = 30'(qq); mbr_k = 6'(he_pkg::mbr_k(qq)); mbr_r = 18'(he_pkg::mbr_r(qq));
      for (int i = 0; i < L; i++) key[i] = (n == 0) ? 30'(qq - 1) : 30'($urandom % 32'(qq));
      @(negedge clk);
      c2 = (n == 0) ? 30'h3fffffff : 30'($urandom);
      start = 1;
      expv = 0;
      for (int i = 0; i < L; i++) if (c2[i]) expv = (expv + 64'(key[i])) % qq;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (64'(res) != expv) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d exp %0d", res, expv);
      end
      checks++;
      if (cyc != L + 2) begin
        failures++;
        if (failures < 10) $display("FAIL cycles %0d", cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_he_lane: one lane (modulus q_5) at N = 16 taken through every lane operation:
// ADD, MAC (negacyclic product plus addend), KEYGEN followed by one KEYMASK per key
// power, and RELIN with the resulting keys. Each result is compared with a reference
// computed here from the same inputs; the EXEC time of ADD and MAC is checked too.
module tb_he_lane;
  import he_pkg::*;
  localparam int N = 16, LOGN = 4, L = 30, LANE = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  op_e             op;
  logic [4:0]      pass;
  logic            in_valid, in_ready, done;
  logic [29:0]     in_a, in_b, in_d, rd_data;
  logic [LOGN-1:0] rd_addr;
  localparam lane_const_t LC = lane_consts(LANE, N);
  he_lane #(.N(N), .LOGN(LOGN), .QW(30), .L(L), .LW(5)) dut (.clk, .rst_n,
    .c_q(LC.q), .c_mu(LC.mu), .c_psi(LC.psi), .c_psi_inv(LC.psi_inv), .c_omega(LC.omega),
    .c_omega_inv(LC.omega_inv), .c_n_inv(LC.n_inv), .c_mbr_k(LC.mbr_k), .c_mbr_r(LC.mbr_r),
    .op, .pass, .in_valid, .in_ready, .in_a, .in_b, .in_d, .done, .rd_addr, .rd_data);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] qq;
  logic [63:0] a [N], b [N], d [N], expv [N], s2 [N];
  logic [63:0] key [L][N];
  int exec_cycles;

  task automatic run_op(input op_e o, input int p);
    op = o; pass = 5'(p);
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_a = 30'(a[k]); in_b = 30'(b[k]); in_d = 30'(d[k]);
    end
    @(negedge clk); in_valid = 0;
    exec_cycles = 1;
    while (!done) begin @(negedge clk); exec_cycles++; end
  endtask

  task automatic check_out(input string what);
    for (int k = 0; k < N; k++) begin
      rd_addr = LOGN'(k); #1;
      checks++;
      if (64'(rd_data) != expv[k]) begin
        failures++;
        if (failures < 10) $display("FAIL %s [%0d] got %0d exp %0d", what, k, rd_data, expv[k]);
      end
    end
  endtask

  function automatic logic [63:0] rnd();
    return 64'($urandom % 32'(qq));
  endfunction

  initial begin
    logic [63:0] s;
    qq = 64'(Q_TABLE[LANE]);
    op = OP_ADD; pass = 0; in_valid = 0; in_a = 0; in_b = 0; in_d = 0; rd_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ADD
    for (int k = 0; k < N; k++) begin
      a[k] = rnd(); b[k] = rnd(); d[k] = rnd(); expv[k] = (a[k] + d[k]) % qq;
    end
    run_op(OP_ADD, 0);
    check_out("ADD");
    checks++;
    if (exec_cycles > N + 4) begin failures++; $display("FAIL ADD exec %0d", exec_cycles); end

    // MAC
    for (int k = 0; k < N; k++) begin
      a[k] = rnd(); b[k] = rnd(); d[k] = rnd(); expv[k] = d[k];
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        s = mulmod64(a[i], b[j], qq);
        if (i + j < N) expv[i+j]   = (expv[i+j] + s) % qq;
        else           expv[i+j-N] = (expv[i+j-N] + qq - s) % qq;
      end
    run_op(OP_MAC, 0);
    check_out("MAC");
    checks++;
    if (exec_cycles > 2 * N * LOGN + 3 * N + N + 8) begin
      failures++; $display("FAIL MAC exec %0d", exec_cycles);
    end

    // KEYGEN then KEYMASK for every power
    for (int k = 0; k < N; k++) begin s2[k] = rnd(); a[k] = s2[k]; end
    run_op(OP_KEYGEN, 0);
    for (int i = 0; i < L; i++) begin
      for (int k = 0; k < N; k++) begin
        d[k] = rnd();
        key[i][k] = (mulmod64(s2[k], 64'(1) << i, qq) + d[k]) % qq;
      end
      run_op(OP_KEYMASK, i);
    end

    // RELIN
    for (int k = 0; k < N; k++) begin
      a[k] = rnd(); d[k] = rnd(); expv[k] = d[k];
      for (int i = 0; i < L; i++) if (a[k][i]) expv[k] = (expv[k] + key[i][k]) % qq;
    end
    run_op(OP_RELIN, 0);
    check_out("RELIN");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

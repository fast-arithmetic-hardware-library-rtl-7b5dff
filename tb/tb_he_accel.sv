// tb_he_accel: end-to-end test of the accelerator (RNS -> 40 lanes -> CRT) at N = 16.
// It runs, on 1200-bit coefficients:
//   homomorphic-style addition (OP_ADD), a polynomial multiply-accumulate (OP_MAC),
//   message encoding (cmd_enc, d := t*m), a full decryption (c0 + c1*s with a
//   ciphertext built here from a secret s, a message m and small noise; cmd_dec must
//   return m), Div&Round scaling (cmd_divr), and version-1 relinearisation key
//   generation (OP_KEYGEN, one OP_KEYMASK per key power) followed by OP_RELIN.
// Results are compared with big-integer references computed here (RELIN per residue,
// since the key is applied lane by lane). Every mechanism is counted and a mechanism
// that never ran counts as a failure.
module tb_he_accel;
  import he_pkg::*;
  localparam int N = 16, K = 40, QW = 30, BW = 1200, L = 30;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          cmd_valid, cmd_ready, cmd_enc, cmd_dec, cmd_divr;
  op_e           cmd_op;
  logic [4:0]    cmd_pass;
  logic          in_valid, in_ready, in_m, out_valid, out_m, done;
  logic [BW-1:0] in_a, in_b, in_d, out_c;
  he_accel #(.N(N)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_pass,
    .cmd_enc, .cmd_dec, .cmd_divr, .in_valid, .in_ready, .in_a, .in_b, .in_d, .in_m,
    .out_valid, .out_c, .out_m, .done);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [BW-1:0] bigq, t;
  logic [BW-1:0] a [N], b [N], d [N], expv [N], res [N];
  logic          m [N], mres [N];
  int            n_add, n_mac, n_enc, n_dec, n_divr, n_keygen, n_keymask, n_relin;

  function automatic logic [BW-1:0] rnd_big();
    logic [BW-1:0] v;
    for (int w = 0; w < 37; w++) v[w*32 +: 32] = $urandom;
    v[1199:1184] = 16'($urandom);
    return v % bigq;
  endfunction

  function automatic logic [BW-1:0] addq(input logic [BW-1:0] x, input logic [BW-1:0] y);
    logic [BW:0] s;
    s = {1'b0, x} + {1'b0, y};
    return (s >= {1'b0, bigq}) ? BW'(s - {1'b0, bigq}) : BW'(s);
  endfunction

  function automatic logic [BW-1:0] subq(input logic [BW-1:0] x, input logic [BW-1:0] y);
    return (x >= y) ? x - y : BW'({1'b0, x} + {1'b0, bigq} - {1'b0, y});
  endfunction

  // negacyclic product of a and b plus d, mod Q
  task automatic ref_mac();
    logic [2*BW-1:0] p;
    logic [BW-1:0]   pr;
    for (int k = 0; k < N; k++) expv[k] = d[k];
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        p  = a[i] * b[j];
        pr = BW'(p % bigq);
        if (i + j < N) expv[i+j]   = addq(expv[i+j], pr);
        else           expv[i+j-N] = subq(expv[i+j-N], pr);
      end
  endtask

  task automatic run_op(input op_e o, input int p, input bit enc, input bit dec, input bit divr);
    int got;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = o; cmd_pass = 5'(p); cmd_enc = enc; cmd_dec = dec; cmd_divr = divr;
    @(negedge clk); cmd_valid = 0;
    got = 0;
    fork
      begin
        for (int k = 0; k < N; k++) begin
          while (!in_ready) @(negedge clk);
          in_valid = 1; in_a = a[k]; in_b = b[k]; in_d = d[k]; in_m = m[k];
          @(negedge clk);
          in_valid = 0;
        end
      end
      begin
        while (!done) begin
          @(posedge clk); #1;
          if (out_valid) begin
            if (got < N) begin res[got] = out_c; mres[got] = out_m; end
            got++;
          end
        end
      end
    join
    if (o != OP_KEYGEN && o != OP_KEYMASK) begin
      checks++;
      if (got != N) begin failures++; $display("FAIL %s: %0d outputs", o.name(), got); end
    end
    case (o)
      OP_ADD: n_add++; OP_MAC: n_mac++; OP_KEYGEN: n_keygen++;
      OP_KEYMASK: n_keymask++; OP_RELIN: n_relin++; default: ;
    endcase
    if (enc) n_enc++;
    if (dec) n_dec++;
    if (divr) n_divr++;
  endtask

  task automatic check_all(input string what);
    for (int k = 0; k < N; k++) begin
      checks++;
      if (res[k] !== expv[k]) begin
        failures++;
        if (failures < 10) $display("FAIL %s [%0d]", what, k);
      end
    end
  endtask

  initial begin
    logic [BW-1:0] s [N];
    logic [BW-1:0] s2 [N];
    logic [63:0]   key [K][L][N];
    logic [63:0]   qi, r;
    logic [1201:0] pw;
    bigq = big_q(K);
    t = bigq >> 1;
    n_add = 0; n_mac = 0; n_enc = 0; n_dec = 0; n_divr = 0; n_keygen = 0; n_keymask = 0; n_relin = 0;
    cmd_valid = 0; cmd_op = OP_ADD; cmd_pass = 0; cmd_enc = 0; cmd_dec = 0; cmd_divr = 0;
    in_valid = 0; in_a = 0; in_b = 0; in_d = 0; in_m = 0;
    for (int k = 0; k < N; k++) m[k] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. addition
    for (int k = 0; k < N; k++) begin
      a[k] = rnd_big(); b[k] = rnd_big(); d[k] = rnd_big(); expv[k] = addq(a[k], d[k]);
    end
    a[0] = bigq - 1; d[0] = bigq - 1; expv[0] = addq(a[0], d[0]);
    run_op(OP_ADD, 0, 0, 0, 0);
    check_all("ADD");

    // 2. multiply-accumulate
    for (int k = 0; k < N; k++) begin a[k] = rnd_big(); b[k] = rnd_big(); d[k] = rnd_big(); end
    ref_mac();
    run_op(OP_MAC, 0, 0, 0, 0);
    check_all("MAC");

    // 3. message encoding: c = a + t*m
    for (int k = 0; k < N; k++) begin
      a[k] = rnd_big(); m[k] = 1'($urandom); expv[k] = addq(a[k], m[k] ? t : '0);
    end
    run_op(OP_ADD, 0, 1, 0, 0);
    check_all("ENC");

    // 4. decryption: c0 = -(c1*s) + t*m + e, then c0 + c1*s decodes to m
    for (int k = 0; k < N; k++) begin
      s[k] = BW'($urandom % 2); a[k] = rnd_big(); m[k] = 1'($urandom);
    end
    for (int k = 0; k < N; k++) begin b[k] = s[k]; d[k] = '0; end
    ref_mac();                                   // expv = c1 * s
    for (int k = 0; k < N; k++) begin
      logic [BW-1:0] e;
      e    = ($urandom % 2) ? BW'($urandom % 64) : bigq - BW'($urandom % 64);
      d[k] = addq(subq(addq(m[k] ? t : '0, e), expv[k]), '0);
    end
    ref_mac();                                   // expv = c0 + c1*s = t*m + e
    run_op(OP_MAC, 0, 0, 1, 0);
    check_all("DEC-u");
    for (int k = 0; k < N; k++) begin
      checks++;
      if (mres[k] !== m[k]) begin failures++; $display("FAIL DEC bit %0d", k); end
    end

    // 5. Div&Round: c = round((a + d) / 2^90)
    for (int k = 0; k < N; k++) begin
      a[k] = rnd_big(); d[k] = rnd_big();
      pw = 1202'(1) << 90;
      expv[k] = BW'(({2'b0, addq(a[k], d[k])} + (pw >> 1)) / pw);
    end
    run_op(OP_ADD, 0, 0, 0, 1);
    check_all("DIVR");

    // 6. relinearisation keys: KEYGEN with s^2, then one mask per power
    for (int k = 0; k < N; k++) begin s2[k] = rnd_big(); a[k] = s2[k]; end
    run_op(OP_KEYGEN, 0, 0, 0, 0);
    for (int i = 0; i < L; i++) begin
      for (int k = 0; k < N; k++) begin
        d[k] = rnd_big();
        for (int l = 0; l < K; l++) begin
          qi = 64'(Q_TABLE[l]);
          key[l][i][k] = (mulmod64(64'(s2[k] % BW'(qi)), 64'(1) << i, qi) + 64'(d[k] % BW'(qi))) % qi;
        end
      end
      run_op(OP_KEYMASK, i, 0, 0, 0);
    end

    // 7. relinearisation: per residue, c_l = d_l + sum_i bit_i(a_l) * key_l[i]
    for (int k = 0; k < N; k++) begin a[k] = rnd_big(); d[k] = rnd_big(); end
    run_op(OP_RELIN, 0, 0, 0, 0);
    for (int k = 0; k < N; k++)
      for (int l = 0; l < K; l++) begin
        logic [29:0] ar;
        qi = 64'(Q_TABLE[l]);
        ar = 30'(a[k] % BW'(qi));
        r  = 64'(d[k] % BW'(qi));
        for (int i = 0; i < L; i++) if (ar[i]) r = (r + key[l][i][k]) % qi;
        checks++;
        if (64'(res[k] % BW'(qi)) != r) begin
          failures++;
          if (failures < 10) $display("FAIL RELIN [%0d] lane %0d", k, l);
        end
      end

    // every mechanism must have run
    $display("ran: add=%0d mac=%0d enc=%0d dec=%0d divr=%0d keygen=%0d keymask=%0d relin=%0d",
             n_add, n_mac, n_enc, n_dec, n_divr, n_keygen, n_keymask, n_relin);
    checks++; if (n_add == 0)     failures++;
    checks++; if (n_mac == 0)     failures++;
    checks++; if (n_enc == 0)     failures++;
    checks++; if (n_dec == 0)     failures++;
    checks++; if (n_divr == 0)    failures++;
    checks++; if (n_keygen == 0)  failures++;
    checks++; if (n_keymask == 0) failures++;
    checks++; if (n_relin == 0)   failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

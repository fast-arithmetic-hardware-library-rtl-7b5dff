// tb_he_accel_full: full-size run of the accelerator with its default parameters
// (N = 1024, K = 40 lanes of 30 bits, 1200-bit Q). It performs one FV decryption:
// a ciphertext (c0, c1) is built here from a binary secret s, a random c1, a random
// message m and small noise e, as c0 = -(c1*s) + t*m + e (mod Q, negacyclic product),
// then the accelerator computes c0 + c1*s with OP_MAC and cmd_dec. Every output
// coefficient is compared with the big-integer reference t*m + e and every decoded bit
// with m. The run also reports the number of clocks of the three phases.
module tb_he_accel_full;
  import he_pkg::*;
  localparam int NN = 1024, BB = 1200;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          cmd_valid, cmd_ready, cmd_enc, cmd_dec, cmd_divr;
  op_e           cmd_op;
  logic [4:0]    cmd_pass;
  logic          in_valid, in_ready, in_m, out_valid, out_m, done;
  logic [BB-1:0] in_a, in_b, in_d, out_c;
  he_accel dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_pass,
    .cmd_enc, .cmd_dec, .cmd_divr, .in_valid, .in_ready, .in_a, .in_b, .in_d, .in_m,
    .out_valid, .out_c, .out_m, .done);

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [BB-1:0] bigq, t;
  logic [BB-1:0] c1 [NN], c0 [NN], prod [NN], expv [NN];
  logic          s [NN], m [NN];

  function automatic logic [BB-1:0] rnd_big();
    logic [BB-1:0] v;
    for (int w = 0; w < 37; w++) v[w*32 +: 32] = $urandom;
    v[1199:1184] = 16'($urandom);
    return v % bigq;
  endfunction

  function automatic logic [BB-1:0] addq(input logic [BB-1:0] x, input logic [BB-1:0] y);
    logic [BB:0] sm;
    sm = {1'b0, x} + {1'b0, y};
    return (sm >= {1'b0, bigq}) ? BB'(sm - {1'b0, bigq}) : BB'(sm);
  endfunction

  function automatic logic [BB-1:0] subq(input logic [BB-1:0] x, input logic [BB-1:0] y);
    return (x >= y) ? x - y : BB'({1'b0, x} + {1'b0, bigq} - {1'b0, y});
  endfunction

  initial begin
    int got, cyc_all, first_out;
    bigq = big_q(K);
    t    = bigq >> 1;
    cmd_valid = 0; cmd_op = OP_MAC; cmd_pass = 0; cmd_enc = 0; cmd_dec = 0; cmd_divr = 0;
    in_valid = 0; in_a = 0; in_b = 0; in_d = 0; in_m = 0;

    // reference: prod = c1 * s in Z_Q[x]/(x^N + 1), s binary
    for (int k = 0; k < NN; k++) begin
      c1[k] = rnd_big(); s[k] = 1'($urandom); m[k] = 1'($urandom); prod[k] = '0;
    end
    for (int j = 0; j < NN; j++)
      if (s[j])
        for (int i = 0; i < NN; i++)
          if (i + j < NN) prod[i+j]    = addq(prod[i+j], c1[i]);
          else            prod[i+j-NN] = subq(prod[i+j-NN], c1[i]);
    for (int k = 0; k < NN; k++) begin
      logic [BB-1:0] e;
      e       = ($urandom % 2) ? BB'($urandom % 1024) : bigq - BB'($urandom % 1024);
      expv[k] = addq(m[k] ? t : '0, e);
      c0[k]   = subq(expv[k], prod[k]);
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_dec = 1;
    @(negedge clk); cmd_valid = 0;
    got = 0; cyc_all = 0; first_out = 0;
    fork
      begin
        for (int k = 0; k < NN; k++) begin
          while (!in_ready) @(negedge clk);
          in_valid = 1; in_a = c1[k]; in_b = BB'(s[k]); in_d = c0[k]; in_m = 0;
          @(negedge clk);
          in_valid = 0;
        end
      end
      begin
        while (!done) begin
          @(posedge clk); #1;
          cyc_all++;
          if (out_valid) begin
            if (got == 0) first_out = cyc_all;
            if (got < NN) begin
              checks += 2;
              if (out_c !== expv[got]) begin
                failures++;
                if (failures < 10) $display("FAIL coefficient %0d", got);
              end
              if (out_m !== m[got]) begin
                failures++;
                if (failures < 10) $display("FAIL message bit %0d", got);
              end
            end
            got++;
          end
        end
      end
    join
    checks++;
    if (got != NN) begin failures++; $display("FAIL %0d outputs", got); end
    $display("decryption of N=%0d: first output after %0d clocks, done after %0d clocks",
             NN, first_out, cyc_all);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

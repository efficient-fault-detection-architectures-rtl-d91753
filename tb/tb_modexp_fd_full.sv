// Full-size testbench: modexp_fd_top with every parameter at its default
// (2048-bit operands, 50-bit coefficients), l = 128.
//
// The modulus is N = 3^a, the largest power of three below 2^2048, with
// phi(N) = 2*3^(a-1); x is drawn at random and made coprime to 3, y is a
// random 2048-bit exponent (so it is usually larger than phi and gets
// reduced). Two operations are run:
//   1. fault free: the result must be released and equal x^y mod N,
//      computed here with double-width arithmetic from the unreduced y;
//   2. one bit of x flipped while the second round encodes: the result must
//      be withheld and fault_detected raised.
// The cycle count of each operation is compared with the closed form
// 2(K+2) + 2(EW+5) + (b1 + min(b2,l))(W+2) + (b2 - min(b2,l)) + 2, where b1,
// b2 are the bit lengths of the reduced exponents of the two rounds.
module tb_modexp_fd_full;
  import modexp_pkg::*;
  localparam int unsigned W   = OP_W;
  localparam int unsigned K   = K_W;
  localparam int unsigned EW  = W + K + 1;
  localparam int unsigned CW  = $clog2(W + 1);
  localparam int unsigned L   = L_DEF;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [W-1:0] x = '0, y = '0, n = '0, phi = '0;
  logic [K-1:0] k1x = '0, k1y = '0, k2x = '0, k2y = '0;
  logic [CW-1:0] l = '0;
  fd_state_e state;
  logic busy, done, result_valid, fault_detected, q_mismatch, hw_mismatch;
  logic [W-1:0] result;
  int checks = 0, failures = 0;
  longint unsigned cyc = 0;

  modexp_fd_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [W-1:0] rnd_wide();
    logic [W-1:0] r;
    for (int i = 0; i < W; i += 32) r[i+:32] = $urandom;
    return r;
  endfunction

  function automatic logic [W-1:0] modexp(input logic [W-1:0] b, input logic [W-1:0] e,
                                          input logic [W-1:0] m);
    logic [2*W-1:0] r, bb;
    r = 1; bb = (2*W)'(b) % (2*W)'(m);
    for (int i = 0; i < W; i++) begin
      if (e[i]) r = (r * bb) % (2*W)'(m);
      bb = (bb * bb) % (2*W)'(m);
    end
    return r[W-1:0];
  endfunction

  function automatic int bitlen(input logic [W-1:0] v);
    for (int i = W - 1; i >= 0; i--) if (v[i]) return i + 1;
    return 0;
  endfunction

  task automatic operation(input bit inject, input logic [W-1:0] tx, input logic [W-1:0] ty);
    logic [W-1:0] x2, yr, q;
    int b, nm2;
    longint unsigned c0, expc;
    x2 = inject ? tx ^ (W'(1) << ($urandom % W)) : tx;
    yr = ty % phi;
    b = bitlen(yr);
    nm2 = (b < int'(L)) ? b : int'(L);
    expc = longint'(2 * (K + 2) + 2 * (EW + 5)) + longint'(b + nm2) * longint'(W + 2)
           + longint'(b - nm2) + 2;
    q = modexp(tx, ty, n);
    @(negedge clk);
    x = tx; y = ty; l = CW'(L);
    k1x = {$urandom, $urandom}; k1y = {$urandom, $urandom};
    k2x = {$urandom, $urandom}; k2y = {$urandom, $urandom};
    start = 1'b1; c0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      if (state == ST_ENC2) x = x2;
      @(negedge clk);
    end
    checks++;
    if (cyc - c0 != expc) begin
      failures++; $display("FAIL cycles %0d expected %0d", cyc - c0, expc);
    end
    @(negedge clk);
    $display("operation inject=%0d: %0d cycles, valid=%0d fault=%0d qm=%0d hm=%0d", inject,
             cyc - c0 - 1, result_valid, fault_detected, q_mismatch, hw_mismatch);
    checks++;
    if (inject) begin
      if (result_valid || !fault_detected || result != '0) begin
        failures++; $display("FAIL injected fault not detected");
      end
    end else begin
      if (!result_valid || fault_detected || result != q) begin
        failures++; $display("FAIL fault-free result wrong or rejected");
      end
    end
  endtask

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W+1:0] p;
    logic [W-1:0] tx;
    // N = 3^a < 2^W, phi(N) = 2 * 3^(a-1)
    p = 1;
    while (p * 3 < ((W+2)'(1) << W)) p = p * 3;
    n = W'(p);
    phi = W'(p / 3 * 2);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    tx = rnd_wide();
    while (tx % 3 == 0) tx = tx + 1;
    operation(1'b0, tx, rnd_wide());
    operation(1'b1, tx, rnd_wide());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

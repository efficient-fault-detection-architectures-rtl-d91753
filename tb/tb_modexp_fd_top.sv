// End-to-end testbench for modexp_fd_top at reduced size (64-bit operands,
// 16-bit coefficients).
//
// Moduli with a known totient are built here: prime powers p^a (as for a
// prime-field Diffie-Hellman modulus, phi = (p-1)p^(a-1)) and RSA-style
// products of two primes (phi = (p-1)(q-1)); primes are found by trial
// division. Each operation draws random x (coprime to N), y and four
// encoding coefficients, and one of these scenarios:
//   clean       - no fault; the released result must equal x^y mod N,
//                 computed here from the unreduced exponent;
//   x fault t2  - one bit of x flipped while the second round encodes;
//   y fault t2  - a bit of y at or above position l flipped in round 2
//                 (y < phi so the reduction keeps the low bits): only the
//                 Hamming-weight check can see it;
//   y fault t2 low - a bit below l flipped in round 2;
//   x fault t1  - x corrupted during the first round only, so the stored
//                 result is wrong and must be withheld.
// For every operation the expected decision is computed from the values
// each round actually saw, and the outputs and cycle count are compared.
// Mechanisms counted (each must occur): accepted result, detection by the
// partial result, detection by the Hamming weight alone, withheld faulty
// result, exponent reduced mod phi, exponent shorter than l, bits counted
// without multiplication in round 2.
module tb_modexp_fd_top;
  import modexp_pkg::*;
  localparam int unsigned W   = 64;
  localparam int unsigned K_W = 16;
  localparam int unsigned EW  = W + K_W + 1;
  localparam int unsigned CW  = $clog2(W + 1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [W-1:0]   x = '0, y = '0, n = '0, phi = '0;
  logic [K_W-1:0] k1x = '0, k1y = '0, k2x = '0, k2y = '0;
  logic [CW-1:0]  l = '0;
  fd_state_e      state;
  logic           busy, done, result_valid, fault_detected, q_mismatch, hw_mismatch;
  logic [W-1:0]   result;
  int checks = 0, failures = 0;
  int c_accept = 0, c_det_q = 0, c_det_hw_only = 0, c_withheld = 0;
  int c_reduced = 0, c_short = 0, c_count_only = 0;
  longint unsigned cyc = 0;

  modexp_fd_top #(.W(W), .K_W(K_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

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

  function automatic bit is_prime(input longint unsigned v);
    if (v < 2) return 0;
    for (longint unsigned d = 2; d * d <= v; d++) if (v % d == 0) return 0;
    return 1;
  endfunction

  function automatic longint unsigned rand_prime(input int bits);
    longint unsigned v;
    do v = (longint'($urandom) & ((64'd1 << bits) - 1)) | (64'd1 << (bits - 1)) | 1;
    while (!is_prime(v));
    return v;
  endfunction

  // Expected values for one round given the inputs it encoded.
  typedef struct { logic [W-1:0] q, qp; int hw, bl; } round_t;
  function automatic round_t ref_round(input logic [W-1:0] tx, input logic [W-1:0] ty,
                                       input logic [W-1:0] tn, input logic [W-1:0] tphi,
                                       input int tl);
    round_t rr;
    logic [W-1:0] xr, yr, yp;
    xr = tx % tn;
    yr = ty % tphi;
    yp = (tl >= W) ? yr : (yr & ((W'(1) << tl) - 1));
    rr.q = modexp(xr, yr, tn);
    rr.qp = modexp(xr, yp, tn);
    rr.hw = $countones(yr);
    rr.bl = bitlen(yr);
    return rr;
  endfunction

  task automatic operation(input int scen, input logic [W-1:0] tn, input logic [W-1:0] tphi,
                           input logic [W-1:0] tx, input logic [W-1:0] ty, input int tl);
    logic [W-1:0] x1, y1, x2, y2;
    round_t r1, r2;
    bit exp_match;
    int nm1, nm2, nc2, fb;
    longint unsigned c0, expc;
    x1 = tx; y1 = ty; x2 = tx; y2 = ty;
    fb = $urandom % W;
    unique case (scen)
      1: x2 = tx ^ (W'(1) << fb);
      2: y2 = ty ^ (W'(1) << (tl + $urandom % (bitlen(tphi) - 1 - tl)));
      3: y2 = ty ^ (W'(1) << ($urandom % tl));
      4: x1 = tx ^ (W'(1) << fb);
      default: ;
    endcase
    r1 = ref_round(x1, y1, tn, tphi, tl);
    r2 = ref_round(x2, y2, tn, tphi, tl);
    exp_match = (r1.qp == r2.qp) && (r1.hw == r2.hw);
    nm1 = r1.bl;
    nm2 = (r2.bl < tl) ? r2.bl : tl;
    nc2 = r2.bl - nm2;
    // Two rounds: encoder K_W+2, core (EW+1 + bits + 2) + 2, then CMP and DONE.
    expc = longint'(2 * (K_W + 2) + 2 * (EW + 1 + 2 + 2) + nm1 * (W + 2) + nm2 * (W + 2) + nc2
                    + 1 + 1);
    if (ty >= tphi) c_reduced++;
    if (r1.bl < tl) c_short++;
    if (nc2 > 0) c_count_only++;

    @(negedge clk);
    x = x1; y = y1; n = tn; phi = tphi; l = CW'(tl);
    k1x = K_W'($urandom); k1y = K_W'($urandom); k2x = K_W'($urandom); k2y = K_W'($urandom);
    start = 1'b1; c0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      if (state == ST_ENC2) begin x = x2; y = y2; end
      @(negedge clk);
    end
    checks++;
    if (cyc - c0 != expc) begin
      failures++; $display("FAIL scen %0d cycles %0d expected %0d", scen, cyc - c0, expc);
    end
    @(negedge clk);
    checks++;
    if (result_valid != exp_match || fault_detected != !exp_match ||
        q_mismatch != (r1.qp != r2.qp) || hw_mismatch != (r1.hw != r2.hw)) begin
      failures++;
      $display("FAIL scen %0d flags valid=%0d fault=%0d qm=%0d hm=%0d", scen, result_valid,
               fault_detected, q_mismatch, hw_mismatch);
    end
    checks++;
    if (result != (exp_match ? r1.q : '0)) begin failures++; $display("FAIL scen %0d result", scen); end
    if (scen == 0) begin
      checks++;
      if (!result_valid || result != modexp(tx, ty, tn)) begin
        failures++; $display("FAIL clean result differs from x^y mod N");
      end
    end
    if (result_valid) c_accept++;
    if (q_mismatch) c_det_q++;
    if (hw_mismatch && !q_mismatch) c_det_hw_only++;
    if (!result_valid && r1.q != modexp(tx, ty, tn)) c_withheld++;
  endtask

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] tn, tphi, tx, ty;
    longint unsigned p, q, pa;
    int ls [4] = '{10, 20, 50, 64};
    int tl, scen;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 40; i++) begin
      if (i % 2 == 0) begin
        p = rand_prime(31); q = rand_prime(32);
        tn = W'(p * q); tphi = W'((p - 1) * (q - 1));
      end else begin
        p = rand_prime(2 + $urandom % 12);
        pa = p;
        while (pa <= ((64'hFFFF_FFFF_FFFF_FFFF) / p)) pa = pa * p;
        tn = W'(pa); tphi = W'(pa / p * (p - 1));
      end
      scen = i % 5;
      tl = (scen == 2) ? 10 + $urandom % 20 : ls[(i / 5) % 4];
      do begin
        tx = {$urandom, $urandom};
      end while ((tx % W'(p)) == 0 || (i % 2 == 0 && (tx % W'(q)) == 0));
      ty = {$urandom, $urandom};
      if (scen == 2) ty = ty % tphi;                 // keep y < phi
      if (i % 10 == 9) ty = ty & W'(16'hFFFF) % tphi; // short exponent
      operation(scen, tn, tphi, tx, ty, tl);
    end
    checks++;
    if (c_accept == 0 || c_det_q == 0 || c_det_hw_only == 0 || c_withheld == 0 ||
        c_reduced == 0 || c_short == 0 || c_count_only == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("mechanisms: accepted=%0d detected_by_partial=%0d detected_by_hw_only=%0d withheld=%0d reduced=%0d short=%0d count_only=%0d",
             c_accept, c_det_q, c_det_hw_only, c_withheld, c_reduced, c_short, c_count_only);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

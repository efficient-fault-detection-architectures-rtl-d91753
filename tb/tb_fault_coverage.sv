// Error-coverage workload for modexp_fd_top at reduced size (128-bit
// operands, 16-bit coefficients).
//
// Reproduces the four fault models the scheme is evaluated with, applied to
// the base or to the exponent during the first round only (the values the
// first round encodes are corrupted, the recomputation sees the true ones):
//   total random  - the operand is replaced by a fresh random value;
//   single bit    - one random bit is flipped;
//   k-bit random  - k distinct random bits are flipped (k = 3, 5, 15);
//   k-bit burst   - k consecutive bits from a random position are flipped.
// Combined faults follow: c1 corrupts base and exponent of the first round,
// c2 those of the second round, c3 all four (operands replaced at random).
// Each model runs with l = 10, 20 and 50 on two moduli with known totient:
// the Mersenne prime 2^127-1 (a prime-field, Diffie-Hellman style modulus)
// and the RSA-style product (2^89-1)(2^31-1).
//
// Checks: for every operation the design's decision (accept or reject, and
// which comparison failed) must equal the decision predicted from the values
// each round actually used, and an accepted result must equal the stored
// first-round result. Fault-free operations must be accepted with the
// correct x^y mod N. The detection rate of each model/operand/l group is
// printed; each group must detect at least one fault.
module tb_fault_coverage;
  import modexp_pkg::*;
  localparam int unsigned W   = 128;
  localparam int unsigned K_W = 16;
  localparam int unsigned CW  = $clog2(W + 1);
  localparam int TRIALS = 12;    // per (model, operand, l) group

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [W-1:0]   x = '0, y = '0, n = '0, phi = '0;
  logic [K_W-1:0] k1x = '0, k1y = '0, k2x = '0, k2y = '0;
  logic [CW-1:0]  l = '0;
  fd_state_e      state;
  logic           busy, done, result_valid, fault_detected, q_mismatch, hw_mismatch;
  logic [W-1:0]   result;
  int checks = 0, failures = 0;

  modexp_fd_top #(.W(W), .K_W(K_W)) dut (.*);

  always #5 clk = ~clk;

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

  function automatic logic [W-1:0] rnd_w();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // Fault models: 0 total random, 1 single bit, 2 k-bit random, 3 k-bit burst.
  function automatic logic [W-1:0] corrupt(input logic [W-1:0] v, input int model, input int k);
    logic [W-1:0] mask;
    int pos;
    mask = '0;
    unique case (model)
      0: return rnd_w();
      1: mask[$urandom % W] = 1'b1;
      2: while ($countones(mask) < k) mask[$urandom % W] = 1'b1;
      default: begin
        pos = $urandom % W;
        for (int i = 0; i < k; i++) mask[(pos + i) % W] = 1'b1;
      end
    endcase
    return v ^ mask;
  endfunction

  // Runs one operation on the true operands tx/ty; round 1 encodes x1/y1
  // and round 2 encodes x2/y2.
  task automatic operation(input logic [W-1:0] tx, input logic [W-1:0] ty,
                           input logic [W-1:0] x1, input logic [W-1:0] y1,
                           input logic [W-1:0] x2, input logic [W-1:0] y2,
                           input int tl, output bit detected, output bit corrupt_out);
    logic [W-1:0] xr1, yr1, xr2, yr2, q1, qp1, qp2, mask;
    bit exp_q, exp_h;
    mask = (W'(1) << tl) - 1;
    xr1 = x1 % n; yr1 = y1 % phi; xr2 = x2 % n; yr2 = y2 % phi;
    q1  = modexp(xr1, yr1, n);
    qp1 = modexp(xr1, yr1 & mask, n);
    qp2 = modexp(xr2, yr2 & mask, n);
    exp_q = (qp1 != qp2);
    exp_h = ($countones(yr1) != $countones(yr2));
    @(negedge clk);
    x = x1; y = y1; l = CW'(tl);
    k1x = K_W'($urandom); k1y = K_W'($urandom); k2x = K_W'($urandom); k2y = K_W'($urandom);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      if (state == ST_ENC2) begin x = x2; y = y2; end
      @(negedge clk);
    end
    @(negedge clk);
    checks++;
    if (q_mismatch != exp_q || hw_mismatch != exp_h || result_valid != !(exp_q || exp_h) ||
        result != ((exp_q || exp_h) ? '0 : q1)) begin
      failures++;
      $display("FAIL decision: qm=%0d/%0d hm=%0d/%0d", q_mismatch, exp_q, hw_mismatch, exp_h);
    end
    detected = fault_detected;
    corrupt_out = (q1 != modexp(tx, ty, n));
  endtask

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string mname [4] = '{"total random", "single bit", "k-bit random", "k-bit burst"};
    int ls [3] = '{10, 20, 50};
    int ks [3] = '{3, 5, 15};
    logic [W-1:0] tx, ty;
    bit det, bad;
    int n_det, n_bad, n_bad_det;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int mod_sel = 0; mod_sel < 2; mod_sel++) begin
      if (mod_sel == 0) begin
        n = (W'(1) << 127) - 1;  phi = n - 1;
      end else begin
        n = ((W'(1) << 89) - 1) * ((W'(1) << 31) - 1);
        phi = ((W'(1) << 89) - 2) * ((W'(1) << 31) - 2);
      end
      // Fault-free reference operations.
      for (int i = 0; i < 4; i++) begin
        do tx = rnd_w(); while (tx % n == 0 || (mod_sel == 1 && (tx % ((W'(1) << 31) - 1) == 0 ||
                                                                 tx % ((W'(1) << 89) - 1) == 0)));
        ty = rnd_w();
        operation(tx, ty, tx, ty, tx, ty, 20, det, bad);
        checks++;
        if (det || !result_valid || result != modexp(tx, ty, n)) begin
          failures++; $display("FAIL fault-free operation");
        end
      end
      for (int model = 0; model < 4; model++)
        for (int ki = 0; ki < ((model >= 2) ? 3 : 1); ki++)
          for (int opnd = 0; opnd < 2; opnd++)
            for (int li = 0; li < 3; li++) begin
              n_det = 0; n_bad = 0; n_bad_det = 0;
              for (int t = 0; t < TRIALS; t++) begin
                tx = rnd_w(); ty = rnd_w();
                if (opnd == 0) operation(tx, ty, corrupt(tx, model, ks[ki]), ty, tx, ty, ls[li], det, bad);
                else           operation(tx, ty, tx, corrupt(ty, model, ks[ki]), tx, ty, ls[li], det, bad);
                n_det += int'(det); n_bad += int'(bad); n_bad_det += int'(det && bad);
              end
              $display("N%0d %-12s k=%2d fault on %s l=%2d: detected %0d/%0d, corrupted results detected %0d/%0d",
                       mod_sel, mname[model], (model >= 2) ? ks[ki] : 1, opnd ? "y1" : "x1",
                       ls[li], n_det, TRIALS, n_bad_det, n_bad);
              checks++;
              if (n_det == 0) begin failures++; $display("FAIL group detected nothing"); end
            end
      // Combined faults: c1 = (x1, y1), c2 = (x2, y2), c3 = (x1, x2, y1, y2),
      // each operand replaced by a random value (total random model).
      for (int c = 1; c <= 3; c++) begin
        n_det = 0; n_bad = 0; n_bad_det = 0;
        for (int t = 0; t < TRIALS; t++) begin
          logic [W-1:0] a1, b1, a2, b2;
          tx = rnd_w(); ty = rnd_w();
          a1 = tx; b1 = ty; a2 = tx; b2 = ty;
          if (c != 2) begin a1 = rnd_w(); b1 = rnd_w(); end
          if (c != 1) begin a2 = rnd_w(); b2 = rnd_w(); end
          operation(tx, ty, a1, b1, a2, b2, ls[t % 3], det, bad);
          n_det += int'(det); n_bad += int'(bad); n_bad_det += int'(det && bad);
        end
        $display("N%0d combined fault c%0d: detected %0d/%0d, corrupted results detected %0d/%0d",
                 mod_sel, c, n_det, TRIALS, n_bad_det, n_bad);
        checks++;
        if (n_det == 0) begin failures++; $display("FAIL group detected nothing"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

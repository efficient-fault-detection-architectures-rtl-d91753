// Self-checking testbench for modexp_alg2 (reduced to 64-bit operands and
// 16-bit coefficients so that many operations fit in a short run).
// Random encoded operands, moduli and l values are run in full and partial
// mode. The reference reduces x_enc mod N and y_enc mod phi, computes
// x^y, x^(y mod 2^l) and popcount(y) independently, and the cycle count is
// checked against EW+1 + (multiplied bits)*(W+2) + (counted-only bits) + 3
// clock edges. Small phi values produce exponents shorter than l.
module tb_modexp_alg2;
  localparam int unsigned W   = 64;
  localparam int unsigned K_W = 16;
  localparam int unsigned EW  = W + K_W + 1;
  localparam int unsigned CW  = $clog2(W + 1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, partial = 1'b0;
  logic [EW-1:0] x_enc = '0, y_enc = '0;
  logic [W-1:0]  n = '0, phi = '0;
  logic [CW-1:0] l = '0;
  logic busy, done;
  logic [W-1:0]  result, result_partial;
  logic [CW-1:0] hw;
  int checks = 0, failures = 0;
  int n_short = 0, n_count_only = 0;
  longint unsigned cyc = 0;

  modexp_alg2 #(.W(W), .K_W(K_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [W-1:0] modexp(input logic [W-1:0] b, input logic [W-1:0] e,
                                          input logic [W-1:0] m);
    logic [2*W-1:0] r, bb;
    r = 1; bb = (2*W)'(b);
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

  task automatic run(input logic [EW-1:0] xe, input logic [EW-1:0] ye, input logic [W-1:0] tn,
                     input logic [W-1:0] tphi, input int tl, input logic tpart);
    logic [W-1:0] xr, yr, ypart, q, qp;
    int bl, nm, nc;
    longint unsigned c0, expc;
    xr = W'(xe % EW'(tn));
    yr = W'(ye % EW'(tphi));
    ypart = (tl >= W) ? yr : (yr & ((W'(1) << tl) - 1));
    q  = modexp(xr, yr, tn);
    qp = modexp(xr, ypart, tn);
    bl = bitlen(yr);
    nm = (tpart && tl < bl) ? tl : bl;
    nc = bl - nm;
    if (bl < tl) n_short++;
    if (nc > 0) n_count_only++;
    expc = longint'(EW + 1 + nm * (W + 2) + nc + 3);
    @(negedge clk);
    x_enc = xe; y_enc = ye; n = tn; phi = tphi; l = CW'(tl); partial = tpart;
    start = 1'b1; c0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    checks++;
    if (result_partial != qp) begin failures++; $display("FAIL partial result l=%0d", tl); end
    checks++;
    if (hw != CW'($countones(yr))) begin failures++; $display("FAIL hamming weight"); end
    checks++;
    if (result != (tpart ? qp : q)) begin failures++; $display("FAIL result part=%0d", tpart); end
    checks++;
    if (cyc - c0 != expc) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", cyc - c0, expc);
    end
  endtask

  function automatic logic [W-1:0] rnd_w();
    return {$urandom, $urandom};
  endfunction
  function automatic logic [EW-1:0] rnd_e();
    return {$urandom, $urandom, $urandom};
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] tn, tphi;
    int ls [5] = '{10, 20, 50, 64, 0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Zero exponent, exponent 1, modulus 2.
    run(rnd_e(), EW'(7) * EW'(1000), W'(1000003), W'(1000), 10, 1'b0);
    run(EW'(5), EW'(1), W'(2), W'(1), 1, 1'b0);
    for (int i = 0; i < 40; i++) begin
      tn = rnd_w() >> ($urandom % 8);
      if (tn < 2) tn = W'(97);
      tphi = (i % 4 == 3) ? W'($urandom % 5000 + 1) : (rnd_w() >> ($urandom % 8));
      if (tphi == '0) tphi = W'(1);
      run(rnd_e(), rnd_e(), tn, tphi, ls[i % 5], i[0]);
    end
    checks++;
    if (n_short == 0 || n_count_only == 0) begin
      failures++;
      $display("FAIL coverage short=%0d count_only=%0d", n_short, n_count_only);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Self-checking testbench for mod_mult at its full 2048-bit width.
// Edge cases (zero operands, m-1 operands, m = 1, small and full-width
// moduli) and random operands are multiplied; every product is compared
// with (a*b) % m computed with double-width arithmetic, and the latency
// (W+1 clock edges from the start edge to done being visible) is checked.
module tb_mod_mult;
  localparam int unsigned W = 2048;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [W-1:0] a = '0, b = '0, m = '0;
  logic busy, done;
  logic [W-1:0] p;
  int checks = 0, failures = 0;
  longint unsigned cyc = 0;

  mod_mult #(.W(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [W-1:0] rnd_wide();
    logic [W-1:0] r;
    for (int i = 0; i < W; i += 32) r[i+:32] = $urandom;
    return r;
  endfunction

  task automatic run(input logic [W-1:0] ta, input logic [W-1:0] tb_, input logic [W-1:0] tm);
    logic [2*W-1:0] ref_p;
    longint unsigned c0;
    @(negedge clk);
    a = ta; b = tb_; m = tm; start = 1'b1; c0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    ref_p = ((2*W)'(ta) * (2*W)'(tb_)) % (2*W)'(tm);
    checks++;
    if (p != ref_p[W-1:0]) begin
      failures++;
      $display("FAIL product mismatch (m bit %0d)", $clog2(tm));
    end
    checks++;
    if (cyc - c0 != W + 1) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", cyc - c0, W + 1);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] mm;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    mm = rnd_wide() | (W'(1) << (W-1));
    run('0, rnd_wide() % mm, mm);
    run(rnd_wide() % mm, '0, mm);
    run(mm - 1, mm - 1, mm);
    run(W'(1), mm - 1, mm);
    run('0, '0, W'(1));
    run(W'(5), W'(6), W'(7));
    for (int i = 0; i < 12; i++) begin
      mm = rnd_wide();
      if (i % 3 == 1) mm = mm >> ($urandom % W);
      if (mm == '0) mm = W'(3);
      run(rnd_wide() % mm, rnd_wide() % mm, mm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

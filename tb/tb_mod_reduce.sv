// Self-checking testbench for mod_reduce at its full size (2099-bit input,
// 2048-bit modulus). Inputs shaped like encoded operands (v + k*m), edge
// cases and random values are reduced; each remainder is compared with
// a % m, and the latency (AW+1 edges from start edge to done) is checked.
module tb_mod_reduce;
  localparam int unsigned W  = 2048;
  localparam int unsigned AW = 2099;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [AW-1:0] a = '0;
  logic [W-1:0]  m = '0;
  logic busy, done;
  logic [W-1:0]  r;
  int checks = 0, failures = 0;
  longint unsigned cyc = 0;

  mod_reduce #(.AW(AW), .W(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [AW-1:0] rnd_wide();
    logic [AW+31:0] t;
    for (int i = 0; i < AW; i += 32) t[i+:32] = $urandom;
    return t[AW-1:0];
  endfunction

  task automatic run(input logic [AW-1:0] ta, input logic [W-1:0] tm);
    logic [AW-1:0] ref_r;
    longint unsigned c0;
    @(negedge clk);
    a = ta; m = tm; start = 1'b1; c0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    ref_r = ta % AW'(tm);
    checks++;
    if (AW'(r) != ref_r) begin failures++; $display("FAIL remainder mismatch"); end
    checks++;
    if (cyc - c0 != AW + 1) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", cyc - c0, AW + 1);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] mm;
    logic [AW-1:0] v;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('0, W'(12345));
    run(AW'(12344), W'(12345));
    run(AW'(12345), W'(12345));
    run('1, W'(1));
    run('1, '1);
    for (int i = 0; i < 10; i++) begin
      mm = rnd_wide()[W-1:0] | (W'(1) << (W-1 - (i % 4) * 300));
      v  = AW'(rnd_wide()[W-1:0]) + AW'($urandom) * AW'(mm);  // v + k*m
      run(v, mm);
      run(rnd_wide(), mm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

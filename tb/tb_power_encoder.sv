// Self-checking testbench for power_encoder at its full size (2048-bit
// operands, 50-bit coefficient). Each output is compared with
// y + k*phi computed at full width, including the all-ones extremes,
// k = 0 and k = 1, and the latency (K_W+1 edges) is checked.
module tb_power_encoder;
  localparam int unsigned W   = 2048;
  localparam int unsigned K_W = 50;
  localparam int unsigned EW  = W + K_W + 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [W-1:0]   y = '0, phi = '0;
  logic [K_W-1:0] k = '0;
  logic busy, done;
  logic [EW-1:0]  y_enc;
  int checks = 0, failures = 0;
  longint unsigned cyc = 0;

  power_encoder #(.W(W), .K_W(K_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [W-1:0] rnd_wide();
    logic [W-1:0] r;
    for (int i = 0; i < W; i += 32) r[i+:32] = $urandom;
    return r;
  endfunction

  task automatic run(input logic [W-1:0] ta, input logic [K_W-1:0] tk, input logic [W-1:0] tm);
    logic [EW-1:0] ref_v;
    longint unsigned c0;
    @(negedge clk);
    y = ta; k = tk; phi = tm; start = 1'b1; c0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    ref_v = EW'(ta) + EW'(tk) * EW'(tm);
    checks++;
    if (y_enc != ref_v) begin failures++; $display("FAIL encoded value mismatch"); end
    checks++;
    if (cyc - c0 != K_W + 1) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", cyc - c0, K_W + 1);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('1, '1, '1);
    run(rnd_wide(), '0, rnd_wide());
    run(rnd_wide(), K_W'(1), rnd_wide());
    run('0, K_W'(1) << (K_W-1), rnd_wide());
    for (int i = 0; i < 20; i++)
      run(rnd_wide(), {$urandom, $urandom}, rnd_wide() >> ($urandom % 64));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Self-checking testbench for fd_comparator (2048-bit partial results).
// Captures first-round values, then compares second-round values that are
// equal, differ in the partial result only, in the Hamming weight only, or
// in both; checks match/mismatch flags and the one-cycle valid strobe.
module tb_fd_comparator;
  localparam int unsigned W  = 2048;
  localparam int unsigned CW = 12;

  logic clk = 1'b0, rst_n = 1'b0, capture = 1'b0, compare = 1'b0;
  logic [W-1:0]  q_partial = '0;
  logic [CW-1:0] hw = '0;
  logic valid, match, q_mismatch, hw_mismatch;
  int checks = 0, failures = 0;

  fd_comparator #(.W(W), .CW(CW)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [W-1:0] rnd_wide();
    logic [W-1:0] r;
    for (int i = 0; i < W; i += 32) r[i+:32] = $urandom;
    return r;
  endfunction

  task automatic trial(input bit diff_q, input bit diff_hw);
    logic [W-1:0]  q1;
    logic [CW-1:0] h1;
    q1 = rnd_wide(); h1 = CW'($urandom);
    @(negedge clk); q_partial = q1; hw = h1; capture = 1'b1;
    @(negedge clk); capture = 1'b0;
    q_partial = rnd_wide(); hw = CW'($urandom);   // unrelated values between rounds
    @(negedge clk);
    q_partial = diff_q ? q1 ^ (W'(1) << ($urandom % W)) : q1;
    hw = diff_hw ? h1 + CW'($urandom % 5 + 1) : h1;
    compare = 1'b1;
    checks++;
    if (valid) begin failures++; $display("FAIL valid before compare"); end
    @(negedge clk); compare = 1'b0;
    checks++;
    if (!valid) begin failures++; $display("FAIL valid missing"); end
    checks++;
    if (match != !(diff_q || diff_hw) || q_mismatch != diff_q || hw_mismatch != diff_hw) begin
      failures++;
      $display("FAIL flags dq=%0d dh=%0d m=%0d qm=%0d hm=%0d", diff_q, diff_hw, match,
               q_mismatch, hw_mismatch);
    end
    @(negedge clk);
    checks++;
    if (valid) begin failures++; $display("FAIL valid longer than one cycle"); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 24; i++) trial(i[0], i[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

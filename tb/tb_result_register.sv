// Self-checking testbench for result_register (2048 bits). Loads a first-
// round result, lets unrelated data pass on the input, then issues an
// accepting or rejecting decision: an accepted value must appear with
// out_valid, a rejected one must never appear (output zero, out_valid low).
module tb_result_register;
  localparam int unsigned W = 2048;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, decide = 1'b0, accept = 1'b0;
  logic [W-1:0] q_in = '0;
  logic out_valid;
  logic [W-1:0] q_out;
  int checks = 0, failures = 0;

  result_register #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [W-1:0] rnd_wide();
    logic [W-1:0] r;
    for (int i = 0; i < W; i += 32) r[i+:32] = $urandom;
    return r;
  endfunction

  task automatic trial(input bit acc);
    logic [W-1:0] q1;
    q1 = rnd_wide();
    @(negedge clk); q_in = q1; load = 1'b1;
    @(negedge clk); load = 1'b0; q_in = rnd_wide();
    checks++;
    if (out_valid || q_out != '0) begin failures++; $display("FAIL output before decision"); end
    repeat (3) @(negedge clk);
    decide = 1'b1; accept = acc;
    @(negedge clk); decide = 1'b0; accept = 1'b0;
    checks++;
    if (out_valid != acc || q_out != (acc ? q1 : '0)) begin
      failures++;
      $display("FAIL decision acc=%0d valid=%0d", acc, out_valid);
    end
    repeat (2) @(negedge clk);
    checks++;
    if (out_valid != acc || q_out != (acc ? q1 : '0)) begin failures++; $display("FAIL hold"); end
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
    checks++;
    if (out_valid || q_out != '0) begin failures++; $display("FAIL reset state"); end
    for (int i = 0; i < 16; i++) trial(($urandom % 2) == 1 || i == 0);
    trial(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

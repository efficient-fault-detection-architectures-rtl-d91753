// Self-checking testbench for fd_controller. Small behavioural stand-ins
// answer enc_start and alg_start with a done pulse after random delays; the
// testbench checks the order of phases (ENC1, RUN1, ENC2, RUN2, CMP, DONE),
// that round2 selects the second coefficient pair only in the second round,
// and that every strobe is issued exactly once per operation.
module tb_fd_controller;
  import modexp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic enc_done = 1'b0, alg_done = 1'b0;
  fd_state_e state;
  logic round2, enc_start, alg_start, capture, compare, done;
  int checks = 0, failures = 0;
  int n_enc, n_alg, n_cap, n_cmp, n_done, n_r2_alg;
  int enc_timer = -1, alg_timer = -1;

  fd_controller dut (.*);

  always #5 clk = ~clk;

  // Stand-in units: done pulse a random number of cycles after start.
  always @(posedge clk) begin
    enc_done <= 1'b0;
    alg_done <= 1'b0;
    if (enc_start) enc_timer <= 1 + $urandom % 6;
    else if (enc_timer > 0) enc_timer <= enc_timer - 1;
    else if (enc_timer == 0) begin enc_done <= 1'b1; enc_timer <= -1; end
    if (alg_start) alg_timer <= 1 + $urandom % 20;
    else if (alg_timer > 0) alg_timer <= alg_timer - 1;
    else if (alg_timer == 0) begin alg_done <= 1'b1; alg_timer <= -1; end
  end

  // Strobe counters and ordering checks.
  always @(negedge clk) if (rst_n) begin
    if (enc_start) n_enc++;
    if (alg_start) begin n_alg++; if (round2) n_r2_alg++; end
    if (capture) begin
      n_cap++; checks++;
      if (round2 || state != ST_RUN1) begin failures++; $display("FAIL capture outside round 1"); end
    end
    if (compare) begin
      n_cmp++; checks++;
      if (!round2 || state != ST_RUN2) begin failures++; $display("FAIL compare outside round 2"); end
    end
    if (done) n_done++;
  end

  task automatic operation();
    fd_state_e seen [$];
    fd_state_e exp_seq [7] = '{ST_IDLE, ST_ENC1, ST_RUN1, ST_ENC2, ST_RUN2, ST_CMP, ST_DONE};
    n_enc = 0; n_alg = 0; n_cap = 0; n_cmp = 0; n_done = 0; n_r2_alg = 0;
    @(negedge clk); start = 1'b1;
    seen.push_back(state);
    @(negedge clk); start = 1'b0;
    while (seen.size() < 40 && state != ST_IDLE) begin
      if (state != seen[$]) seen.push_back(state);
      checks++;
      if (round2 != (state inside {ST_ENC2, ST_RUN2, ST_CMP})) begin
        failures++; $display("FAIL round2 in state %s", state.name());
      end
      @(negedge clk);
    end
    checks++;
    if (seen.size() != 7) begin failures++; $display("FAIL %0d phases", seen.size()); end
    else foreach (exp_seq[i]) if (seen[i] != exp_seq[i]) begin
      failures++; $display("FAIL phase %0d is %s", i, seen[i].name());
    end
    checks++;
    if (n_enc != 2 || n_alg != 2 || n_cap != 1 || n_cmp != 1 || n_done != 1 || n_r2_alg != 1) begin
      failures++;
      $display("FAIL strobes enc=%0d alg=%0d cap=%0d cmp=%0d done=%0d", n_enc, n_alg, n_cap,
               n_cmp, n_done);
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
    for (int i = 0; i < 10; i++) begin
      operation();
      repeat ($urandom % 3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Fault-detecting modular exponentiator: x^y mod N with partial
// recomputation.
//
// One operation runs two rounds on the same inputs:
//   t1: x1 = x + k1x*N and y1 = y + k1y*phi(N) are formed by the base and
//       power encoders; the core computes Q1 = x1^y1 mod N, the partial
//       result Q1p = x1^(y1' mod 2^l) mod N and HW1 = popcount(y1'), where
//       y1' = y1 mod phi(N). Q1 goes to the result register, Q1p and HW1 to
//       the comparator.
//   t2: x2 = x + k2x*N and y2 = y + k2y*phi(N); the core runs only the first
//       l exponent bits (Q2p) and counts HW2 over the whole reduced exponent.
// Q1 is released as the result only if Q1p = Q2p and HW1 = HW2; otherwise
// fault_detected is raised and the output stays zero. The encodings cancel
// inside the core (x mod N, y mod phi(N)), so in a fault-free run both
// rounds see the same reduced operands while the datapath handles different
// encoded values in each round.
//
// Interface: apply x, y, n, phi, the four coefficients and l, pulse start
// in idle. The encoders read x, y, n, phi and the selected coefficients at
// the start of each round, so they must be held for the whole operation.
// done pulses once; result_valid, result, fault_detected, q_mismatch and
// hw_mismatch then hold until the next start. state shows the current phase.
// Requirements: N >= 2, phi = phi(N) (or a multiple of the order of x), and
// gcd(x, N) = 1 whenever the exponent is reduced.
//
// Timing (W = operand width, K = coefficient width, EW = W+K+1, b1/b2 =
// bit lengths of the reduced exponents of the two rounds, m2 = min(b2, l)):
// counting clock edges from the one that samples start through the one
// after which done is high, an operation takes
//   2(K+2) + 2(EW+5) + (b1 + m2)(W+2) + (b2 - m2) + 2
// (about 4.46 M cycles at the defaults with a full-length exponent, about
// 6% of it in round t2 for l = 128).
//
// The block structure (two encoders, the exponentiation core, comparator and
// output register, switched between t1 and t2) follows the scheme. The
// random coefficients come from outside: the random number source is not part
// of this design.
module modexp_fd_top #(
  parameter int unsigned W   = modexp_pkg::OP_W,
  parameter int unsigned K_W = modexp_pkg::K_W,
  localparam int unsigned CW = modexp_pkg::cnt_width(W)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   x,
  input  logic [W-1:0]   y,
  input  logic [W-1:0]   n,
  input  logic [W-1:0]   phi,
  input  logic [K_W-1:0] k1x,
  input  logic [K_W-1:0] k1y,
  input  logic [K_W-1:0] k2x,
  input  logic [K_W-1:0] k2y,
  input  logic [CW-1:0]  l,
  output modexp_pkg::fd_state_e state,
  output logic           busy,
  output logic           done,
  output logic           result_valid,
  output logic [W-1:0]   result,
  output logic           fault_detected,
  output logic           q_mismatch,
  output logic           hw_mismatch
);

  localparam int unsigned EW = W + K_W + 1;

  logic round2, enc_start, alg_start, capture, compare;
  logic bx_busy, bx_done, py_busy, py_done;
  logic alg_busy, alg_done;
  logic cmp_valid, cmp_match;
  logic [K_W-1:0] kx, ky;
  logic [EW-1:0]  x_enc, y_enc;
  logic [W-1:0]   q_full, q_part;
  logic [CW-1:0]  hw;

  fd_controller u_ctrl (
    .clk, .rst_n, .start,
    .enc_done(bx_done), .alg_done,
    .state, .round2, .enc_start, .alg_start, .capture, .compare, .done
  );

  // The t1 / t2 coefficient switches.
  assign kx = round2 ? k2x : k1x;
  assign ky = round2 ? k2y : k1y;

  base_encoder #(.W(W), .K_W(K_W)) u_base_enc (
    .clk, .rst_n, .start(enc_start), .x, .k(kx), .n,
    .busy(bx_busy), .done(bx_done), .x_enc
  );

  power_encoder #(.W(W), .K_W(K_W)) u_power_enc (
    .clk, .rst_n, .start(enc_start), .y, .k(ky), .phi,
    .busy(py_busy), .done(py_done), .y_enc
  );

  modexp_alg2 #(.W(W), .K_W(K_W)) u_alg2 (
    .clk, .rst_n, .start(alg_start), .partial(round2),
    .x_enc, .y_enc, .n, .phi, .l,
    .busy(alg_busy), .done(alg_done),
    .result(q_full), .result_partial(q_part), .hw
  );

  fd_comparator #(.W(W), .CW(CW)) u_cmp (
    .clk, .rst_n, .capture, .compare, .q_partial(q_part), .hw,
    .valid(cmp_valid), .match(cmp_match), .q_mismatch, .hw_mismatch
  );

  result_register #(.W(W)) u_reg (
    .clk, .rst_n, .load(capture), .q_in(q_full),
    .decide(cmp_valid), .accept(cmp_match),
    .out_valid(result_valid), .q_out(result)
  );

  assign busy = (state != modexp_pkg::ST_IDLE);

  // fault_detected is cleared at start and set by a rejected comparison.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        fault_detected <= 1'b0;
    else if (start && !busy)           fault_detected <= 1'b0;
    else if (cmp_valid && !cmp_match)  fault_detected <= 1'b1;
  end

  // Units are only started when idle; both encoders run in lockstep.
  a_enc_idle:     assert property (@(posedge clk) disable iff (!rst_n)
                                   enc_start |-> !bx_busy && !py_busy);
  a_alg_idle:     assert property (@(posedge clk) disable iff (!rst_n)
                                   alg_start |-> !alg_busy);
  a_enc_lockstep: assert property (@(posedge clk) disable iff (!rst_n) bx_done == py_done);

endmodule

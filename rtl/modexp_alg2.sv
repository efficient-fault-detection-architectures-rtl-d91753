// Right-to-left modular exponentiation core with partial-result and
// Hamming-weight outputs ("Algorithm 2" of the protected scheme).
//
// From an encoded base x_enc and encoded exponent y_enc it computes
//   result         = x^y mod N                 (y = y_enc mod phi(N))
//   result_partial = x^(y mod 2^l) mod N       (after the first l exponent bits)
//   hw             = Hamming weight of y_enc mod phi(N)
// The partial result is the value the result register holds after the l-th
// loop iteration, so it costs nothing extra in a full run.
//
// How it works:
//   1. Two mod_reduce units reduce x_enc mod N and y_enc mod phi(N) in
//      parallel (algorithm lines 02-03). result starts at 1, counter and hw at 0.
//   2. Loop while y != 0. For every exponent bit two mod_mult units run in
//      parallel: result*x and x*x. The product result*x is kept only when the
//      current exponent bit is 1 (line 08), and hw is incremented for it
//      (line 09). x takes x*x, y shifts right, counter increments (lines 10-12).
//      When counter reaches l the result is copied to result_partial (line 14).
//   3. With partial = 1 (recomputation round) no multiplication is started
//      once l bits are done; the remaining bits of y are only shifted out and
//      counted, one per cycle, so hw still covers the whole reduced exponent.
//
// Timing: reduction takes EW cycles; each multiplied exponent bit takes
// W+2 cycles (start, W multiplier cycles, update); each counted-only bit one
// cycle. done pulses once the loop ends; outputs hold until the next start.
//
// Interface: pulse start while busy is low. N must be at least 2 and phi
// nonzero. l is sampled at start.
//
// Follows the algorithm: the reductions, the loop with its
// counter and Hamming-weight count, and the capture of the partial result.
// This design's own choices: computing the multiply and the square in
// parallel; always running the multiply and discarding it when the bit is 0
// (equal work per bit); counting the remaining bits without multiplying in
// the partial round; and, when y has fewer than l significant bits, taking
// the final result as the partial result (the algorithm leaves it unset,
// but it is the value the result would have after l iterations).
module modexp_alg2 #(
  parameter int unsigned W   = modexp_pkg::OP_W,
  parameter int unsigned K_W = modexp_pkg::K_W,
  localparam int unsigned EW = W + K_W + 1,
  localparam int unsigned CW = modexp_pkg::cnt_width(W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          partial,   // 1: stop multiplying after l bits
  input  logic [EW-1:0] x_enc,
  input  logic [EW-1:0] y_enc,
  input  logic [W-1:0]  n,
  input  logic [W-1:0]  phi,
  input  logic [CW-1:0] l,
  output logic          busy,
  output logic          done,
  output logic [W-1:0]  result,
  output logic [W-1:0]  result_partial,
  output logic [CW-1:0] hw
);

  typedef enum logic [2:0] {
    S_IDLE   = 3'd0,
    S_RED    = 3'd1,
    S_LOOP   = 3'd2,
    S_MUL    = 3'd3,
    S_FIN    = 3'd4
  } alg_state_e;

  alg_state_e    st_q;
  logic [W-1:0]  n_q;
  logic [W-1:0]  x_q, y_q, res_q, resp_q;
  logic [CW-1:0] cnt_q, hw_q, l_q;
  logic          part_q;
  logic          bit_q;       // exponent bit being processed in S_MUL
  logic          done_q;

  // Reduction units (lines 02 and 03).
  logic red_start;
  logic rx_busy, rx_done, ry_busy, ry_done;
  logic [W-1:0] rx, ry;

  mod_reduce #(.AW(EW), .W(W)) u_red_x (
    .clk, .rst_n, .start(red_start), .a(x_enc), .m(n),
    .busy(rx_busy), .done(rx_done), .r(rx)
  );
  mod_reduce #(.AW(EW), .W(W)) u_red_y (
    .clk, .rst_n, .start(red_start), .a(y_enc), .m(phi),
    .busy(ry_busy), .done(ry_done), .r(ry)
  );

  // Multiply (result*x) and square (x*x) units, lines 08 and 11.
  logic mul_start;
  logic mm_busy, mm_done, ms_busy, ms_done;
  logic [W-1:0] pm, ps;

  mod_mult #(.W(W)) u_mul (
    .clk, .rst_n, .start(mul_start), .a(res_q), .b(x_q), .m(n_q),
    .busy(mm_busy), .done(mm_done), .p(pm)
  );
  mod_mult #(.W(W)) u_sqr (
    .clk, .rst_n, .start(mul_start), .a(x_q), .b(x_q), .m(n_q),
    .busy(ms_busy), .done(ms_done), .p(ps)
  );

  // In the partial round, bits beyond l are only counted.
  logic count_only;
  assign count_only = part_q && (cnt_q >= l_q);

  assign red_start = (st_q == S_IDLE) && start;
  assign mul_start = (st_q == S_LOOP) && (y_q != '0) && !count_only;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= S_IDLE;
      n_q    <= '0;
      x_q    <= '0;
      y_q    <= '0;
      res_q  <= '0;
      resp_q <= '0;
      cnt_q  <= '0;
      hw_q   <= '0;
      l_q    <= '0;
      part_q <= 1'b0;
      bit_q  <= 1'b0;
      done_q <= 1'b0;
    end else begin
      done_q <= 1'b0;
      unique case (st_q)
        S_IDLE: if (start) begin
          n_q    <= n;
          l_q    <= l;
          part_q <= partial;
          st_q   <= S_RED;
        end
        S_RED: if (rx_done) begin   // both reducers finish together
          x_q    <= rx;
          y_q    <= ry;
          res_q  <= W'(1);
          resp_q <= W'(1);
          cnt_q  <= '0;
          hw_q   <= '0;
          st_q   <= S_LOOP;
        end
        S_LOOP: begin
          if (y_q == '0) begin
            st_q <= S_FIN;
          end else if (count_only) begin
            hw_q  <= hw_q + CW'(y_q[0]);
            y_q   <= y_q >> 1;
            cnt_q <= cnt_q + 1'b1;
          end else begin
            bit_q <= y_q[0];
            st_q  <= S_MUL;
          end
        end
        S_MUL: if (ms_done) begin   // both multipliers finish together
          if (bit_q) begin
            res_q <= pm;
            hw_q  <= hw_q + 1'b1;
          end
          x_q   <= ps;
          y_q   <= y_q >> 1;
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q + 1'b1 == l_q) resp_q <= bit_q ? pm : res_q;
          st_q  <= S_LOOP;
        end
        S_FIN: begin
          if (cnt_q < l_q) resp_q <= res_q;
          done_q <= 1'b1;
          st_q   <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign busy           = (st_q != S_IDLE);
  assign done           = done_q;
  assign result         = res_q;
  assign result_partial = resp_q;
  assign hw             = hw_q;

  // Units are only started when idle; paired units run in lockstep.
  a_red_idle:     assert property (@(posedge clk) disable iff (!rst_n)
                                   red_start |-> !rx_busy && !ry_busy);
  a_mul_idle:     assert property (@(posedge clk) disable iff (!rst_n)
                                   mul_start |-> !mm_busy && !ms_busy);
  a_red_lockstep: assert property (@(posedge clk) disable iff (!rst_n) rx_done == ry_done);
  a_mul_lockstep: assert property (@(posedge clk) disable iff (!rst_n) mm_done == ms_done);

endmodule

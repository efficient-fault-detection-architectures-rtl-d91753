// Bit-serial modular multiplier: p = (a * b) mod m.
//
// Interleaved (Blakley) multiplication. The multiplier a is scanned from its
// most significant bit down; every cycle the partial remainder is doubled,
// b is added when the current bit of a is 1, and at most two subtractions of
// m bring it back below m. The remainder therefore never exceeds W+2 bits and
// no double-width product is formed.
//
// Interface: pulse start for one cycle while busy is low, with a, b < m and
// m >= 1 applied; operands are captured on that edge. busy stays high for
// W cycles, then done pulses for one cycle and p holds the result until the
// next start. Latency: done is high in the W-th cycle after the start edge.
//
// The exponentiation algorithm only asks for "(a x b) mod N"; the
// multiplier architecture (radix 2, one operand bit per cycle, no odd-modulus
// restriction so no Montgomery conversion) is this design's own choice.
module mod_mult #(
  parameter int unsigned W = modexp_pkg::OP_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] m,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] p
);

  localparam int unsigned CW = modexp_pkg::cnt_width(W);

  logic [W-1:0]  a_q, b_q, m_q;
  logic [W+1:0]  r_q;
  logic [CW-1:0] cnt_q;

  // One interleaved step: r <- 2r + a_msb*b, then reduce below m.
  logic [W+1:0] t0, t1, t2;
  always_comb begin
    t0 = {r_q[W:0], 1'b0} + (a_q[W-1] ? {2'b00, b_q} : '0);
    t1 = (t0 >= {2'b00, m_q}) ? t0 - {2'b00, m_q} : t0;
    t2 = (t1 >= {2'b00, m_q}) ? t1 - {2'b00, m_q} : t1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
      b_q   <= '0;
      m_q   <= '0;
      r_q   <= '0;
      cnt_q <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          a_q   <= a;
          b_q   <= b;
          m_q   <= m;
          r_q   <= '0;
          cnt_q <= CW'(W);
          busy  <= 1'b1;
        end
      end else begin
        r_q   <= t2;
        a_q   <= {a_q[W-2:0], 1'b0};
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign p = r_q[W-1:0];

  // The remainder stays below m by construction.
  a_rem_below_m: assert property (@(posedge clk) disable iff (!rst_n)
                                   busy |-> (r_q < {2'b00, m_q}));

endmodule

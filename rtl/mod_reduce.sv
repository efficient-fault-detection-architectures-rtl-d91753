// Bit-serial modular reduction: r = a mod m for a wide a (AW bits) and a
// W-bit modulus m >= 1.
//
// Restoring reduction, most significant bit first: every cycle the running
// remainder is doubled, the next bit of a is shifted in, and m is subtracted
// once if the remainder reached m. Since the remainder is kept below m it
// needs only W+1 bits.
//
// Interface: pulse start while busy is low; a and m are captured on that
// edge. busy stays high for AW cycles, then done pulses for one cycle and r
// holds the result until the next start.
//
// Lines 02 and 03 of the protected exponentiation algorithm reduce the
// encoded base modulo N and the encoded exponent modulo phi(N); the serial
// restoring structure used for it here is this design's own choice.
module mod_reduce #(
  parameter int unsigned AW = modexp_pkg::enc_width(modexp_pkg::OP_W, modexp_pkg::K_W),
  parameter int unsigned W  = modexp_pkg::OP_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] a,
  input  logic [W-1:0]  m,
  output logic          busy,
  output logic          done,
  output logic [W-1:0]  r
);

  localparam int unsigned CW = modexp_pkg::cnt_width(AW);

  logic [AW-1:0] a_q;
  logic [W-1:0]  m_q;
  logic [W:0]    r_q;
  logic [CW-1:0] cnt_q;

  logic [W:0] t0, t1;
  always_comb begin
    t0 = {r_q[W-1:0], a_q[AW-1]};
    t1 = (t0 >= {1'b0, m_q}) ? t0 - {1'b0, m_q} : t0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
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
          m_q   <= m;
          r_q   <= '0;
          cnt_q <= CW'(AW);
          busy  <= 1'b1;
        end
      end else begin
        r_q   <= t1;
        a_q   <= {a_q[AW-2:0], 1'b0};
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign r = r_q[W-1:0];

  a_rem_below_m: assert property (@(posedge clk) disable iff (!rst_n)
                                   busy |-> (r_q < {1'b0, m_q}));

endmodule

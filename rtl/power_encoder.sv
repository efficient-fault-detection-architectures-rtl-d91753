// Power (exponent) encoder: y_enc = y + k*phi(N).
//
// Because x^(k*phi(N)) = 1 mod N for x coprime to N, the encoded exponent gives the same power and needs no decoding: the exponentiation core reduces it modulo phi(N) before use.
// The encoder is run once per round with a fresh random k, so that the
// first computation and the recomputation work on different operand values.
//
// How it works: shift-and-add over the bits of k, least significant first.
// The accumulator starts at y; in each of K_W cycles the shifted copy of
// phi(N) is added when the current bit of k is 1. All K_W cycles are always
// spent, whatever the value of k, so the encoding time does not depend on k.
//
// Interface: pulse start while busy is low; y, k and phi are captured on
// that edge. busy stays high for K_W cycles, then done pulses for one cycle
// and y_enc (W+K_W+1 bits, wide enough for any inputs) holds the result.
//
// The formula follows the scheme; the serial shift-and-add structure and the
// source of k (an input port) are this design's own choices.
module power_encoder #(
  parameter int unsigned W   = modexp_pkg::OP_W,
  parameter int unsigned K_W = modexp_pkg::K_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [W-1:0]        y,
  input  logic [K_W-1:0]      k,
  input  logic [W-1:0]        phi,
  output logic                busy,
  output logic                done,
  output logic [W+K_W:0]      y_enc
);

  localparam int unsigned CW = modexp_pkg::cnt_width(K_W);

  logic [W+K_W:0]   acc_q;
  logic [W+K_W-1:0] mult_q;   // phi(N) shifted left by the current bit index
  logic [K_W-1:0]   k_q;
  logic [CW-1:0]    cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q  <= '0;
      mult_q <= '0;
      k_q    <= '0;
      cnt_q  <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          acc_q  <= (W+K_W+1)'(y);
          mult_q <= (W+K_W)'(phi);
          k_q    <= k;
          cnt_q  <= CW'(K_W);
          busy   <= 1'b1;
        end
      end else begin
        if (k_q[0]) acc_q <= acc_q + (W+K_W+1)'(mult_q);
        mult_q <= {mult_q[W+K_W-2:0], 1'b0};
        k_q    <= k_q >> 1;
        cnt_q  <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign y_enc = acc_q;

endmodule

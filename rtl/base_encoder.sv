// Base encoder: x_enc = x + k*N.
//
// Because (x + k*N) mod N = x mod N, the encoded base needs no decoding: the exponentiation core reduces it modulo N before use.
// The encoder is run once per round with a fresh random k, so that the
// first computation and the recomputation work on different operand values.
//
// How it works: shift-and-add over the bits of k, least significant first.
// The accumulator starts at x; in each of K_W cycles the shifted copy of
// N is added when the current bit of k is 1. All K_W cycles are always
// spent, whatever the value of k, so the encoding time does not depend on k.
//
// Interface: pulse start while busy is low; x, k and n are captured on
// that edge. busy stays high for K_W cycles, then done pulses for one cycle
// and x_enc (W+K_W+1 bits, wide enough for any inputs) holds the result.
//
// The formula follows the scheme; the serial shift-and-add structure and the
// source of k (an input port) are this design's own choices.
module base_encoder #(
  parameter int unsigned W   = modexp_pkg::OP_W,
  parameter int unsigned K_W = modexp_pkg::K_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [W-1:0]        x,
  input  logic [K_W-1:0]      k,
  input  logic [W-1:0]        n,
  output logic                busy,
  output logic                done,
  output logic [W+K_W:0]      x_enc
);

  localparam int unsigned CW = modexp_pkg::cnt_width(K_W);

  logic [W+K_W:0]   acc_q;
  logic [W+K_W-1:0] mult_q;   // N shifted left by the current bit index
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
          acc_q  <= (W+K_W+1)'(x);
          mult_q <= (W+K_W)'(n);
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

  assign x_enc = acc_q;

endmodule

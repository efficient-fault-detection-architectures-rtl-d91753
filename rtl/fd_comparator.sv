// Comparator of the two-round check.
//
// At the end of the first round (capture) it stores the partial result
// Q1partial = x1^(y1 mod 2^l) mod N and the Hamming weight HW1 of the reduced
// exponent. At the end of the second round (compare) it compares them with
// Q2partial and HW2 and reports, one cycle later, whether both pairs match.
// A mismatch of either pair flags a fault. The two causes are reported
// separately so that a test can tell which check caught a fault.
//
// Interface: capture and compare are one-cycle strobes (never together).
// valid pulses for one cycle after compare; match, q_mismatch and
// hw_mismatch hold their value until the next compare. Storage is cleared
// by reset.
//
// The quantities compared follow the scheme; holding the first-round values
// inside the comparator and the one-cycle registered decision are this
// design's own choices.
module fd_comparator #(
  parameter int unsigned W  = modexp_pkg::OP_W,
  parameter int unsigned CW = modexp_pkg::cnt_width(modexp_pkg::OP_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          capture,
  input  logic          compare,
  input  logic [W-1:0]  q_partial,
  input  logic [CW-1:0] hw,
  output logic          valid,
  output logic          match,
  output logic          q_mismatch,
  output logic          hw_mismatch
);

  logic [W-1:0]  q1_q;
  logic [CW-1:0] hw1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q1_q        <= '0;
      hw1_q       <= '0;
      valid       <= 1'b0;
      q_mismatch  <= 1'b0;
      hw_mismatch <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (capture) begin
        q1_q  <= q_partial;
        hw1_q <= hw;
      end
      if (compare) begin
        q_mismatch  <= (q_partial != q1_q);
        hw_mismatch <= (hw != hw1_q);
        valid       <= 1'b1;
      end
    end
  end

  assign match = !q_mismatch && !hw_mismatch;

  a_strobes_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
                                         !(capture && compare));

endmodule

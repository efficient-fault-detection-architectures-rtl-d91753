// Output register of the two-round check.
//
// The full result Q1 = x1^y1 mod N of the first round is loaded here and
// held while the partial recomputation runs. When the comparator decides,
// the register either releases Q1 as the output x^y mod N (both checks
// matched) or withholds it: the output is forced to zero and out_valid
// stays low, so a faulty result never leaves the design.
//
// Interface: load strobes Q1 in and clears out_valid and the output.
// decide is the comparator's valid strobe and accept its match flag;
// on decide the register sets out_valid = accept and drives q_out with the
// stored value if accepted, else zero. Outputs hold until the next load.
//
// The register and its release by the comparator follow the scheme's block
// diagram; zeroing the output on a detected fault is this design's own
// choice (the diagram only shows the release path).
module result_register #(
  parameter int unsigned W = modexp_pkg::OP_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] q_in,
  input  logic         decide,
  input  logic         accept,
  output logic         out_valid,
  output logic [W-1:0] q_out
);

  logic [W-1:0] q1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q1_q      <= '0;
      q_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      if (load) begin
        q1_q      <= q_in;
        q_out     <= '0;
        out_valid <= 1'b0;
      end else if (decide) begin
        q_out     <= accept ? q1_q : '0;
        out_valid <= accept;
      end
    end
  end

endmodule

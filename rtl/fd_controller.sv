// Sequencer of the two-round check (the t1 / t2 switches of the scheme).
//
// Round t1: start both encoders with the first pair of coefficients, then
// run the exponentiation core in full mode; when it finishes, load Q1 into
// the result register and let the comparator capture Q1partial and HW1.
// Round t2: start the encoders again with the second pair of coefficients,
// run the core in partial mode, then strobe the comparator with Q2partial
// and HW2. The comparator decides in ST_CMP, its decision reaches the
// result register, and done pulses in ST_DONE.
//
// Interface: start is accepted in ST_IDLE. round2 selects the coefficient
// pair (0: k1x/k1y, 1: k2x/k2y) and the core's partial mode. enc_start,
// alg_start, capture (also the result register's load) and compare are
// one-cycle strobes; enc_done and
// alg_done are the units' done pulses. done pulses in ST_DONE.
//
// The order of the two rounds and what each one computes follow the scheme;
// the state encoding and strobe timing are this design's own choices.
module fd_controller
  import modexp_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  logic      enc_done,
  input  logic      alg_done,
  output fd_state_e state,
  output logic      round2,
  output logic      enc_start,
  output logic      alg_start,
  output logic      capture,
  output logic      compare,
  output logic      done
);

  fd_state_e st_q;
  logic      launched_q;   // unit of the current phase has been started

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= ST_IDLE;
      launched_q <= 1'b0;
    end else begin
      unique case (st_q)
        ST_IDLE: if (start) begin
          st_q       <= ST_ENC1;
          launched_q <= 1'b0;
        end
        ST_ENC1, ST_ENC2: begin
          launched_q <= 1'b1;
          if (launched_q && enc_done) begin
            st_q       <= (st_q == ST_ENC1) ? ST_RUN1 : ST_RUN2;
            launched_q <= 1'b0;
          end
        end
        ST_RUN1: begin
          launched_q <= 1'b1;
          if (launched_q && alg_done) begin
            st_q       <= ST_ENC2;
            launched_q <= 1'b0;
          end
        end
        ST_RUN2: begin
          launched_q <= 1'b1;
          if (launched_q && alg_done) begin
            st_q       <= ST_CMP;
            launched_q <= 1'b0;
          end
        end
        ST_CMP:  st_q <= ST_DONE;
        ST_DONE: st_q <= ST_IDLE;
        default: st_q <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    state     = st_q;
    round2    = (st_q == ST_ENC2) || (st_q == ST_RUN2) || (st_q == ST_CMP);
    enc_start = ((st_q == ST_ENC1) || (st_q == ST_ENC2)) && !launched_q;
    alg_start = ((st_q == ST_RUN1) || (st_q == ST_RUN2)) && !launched_q;
    capture   = (st_q == ST_RUN1) && launched_q && alg_done;
    compare   = (st_q == ST_RUN2) && launched_q && alg_done;
    done      = (st_q == ST_DONE);
  end

endmodule

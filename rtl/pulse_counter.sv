// pulse_counter -- turns a pulse sequence back into a binary count.
//
// A sequence of N pulses represents (number of ones)/N. This block counts the
// ones and the pulses of one sequence and presents both when the sequence
// ends, so the estimate is count/len. The paper states this estimator
// (X_s = 1/N sum X_i) and, for crossbar arrays, integrates the product pulses
// and digitises them; a digital counter is this design's form of it.
//
// Interface: `in` is a pulse stream. In the cycle after the pulse marked
// `last`, `done` is high for one clock and `count`/`len` hold the result until
// the next sequence ends. Up to 2^CNT_W - 1 pulses per sequence.
module pulse_counter #(
  parameter int unsigned CNT_W = dc_pkg::N_W + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  dc_pkg::pulse_t   in,
  output logic [CNT_W-1:0] count,
  output logic [CNT_W-1:0] len,
  output logic             done
);

  logic [CNT_W-1:0] acc, n_acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      n_acc <= '0;
      count <= '0;
      len   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (in.valid) begin
        if (in.last) begin
          count <= acc + CNT_W'(in.bit_);
          len   <= n_acc + 1'b1;
          done  <= 1'b1;
          acc   <= '0;
          n_acc <= '0;
        end else begin
          acc   <= acc + CNT_W'(in.bit_);
          n_acc <= n_acc + 1'b1;
        end
      end
    end
  end

endmodule

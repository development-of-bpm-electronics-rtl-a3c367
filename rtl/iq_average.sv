// iq_average: averages the I/Q pairs of NCH_P channels over 2^LOG2N samples.
// start_i clears the accumulators; the next 2^LOG2N valid_i samples are
// summed, and done_o pulses for one clock with the means (sum >>> LOG2N) on
// i_o/q_o. The default of 16 samples is 1 us of I/Q at decimation 16, the
// macro-pulse length the paper averages for its phase-resolution figures.
// The block is named "Ave I,Q" in the system diagram; the power-of-two window
// is this design's choice.
module iq_average
  import bpm_pkg::*;
#(
  parameter int unsigned NCH_P = NCH,
  parameter int unsigned LOG2N = 4
) (
  input  logic clk,
  input  logic rst,
  input  logic start_i,
  input  logic valid_i,
  input  iq_t  i_i [NCH_P],
  input  iq_t  q_i [NCH_P],
  output logic done_o,
  output logic busy_o,
  output iq_t  i_o [NCH_P],
  output iq_t  q_o [NCH_P]
);
  logic signed [IQ_W+LOG2N-1:0] acc_i [NCH_P], acc_q [NCH_P];
  logic [LOG2N:0] cnt;

  always_ff @(posedge clk) begin
    done_o <= 1'b0;
    if (rst) begin
      busy_o <= 1'b0; cnt <= '0;
      for (int c = 0; c < NCH_P; c++) begin
        acc_i[c] <= '0; acc_q[c] <= '0; i_o[c] <= '0; q_o[c] <= '0;
      end
    end else if (start_i) begin
      busy_o <= 1'b1; cnt <= '0;
      for (int c = 0; c < NCH_P; c++) begin acc_i[c] <= '0; acc_q[c] <= '0; end
    end else if (busy_o && valid_i) begin
      for (int c = 0; c < NCH_P; c++) begin
        acc_i[c] <= acc_i[c] + (IQ_W+LOG2N)'(i_i[c]);
        acc_q[c] <= acc_q[c] + (IQ_W+LOG2N)'(q_i[c]);
      end
      cnt <= cnt + 1'b1;
      if (cnt == (LOG2N+1)'((1 << LOG2N) - 1)) begin
        busy_o <= 1'b0;
        done_o <= 1'b1;
        for (int c = 0; c < NCH_P; c++) begin
          i_o[c] <= iq_t'((acc_i[c] + (IQ_W+LOG2N)'(i_i[c])) >>> LOG2N);
          q_o[c] <= iq_t'((acc_q[c] + (IQ_W+LOG2N)'(q_i[c])) >>> LOG2N);
        end
      end
    end
  end
endmodule

// fir: NTAPS-tap FIR filter on the decimated I/Q stream of one channel.
// On every valid_i the new I/Q pair enters a shift register and the output
// y = sum_k coef_k * x[n-k] >> 15 (coefficients in Q1.15) is registered:
// one clock of latency, one output per input. The coefficients come from
// registers so the filter can be loaded at run time. The paper only names
// the FIR after the decimator; tap count and number formats are this
// design's choices.
module fir
  import bpm_pkg::*;
#(
  parameter int unsigned NTAPS = 8
) (
  input  logic  clk,
  input  logic  rst,
  input  coef_t coef_i [NTAPS],
  input  logic  valid_i,
  input  iq_t   i_i,
  input  iq_t   q_i,
  output logic  valid_o,
  output iq_t   i_o,
  output iq_t   q_o
);
  iq_t dl_i [NTAPS], dl_q [NTAPS];
  logic signed [IQ_W+COEF_W+3:0] acc_i, acc_q;

  // Taps including the sample arriving now.
  always_comb begin
    acc_i = (IQ_W+COEF_W+4)'(i_i) * coef_i[0];
    acc_q = (IQ_W+COEF_W+4)'(q_i) * coef_i[0];
    for (int k = 1; k < NTAPS; k++) begin
      acc_i += (IQ_W+COEF_W+4)'(dl_i[k-1]) * coef_i[k];
      acc_q += (IQ_W+COEF_W+4)'(dl_q[k-1]) * coef_i[k];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < NTAPS; k++) begin dl_i[k] <= '0; dl_q[k] <= '0; end
      valid_o <= 1'b0;
      i_o <= '0;
      q_o <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) begin
        dl_i[0] <= i_i;
        dl_q[0] <= q_i;
        for (int k = 1; k < NTAPS; k++) begin dl_i[k] <= dl_i[k-1]; dl_q[k] <= dl_q[k-1]; end
        i_o <= iq_t'(acc_i >>> 15);
        q_o <= iq_t'(acc_q >>> 15);
      end
    end
  end
endmodule

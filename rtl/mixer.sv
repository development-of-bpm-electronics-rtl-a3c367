// mixer: complex down-mixing of one channel's polyphase ADC samples.
// For each of the SPC samples x_k presented per clock it forms
// I_k = x_k*cos_k and Q_k = -x_k*sin_k, scales by 2^-15 (the NCO amplitude is
// 32767) and registers the result: one clock of latency, one result set per
// valid input. The paper shows the multiplier between the ADC and the CIC;
// the widths and the sign convention of Q are this design's choices.
module mixer
  import bpm_pkg::*;
#(
  parameter int unsigned SPC_P = SPC
) (
  input  logic clk,
  input  logic rst,
  input  logic valid_i,
  input  adc_t x_i   [SPC_P],
  input  adc_t cos_i [SPC_P],
  input  adc_t sin_i [SPC_P],
  output logic valid_o,
  output mix_t i_o   [SPC_P],
  output mix_t q_o   [SPC_P]
);
  always_ff @(posedge clk) begin
    if (rst) valid_o <= 1'b0;
    else     valid_o <= valid_i;
    for (int k = 0; k < SPC_P; k++) begin
      logic signed [2*ADC_W-1:0] pi, pq;
      pi = x_i[k] * cos_i[k];
      pq = x_i[k] * sin_i[k];
      i_o[k] <= mix_t'(pi >>> 15);
      q_o[k] <= mix_t'(-(pq >>> 15));
    end
  end
endmodule

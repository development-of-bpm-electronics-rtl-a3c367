// nco: polyphase numerically controlled oscillator.
// The 250 MSPS ADC stream arrives as SPC samples per channel per 62.5 MHz
// clock, so the oscillator produces SPC phases per clock: phase k of a clock
// is acc + k*phase_inc, and acc advances by SPC*phase_inc on every valid
// clock. A 1024-entry cosine table (amplitude 32767, filled from $cos at
// start-up) is addressed with the top 10 phase bits; sine is read a quarter
// turn earlier in the same table. Outputs are combinational from the
// registered accumulator, so cos_o/sin_o belong to the samples presented in
// the same cycle as valid_i. sync_i clears the accumulator.
// The paper names a "Poly Phase NCO" (a vendor core in the authors' firmware);
// table size, widths and the sync input are this design's choices.
module nco
  import bpm_pkg::*;
#(
  parameter int unsigned SPC_P   = SPC,
  parameter int unsigned LUT_AW  = 10
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               valid_i,
  input  logic               sync_i,
  input  logic [31:0]        phase_inc_i,
  output adc_t               cos_o [SPC_P],
  output adc_t               sin_o [SPC_P]
);
  localparam int unsigned LUT_N = 1 << LUT_AW;
  adc_t        lut [LUT_N];
  logic [31:0] acc;

  initial begin
    for (int n = 0; n < LUT_N; n++)
      lut[n] = adc_t'($rtoi($floor(32767.0 * $cos(2.0 * 3.14159265358979 * n / LUT_N) + 0.5)));
  end

  always_ff @(posedge clk) begin
    if (rst || sync_i) acc <= '0;
    else if (valid_i)  acc <= acc + 32'(SPC_P) * phase_inc_i;
  end

  always_comb begin
    for (int k = 0; k < SPC_P; k++) begin
      logic [31:0] ph;
      ph = acc + 32'(k) * phase_inc_i;
      cos_o[k] = lut[ph[31 -: LUT_AW]];
      // sin(x) = cos(x - pi/2)
      sin_o[k] = lut[ph[31 -: LUT_AW] - LUT_AW'(LUT_N / 4)];
    end
  end
endmodule

// ddc: digital down-converter for the NCH ADC channels of one AMC.
// One polyphase NCO is shared by all channels; each channel has its own
// mixer, CIC decimator and FIR, as in the FPGA diagram
// (NCO -> mixer -> CIC -> Deci(Ratio) -> FIR). Input: SPC samples per
// channel per clock with adc_valid_i. Output: one I/Q pair per channel every
// ratio_i input clocks (decimation SPC*ratio_i of the 250 MSPS sample rate).
// Latency from the last contributing input to iq_valid_o: 3 clocks (mixer,
// CIC comb register, FIR register).
module ddc
  import bpm_pkg::*;
#(
  parameter int unsigned NCH_P = NCH,
  parameter int unsigned NTAPS = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        sync_i,
  input  logic [31:0] phase_inc_i,
  input  logic [7:0]  ratio_i,
  input  coef_t       coef_i [NTAPS],
  input  logic        adc_valid_i,
  input  adc_t        adc_i [NCH_P][SPC],
  output logic        iq_valid_o,
  output iq_t         i_o [NCH_P],
  output iq_t         q_o [NCH_P]
);
  adc_t cos_w [SPC], sin_w [SPC];
  logic [NCH_P-1:0] fir_valid;

  nco u_nco (
    .clk, .rst, .valid_i(adc_valid_i), .sync_i, .phase_inc_i,
    .cos_o(cos_w), .sin_o(sin_w)
  );

  for (genvar c = 0; c < NCH_P; c++) begin : g_ch
    logic mix_valid, cic_valid;
    mix_t mi [SPC], mq [SPC];
    iq_t  ci, cq;

    mixer u_mixer (
      .clk, .rst, .valid_i(adc_valid_i), .x_i(adc_i[c]), .cos_i(cos_w), .sin_i(sin_w),
      .valid_o(mix_valid), .i_o(mi), .q_o(mq)
    );
    cic_decim u_cic (
      .clk, .rst, .sync_i, .ratio_i, .valid_i(mix_valid), .i_i(mi), .q_i(mq),
      .valid_o(cic_valid), .i_o(ci), .q_o(cq)
    );
    fir #(.NTAPS(NTAPS)) u_fir (
      .clk, .rst, .coef_i, .valid_i(cic_valid), .i_i(ci), .q_i(cq),
      .valid_o(fir_valid[c]), .i_o(i_o[c]), .q_o(q_o[c])
    );
  end

  assign iq_valid_o = fir_valid[0];
endmodule

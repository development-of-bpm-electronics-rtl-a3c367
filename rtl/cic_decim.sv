// cic_decim: cascaded integrator-comb decimator for one I/Q channel.
// The SPC polyphase samples of a clock are first summed (a length-SPC boxcar
// that decimates by SPC), then pass ORDER integrators at the 62.5 MHz clock
// rate, are down-sampled by the run-time ratio ratio_i (the "Deci"/"Ratio" of
// the FPGA diagram), and pass ORDER combs of differential delay 1 at the
// output rate. Total decimation is SPC*ratio_i (16 for ratio 4, the factor the
// paper assumes); the DC gain is SPC*ratio_i^ORDER. Wrap-around in the
// integrators cancels in the combs, so the output is exact as long as it fits
// IQ_W bits. valid_o pulses once per ratio_i valid inputs. sync_i or a change
// of ratio_i restarts the filter. ORDER and the polyphase pre-sum are this
// design's choices; the paper only names a CIC core followed by decimation.
module cic_decim
  import bpm_pkg::*;
#(
  parameter int unsigned SPC_P     = SPC,
  parameter int unsigned ORDER     = 3,
  parameter int unsigned MAX_RATIO = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        sync_i,
  input  logic [7:0]  ratio_i,
  input  logic        valid_i,
  input  mix_t        i_i [SPC_P],
  input  mix_t        q_i [SPC_P],
  output logic        valid_o,
  output iq_t         i_o,
  output iq_t         q_o
);
  iq_t         integ_i [ORDER], integ_q [ORDER];
  iq_t         comb_i  [ORDER], comb_q  [ORDER];   // previous comb inputs
  logic [7:0]  cnt, ratio_q;
  iq_t         sum_i, sum_q;

  always_comb begin
    sum_i = '0;
    sum_q = '0;
    for (int k = 0; k < SPC_P; k++) begin
      sum_i += iq_t'(i_i[k]);
      sum_q += iq_t'(q_i[k]);
    end
  end

  always_ff @(posedge clk) begin
    ratio_q <= ratio_i;
    valid_o <= 1'b0;
    if (rst || sync_i || ratio_q != ratio_i) begin
      for (int s = 0; s < ORDER; s++) begin
        integ_i[s] <= '0; integ_q[s] <= '0;
        comb_i[s]  <= '0; comb_q[s]  <= '0;
      end
      cnt <= '0;
      i_o <= '0;
      q_o <= '0;
    end else if (valid_i) begin
      integ_i[0] <= integ_i[0] + sum_i;
      integ_q[0] <= integ_q[0] + sum_q;
      for (int s = 1; s < ORDER; s++) begin
        integ_i[s] <= integ_i[s] + integ_i[s-1];
        integ_q[s] <= integ_q[s] + integ_q[s-1];
      end
      if (cnt >= ratio_i - 8'd1) begin
        iq_t ci, cq;
        cnt <= '0;
        ci = integ_i[ORDER-1];
        cq = integ_q[ORDER-1];
        for (int s = 0; s < ORDER; s++) begin
          comb_i[s] <= ci;
          comb_q[s] <= cq;
          ci = ci - comb_i[s];
          cq = cq - comb_q[s];
        end
        i_o     <= ci;
        q_o     <= cq;
        valid_o <= 1'b1;
      end else begin
        cnt <= cnt + 8'd1;
      end
    end
  end

  initial assert (MAX_RATIO <= 255 && ORDER >= 1);
  // Run-time ratio must stay in 1..MAX_RATIO.
  a_ratio: assert property (@(posedge clk) disable iff (rst)
                            ratio_i >= 8'd1 && ratio_i <= 8'(MAX_RATIO));
endmodule

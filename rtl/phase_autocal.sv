// phase_autocal: temperature-triggered phase self-calibration.
// The PLL on the RTM drifts with temperature, so the firmware measures the
// phase of a copy of the 162.5 MHz reference through the same analog
// channels and uses it to zero the drift. This controller does that:
//  * A calibration is needed when none has been made yet, when force_i is
//    pulsed, or when |temp_i - temperature at the last calibration| > tsh_i
//    (the paper's threshold T_sh; 0.2 C in its test).
//  * It waits for a no-beam period (beam_i low), then drives cal_switch_o to
//    turn the RF switches of all AFE channels to the reference copy, waits
//    SETTLE clocks for the switch and the DDC pipeline, and averages the
//    I/Q of all channels over 2^LOG2N decimated samples (iq_average).
//  * The CORDIC then gives each channel's reference phase, stored in
//    cal_phase_o (2^-16 turn units); the switches return to the beam and the
//    temperature is remembered. If beam returns before the average is
//    complete, the attempt is dropped and retried in the next gap.
// The beam phase of channel c corrected for drift is its measured phase
// minus cal_phase_o[c]; the reference phases travel in every I/Q packet
// header for that purpose. Temperature units (0.01 C per count), SETTLE and
// the per-channel measurement are this design's choices.
module phase_autocal
  import bpm_pkg::*;
#(
  parameter int unsigned NCH_P  = NCH,
  parameter int unsigned SETTLE = 64,
  parameter int unsigned LOG2N  = 4
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               enable_i,
  input  logic               force_i,
  input  logic signed [15:0] temp_i,
  input  logic [15:0]        tsh_i,
  input  logic               beam_i,
  input  logic               iq_valid_i,
  input  iq_t                i_i [NCH_P],
  input  iq_t                q_i [NCH_P],
  output logic               cal_switch_o,
  output logic [15:0]        cal_phase_o [NCH_P],
  output logic [15:0]        cal_count_o,
  output logic               busy_o
);
  typedef enum logic [2:0] {IDLE, WAIT_GAP, SETTLING, AVERAGE, PHASE, PHASE_WAIT} state_e;
  state_e state;
  logic signed [15:0] temp_ref;
  logic               have_cal, force_pend;
  logic [$clog2(SETTLE+1)-1:0] settle_cnt;
  localparam int unsigned CHW = (NCH_P > 1) ? $clog2(NCH_P) : 1;
  logic [CHW-1:0]     ch;
  logic signed [16:0] dtemp;
  logic               need;

  logic avg_start, avg_done, avg_busy;
  iq_t  avg_i [NCH_P], avg_q [NCH_P];
  logic cor_start, cor_done;
  logic [15:0] cor_phase;

  assign dtemp = 17'(temp_i) - 17'(temp_ref);
  assign need  = !have_cal || force_pend ||
                 ((dtemp < 0 ? -dtemp : dtemp) > signed'({1'b0, tsh_i}));
  assign busy_o = (state != IDLE);

  iq_average #(.NCH_P(NCH_P), .LOG2N(LOG2N)) u_avg (
    .clk, .rst, .start_i(avg_start), .valid_i(iq_valid_i), .i_i, .q_i,
    .done_o(avg_done), .busy_o(avg_busy), .i_o(avg_i), .q_o(avg_q)
  );

  cordic_phase u_cordic (
    .clk, .rst, .start_i(cor_start),
    .i_i(avg_i[ch]), .q_i(avg_q[ch]),
    .done_o(cor_done), .phase_o(cor_phase)
  );

  always_ff @(posedge clk) begin
    avg_start <= 1'b0;
    cor_start <= 1'b0;
    if (rst) begin
      state <= IDLE; temp_ref <= '0; have_cal <= 1'b0; force_pend <= 1'b0;
      settle_cnt <= '0; ch <= '0; cal_switch_o <= 1'b0; cal_count_o <= '0;
      for (int c = 0; c < NCH_P; c++) cal_phase_o[c] <= '0;
    end else begin
      if (force_i) force_pend <= 1'b1;
      unique case (state)
        IDLE: if (enable_i && need) state <= WAIT_GAP;
        WAIT_GAP: if (!beam_i) begin
          cal_switch_o <= 1'b1;
          settle_cnt   <= '0;
          state        <= SETTLING;
        end
        SETTLING: begin
          if (beam_i) begin
            cal_switch_o <= 1'b0; state <= WAIT_GAP;
          end else if (settle_cnt == ($bits(settle_cnt))'(SETTLE)) begin
            avg_start <= 1'b1;
            state     <= AVERAGE;
          end else begin
            settle_cnt <= settle_cnt + 1'b1;
          end
        end
        AVERAGE: begin
          if (beam_i) begin
            cal_switch_o <= 1'b0; state <= WAIT_GAP;
          end else if (avg_done) begin
            cal_switch_o <= 1'b0;
            ch           <= '0;
            state        <= PHASE;
          end
        end
        PHASE: begin
          cor_start <= 1'b1;
          state     <= PHASE_WAIT;
        end
        PHASE_WAIT: if (cor_done) begin
          cal_phase_o[ch] <= cor_phase;
          if (ch == CHW'(NCH_P - 1)) begin
            temp_ref    <= temp_i;
            have_cal    <= 1'b1;
            force_pend  <= 1'b0;
            cal_count_o <= cal_count_o + 16'd1;
            state       <= IDLE;
          end else begin
            ch    <= ch + 1'b1;
            state <= PHASE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule

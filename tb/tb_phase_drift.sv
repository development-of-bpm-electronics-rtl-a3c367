// tb_phase_drift: the two phase measurements of the bench test, run through
// the down-converter and the self-calibration at their default parameters
// (decimation 16, SETTLE 64, 16-sample calibration average, T_sh 20 counts).
//
// Channel model. While the RF switch selects the button (cal_switch low), each
// of the 8 channels sees, during a beam pulse, a 162.5 MHz line of amplitude
// 8000 counts (about a quarter of full scale) and no signal between pulses;
// with the switch on the reference it sees the RF reference copy at 16000
// counts. Every sample carries uniform noise of +-25 counts (50 counts
// peak-to-peak). The clock chip's drift is modelled as a phase shift common
// to button and reference of 2 degrees per 6 C, i.e. 1/300 degree per
// 0.01 C count.
//
// Run. The temperature rises by 1 count (0.01 C) per beam period, 600 counts
// (6 C) in all. A period is 300 clocks of beam and 700 clocks of gap (the
// 1 % duty cycle compressed to keep the run short; the gap only has to hold
// one calibration). In every pulse the I/Q of the first 16 decimated samples
// after the filters settle (1 us) is averaged, and the drift-compensated
// phase atan2(Q, I) - cal_phase is formed per channel.
//
// Checked: per pulse and channel the compensated phase stays within 0.2
// degree of the drift-free value (beam phase - reference phase); the
// uncompensated phase moves by 2 degrees over the run (so the compensation
// did something); the calibration ran at each 0.2 C step (at least 25
// times); and the rms of the compensated 1 us phase over all pulses is below
// the 0.3 degree resolution requirement. The numbers reached are printed.
module tb_phase_drift;
  import bpm_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int  PERIOD = 1000, BEAM = 300, NPER = 620, SKIP = 60, NAVG = 16;
  localparam real A_BEAM = 8000.0, A_REF = 16000.0, NOISE = 25.0;

  logic clk = 0, rst = 1, beam = 0, sw, busy, iq_valid;
  logic signed [15:0] temp = 16'sd4500;
  adc_t  adc [NCH][SPC];
  coef_t coef [8];
  iq_t   ii [NCH], qq [NCH];
  logic [15:0] cph [NCH], cnt;
  int checks = 0, failures = 0;

  ddc u_ddc (.clk, .rst, .sync_i(1'b0), .phase_inc_i(PHASE_INC_162M5), .ratio_i(8'd4), .coef_i(coef),
             .adc_valid_i(1'b1), .adc_i(adc), .iq_valid_o(iq_valid), .i_o(ii), .q_o(qq));
  phase_autocal u_cal (
    .clk, .rst, .enable_i(1'b1), .force_i(1'b0), .temp_i(temp), .tsh_i(16'd20), .beam_i(beam),
    .iq_valid_i(iq_valid), .i_i(ii), .q_i(qq), .cal_switch_o(sw), .cal_phase_o(cph),
    .cal_count_o(cnt), .busy_o(busy));

  always #8 clk = ~clk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (PERIOD * (NPER + 20)) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real beam_deg(int c);
    return 20.0 + 41.0 * real'(c);
  endfunction
  function automatic real ref_deg(int c);
    return -100.0 + 13.0 * real'(c);
  endfunction
  function automatic real drift_deg(int t);
    return real'(t - 4500) / 300.0;
  endfunction
  function automatic real wrap(real d);
    while (d > 180.0) d -= 360.0;
    while (d < -180.0) d += 360.0;
    return d;
  endfunction

  // ADC model: 4 samples per clock, sample index n; 0.65 * 20 is a whole
  // number of turns, so n is taken modulo 20 to keep the argument small
  int n20 = 0;
  always @(posedge clk) begin
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < SPC; k++) begin
        real a, ph, v;
        a  = sw ? A_REF : (beam ? A_BEAM : 0.0);
        ph = (sw ? ref_deg(c) : beam_deg(c)) + drift_deg(int'(temp));
        v  = a * $cos(2.0 * PI * 0.65 * real'((n20 + k) % 20) + ph * PI / 180.0)
             + NOISE * (2.0 * real'($urandom % 1001) / 1000.0 - 1.0);
        adc[c][k] <= adc_t'($rtoi(v));
      end
    n20 <= (n20 + SPC) % 20;
  end

  initial begin
    real first_raw [NCH], last_raw [NCH], sum_c, sum_c2, worst, raw_move;
    int  npulse;
    for (int k = 0; k < 8; k++) coef[k] = 16'sd4096;
    for (int c = 0; c < NCH; c++) for (int k = 0; k < SPC; k++) adc[c][k] = '0;
    sum_c = 0.0; sum_c2 = 0.0; worst = 0.0; npulse = 0;
    repeat (4) @(posedge clk);
    rst <= 0;
    repeat (PERIOD) @(posedge clk);
    for (int p = 0; p < NPER; p++) begin
      real si [NCH], sq [NCH];
      int  got;
      if (p >= 10 && p < 610) temp <= temp + 16'sd1;
      beam <= 1;
      repeat (SKIP) @(posedge clk);
      for (int c = 0; c < NCH; c++) begin si[c] = 0.0; sq[c] = 0.0; end
      got = 0;
      while (got < NAVG) begin
        @(posedge clk);
        if (iq_valid) begin
          for (int c = 0; c < NCH; c++) begin si[c] += real'(ii[c]); sq[c] += real'(qq[c]); end
          got++;
        end
      end
      chk(!sw, $sformatf("switch stays on the button during pulse %0d", p));
      if (p >= 5) begin
        for (int c = 0; c < NCH; c++) begin
          real raw, comp, err;
          raw  = $atan2(sq[c], si[c]) * 180.0 / PI;
          comp = wrap(raw - real'(signed'(cph[c])) * 360.0 / 65536.0);
          err  = wrap(comp - (beam_deg(c) - ref_deg(c)));
          chk(err < 0.2 && err > -0.2,
              $sformatf("pulse %0d ch%0d compensated phase off by %f degree", p, c, err));
          if (err > worst) worst = err;
          if (-err > worst) worst = -err;
          sum_c += err; sum_c2 += err * err; npulse++;
          if (p == 5) first_raw[c] = raw;
          last_raw[c] = raw;
        end
      end
      repeat (BEAM - SKIP - 4 * NAVG) @(posedge clk);
      beam <= 0;
      repeat (PERIOD - BEAM) @(posedge clk);
    end
    raw_move = 0.0;
    for (int c = 0; c < NCH; c++) raw_move += wrap(last_raw[c] - first_raw[c]) / real'(NCH);
    chk(raw_move > 1.9 && raw_move < 2.1,
        $sformatf("uncompensated phase moved %f degree over 6 C, expected 2", raw_move));
    chk(cnt >= 26 && cnt <= 32, $sformatf("%0d calibrations over 6 C at T_sh 0.2 C", cnt));
    begin
      real mean, rms;
      mean = sum_c / real'(npulse);
      rms  = $sqrt(sum_c2 / real'(npulse) - mean * mean);
      chk(rms < 0.3, $sformatf("1 us phase rms %f degree", rms));
      $display("uncompensated drift %f deg, worst compensated error %f deg, rms %f deg, %0d calibrations",
               raw_move, worst, rms, cnt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

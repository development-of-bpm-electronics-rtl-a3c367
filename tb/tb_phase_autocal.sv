// tb_phase_autocal: a model of the 8 AFE channels returns, while the RF
// switch points at the reference copy, I/Q vectors whose phase is a
// per-channel offset plus a temperature-dependent drift (0.33 degree per
// 0.01 C count, about 2 degrees for 6 C as in the paper), and a beam signal
// of another phase otherwise. Checked: the first calibration waits for a
// beam gap; the stored phases match the model within 0.05 degree; a
// temperature step below T_sh does not recalibrate, one above does; beam
// returning mid-measurement aborts the attempt (switch released next clock)
// and it is redone in the next gap; force_i recalibrates.
module tb_phase_autocal;
  import bpm_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1, en = 1, force_cal = 0, beam = 1, iqv = 0, sw, busy;
  logic signed [15:0] temp = 16'sd4500;
  iq_t ii [NCH], qq [NCH];
  logic [15:0] cph [NCH], cnt;
  int checks = 0, failures = 0, cyc = 0;
  phase_autocal #(.SETTLE(8), .LOG2N(4)) dut (
    .clk, .rst, .enable_i(en), .force_i(force_cal), .temp_i(temp), .tsh_i(16'd20), .beam_i(beam),
    .iq_valid_i(iqv), .i_i(ii), .q_i(qq), .cal_switch_o(sw), .cal_phase_o(cph), .cal_count_o(cnt),
    .busy_o(busy));
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic real ref_deg(int c, int t);
    return -150.0 + 37.0 * c + 0.0033 * 100.0 * real'(t - 4500);
  endfunction
  // channel model: one decimated I/Q sample every 4 clocks
  always @(posedge clk) begin
    cyc <= cyc + 1;
    iqv <= (cyc % 4 == 0);
    for (int c = 0; c < NCH; c++) begin
      real a;
      a = sw ? ref_deg(c, int'(temp)) : 77.0;
      ii[c] <= iq_t'($rtoi(1.0e6 * $cos(a * PI / 180.0)));
      qq[c] <= iq_t'($rtoi(1.0e6 * $sin(a * PI / 180.0)));
    end
  end
  // the switch must be released the clock after beam returns
  logic sw_beam_d = 0;
  always @(posedge clk) begin
    if (!rst && sw && beam && sw_beam_d) begin failures++; $display("FAIL switch held during beam"); end
    sw_beam_d <= sw && beam;
  end
  task automatic check_phases(string tag);
    for (int c = 0; c < NCH; c++) begin
      real got, d;
      got = real'(signed'(cph[c])) * 360.0 / 65536.0;
      d = got - ref_deg(c, int'(temp));
      if (d > 180.0) d -= 360.0;
      if (d < -180.0) d += 360.0;
      chk(d < 0.05 && d > -0.05, $sformatf("%s ch%0d phase %f exp %f", tag, c, got, ref_deg(c, int'(temp))));
    end
  endtask
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (300) @(posedge clk);
    chk(!sw && cnt == 0, "no calibration during beam");
    beam <= 0;
    wait (cnt == 1);
    @(posedge clk);
    check_phases("first");
    // below threshold
    beam <= 1; temp <= temp + 16'sd15;
    repeat (50) @(posedge clk);
    beam <= 0;
    repeat (500) @(posedge clk);
    chk(cnt == 1 && !sw, "no recalibration below T_sh");
    // above threshold, beam comes back during the average
    beam <= 1; temp <= temp + 16'sd10;   // 25 counts from the last calibration
    repeat (50) @(posedge clk);
    beam <= 0;
    wait (sw);
    repeat (20) @(posedge clk);
    beam <= 1;
    repeat (2) @(posedge clk);
    chk(!sw && cnt == 1, "aborted on beam");
    repeat (100) @(posedge clk);
    beam <= 0;
    wait (cnt == 2);
    @(posedge clk);
    check_phases("after drift");
    // forced
    #1 force_cal = 1; @(posedge clk); #1 force_cal = 0;
    wait (cnt == 3);
    @(posedge clk);
    chk(!sw && !busy, "idle after forced calibration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

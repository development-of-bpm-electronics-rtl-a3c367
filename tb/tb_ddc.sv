// tb_ddc: feeds each of the 8 channels a 162.5 MHz tone sampled at 250 MSPS,
// x = A cos(2 pi 0.65 n + phi_c), with a different amplitude and phase per
// channel. After the filters settle, atan2(Q, I) must give phi_c within
// 1 degree and |I,Q| must equal A/2 times the DC gain (4*4^3 for ratio 4,
// unity FIR) within 3 %. One I/Q output is expected every 4 clocks
// (decimation 16).
module tb_ddc;
  import bpm_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1, sync = 0, valid = 0, vo;
  adc_t adc [NCH][SPC];
  coef_t coef [8];
  iq_t io [NCH], qo [NCH];
  int checks = 0, failures = 0, cyc = 0, last = -1, nout = 0;
  real amp [NCH], phi [NCH];
  ddc dut (.clk, .rst, .sync_i(sync), .phase_inc_i(PHASE_INC_162M5), .ratio_i(8'd4), .coef_i(coef),
           .adc_valid_i(valid), .adc_i(adc), .iq_valid_o(vo), .i_o(io), .q_o(qo));
  always #8 clk = ~clk;
  always @(posedge clk) cyc++;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint n = 0;
    for (int k = 0; k < 8; k++) coef[k] = 16'sd4096;
    for (int c = 0; c < NCH; c++) begin
      amp[c] = 4000.0 + 3000.0 * c;
      phi[c] = -170.0 + 45.0 * c;
    end
    repeat (2) @(posedge clk);
    rst <= 0;
    repeat (400) begin
      for (int c = 0; c < NCH; c++)
        for (int k = 0; k < SPC; k++)
          adc[c][k] = adc_t'($rtoi(amp[c] * $cos(2.0 * PI * 0.65 * real'(n + k) + phi[c] * PI / 180.0)));
      valid <= 1;
      n += SPC;
      @(posedge clk); #1;
      if (vo) begin
        if (last >= 0) chk(cyc - last == 4, $sformatf("output spacing %0d", cyc - last));
        last = cyc;
        nout++;
        if (nout > 10) begin
          for (int c = 0; c < NCH; c++) begin
            real ph, mag, d;
            ph  = $atan2(real'(qo[c]), real'(io[c])) * 180.0 / PI;
            mag = $sqrt(real'(io[c]) * real'(io[c]) + real'(qo[c]) * real'(qo[c]));
            d = ph - phi[c];
            if (d > 180.0) d -= 360.0;
            if (d < -180.0) d += 360.0;
            chk(d < 1.0 && d > -1.0, $sformatf("ch%0d phase %f exp %f", c, ph, phi[c]));
            chk(mag > 0.97 * amp[c] / 2.0 * 256.0 && mag < 1.03 * amp[c] / 2.0 * 256.0,
                $sformatf("ch%0d magnitude %f exp %f", c, mag, amp[c] * 128.0));
          end
        end
      end
    end
    chk(nout > 90, "output count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mixer: random samples and oscillator values; the registered I/Q must
// equal x*cos/2^15 and -x*sin/2^15 (arithmetic shift) one clock later.
module tb_mixer;
  import bpm_pkg::*;
  logic clk = 0, rst = 1, valid = 0, vo;
  adc_t x [SPC], c [SPC], s [SPC];
  mix_t i [SPC], q [SPC];
  int checks = 0, failures = 0;
  mixer dut (.clk, .rst, .valid_i(valid), .x_i(x), .cos_i(c), .sin_i(s), .valid_o(vo), .i_o(i), .q_o(q));
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint ei [SPC], eq [SPC];
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 300; n++) begin
      for (int k = 0; k < SPC; k++) begin
        x[k] = adc_t'($urandom); c[k] = adc_t'($urandom); s[k] = adc_t'($urandom);
        if (n == 0) begin x[k] = -32768; c[k] = 32767; s[k] = -32767; end
        ei[k] = (longint'(x[k]) * longint'(c[k]));
        eq[k] = (longint'(x[k]) * longint'(s[k]));
        // floor division by 2^15
        ei[k] = (ei[k] >= 0) ? ei[k] / 32768 : -((-ei[k] + 32767) / 32768);
        eq[k] = (eq[k] >= 0) ? eq[k] / 32768 : -((-eq[k] + 32767) / 32768);
        eq[k] = -eq[k];
      end
      valid = (n % 3 != 2);
      @(posedge clk); #1;
      checks++;
      if (vo != valid) begin failures++; $display("FAIL valid"); end
      for (int k = 0; k < SPC; k++) begin
        checks++;
        if (longint'(i[k]) != ei[k] || longint'(q[k]) != eq[k]) begin
          failures++; $display("FAIL n=%0d k=%0d i=%0d/%0d q=%0d/%0d", n, k, i[k], ei[k], q[k], eq[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

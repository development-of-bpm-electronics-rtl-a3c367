// tb_fir: loads distinct taps, sends an impulse (the output must replay the
// taps scaled by the impulse), then a random sequence compared with a
// direct-form convolution computed here.
module tb_fir;
  import bpm_pkg::*;
  localparam int NT = 8;
  logic clk = 0, rst = 1, valid = 0, vo;
  coef_t coef [NT];
  iq_t ii = '0, qi = '0, io, qo;
  int checks = 0, failures = 0;
  fir #(.NTAPS(NT)) dut (.clk, .rst, .coef_i(coef), .valid_i(valid), .i_i(ii), .q_i(qi),
                         .valid_o(vo), .i_o(io), .q_o(qo));
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic longint fl(longint v);   // floor(v / 2^15)
    return (v >= 0) ? v / 32768 : -((-v + 32767) / 32768);
  endfunction
  initial begin
    longint hist_i [NT], hist_q [NT], ei, eq;
    for (int k = 0; k < NT; k++) coef[k] = coef_t'(1000 * (k + 1) - 3000);
    for (int k = 0; k < NT; k++) begin hist_i[k] = 0; hist_q[k] = 0; end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 200; n++) begin
      if (n == 0)      begin ii = 32768; qi = -32768; end
      else if (n < 10) begin ii = 0; qi = 0; end
      else begin ii = iq_t'($urandom) >>> 4; qi = iq_t'($urandom) >>> 4; end
      valid = (n < 10) || ($urandom % 4 != 0);
      if (valid) begin
        for (int k = NT - 1; k > 0; k--) begin hist_i[k] = hist_i[k-1]; hist_q[k] = hist_q[k-1]; end
        hist_i[0] = ii; hist_q[0] = qi;
      end
      ei = 0; eq = 0;
      for (int k = 0; k < NT; k++) begin ei += hist_i[k] * coef[k]; eq += hist_q[k] * coef[k]; end
      @(posedge clk); #1;
      chk(vo == valid, "valid");
      if (valid) begin
        chk(longint'(io) == fl(ei), $sformatf("I n=%0d %0d exp %0d", n, io, fl(ei)));
        chk(longint'(qo) == fl(eq), $sformatf("Q n=%0d %0d exp %0d", n, qo, fl(eq)));
        if (n < NT) chk(io == iq_t'(coef[n]), "impulse replays taps");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

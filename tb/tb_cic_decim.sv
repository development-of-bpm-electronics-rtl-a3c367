// tb_cic_decim: constant input at several ratios. After the filter settles
// every output must equal the DC gain SPC*R^3 times the input, outputs must
// come exactly every R valid clocks, and an impulse must give a response
// whose decimated samples sum to R^(3-1) times the impulse.
module tb_cic_decim;
  import bpm_pkg::*;
  logic clk = 0, rst = 1, sync = 0, valid = 0, vo;
  logic [7:0] ratio = 8'd4;
  mix_t i [SPC], q [SPC];
  iq_t io, qo;
  int checks = 0, failures = 0;
  int last_out, cyc = 0;
  cic_decim dut (.clk, .rst, .sync_i(sync), .ratio_i(ratio), .valid_i(valid), .i_i(i), .q_i(q),
                 .valid_o(vo), .i_o(io), .q_o(qo));
  always #5 clk = ~clk;
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
    int r, nout, a, b;
    longint sum;
    int rs [5] = '{1, 2, 4, 8, 16};
    repeat (2) @(posedge clk);
    rst <= 0;
    foreach (rs[t]) begin
      r = rs[t];
      a = 1000 + 37 * t; b = -2000 + 11 * t;
      ratio <= 8'(r);
      for (int k = 0; k < SPC; k++) begin i[k] = mix_t'(a); q[k] = mix_t'(b); end
      @(posedge clk); @(posedge clk);
      valid <= 1;
      nout = 0; last_out = -1;
      while (nout < 8) begin
        @(posedge clk); #1;
        if (vo) begin
          if (last_out >= 0) chk(cyc - last_out == r, $sformatf("spacing r=%0d got %0d", r, cyc - last_out));
          last_out = cyc;
          nout++;
          if (nout > 4) begin
            chk(io == iq_t'(SPC * a * r * r * r), $sformatf("I dc r=%0d %0d", r, io));
            chk(qo == iq_t'(SPC * b * r * r * r), $sformatf("Q dc r=%0d %0d", r, qo));
          end
        end
      end
      valid <= 0;
    end
    // impulse at ratio 4
    ratio <= 8'd4;
    for (int k = 0; k < SPC; k++) begin i[k] = '0; q[k] = '0; end
    sync <= 1; @(posedge clk); sync <= 0; valid <= 1;
    i[0] = 100;
    @(posedge clk); #1;
    i[0] = 0;
    sum = 0;
    repeat (60) begin @(posedge clk); #1; if (vo) sum += io; end
    chk(sum == 100 * 16, $sformatf("impulse sum %0d", sum));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

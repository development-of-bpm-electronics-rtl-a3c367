// tb_iq_average: random I/Q per channel over 16 samples with gaps in valid;
// the output after done must be the floor of the mean computed here, and
// samples before start or after done must not count.
module tb_iq_average;
  import bpm_pkg::*;
  logic clk = 0, rst = 1, start = 0, valid = 0, done, busy;
  iq_t ii [NCH], qq [NCH], io [NCH], qo [NCH];
  int checks = 0, failures = 0;
  iq_average #(.LOG2N(4)) dut (.clk, .rst, .start_i(start), .valid_i(valid), .i_i(ii), .q_i(qq),
                               .done_o(done), .busy_o(busy), .i_o(io), .q_o(qo));
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint si [NCH], sq [NCH];
    int n;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int run = 0; run < 4; run++) begin
      // samples before start are ignored
      for (int c = 0; c < NCH; c++) begin ii[c] = 32'h7fff_0000; qq[c] = 32'h7fff_0000; end
      #1 valid = 1; @(posedge clk); #1 valid = 0;
      start = 1; @(posedge clk); #1 start = 0;
      for (int c = 0; c < NCH; c++) begin si[c] = 0; sq[c] = 0; end
      n = 0;
      while (n < 16) begin
        valid = ($urandom % 3 != 0);
        for (int c = 0; c < NCH; c++) begin
          ii[c] = iq_t'($urandom) >>> (run * 2);
          qq[c] = iq_t'($urandom) >>> (run * 2);
          if (valid) begin si[c] += ii[c]; sq[c] += qq[c]; end
        end
        if (valid) n++;
        @(posedge clk); #1;
        chk(done == (n == 16 && valid), "done timing");
      end
      valid = 0;
      for (int c = 0; c < NCH; c++) begin
        longint ei, eq;
        ei = (si[c] >= 0) ? si[c] / 16 : -((-si[c] + 15) / 16);
        eq = (sq[c] >= 0) ? sq[c] / 16 : -((-sq[c] + 15) / 16);
        chk(longint'(io[c]) == ei && longint'(qo[c]) == eq, $sformatf("run %0d ch %0d", run, c));
      end
      chk(!busy, "idle after done");
      valid = 1; @(posedge clk); #1 valid = 0;   // after done: ignored
      chk(!done, "no second done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

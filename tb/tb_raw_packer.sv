// tb_raw_packer: 8 channels of counting raw samples. An event must give the
// raw header in the next clock, then raw_len words holding the samples of the
// following clocks (channel c in bits 64c.., oldest sample lowest), the last
// with tlast. A trigger during a packet is ignored and counted.
module tb_raw_packer;
  import bpm_pkg::*;
  localparam int LEN = 6;
  logic clk = 0, rst = 1, evv = 0, av = 0, tvalid, tlast;
  event_tag_t ev;
  adc_t adc [NCH][SPC];
  logic [WORD_W-1:0] tdata;
  logic [15:0] busy;
  int checks = 0, failures = 0;
  raw_packer dut (.clk, .rst, .event_valid_i(evv), .event_i(ev), .device_id_i(16'h0007),
                  .raw_len_i(32'(LEN)), .adc_valid_i(av), .adc_i(adc),
                  .m_tdata(tdata), .m_tvalid(tvalid), .m_tlast(tlast), .busy_o(busy));
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int n = 0;
  always @(posedge clk) begin
    for (int c = 0; c < NCH; c++) for (int k = 0; k < SPC; k++) adc[c][k] <= adc_t'(1000 * c + 4 * (n + 1) + k);
    n <= n + 1;
  end
  initial begin
    int base;
    av = 1;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    for (int p = 0; p < 3; p++) begin
      #1;
      ev = '{event_id: 32'(p), time_sec: 32'd5, time_ticks: 32'(p)};
      evv = 1;
      @(posedge clk); #1; evv = 0;
      chk(tvalid && !tlast, "header valid");
      chk(tdata[511:496] == 16'hB9B9 && tdata[479:472] == 8'h02 && tdata[495:480] == 16'h0007, "header ids");
      chk(tdata[447:416] == 32'(p) && tdata[351:320] == 32'(LEN), "header event/size");
      base = n;     // samples present at this clock are the first packed
      for (int w = 0; w < LEN; w++) begin
        if (w == 2) evv = 1;            // overlapping trigger
        @(posedge clk); #1; evv = 0;
        chk(tvalid, "data valid");
        chk(tlast == (w == LEN - 1), "tlast");
        for (int c = 0; c < NCH; c++) for (int k = 0; k < SPC; k++)
          chk(tdata[64*c + 16*k +: 16] == 16'(1000 * c + 4 * (base + w) + k),
              $sformatf("p%0d w%0d c%0d k%0d %0d", p, w, c, k, tdata[64*c + 16*k +: 16]));
      end
      @(posedge clk); #1;
      chk(!tvalid, "idle after packet");
    end
    chk(busy == 16'd3, $sformatf("overlap count %0d", busy));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_raw_pulse: the raw-data path of the whole design with a full-length
// PIP-II beam pulse, every parameter of the top at its default. The beam
// pulse is up to 0.55 ms long: 0.55 ms x 62.5 MHz = 34375 raw words of 512
// bits (2.2 MB). The test sets RAW_LEN to 34375, arms a capture, selects the
// raw stream and sends one trigger. The snapshot stores the packet in the
// DDR model and plays it back through the 32-bit, 100 MHz DMA output.
//
// The ADC model puts a counter on every lane, sample (c, k) of clock t being
// t + 1000c + 250k (16 bits), so each payload word tells which clock it came
// from. Checked: the header (magic, type, event ID, size); that the payload
// is 34375 consecutive ADC clocks starting within a few clocks of the
// trigger; no raw word lost or truncated; and the time from trigger to the
// last DMA beat. That time is the 0.55 ms capture plus 34376 x 16 beats at
// 100 MHz (5.50 ms), and must fit in the 50 ms period of the 20 Hz beam.
module tb_raw_pulse;
  import bpm_pkg::*;
  localparam int RAW_WORDS = 34375;
  logic clk = 0, rst = 1, uclk = 0, urst = 1, dclk = 0, drst = 1;
  logic adc_valid = 0;
  adc_t adc [NCH][SPC];
  logic trig = 0;
  logic signed [15:0] temp = 16'sd4500;
  logic cal_switch;
  axil_req_t sreq = '0, preq [3];
  axil_rsp_t srsp, prsp [3];
  logic we, re, rv;
  logic [23:0] wa, ra;
  logic [511:0] wd, rd;
  logic [31:0] dt;
  logic dv, dl;
  logic [15:0] drops, ccount, rawov, rawlost, strunc;
  logic cbusy, sbusy;
  logic [31:0] tsec;
  int checks = 0, failures = 0;

  bpm_top dut (
    .clk, .rst, .ui_clk(uclk), .ui_rst(urst), .dma_clk(dclk), .dma_rst(drst), .adc_valid, .adc_data(adc),
    .trigger(trig), .pps(1'b0), .bcast_valid(1'b0), .bcast_sec(32'd0), .beam(1'b0), .temperature(temp),
    .cal_switch, .s_axil_req(sreq), .s_axil_rsp(srsp), .periph_req(preq), .periph_rsp(prsp),
    .mem_we(we), .mem_addr(wa), .mem_wdata(wd), .mem_re(re), .mem_raddr(ra), .mem_rvalid(rv),
    .mem_rdata(rd), .dma_tdata(dt), .dma_tvalid(dv), .dma_tlast(dl), .dma_tready(1'b1),
    .iq_drops(drops), .cal_count(ccount), .cal_busy(cbusy), .snap_busy(sbusy),
    .raw_overlaps(rawov), .raw_lost(rawlost), .snap_truncated(strunc), .time_sec(tsec));

  ddr_model #(.ADDR_W(24), .AW(16)) u_ddr (.clk(uclk), .we, .addr(wa), .wdata(wd), .re, .raddr(ra),
                                           .rvalid(rv), .rdata(rd));
  always #8 clk = ~clk;     // 62.5 MHz
  always #5 dclk = ~dclk;   // 100 MHz
  always #2.5 uclk = ~uclk; // 200 MHz DDR controller user clock

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    #12ms;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ADC model: lane counters
  logic [15:0] t = '0;
  always @(posedge clk) begin
    adc_valid <= 1'b1;
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < SPC; k++) adc[c][k] <= adc_t'(t + 16'(1000 * c + 250 * k));
    t <= t + 16'd1;
  end

  // peripherals on M1..M3 are not used: idle responses
  for (genvar p = 0; p < 3; p++) begin : g_p
    assign prsp[p] = '0;
  end

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(posedge clk); #1;
    sreq.awaddr = a; sreq.awvalid = 1; sreq.wdata = d; sreq.wstrb = 4'hF; sreq.wvalid = 1; sreq.bready = 1;
    do @(posedge clk); while (!srsp.awready);
    #1 sreq.awvalid = 0; sreq.wvalid = 0;
    while (!srsp.bvalid) @(posedge clk);
    @(posedge clk); #1 sreq.bready = 0;
  endtask

  // DMA sink: rebuild words and check the raw packet as it streams
  logic [511:0] wacc;
  int beat = 0, nword = 0, bad_words = 0, raw_done = 0;
  logic [15:0] t0;
  realtime t_trig, t_end;
  always @(posedge dclk) if (!drst && dv) begin
    wacc[32*beat +: 32] = dt;
    if (beat == 15) begin
      beat = 0;
      if (nword == 0) begin
        pkt_header_t h;
        h = pkt_header_t'(wacc);
        chk(h.magic == HDR_MAGIC && h.data_type == DT_RAW, "raw header magic and type");
        chk(h.event_id == 32'd0 && h.event_size == 32'(RAW_WORDS),
            $sformatf("raw header event %0d size %0d", h.event_id, h.event_size));
      end else begin
        logic ok;
        if (nword == 1) t0 = wacc[15:0];
        ok = 1'b1;
        for (int c = 0; c < NCH; c++)
          for (int k = 0; k < SPC; k++)
            if (wacc[64*c + 16*k +: 16] != 16'(t0 + 16'(nword - 1) + 16'(1000 * c + 250 * k))) ok = 1'b0;
        if (!ok) begin
          bad_words++;
          if (bad_words < 5) $display("FAIL payload word %0d not from ADC clock %0d", nword, t0 + 16'(nword - 1));
        end
      end
      if (dl) begin
        chk(nword == RAW_WORDS, $sformatf("tlast after %0d payload words, expected %0d", nword, RAW_WORDS));
        t_end = $realtime;
        raw_done = 1;
        nword = 0;
      end else nword++;
    end else begin
      beat++;
      if (dl) begin failures++; $display("FAIL tlast in mid-word"); end
    end
  end

  initial begin
    logic [15:0] t_at_trig;
    repeat (4) @(posedge clk);
    rst <= 0; urst <= 0; drst <= 0;
    repeat (20) @(posedge clk);
    wr(32'(REG_RAW_LEN), RAW_WORDS);
    wr(32'(REG_CTRL), 32'h0000_000B);   // capture, raw stream, calibration enabled
    repeat (100) @(posedge clk);
    @(posedge clk); #1 trig = 1; t_at_trig = t; t_trig = $realtime;
    @(posedge clk); #1 trig = 0;
    while (!raw_done) @(posedge clk);
    begin
      int d;
      d = int'(t0) - int'(t_at_trig);
      chk(d >= 0 && d <= 4, $sformatf("payload starts %0d clocks after the trigger", d));
    end
    chk(bad_words == 0, $sformatf("%0d payload words not consecutive ADC clocks", bad_words));
    chk(rawlost == 0 && strunc == 0 && rawov == 0, "no raw word lost, truncated or overlapped");
    begin
      real ms;
      ms = (t_end - t_trig) / 1.0e6;
      $display("0.55 ms raw pulse: trigger to last DMA beat %f ms", ms);
      chk(ms > 6.0 && ms < 6.2, $sformatf("raw pulse delivered in %f ms, expected 0.55 + 5.50", ms));
      chk(ms < 50.0, "raw pulse delivered within one 20 Hz period");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

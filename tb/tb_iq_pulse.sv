// tb_iq_pulse: the I/Q path of the whole design with a full-length 0.55 ms
// beam pulse, every parameter of the top at its default. At decimation 16
// (ratio 4) the pulse is 0.55 ms x 15.625 MS/s = 8594 I/Q words, more than
// the 8192-word packet FIFO can take whole (header + 8191 words at most):
// the packer must drop that packet and count it, and send nothing. At ratio
// 5 (decimation 20, 12.5 MS/s) the same pulse is 6875 words, which fits:
// that packet must arrive whole, with ratio 5 and its size in the header.
// The DMA drains 6.25 M words/s while the packet fills at 12.5 M words/s, so
// the packet streams out as it is made and its last beat leaves 6876 x 16
// beats at 100 MHz (1.10 ms) after the trigger. The ADC model is the lane counter of tb_raw_pulse; the payload
// content is checked by the down-converter tests, only sizes here.
module tb_iq_pulse;
  import bpm_pkg::*;
  localparam int LONG_WORDS = 8594, R5_WORDS = 6875;
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

  ddr_model #(.ADDR_W(24), .AW(12)) u_ddr (.clk(uclk), .we, .addr(wa), .wdata(wd), .re, .raddr(ra),
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

    // DMA sink: count words per packet
  logic [511:0] wacc;
  int beat = 0, nword = 0, npkt = 0, last_size = 0;
  pkt_header_t h;
  realtime t_trig, t_end;
  always @(posedge dclk) if (!drst && dv) begin
    wacc[32*beat +: 32] = dt;
    if (beat == 15) begin
      beat = 0;
      if (nword == 0) h = pkt_header_t'(wacc);
      if (dl) begin
        last_size = nword;
        npkt++;
        t_end = $realtime;
        nword = 0;
      end else nword++;
    end else begin
      beat++;
      if (dl) begin failures++; $display("FAIL tlast in mid-word"); end
    end
  end

  initial begin
    repeat (4) @(posedge clk);
    rst <= 0; urst <= 0; drst <= 0;
    repeat (20) @(posedge clk);
    // 0.55 ms at decimation 16: does not fit, dropped whole
    wr(32'(REG_IQ_LEN), LONG_WORDS);
    repeat (100) @(posedge clk);
    @(posedge clk); #1 trig = 1;
    @(posedge clk); #1 trig = 0;
    repeat (40000) @(posedge clk);
    chk(drops == 16'd1, $sformatf("0.55 ms packet at decimation 16 dropped (drops %0d)", drops));
    chk(npkt == 0, "nothing sent for the dropped packet");
    // 0.55 ms at decimation 20: fits
    wr(32'(REG_RATIO), 32'd5);
    wr(32'(REG_IQ_LEN), R5_WORDS);
    repeat (200) @(posedge clk);
    @(posedge clk); #1 trig = 1; t_trig = $realtime;
    @(posedge clk); #1 trig = 0;
    while (npkt == 0) @(posedge clk);
    chk(last_size == R5_WORDS, $sformatf("packet of %0d words, expected %0d", last_size, R5_WORDS));
    chk(h.magic == HDR_MAGIC && h.data_type == DT_IQ && h.event_id == 32'd1 && h.attr == 8'd5 &&
        h.event_size == 32'(R5_WORDS), "I/Q header: event 1, ratio 5, size");
    chk(drops == 16'd1, "no further drop");
    begin
      real ms;
      ms = (t_end - t_trig) / 1.0e6;
      $display("0.55 ms I/Q pulse at decimation 20: trigger to last DMA beat %f ms", ms);
      chk(ms > 1.09 && ms < 1.12, $sformatf("delivered in %f ms, expected 1.10", ms));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

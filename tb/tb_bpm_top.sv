// tb_bpm_top: end-to-end test of the whole programmable-logic design at its
// default parameters. Models around it: an ADC/AFE model whose 8 channels
// carry a 162.5 MHz beam tone during beam and, while the calibration switch
// is on, the reference copy; both go through the same temperature-dependent
// drift (0.33 degree per 0.01 C count). A PL DDR model, three peripheral
// register models on crossbar ports M1..M3 and a DMA sink that rebuilds
// 512-bit words and packets from the 32-bit beats.
// Sequence and checks:
//  * register access through the crossbar (app registers and a peripheral);
//  * self-calibration in the first beam gap;
//  * beam pulses with triggers: I/Q packets whose header carries event ID,
//    size, ratio and the reference phases, and whose I/Q phase minus the
//    reference phase equals the drift-free offset within 0.2 degree, before
//    and after a temperature step beyond T_sh that triggers recalibration;
//  * drift compensation in the FPGA (CTRL bit 5): a packet flagged in the
//    header whose I/Q phase alone equals the drift-free offset;
//  * capture and stream switch: a raw snapshot packet whose payload is a
//    contiguous run of the ADC words;
//  * FIFO overflow: with the DMA stalled a long packet fills the FIFO and the
//    next one is dropped whole and counted.
// Each mechanism is counted and must occur at least once.
module tb_bpm_top;
  import bpm_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1, uclk = 0, urst = 1, dclk = 0, drst = 1;
  logic adc_valid = 0;
  adc_t adc [NCH][SPC];
  logic trig = 0, pps = 0, bv = 0, beam = 0;
  logic [31:0] bsec = '0;
  logic signed [15:0] temp = 16'sd4500;
  logic cal_switch;
  axil_req_t sreq = '0, preq [3];
  axil_rsp_t srsp, prsp [3];
  logic we, re, rv;
  logic [23:0] wa, ra;
  logic [511:0] wd, rd;
  logic [31:0] dt;
  logic dv, dl, dr = 1;
  logic [15:0] drops, ccount, rawov, rawlost, strunc;
  logic cbusy, sbusy;
  logic [31:0] tsec;
  int checks = 0, failures = 0;

  bpm_top dut (
    .clk, .rst, .ui_clk(uclk), .ui_rst(urst), .dma_clk(dclk), .dma_rst(drst), .adc_valid, .adc_data(adc),
    .trigger(trig), .pps, .bcast_valid(bv), .bcast_sec(bsec), .beam, .temperature(temp),
    .cal_switch, .s_axil_req(sreq), .s_axil_rsp(srsp), .periph_req(preq), .periph_rsp(prsp),
    .mem_we(we), .mem_addr(wa), .mem_wdata(wd), .mem_re(re), .mem_raddr(ra), .mem_rvalid(rv),
    .mem_rdata(rd), .dma_tdata(dt), .dma_tvalid(dv), .dma_tlast(dl), .dma_tready(dr),
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
    #20ms;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- ADC / AFE model
  function automatic real beam_deg(int c); return 20.0 + 31.0 * c; endfunction
  function automatic real ref_deg(int c);  return -100.0 + 23.0 * c; endfunction
  function automatic real drift_deg();     return 0.33 * real'(int'(temp) - 4500); endfunction
  longint n = 0;
  logic [511:0] adc_log [longint];
  always @(posedge clk) begin
    logic [511:0] w;
    adc_valid <= 1'b1;
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < SPC; k++) begin
        real a, ph;
        a  = cal_switch ? 12000.0 : (beam ? 10000.0 : 0.0);
        ph = (cal_switch ? ref_deg(c) : beam_deg(c)) + drift_deg();
        adc[c][k] <= adc_t'($rtoi(a * $cos(2.0 * PI * 0.65 * real'(n + k) + ph * PI / 180.0)));
        w[64*c + 16*k +: 16] = 16'($rtoi(a * $cos(2.0 * PI * 0.65 * real'(n + k) + ph * PI / 180.0)));
      end
    adc_log[n] = w;
    if (adc_log.exists(n - 40000)) adc_log.delete(n - 40000);
    n <= n + SPC;
  end
  // PPS every 10000 clocks (scaled)
  int cyc = 0;
  always @(posedge clk) begin cyc <= cyc + 1; pps <= (cyc % 10000 == 9999); end

  // ---------------- peripheral models on M1..M3
  int periph_writes [3] = '{0, 0, 0};
  logic [31:0] periph_mem [3];
  for (genvar p = 0; p < 3; p++) begin : g_p
    always @(posedge clk) if (rst) prsp[p] <= '0; else begin
      prsp[p].awready <= preq[p].awvalid && !prsp[p].awready;
      prsp[p].wready  <= preq[p].wvalid && !prsp[p].wready;
      if (preq[p].awvalid && preq[p].wvalid && !prsp[p].bvalid && !prsp[p].awready) begin
        periph_mem[p] <= preq[p].wdata ^ preq[p].awaddr;
        periph_writes[p]++;
        prsp[p].bvalid <= 1;
      end else if (preq[p].bready) prsp[p].bvalid <= 0;
      prsp[p].arready <= preq[p].arvalid && !prsp[p].arready && !prsp[p].rvalid;
      if (preq[p].arvalid && !prsp[p].arready && !prsp[p].rvalid) begin
        prsp[p].rvalid <= 1; prsp[p].rdata <= periph_mem[p];
      end else if (preq[p].rready) prsp[p].rvalid <= 0;
    end
  end

  // ---------------- AXI4-Lite master tasks
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(posedge clk); #1;
    sreq.awaddr = a; sreq.awvalid = 1; sreq.wdata = d; sreq.wstrb = 4'hF; sreq.wvalid = 1; sreq.bready = 1;
    do @(posedge clk); while (!srsp.awready);
    #1 sreq.awvalid = 0; sreq.wvalid = 0;
    while (!srsp.bvalid) @(posedge clk);
    @(posedge clk); #1 sreq.bready = 0;
  endtask
  task automatic rdreg(input logic [31:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    sreq.araddr = a; sreq.arvalid = 1; sreq.rready = 1;
    do @(posedge clk); while (!srsp.arready);
    #1 sreq.arvalid = 0;
    while (!srsp.rvalid) @(posedge clk);
    d = srsp.rdata;
    @(posedge clk); #1 sreq.rready = 0;
  endtask

  // ---------------- DMA sink
  typedef logic [511:0] word_q_t [$];
  word_q_t pkts [$];
  word_q_t cur;
  logic [511:0] wacc;
  int beat = 0, beats_total = 0;
  always @(posedge dclk) if (!drst && dv && dr) begin
    wacc[32*beat +: 32] = dt;
    beats_total++;
    if (beat == 15) begin
      beat = 0;
      cur.push_back(wacc);
      if (dl) begin pkts.push_back(cur); cur = {}; end
    end else begin
      beat++;
      if (dl) begin failures++; $display("FAIL tlast in mid-word"); end
    end
  end

  // ---------------- mechanism counters
  int n_iq_pkts = 0, n_raw_pkts = 0, n_cals = 0, n_drops = 0, n_switch = 0, n_recal = 0, n_comp = 0;

  task automatic pulse_trigger();
    @(posedge clk); #1 trig = 1; @(posedge clk); #1 trig = 0;
  endtask
  task automatic beam_pulse(int len);
    @(posedge clk); #1 beam = 1;
    pulse_trigger();
    repeat (len) @(posedge clk);
    #1 beam = 0;
  endtask
  task automatic wait_pkts(int k);
    int t = 0;
    while (pkts.size() < k && t < 400000) begin @(posedge clk); t++; end
    chk(pkts.size() >= k, $sformatf("packet arrived (%0d of %0d)", pkts.size(), k));
  endtask

  function automatic real wrap(real d);
    while (d > 180.0) d -= 360.0;
    while (d < -180.0) d += 360.0;
    return d;
  endfunction

  int exp_event = 0;
  task automatic check_iq_pkt(word_q_t p, int len, output real comp [NCH]);
    pkt_header_t h;
    h = pkt_header_t'(p[0]);
    chk(p.size() == len + 1, $sformatf("iq packet size %0d", p.size()));
    chk(h.magic == HDR_MAGIC && h.data_type == DT_IQ && h.device_id == 16'h0021, "iq header ids");
    chk(h.event_id == 32'(exp_event), $sformatf("event id %0d exp %0d", h.event_id, exp_event));
    chk(h.event_size == 32'(len) && h.attr[6:0] == 7'd4 && h.config_word == PHASE_INC_162M5, "iq header size/ratio/nco");
    for (int c = 0; c < NCH; c++) begin
      real iqph, refph, d;
      logic [511:0] w;
      w = p[len];                 // last word: filters settled on the beam
      iqph  = $atan2(real'(signed'(w[64*c+32 +: 32])), real'(signed'(w[64*c +: 32]))) * 180.0 / PI;
      // attr bit 7: the FPGA has already turned I/Q by the reference phase
      refph = h.attr[7] ? 0.0 : real'(signed'(h.cal_phase[16*c +: 16])) * 360.0 / 65536.0;
      comp[c] = wrap(iqph - refph);
      d = wrap(comp[c] - wrap(beam_deg(c) - ref_deg(c)));
      chk(d < 0.2 && d > -0.2, $sformatf("ch%0d compensated phase %f exp %f", c, comp[c], wrap(beam_deg(c) - ref_deg(c))));
    end
    n_iq_pkts++;
  endtask

  initial begin
    logic [31:0] d;
    real comp_a [NCH], comp_b [NCH];
    word_q_t p;
    pkt_header_t hh;
    repeat (4) @(posedge clk);
    rst <= 0; urst <= 0; drst <= 0;
    // registers through the crossbar
    rdreg(32'h0000_0000, d); chk(d == 32'hB9B0_0001, "ID register");
    wr(32'h0000_0018, 32'h21);                       // device ID
    wr(32'h0000_0014, 32'd32);                       // raw packet length
    wr(32'h0000_2004, 32'h55);                       // SDIO-ADC port
    rdreg(32'h0000_2004, d); chk(d == (32'h55 ^ 32'h2004) && periph_writes[1] == 1, "peripheral port M2");
    // broadcast time
    @(posedge clk); #1 bv = 1; bsec = 32'd1_700_000_000; @(posedge clk); #1 bv = 0;
    // first calibration in the initial gap
    wait (ccount == 1);
    n_cals++;
    repeat (20) @(posedge clk);
    // beam pulse 1 -> I/Q packet
    beam_pulse(300);
    wait_pkts(1);
    p = pkts.pop_front();
    check_iq_pkt(p, 16, comp_a);
    exp_event++;
    // temperature step beyond T_sh: drift 6.6 degrees; recalibration in the gap
    temp = temp + 16'sd20 + 16'sd1;
    wait (ccount == 2);
    n_recal++; n_cals++;
    repeat (20) @(posedge clk);
    beam_pulse(300);
    wait_pkts(1);
    p = pkts.pop_front();
    check_iq_pkt(p, 16, comp_b);
    exp_event++;
    for (int c = 0; c < NCH; c++)
      chk(wrap(comp_a[c] - comp_b[c]) < 0.2 && wrap(comp_a[c] - comp_b[c]) > -0.2, "phase stable over temperature");
    // drift compensation in the FPGA: the I/Q phase itself is drift-free
    wr(32'h0000_0004, 32'h28);                       // compensation + autocal enable
    beam_pulse(300);
    wait_pkts(1);
    p = pkts.pop_front();
    hh = pkt_header_t'(p[0]);
    chk(hh.attr == 8'h84, "compensated packet flagged in the header");
    check_iq_pkt(p, 16, comp_b);
    exp_event++;
    n_comp++;
    wr(32'h0000_0004, 32'h08);
    // raw snapshot: capture, trigger, then switch the DMA to the raw stream
    wr(32'h0000_0004, 32'h0A);                       // capture + autocal enable
    beam_pulse(300);                                 // I/Q packet and raw packet
    exp_event++;
    wait_pkts(1);
    p = pkts.pop_front();                            // the I/Q packet of this event
    hh = pkt_header_t'(p[0]);
    chk(hh.data_type == DT_IQ, "iq packet before switch");
    n_iq_pkts++;
    wr(32'h0000_0004, 32'h09);                       // select raw stream
    n_switch++;
    wait_pkts(1);
    p = pkts.pop_front();
    begin
      pkt_header_t h;
      longint first;
      bit found;
      h = pkt_header_t'(p[0]);
      chk(h.data_type == DT_RAW && h.event_size == 32'd32 && p.size() == 33, "raw packet header and size");
      chk(h.event_id == 32'(exp_event - 1), "raw packet event id");
      found = 0;
      foreach (adc_log[k]) if (!found && adc_log[k] == p[1]) begin found = 1; first = k; end
      chk(found, "raw payload found in ADC stream");
      if (found)
        for (int w = 1; w < 32; w++)
          chk(adc_log.exists(first + 4 * w) && adc_log[first + 4 * w] == p[1 + w], $sformatf("raw word %0d", w));
      n_raw_pkts++;
    end
    wr(32'h0000_0004, 32'h08);                       // back to I/Q
    n_switch++;
    // overflow: DMA stalled, one packet of 8000 words fills the FIFO
    wr(32'h0000_0010, 32'd8000);
    #1 dr = 0;
    beam_pulse(32100);
    exp_event++;
    pulse_trigger();                                 // no room: dropped
    exp_event++;
    repeat (10) @(posedge clk);
    chk(drops == 16'd1, $sformatf("drop counted %0d", drops));
    if (drops == 16'd1) n_drops++;
    rdreg(32'h0000_0020, d); chk(d[15:0] == 16'd1 && d[31:16] == 16'd2, "status register");
    #1 dr = 1;
    wait_pkts(1);
    p = pkts.pop_front();
    hh = pkt_header_t'(p[0]);
    chk(p.size() == 8001 && hh.event_id == 32'(exp_event - 2), "long packet complete");
    wr(32'h0000_0010, 32'd16);
    beam_pulse(300);
    wait_pkts(1);
    p = pkts.pop_front();
    hh = pkt_header_t'(p[0]);
    chk(hh.event_id == 32'(exp_event) && hh.diag == 32'd1, "event after drop carries the drop count");
    chk(hh.time_sec >= 32'd1_700_000_000, "broadcast time in header");
    // every mechanism happened
    chk(n_iq_pkts > 0, "I/Q packets");
    chk(n_raw_pkts > 0, "raw snapshot");
    chk(n_cals > 0, "self-calibration");
    chk(n_recal > 0, "temperature-triggered recalibration");
    chk(n_drops > 0, "FIFO overflow drop");
    chk(n_switch > 0, "stream switch");
    chk(n_comp > 0, "drift compensation in the FPGA");
    chk(rawlost == 0 && rawov == 0, "no raw words lost");
    $display("mechanisms: iq_packets=%0d raw_packets=%0d calibrations=%0d recalibrations=%0d drops=%0d stream_switches=%0d compensated=%0d",
             n_iq_pkts, n_raw_pkts, n_cals, n_recal, n_drops, n_switch, n_comp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

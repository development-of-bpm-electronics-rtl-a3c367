// tb_dma_mux: the I/Q input (62.5 MHz) and the raw input (166 MHz) both offer
// packets while the select toggles at random moments; the DMA side
// (100 MHz) applies random back-pressure. Every word carries its source,
// packet number and index. Reassembled from the 32-bit beats (low beat
// first), each source's packets must arrive complete, in order and never
// interleaved, with tlast only on the last beat of a packet, and a packet
// that starts while the select has been steady must come from the selected
// source.
module tb_dma_mux;
  import bpm_pkg::*;
  localparam int NPKT = 12;
  logic clk = 0, rst = 1, uclk = 0, urst = 1, dclk = 0, drst = 1, sel = 0;
  logic [WORD_W-1:0] d0, d1;
  logic v0 = 0, v1 = 0, l0 = 0, l1 = 0, r0, r1;
  logic [31:0] mt;
  logic mv, ml, mr = 0;
  int checks = 0, failures = 0;
  dma_mux dut (.s0_clk(clk), .s0_rst(rst), .s0_tdata(d0), .s0_tvalid(v0), .s0_tlast(l0), .s0_tready(r0),
               .s1_clk(uclk), .s1_rst(urst), .s1_tdata(d1), .s1_tvalid(v1), .s1_tlast(l1), .s1_tready(r1),
               .dma_clk(dclk), .dma_rst(drst), .sel_i(sel),
               .m_tdata(mt), .m_tvalid(mv), .m_tlast(ml), .m_tready(mr));
  always #8 clk = ~clk;
  always #5 dclk = ~dclk;
  always #3 uclk = ~uclk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int plen(int src, int p); return 1 + (p * 3 + src) % 5; endfunction
  function automatic logic [WORD_W-1:0] mkword(int src, int p, int w);
    logic [WORD_W-1:0] x;
    for (int b = 0; b < 16; b++) x[32*b +: 32] = {8'(src), 8'(p), 8'(w), 8'(b)};
    return x;
  endfunction
  // sources
  int p0 = 0, w0 = 0, p1 = 0, w1 = 0;
  always @(posedge clk) if (!rst) begin
    if (v0 && r0) begin
      if (w0 == plen(0, p0) - 1) begin w0 = 0; p0++; end else w0++;
    end
    v0 <= p0 < NPKT; d0 <= mkword(0, p0, w0); l0 <= (w0 == plen(0, p0) - 1);
  end
  always @(posedge uclk) if (!urst) begin
    if (v1 && r1) begin
      if (w1 == plen(1, p1) - 1) begin w1 = 0; p1++; end else w1++;
    end
    v1 <= (p1 < NPKT) && ($urandom % 2 == 1); d1 <= mkword(1, p1, w1); l1 <= (w1 == plen(1, p1) - 1);
  end
  // select: toggled at random DMA clocks; steady count for the source check
  int steady = 0;
  always @(posedge dclk) begin
    if ($urandom % 150 == 0) begin sel <= ~sel; steady <= 0; end
    else steady <= steady + 1;
  end
  // sink
  int beat = 0, cur_src = -1, cur_pkt = -1, cur_w = 0, exp_pkt [2] = '{0, 0};
  always @(posedge dclk) begin
    mr <= ($urandom % 4) != 0;
    if (!drst && mv && mr) begin
      int s, p, w, b;
      {s, p, w, b} = {24'd0, mt[31:24], 24'd0, mt[23:16], 24'd0, mt[15:8], 24'd0, mt[7:0]};
      checks++;
      if (cur_src < 0) begin
        cur_src = s; cur_pkt = p; cur_w = 0;
        if (p != exp_pkt[s]) begin failures++; $display("FAIL src %0d packet %0d exp %0d", s, p, exp_pkt[s]); end
        if (steady > 3) begin
          checks++;
          if (s != int'(sel)) begin failures++; $display("FAIL packet from unselected source %0d", s); end
        end
      end
      if (s != cur_src || p != cur_pkt || w != cur_w || b != beat) begin
        failures++; $display("FAIL beat s%0d p%0d w%0d b%0d (cur s%0d p%0d w%0d b%0d)", s, p, w, b, cur_src, cur_pkt, cur_w, beat);
      end
      if (ml != (beat == 15 && w == plen(s, p) - 1)) begin failures++; $display("FAIL tlast"); end
      if (beat == 15) begin
        beat = 0;
        if (w == plen(s, p) - 1) begin exp_pkt[s]++; cur_src = -1; end
        else cur_w++;
      end else beat++;
    end
  end
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0; urst <= 0; drst <= 0;
    wait (exp_pkt[0] == NPKT && exp_pkt[1] == NPKT);
    repeat (5) @(posedge clk);
    chk(!mv, "drained");
    chk(exp_pkt[0] == NPKT && exp_pkt[1] == NPKT, "all packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

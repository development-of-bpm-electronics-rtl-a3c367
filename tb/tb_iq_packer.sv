// tb_iq_packer: FIFO of 16 words, packets of 5 I/Q words. A first event must
// give a header (magic, type, IDs, times, size, ratio, calibration phases)
// followed by the next 5 I/Q words with tlast on the last, under random
// back-pressure. With the output stalled, packets are accepted while the
// FIFO has room for a whole packet and dropped whole afterwards; the drop
// count and the header's diagnostic field must show it.
module tb_iq_packer;
  import bpm_pkg::*;
  localparam int DEPTH = 16, LEN = 5;
  logic clk = 0, rst = 1, evv = 0, iqv = 0, tvalid, tlast, tready = 0;
  event_tag_t ev;
  iq_t ii [NCH], qq [NCH];
  logic [WORD_W-1:0] tdata;
  logic [15:0] drops;
  int checks = 0, failures = 0;
  logic [WORD_W:0] expq [$];
  int sample = 0;
  iq_packer #(.FIFO_DEPTH(DEPTH)) dut (
    .clk, .rst, .event_valid_i(evv), .event_i(ev), .device_id_i(16'h0042), .ratio_i(8'd4),
    .config_i(32'hC0FFEE), .cal_phase_i({8{16'h1234}}), .iq_len_i(32'(LEN)),
    .iq_valid_i(iqv), .i_i(ii), .q_i(qq),
    .m_tdata(tdata), .m_tvalid(tvalid), .m_tlast(tlast), .m_tready(tready), .drops_o(drops));
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // Output checker: compare every accepted word with the expected queue.
  always @(posedge clk) if (!rst && tvalid && tready) begin
    logic [WORD_W:0] w;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected word"); end
    else begin
      w = expq.pop_front();
      if ({tlast, tdata} != w) begin failures++; $display("FAIL word mismatch last=%0d/%0d", tlast, w[WORD_W]); end
    end
  end
  function automatic logic [WORD_W-1:0] hdr_word(int id, int drops_now);
    logic [WORD_W-1:0] h = '0;
    h[511:496] = 16'hB9B9; h[495:480] = 16'h0042; h[479:472] = 8'h01; h[471:464] = 8'd4;
    h[447:416] = 32'(id); h[415:384] = 32'(100 + id); h[383:352] = 32'(7 * id);
    h[351:320] = 32'(LEN); h[319:288] = 32'hC0FFEE; h[287:256] = 32'(drops_now);
    h[255:128] = {8{16'h1234}};
    return h;
  endfunction
  task automatic send_event(int id, bit accepted, int drops_now);
    ev = '{event_id: 32'(id), time_sec: 32'(100 + id), time_ticks: 32'(7 * id)};
    evv = 1;
    if (accepted) expq.push_back({1'b0, hdr_word(id, drops_now)});
    @(posedge clk); #1; evv = 0;
    // I/Q words: every second clock
    for (int w = 0; w < LEN; w++) begin
      logic [WORD_W-1:0] d;
      for (int c = 0; c < NCH; c++) begin ii[c] = iq_t'(sample * 16 + c); qq[c] = -iq_t'(sample * 16 + c); end
      for (int c = 0; c < NCH; c++) begin d[64*c +: 32] = ii[c]; d[64*c+32 +: 32] = qq[c]; end
      sample++;
      iqv = 1;
      if (accepted) expq.push_back({w == LEN - 1, d});
      @(posedge clk); #1; iqv = 0;
      @(posedge clk); #1;
    end
    iqv = 1; @(posedge clk); #1; iqv = 0;   // samples between packets are not packed
    sample++;
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    fork
      forever begin @(posedge clk); #1 tready = ($urandom % 3 != 0) && !stall; end
    join_none
    send_event(0, 1, 0);
    send_event(1, 1, 0);
    while (expq.size() != 0) @(posedge clk);
    chk(drops == 0, "no drops yet");
    // stall: 16 words hold two 6-word packets; the third and fourth are dropped
    stall = 1;
    repeat (3) @(posedge clk);
    send_event(2, 1, 0);
    send_event(3, 1, 0);
    send_event(4, 0, 0);
    send_event(5, 0, 0);
    chk(drops == 16'd2, $sformatf("drops %0d", drops));
    stall = 0;
    while (expq.size() != 0) @(posedge clk);
    send_event(6, 1, 2);
    while (expq.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    chk(!tvalid, "fifo empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  bit stall = 0;
endmodule

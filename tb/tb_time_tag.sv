// tb_time_tag: PPS every 50 clocks, a broadcast time before the third PPS,
// and triggers at chosen clocks. Each event must carry the next event ID,
// the seconds count (free-running, then the broadcast value, then counting
// on) and the clocks since the last PPS, one clock after the trigger.
module tb_time_tag;
  import bpm_pkg::*;
  logic clk = 0, rst = 1, pps = 0, trig = 0, bv = 0, ev;
  logic [31:0] bsec = '0, tsec;
  event_tag_t e;
  int checks = 0, failures = 0;
  time_tag dut (.clk, .rst, .pps_i(pps), .trigger_i(trig), .bcast_valid_i(bv), .bcast_sec_i(bsec),
                .event_valid_o(ev), .event_o(e), .time_sec_o(tsec));
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
    // model
    int t = 0, last_pps = -1, sec = 0, id = 0, pend = 0, nsec = 0, exp_ticks;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (t = 0; t < 400; t++) begin
      pps  = (t % 50 == 10);
      bv   = (t == 75);
      bsec = 32'd1000;
      trig = (t % 37 == 5) || (t == 10) || (t == 11);
      @(posedge clk); #1;
      if (trig) begin
        exp_ticks = (last_pps < 0) ? t : t - last_pps - 1;
        chk(ev, "event valid");
        chk(e.event_id == 32'(id), $sformatf("event id %0d exp %0d", e.event_id, id));
        chk(e.time_sec == 32'(sec), $sformatf("sec %0d exp %0d at t=%0d", e.time_sec, sec, t));
        chk(e.time_ticks == 32'(exp_ticks), $sformatf("ticks %0d exp %0d at t=%0d", e.time_ticks, exp_ticks, t));
        id++;
      end else chk(!ev, "no event");
      if (bv) begin pend = 1; nsec = 1000; end
      if (pps) begin
        last_pps = t;
        if (pend) begin sec = nsec; pend = 0; end else sec++;
      end
    end
    chk(tsec == 32'(sec), "final seconds");
    chk(id > 10, "events seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// time_tag: event time tagging from Trigger, PPS and broadcast time.
// time_sec counts seconds: a broadcast time (bcast_valid_i/bcast_sec_i, the
// second that the next PPS starts) is loaded at the next PPS; without one the
// counter steps by one at each PPS. time_ticks counts clocks since the last
// PPS. Each trigger_i pulse latches {event_id, time_sec, time_ticks} into
// event_o with event_valid_o one clock later; the event ID starts at 0 after
// reset and increments per trigger. The paper names the three inputs and the
// header contents; the counting scheme is this design's choice (sub-ns
// tagging by White Rabbit hardware is outside this block).
module time_tag
  import bpm_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        pps_i,
  input  logic        trigger_i,
  input  logic        bcast_valid_i,
  input  logic [31:0] bcast_sec_i,
  output logic        event_valid_o,
  output event_tag_t  event_o,
  output logic [31:0] time_sec_o
);
  logic [31:0] sec, ticks, event_id, next_sec;
  logic        bcast_pend;

  always_ff @(posedge clk) begin
    if (rst) begin
      sec <= '0; ticks <= '0; event_id <= '0; bcast_pend <= 1'b0; next_sec <= '0;
      event_valid_o <= 1'b0; event_o <= '0;
    end else begin
      if (bcast_valid_i) begin
        bcast_pend <= 1'b1;
        next_sec   <= bcast_sec_i;
      end
      if (pps_i) begin
        ticks <= '0;
        if (bcast_pend || bcast_valid_i) begin
          sec        <= bcast_valid_i ? bcast_sec_i : next_sec;
          bcast_pend <= 1'b0;
        end else begin
          sec <= sec + 32'd1;
        end
      end else begin
        ticks <= ticks + 32'd1;
      end
      event_valid_o <= trigger_i;
      if (trigger_i) begin
        event_o  <= '{event_id: event_id, time_sec: sec, time_ticks: ticks};
        event_id <= event_id + 32'd1;
      end
    end
  end
  assign time_sec_o = sec;
endmodule

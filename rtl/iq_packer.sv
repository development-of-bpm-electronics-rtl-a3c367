// iq_packer: frames the decimated I/Q data into packets, one per trigger.
// A decimated sample of all NCH channels is one 512-bit word: channel c holds
// I in bits [64c+31:64c] and Q in bits [64c+63:64c+32]. When an event arrives
// from the time tagger, the packer checks that its FIFO has room for the
// whole packet (header + iq_len_i words). If so it writes the 512-bit header
// and then the next iq_len_i I/Q words, the last one flagged with tlast; if
// not, the packet is dropped whole and drops_o counts it, so the stream never
// carries a truncated packet. The FIFO (FIFO_DEPTH words) absorbs the
// difference between the 8 Gbit/s I/Q rate and the 3.2 Gbit/s DMA. Output is
// an AXI4-Stream style valid/ready interface at the 62.5 MHz clock.
// The paper gives the word width, the clock and the header contents; FIFO
// size, drop policy and word layout are this design's choices.
module iq_packer
  import bpm_pkg::*;
#(
  parameter int unsigned NCH_P      = NCH,
  parameter int unsigned FIFO_DEPTH = 8192
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               event_valid_i,
  input  event_tag_t         event_i,
  input  logic [15:0]        device_id_i,
  input  logic [7:0]         ratio_i,
  input  logic [31:0]        config_i,
  input  logic [127:0]       cal_phase_i,
  input  logic [31:0]        iq_len_i,
  input  logic               iq_valid_i,
  input  iq_t                i_i [NCH_P],
  input  iq_t                q_i [NCH_P],
  output logic [WORD_W-1:0]  m_tdata,
  output logic               m_tvalid,
  output logic               m_tlast,
  input  logic               m_tready,
  output logic [15:0]        drops_o
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;
  logic              active;
  logic [31:0]       remaining;
  logic              push, full, fifo_valid;
  logic [WORD_W:0]   din, dout;
  logic [CW-1:0]     count;
  logic [WORD_W-1:0] iq_word;
  pkt_header_t       hdr;

  always_comb begin
    iq_word = '0;
    for (int c = 0; c < NCH_P; c++) begin
      iq_word[64*c +: 32]      = i_i[c];
      iq_word[64*c + 32 +: 32] = q_i[c];
    end
    hdr = '{magic: HDR_MAGIC, device_id: device_id_i, data_type: DT_IQ, attr: ratio_i,
            reserved0: '0, event_id: event_i.event_id, time_sec: event_i.time_sec,
            time_ticks: event_i.time_ticks, event_size: iq_len_i, config_word: config_i,
            diag: {16'd0, drops_o}, cal_phase: cal_phase_i, reserved1: '0};
  end

  // The header is written in the event cycle, data words afterwards.
  logic accept;
  assign accept = event_valid_i && !active && iq_len_i != 0 &&
                  (33'(FIFO_DEPTH) - 33'(count)) >= (33'(iq_len_i) + 33'd1);

  always_comb begin
    push = 1'b0;
    din  = '0;
    if (accept) begin
      push = 1'b1;
      din  = {1'b0, WORD_W'(hdr)};
    end else if (active && iq_valid_i) begin
      push = 1'b1;
      din  = {remaining == 32'd1, iq_word};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0; remaining <= '0; drops_o <= '0;
    end else begin
      if (accept) begin
        active    <= 1'b1;
        remaining <= iq_len_i;
      end else if (event_valid_i && !active) begin
        drops_o <= drops_o + 16'd1;
      end
      if (active && iq_valid_i) begin
        remaining <= remaining - 32'd1;
        if (remaining == 32'd1) active <= 1'b0;
      end
    end
  end

  sync_fifo #(.WIDTH(WORD_W+1), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .push_i(push), .din_i(din), .pop_i(m_tready),
    .dout_o(dout), .valid_o(fifo_valid), .full_o(full), .count_o(count)
  );
  assign m_tvalid = fifo_valid;
  assign m_tdata  = dout[WORD_W-1:0];
  assign m_tlast  = dout[WORD_W];

  a_no_full_push: assert property (@(posedge clk) disable iff (rst) !(push && full));
endmodule

// raw_packer: frames raw ADC data into packets, one per trigger.
// The NCH x 64-bit raw sample bus (four 16-bit samples per channel per
// clock, 32 Gbit/s) is one 512-bit word per clock, channel c in bits
// [64c+63:64c], oldest sample in the low 16 bits. On an event the packer
// emits the 512-bit header in the event cycle and then raw_len_i words of the
// following clocks, the last flagged with m_tlast. There is no back-pressure:
// the consumer (the snapshot writer into PL DDR) takes one word per clock.
// An event that arrives during a packet is ignored and counted in busy_o.
// Word width and rate follow the paper; header and word layout are this
// design's choices. The paper runs this path on the DDR controller clock
// (ui_clk); here it shares the ADC clock.
module raw_packer
  import bpm_pkg::*;
#(
  parameter int unsigned NCH_P = NCH
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               event_valid_i,
  input  event_tag_t         event_i,
  input  logic [15:0]        device_id_i,
  input  logic [31:0]        raw_len_i,
  input  logic               adc_valid_i,
  input  adc_t               adc_i [NCH_P][SPC],
  output logic [WORD_W-1:0]  m_tdata,
  output logic               m_tvalid,
  output logic               m_tlast,
  output logic [15:0]        busy_o
);
  logic        active;
  logic [31:0] remaining;
  logic [WORD_W-1:0] raw_word;
  pkt_header_t hdr;

  always_comb begin
    raw_word = '0;
    for (int c = 0; c < NCH_P; c++)
      for (int k = 0; k < SPC; k++)
        raw_word[64*c + 16*k +: 16] = adc_i[c][k];
    hdr = '{magic: HDR_MAGIC, device_id: device_id_i, data_type: DT_RAW, attr: 8'd1,
            reserved0: '0, event_id: event_i.event_id, time_sec: event_i.time_sec,
            time_ticks: event_i.time_ticks, event_size: raw_len_i, config_word: '0,
            diag: {16'd0, busy_o}, cal_phase: '0, reserved1: '0};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0; remaining <= '0; busy_o <= '0;
      m_tvalid <= 1'b0; m_tlast <= 1'b0; m_tdata <= '0;
    end else begin
      m_tvalid <= 1'b0;
      m_tlast  <= 1'b0;
      if (event_valid_i && !active && raw_len_i != 0) begin
        active    <= 1'b1;
        remaining <= raw_len_i;
        m_tvalid  <= 1'b1;
        m_tdata   <= WORD_W'(hdr);
      end else begin
        if (event_valid_i) busy_o <= busy_o + 16'd1;
        if (active && adc_valid_i) begin
          m_tvalid  <= 1'b1;
          m_tdata   <= raw_word;
          m_tlast   <= (remaining == 32'd1);
          remaining <= remaining - 32'd1;
          if (remaining == 32'd1) active <= 1'b0;
        end
      end
    end
  end
endmodule

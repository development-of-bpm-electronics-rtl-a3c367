// dma_mux: routes either packet stream to the 32-bit, 100 MHz DMA channel.
// The I/Q stream (s0, 62.5 MHz clock) and the raw snapshot stream (s1, DDR
// controller clock) each enter an asynchronous FIFO into the DMA clock
// domain. There a two-input multiplexer takes whole packets from the FIFO
// chosen by sel_i (0 = I/Q, 1 = raw; re-timed through two flip-flops, so it
// may be driven from any clock domain): the choice is made when a packet's
// first word is taken and held until that packet's tlast, so packets are
// never cut or interleaved. A width converter sends each 512-bit word as
// sixteen 32-bit beats, least significant first, with m_tlast on the last
// beat of a packet's last word: 3.2 Gbit/s, one beat per DMA clock. The
// unselected stream waits in its FIFO and back-pressures its source.
// The paper gives the multiplexer, the 32-bit width and the 100 MHz clock;
// the switching rule, the FIFOs and the beat order are this design's choices.
module dma_mux
  import bpm_pkg::*;
#(
  parameter int unsigned CDC_DEPTH = 16,
  parameter int unsigned OUT_W     = 32
) (
  input  logic               s0_clk,
  input  logic               s0_rst,
  input  logic [WORD_W-1:0]  s0_tdata,
  input  logic               s0_tvalid,
  input  logic               s0_tlast,
  output logic               s0_tready,
  input  logic               s1_clk,
  input  logic               s1_rst,
  input  logic [WORD_W-1:0]  s1_tdata,
  input  logic               s1_tvalid,
  input  logic               s1_tlast,
  output logic               s1_tready,
  input  logic               dma_clk,
  input  logic               dma_rst,
  input  logic               sel_i,
  output logic [OUT_W-1:0]   m_tdata,
  output logic               m_tvalid,
  output logic               m_tlast,
  input  logic               m_tready
);
  localparam int unsigned BEATS = WORD_W / OUT_W;
  localparam int unsigned BW    = $clog2(BEATS);
  logic [1:0]      full, fvalid, fpop;
  logic [WORD_W:0] fdout [2];
  logic            sel_r1, sel_r2, in_pkt, cur_sel, use_sel, word_done;
  logic [BW-1:0]   beat;

  async_fifo #(.WIDTH(WORD_W+1), .DEPTH(CDC_DEPTH)) u_cdc0 (
    .wclk(s0_clk), .wrst(s0_rst), .push_i(s0_tvalid), .din_i({s0_tlast, s0_tdata}), .full_o(full[0]),
    .rclk(dma_clk), .rrst(dma_rst), .pop_i(fpop[0]), .dout_o(fdout[0]), .valid_o(fvalid[0])
  );
  async_fifo #(.WIDTH(WORD_W+1), .DEPTH(CDC_DEPTH)) u_cdc1 (
    .wclk(s1_clk), .wrst(s1_rst), .push_i(s1_tvalid), .din_i({s1_tlast, s1_tdata}), .full_o(full[1]),
    .rclk(dma_clk), .rrst(dma_rst), .pop_i(fpop[1]), .dout_o(fdout[1]), .valid_o(fvalid[1])
  );
  assign s0_tready = !full[0];
  assign s1_tready = !full[1];

  // Packet-boundary multiplexer and 512-to-32 width converter (DMA clock).
  assign use_sel   = in_pkt ? cur_sel : sel_r2;
  assign m_tvalid  = fvalid[use_sel];
  assign m_tdata   = fdout[use_sel][beat*OUT_W +: OUT_W];
  assign word_done = m_tvalid && m_tready && (beat == BW'(BEATS-1));
  assign m_tlast   = fdout[use_sel][WORD_W] && (beat == BW'(BEATS-1));
  assign fpop[0]   = word_done && !use_sel;
  assign fpop[1]   = word_done &&  use_sel;

  always_ff @(posedge dma_clk) begin
    if (dma_rst) begin
      sel_r1 <= 1'b0; sel_r2 <= 1'b0; in_pkt <= 1'b0; cur_sel <= 1'b0; beat <= '0;
    end else begin
      sel_r1 <= sel_i;
      sel_r2 <= sel_r1;
      if (m_tvalid && m_tready) begin
        beat    <= beat + 1'b1;
        cur_sel <= use_sel;
        in_pkt  <= !(word_done && fdout[use_sel][WORD_W]);
      end
    end
  end
endmodule

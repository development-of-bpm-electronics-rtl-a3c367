// bpm_top: programmable-logic signal processing of one BPM digitiser board.
// The 8 ADC channels (four 16-bit samples each per 62.5 MHz clock, from the
// JESD204B receiver) feed two paths:
//  * the DDC (shared polyphase NCO, per-channel mixer, CIC, decimator, FIR),
//    whose I/Q words iq_packer frames into one packet per trigger;
//  * raw_packer, whose raw packets cross into the DDR controller clock
//    (ui_clk) where the snapshot block stores one in the PL DDR when Capture
//    is armed and plays it back afterwards.
// time_tag turns Trigger, PPS and broadcast time into the event ID and time
// stamp of each packet header. dma_mux sends either stream to the 32-bit,
// 100 MHz DMA channel. axil_xbar decodes the processor's AXI4-Lite accesses
// to app_regs (port M0) and to the SDIO-PLL, SDIO-ADC and JESD204B cores,
// which are outside this design (ports M1..M3 leave the top). phase_autocal
// switches the AFE inputs to the reference copy in beam gaps whenever the
// temperature moved by more than T_sh, and its per-channel reference phases
// go into every I/Q header; with CTRL bit 5 set, phase_rotate also turns the
// I/Q by those phases before packing (drift compensated in the FPGA, flagged
// in header attr bit 7). Clocks: clk (62.5 MHz, the ADC word clock) for
// the DDC, packers, time tag, registers and calibration; ui_clk (the DDR
// controller's user clock, at least 62.5 MHz so that the 32 Gbit/s raw
// stream fits) for the snapshot and the memory port, whose status outputs
// (snap_busy, snap_truncated) are in that domain; dma_clk (100 MHz) for the
// DMA stream. The block split, widths, clocks and data rates follow the
// paper's FPGA diagram; the register map, header layout, memory port and the
// clock-crossing FIFOs are this design's choices.
module bpm_top
  import bpm_pkg::*;
#(
  parameter int unsigned NTAPS      = 8,
  parameter int unsigned FIFO_DEPTH = 8192,
  parameter int unsigned ADDR_W     = 24,
  parameter int unsigned MEM_WORDS  = 1 << 24,
  parameter int unsigned SETTLE     = 64
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               ui_clk,
  input  logic               ui_rst,
  input  logic               dma_clk,
  input  logic               dma_rst,
  // JESD204B receiver output
  input  logic               adc_valid,
  input  adc_t               adc_data [NCH][SPC],
  // timing
  input  logic               trigger,
  input  logic               pps,
  input  logic               bcast_valid,
  input  logic [31:0]        bcast_sec,
  input  logic               beam,
  // RTM monitoring and control
  input  logic signed [15:0] temperature,
  output logic               cal_switch,
  // processor AXI4-Lite (S0) and the external peripheral ports M1..M3
  input  axil_req_t          s_axil_req,
  output axil_rsp_t          s_axil_rsp,
  output axil_req_t          periph_req [3],
  input  axil_rsp_t          periph_rsp [3],
  // PL DDR word port (ui_clk)
  output logic               mem_we,
  output logic [ADDR_W-1:0]  mem_addr,
  output logic [WORD_W-1:0]  mem_wdata,
  output logic               mem_re,
  output logic [ADDR_W-1:0]  mem_raddr,
  input  logic               mem_rvalid,
  input  logic [WORD_W-1:0]  mem_rdata,
  // DMA stream (dma_clk)
  output logic [31:0]        dma_tdata,
  output logic               dma_tvalid,
  output logic               dma_tlast,
  input  logic               dma_tready,
  // status
  output logic [15:0]        iq_drops,
  output logic [15:0]        cal_count,
  output logic               cal_busy,
  output logic               snap_busy,
  output logic [15:0]        raw_overlaps,
  output logic [15:0]        raw_lost,
  output logic [15:0]        snap_truncated,
  output logic [31:0]        time_sec
);
  // ---------------- registers
  axil_req_t xreq [4];
  axil_rsp_t xrsp [4];
  logic        stream_sel, capture, ddc_sync, autocal_en, autocal_force, comp_en;
  logic [31:0] phase_inc, iq_len, raw_len;
  logic [7:0]  ratio;
  logic [15:0] device_id, cal_tsh;
  coef_t       coef [NTAPS];

  axil_xbar #(.NM(4)) u_xbar (
    .clk, .rst, .s_req(s_axil_req), .s_rsp(s_axil_rsp), .m_req(xreq), .m_rsp(xrsp)
  );
  for (genvar p = 0; p < 3; p++) begin : g_periph
    assign periph_req[p] = xreq[p+1];
    assign xrsp[p+1]     = periph_rsp[p];
  end

  app_regs #(.NTAPS(NTAPS)) u_regs (
    .clk, .rst, .s_req(xreq[0]), .s_rsp(xrsp[0]),
    .stream_sel_o(stream_sel), .capture_o(capture), .ddc_sync_o(ddc_sync),
    .autocal_en_o(autocal_en), .autocal_force_o(autocal_force), .comp_en_o(comp_en),
    .phase_inc_o(phase_inc), .ratio_o(ratio), .iq_len_o(iq_len), .raw_len_o(raw_len),
    .device_id_o(device_id), .cal_tsh_o(cal_tsh), .coef_o(coef),
    .iq_drops_i(iq_drops), .cal_count_i(cal_count), .temp_i(temperature)
  );

  // ---------------- DDC
  logic iq_valid;
  iq_t  iq_i [NCH], iq_q [NCH];
  ddc #(.NTAPS(NTAPS)) u_ddc (
    .clk, .rst, .sync_i(ddc_sync), .phase_inc_i(phase_inc), .ratio_i(ratio), .coef_i(coef),
    .adc_valid_i(adc_valid), .adc_i(adc_data),
    .iq_valid_o(iq_valid), .i_o(iq_i), .q_o(iq_q)
  );

  // ---------------- time tag
  logic       ev_valid;
  event_tag_t ev;
  time_tag u_tag (
    .clk, .rst, .pps_i(pps), .trigger_i(trigger), .bcast_valid_i(bcast_valid),
    .bcast_sec_i(bcast_sec), .event_valid_o(ev_valid), .event_o(ev), .time_sec_o(time_sec)
  );

  // ---------------- self-calibration
  logic [15:0]  cal_phase [NCH];
  logic [127:0] cal_phase_flat;
  phase_autocal #(.SETTLE(SETTLE)) u_cal (
    .clk, .rst, .enable_i(autocal_en), .force_i(autocal_force), .temp_i(temperature),
    .tsh_i(cal_tsh), .beam_i(beam), .iq_valid_i(iq_valid), .i_i(iq_i), .q_i(iq_q),
    .cal_switch_o(cal_switch), .cal_phase_o(cal_phase), .cal_count_o(cal_count),
    .busy_o(cal_busy)
  );
  always_comb
    for (int c = 0; c < NCH; c++) cal_phase_flat[16*c +: 16] = cal_phase[c];

  // ---------------- drift compensation: I/Q turned by minus the reference
  // phase when CTRL[5] is set; header attr bit 7 then says so
  logic rot_valid, pk_valid;
  iq_t  rot_i [NCH], rot_q [NCH], pk_i [NCH], pk_q [NCH];
  phase_rotate u_rot (
    .clk, .rst, .valid_i(iq_valid), .i_i(iq_i), .q_i(iq_q), .angle_i(cal_phase),
    .valid_o(rot_valid), .i_o(rot_i), .q_o(rot_q)
  );
  assign pk_valid = comp_en ? rot_valid : iq_valid;
  assign pk_i     = comp_en ? rot_i : iq_i;
  assign pk_q     = comp_en ? rot_q : iq_q;

  // ---------------- packing
  logic [WORD_W-1:0] iqp_tdata, rawp_tdata, snap_tdata;
  logic iqp_tvalid, iqp_tlast, iqp_tready;
  logic rawp_tvalid, rawp_tlast;
  logic snap_tvalid, snap_tlast, snap_tready;

  iq_packer #(.FIFO_DEPTH(FIFO_DEPTH)) u_iqp (
    .clk, .rst, .event_valid_i(ev_valid), .event_i(ev), .device_id_i(device_id),
    .ratio_i({comp_en, ratio[6:0]}), .config_i(phase_inc), .cal_phase_i(cal_phase_flat), .iq_len_i(iq_len),
    .iq_valid_i(pk_valid), .i_i(pk_i), .q_i(pk_q),
    .m_tdata(iqp_tdata), .m_tvalid(iqp_tvalid), .m_tlast(iqp_tlast), .m_tready(iqp_tready),
    .drops_o(iq_drops)
  );

  raw_packer u_rawp (
    .clk, .rst, .event_valid_i(ev_valid), .event_i(ev), .device_id_i(device_id),
    .raw_len_i(raw_len), .adc_valid_i(adc_valid), .adc_i(adc_data),
    .m_tdata(rawp_tdata), .m_tvalid(rawp_tvalid), .m_tlast(rawp_tlast), .busy_o(raw_overlaps)
  );

  // raw words cross into the DDR controller clock; the snapshot takes one
  // word per ui_clk, so the FIFO only fills if ui_clk is slower than clk
  logic [WORD_W:0] rawx_dout;
  logic            rawx_full, rawx_valid, capture_ui;
  always_ff @(posedge clk) begin
    if (rst)                          raw_lost <= '0;
    else if (rawp_tvalid && rawx_full) raw_lost <= raw_lost + 16'd1;
  end
  async_fifo #(.WIDTH(WORD_W+1), .DEPTH(16)) u_rawx (
    .wclk(clk), .wrst(rst), .push_i(rawp_tvalid), .din_i({rawp_tlast, rawp_tdata}), .full_o(rawx_full),
    .rclk(ui_clk), .rrst(ui_rst), .pop_i(rawx_valid), .dout_o(rawx_dout), .valid_o(rawx_valid)
  );
  pulse_sync u_capsync (
    .src_clk(clk), .src_rst(rst), .pulse_i(capture), .dst_clk(ui_clk), .dst_rst(ui_rst), .pulse_o(capture_ui)
  );

  snapshot #(.ADDR_W(ADDR_W), .MEM_WORDS(MEM_WORDS)) u_snap (
    .clk(ui_clk), .rst(ui_rst), .capture_i(capture_ui),
    .s_tdata(rawx_dout[WORD_W-1:0]), .s_tvalid(rawx_valid), .s_tlast(rawx_dout[WORD_W]),
    .mem_we, .mem_addr, .mem_wdata, .mem_re, .mem_raddr, .mem_rvalid, .mem_rdata,
    .m_tdata(snap_tdata), .m_tvalid(snap_tvalid), .m_tlast(snap_tlast), .m_tready(snap_tready),
    .busy_o(snap_busy), .truncated_o(snap_truncated)
  );

  // ---------------- DMA multiplexer
  dma_mux u_mux (
    .s0_clk(clk), .s0_rst(rst),
    .s0_tdata(iqp_tdata), .s0_tvalid(iqp_tvalid), .s0_tlast(iqp_tlast), .s0_tready(iqp_tready),
    .s1_clk(ui_clk), .s1_rst(ui_rst),
    .s1_tdata(snap_tdata), .s1_tvalid(snap_tvalid), .s1_tlast(snap_tlast), .s1_tready(snap_tready),
    .dma_clk, .dma_rst, .sel_i(stream_sel),
    .m_tdata(dma_tdata), .m_tvalid(dma_tvalid), .m_tlast(dma_tlast), .m_tready(dma_tready)
  );
endmodule

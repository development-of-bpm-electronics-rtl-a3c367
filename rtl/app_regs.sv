// app_regs: AXI4-Lite register file with the application settings.
// Sits on crossbar port M0 in place of the GPIO core and the "Init App
// Registers" of the FPGA diagram. Writes complete when address and data are
// both valid (bvalid the next clock); reads return rdata the clock after
// arvalid. Register map (byte offsets, see bpm_pkg):
//   0x00 ID (RO)            0x04 CTRL: [0] stream select (0 I/Q, 1 raw),
//   [1] capture, [2] DDC sync, [4] force calibration (these three write-1
//   pulses), [3] self-calibration enable, [5] drift compensation of the
//   I/Q stream (off after reset)
//   0x08 NCO phase increment  0x0C decimation ratio  0x10 I/Q packet words
//   0x14 raw packet words     0x18 device ID          0x1C T_sh threshold
//   0x20 status (RO): [15:0] dropped I/Q packets, [31:16] calibrations
//   0x24 temperature (RO)     0x40..0x5C FIR taps 0..7 (Q1.15)
// Reset values: 162.5 MHz at 250 MSPS, ratio 4 (decimation 16 as in the
// paper), T_sh 20 (0.2 C at 0.01 C per count, the paper's setting), FIR taps
// 1/8 each. The map itself is this design's choice.
module app_regs
  import bpm_pkg::*;
#(
  parameter int unsigned NTAPS       = 8,
  parameter logic [7:0]  RATIO_RST   = 8'd4,
  parameter logic [31:0] IQ_LEN_RST  = 32'd16,
  parameter logic [31:0] RAW_LEN_RST = 32'd256,
  parameter logic [15:0] TSH_RST     = 16'd20
) (
  input  logic        clk,
  input  logic        rst,
  input  axil_req_t   s_req,
  output axil_rsp_t   s_rsp,
  output logic        stream_sel_o,
  output logic        capture_o,
  output logic        ddc_sync_o,
  output logic        autocal_en_o,
  output logic        autocal_force_o,
  output logic        comp_en_o,
  output logic [31:0] phase_inc_o,
  output logic [7:0]  ratio_o,
  output logic [31:0] iq_len_o,
  output logic [31:0] raw_len_o,
  output logic [15:0] device_id_o,
  output logic [15:0] cal_tsh_o,
  output coef_t       coef_o [NTAPS],
  input  logic [15:0] iq_drops_i,
  input  logic [15:0] cal_count_i,
  input  logic [15:0] temp_i
);
  localparam logic [31:0] ID_VALUE = 32'hB9B0_0001;
  logic bvalid, rvalid;
  logic [31:0] rdata;
  logic wr;
  assign wr = s_req.awvalid && s_req.wvalid && !bvalid;

  always_ff @(posedge clk) begin
    if (rst) begin
      bvalid <= 1'b0; rvalid <= 1'b0; rdata <= '0;
      stream_sel_o <= 1'b0; capture_o <= 1'b0; ddc_sync_o <= 1'b0;
      autocal_en_o <= 1'b1; autocal_force_o <= 1'b0; comp_en_o <= 1'b0;
      phase_inc_o <= PHASE_INC_162M5; ratio_o <= RATIO_RST;
      iq_len_o <= IQ_LEN_RST; raw_len_o <= RAW_LEN_RST;
      device_id_o <= '0; cal_tsh_o <= TSH_RST;
      for (int k = 0; k < NTAPS; k++) coef_o[k] <= coef_t'(32768 / NTAPS);
    end else begin
      capture_o <= 1'b0; ddc_sync_o <= 1'b0; autocal_force_o <= 1'b0;
      if (wr) begin
        bvalid <= 1'b1;
        unique casez (s_req.awaddr[7:0])
          REG_CTRL: begin
            stream_sel_o    <= s_req.wdata[0];
            capture_o       <= s_req.wdata[1];
            ddc_sync_o      <= s_req.wdata[2];
            autocal_en_o    <= s_req.wdata[3];
            autocal_force_o <= s_req.wdata[4];
            comp_en_o       <= s_req.wdata[5];
          end
          REG_PHASE_INC: phase_inc_o <= s_req.wdata;
          REG_RATIO:     if (s_req.wdata[7:0] != 0 && s_req.wdata[7:0] <= 8'd16) ratio_o <= s_req.wdata[7:0];
          REG_IQ_LEN:    iq_len_o    <= s_req.wdata;
          REG_RAW_LEN:   raw_len_o   <= s_req.wdata;
          REG_DEV_ID:    device_id_o <= s_req.wdata[15:0];
          REG_CAL_TSH:   cal_tsh_o   <= s_req.wdata[15:0];
          8'b010?_??00:  if (32'(s_req.awaddr[4:2]) < NTAPS) coef_o[s_req.awaddr[4:2]] <= coef_t'(s_req.wdata[15:0]);
          default: ;
        endcase
      end else if (s_req.bready) begin
        bvalid <= 1'b0;
      end
      if (s_req.arvalid && !rvalid) begin
        rvalid <= 1'b1;
        unique casez (s_req.araddr[7:0])
          REG_ID:        rdata <= ID_VALUE;
          REG_CTRL:      rdata <= {26'd0, comp_en_o, 1'b0, autocal_en_o, 2'b00, stream_sel_o};
          REG_PHASE_INC: rdata <= phase_inc_o;
          REG_RATIO:     rdata <= {24'd0, ratio_o};
          REG_IQ_LEN:    rdata <= iq_len_o;
          REG_RAW_LEN:   rdata <= raw_len_o;
          REG_DEV_ID:    rdata <= {16'd0, device_id_o};
          REG_CAL_TSH:   rdata <= {16'd0, cal_tsh_o};
          REG_STATUS:    rdata <= {cal_count_i, iq_drops_i};
          REG_TEMP:      rdata <= {16'd0, temp_i};
          8'b010?_??00:  rdata <= (32'(s_req.araddr[4:2]) < NTAPS) ? 32'(signed'(coef_o[s_req.araddr[4:2]])) : '0;
          default:       rdata <= '0;
        endcase
      end else if (s_req.rready) begin
        rvalid <= 1'b0;
      end
    end
  end

  always_comb begin
    s_rsp = '0;
    s_rsp.awready = wr;
    s_rsp.wready  = wr;
    s_rsp.bvalid  = bvalid;
    s_rsp.bresp   = RESP_OKAY;
    s_rsp.arready = !rvalid;
    s_rsp.rvalid  = rvalid;
    s_rsp.rdata   = rdata;
    s_rsp.rresp   = RESP_OKAY;
  end
endmodule

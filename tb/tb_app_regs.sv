// tb_app_regs: reads the reset values (ID, 162.5 MHz increment, ratio 4,
// T_sh 20, taps 4096, calibration on, compensation off), writes every setting and reads it back, checks that
// capture/sync/force are one-clock pulses, that an illegal ratio is refused,
// and that the status and temperature inputs read back.
module tb_app_regs;
  import bpm_pkg::*;
  logic clk = 0, rst = 1;
  axil_req_t sreq = '0;
  axil_rsp_t srsp;
  logic sel, cap, sync, en, force_cal, comp;
  logic [31:0] inc, iql, rawl;
  logic [7:0] ratio;
  logic [15:0] dev, tsh;
  coef_t coef [8];
  int checks = 0, failures = 0, ncap = 0, nsync = 0, nforce = 0;
  app_regs dut (.clk, .rst, .s_req(sreq), .s_rsp(srsp), .stream_sel_o(sel), .capture_o(cap),
                .ddc_sync_o(sync), .autocal_en_o(en), .autocal_force_o(force_cal), .comp_en_o(comp), .phase_inc_o(inc),
                .ratio_o(ratio), .iq_len_o(iql), .raw_len_o(rawl), .device_id_o(dev), .cal_tsh_o(tsh),
                .coef_o(coef), .iq_drops_i(16'd7), .cal_count_i(16'd3), .temp_i(16'd4567));
  always #5 clk = ~clk;
  always @(posedge clk) if (!rst) begin ncap += int'(cap); nsync += int'(sync); nforce += int'(force_cal); end
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(posedge clk); #1;
    sreq.awaddr = a; sreq.awvalid = 1; sreq.wdata = d; sreq.wstrb = 4'hF; sreq.wvalid = 1; sreq.bready = 1;
    do @(posedge clk); while (!srsp.awready);
    #1 sreq.awvalid = 0; sreq.wvalid = 0;
    while (!srsp.bvalid) @(posedge clk);
    @(posedge clk); #1 sreq.bready = 0;
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    sreq.araddr = a; sreq.arvalid = 1; sreq.rready = 1;
    do @(posedge clk); while (!srsp.arready);
    #1 sreq.arvalid = 0;
    while (!srsp.rvalid) @(posedge clk);
    d = srsp.rdata;
    @(posedge clk); #1 sreq.rready = 0;
  endtask
  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst <= 0;
    rd(32'h00, d); chk(d == 32'hB9B0_0001, "id");
    rd(32'h08, d); chk(d == 32'd2791728742 && inc == d, "phase inc reset");
    rd(32'h0C, d); chk(d == 32'd4 && ratio == 8'd4, "ratio reset");
    rd(32'h1C, d); chk(d == 32'd20, "tsh reset");
    rd(32'h44, d); chk(d == 32'd4096 && coef[1] == 16'sd4096, "tap reset");
    chk(en && !sel && !comp, "ctrl reset");
    wr(32'h08, 32'h1234_5678); rd(32'h08, d); chk(d == 32'h1234_5678 && inc == d, "phase inc");
    wr(32'h0C, 32'd8);         rd(32'h0C, d); chk(d == 32'd8 && ratio == 8'd8, "ratio");
    wr(32'h0C, 32'd0);         rd(32'h0C, d); chk(d == 32'd8, "ratio 0 refused");
    wr(32'h0C, 32'd17);        rd(32'h0C, d); chk(d == 32'd8, "ratio 17 refused");
    wr(32'h10, 32'd100);       rd(32'h10, d); chk(d == 32'd100 && iql == d, "iq len");
    wr(32'h14, 32'd300);       rd(32'h14, d); chk(d == 32'd300 && rawl == d, "raw len");
    wr(32'h18, 32'hABCD);      rd(32'h18, d); chk(d == 32'hABCD && dev == 16'hABCD, "device id");
    wr(32'h1C, 32'd55);        rd(32'h1C, d); chk(d == 32'd55 && tsh == 16'd55, "tsh");
    for (int k = 0; k < 8; k++) wr(32'h40 + 4 * k, 32'(-100 * k));
    for (int k = 0; k < 8; k++) begin
      rd(32'h40 + 4 * k, d);
      chk(d == 32'(-100 * k) && coef[k] == coef_t'(-100 * k), $sformatf("tap %0d = %0d", k, signed'(d)));
    end
    wr(32'h04, 32'h1F);
    repeat (3) @(posedge clk);
    chk(ncap == 1 && nsync == 1 && nforce == 1, "single pulses");
    chk(sel && en && !cap && !sync, "ctrl levels");
    rd(32'h04, d); chk(d == 32'h9, "ctrl readback");
    wr(32'h04, 32'h20); chk(comp && !en && !sel, "drift compensation enable");
    rd(32'h04, d); chk(d == 32'h20, "ctrl readback with compensation");
    wr(32'h04, 32'h0); chk(!sel && !en && !comp, "ctrl cleared");
    rd(32'h20, d); chk(d == {16'd3, 16'd7}, "status");
    rd(32'h24, d); chk(d == 32'd4567, "temperature");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_axil_xbar: four register-memory subordinates, each with its own random
// ready/valid delays, behind the crossbar. Writes to every window must land
// only in that window's subordinate (with the full address), reads must
// return what was written, and an address beyond the last window must be
// answered with DECERR without any subordinate seeing it.
module tb_axil_xbar;
  import bpm_pkg::*;
  logic clk = 0, rst = 1;
  axil_req_t sreq = '0, mreq [4];
  axil_rsp_t srsp, mrsp [4];
  int checks = 0, failures = 0;
  axil_xbar dut (.clk, .rst, .s_req(sreq), .s_rsp(srsp), .m_req(mreq), .m_rsp(mrsp));
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // subordinate models
  logic [31:0] mem [4][16];
  int          hits [4] = '{0, 0, 0, 0};
  for (genvar m = 0; m < 4; m++) begin : g_sub
    logic aw_got = 0, w_got = 0;
    logic [31:0] a, d;
    always @(posedge clk) if (rst) begin
      mrsp[m] <= '0; aw_got = 0; w_got = 0;
    end else begin
      mrsp[m].awready <= 0; mrsp[m].wready <= 0; mrsp[m].arready <= 0;
      if (mreq[m].awvalid && !aw_got && !mrsp[m].awready && $urandom % 2 == 1) begin
        mrsp[m].awready <= 1; aw_got = 1; a = mreq[m].awaddr;
        if (a[31:12] != 20'(m)) begin failures++; $display("FAIL port %0d got addr %h", m, a); end
      end
      if (mreq[m].wvalid && !w_got && !mrsp[m].wready && $urandom % 2 == 1) begin
        mrsp[m].wready <= 1; w_got = 1; d = mreq[m].wdata;
      end
      if (aw_got && w_got && !mrsp[m].bvalid) begin
        mem[m][a[5:2]] = d; hits[m]++;
        mrsp[m].bvalid <= 1; mrsp[m].bresp <= RESP_OKAY; aw_got = 0; w_got = 0;
      end else if (mrsp[m].bvalid && mreq[m].bready) mrsp[m].bvalid <= 0;
      if (mreq[m].arvalid && !mrsp[m].arready && !mrsp[m].rvalid && $urandom % 2 == 1) begin
        mrsp[m].arready <= 1; mrsp[m].rvalid <= 1; mrsp[m].rdata <= mem[m][mreq[m].araddr[5:2]];
        mrsp[m].rresp <= RESP_OKAY; hits[m]++;
      end else if (mrsp[m].rvalid && mreq[m].rready) mrsp[m].rvalid <= 0;
    end
  end
  task automatic wr(input logic [31:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(posedge clk); #1;
    sreq.awaddr = a; sreq.awvalid = 1; sreq.wdata = d; sreq.wstrb = 4'hF; sreq.wvalid = 1; sreq.bready = 1;
    do @(posedge clk); while (!(srsp.awready));
    #1 sreq.awvalid = 0; sreq.wvalid = 0;
    while (!srsp.bvalid) @(posedge clk);
    resp = srsp.bresp;
    @(posedge clk); #1 sreq.bready = 0;
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(posedge clk); #1;
    sreq.araddr = a; sreq.arvalid = 1; sreq.rready = 1;
    do @(posedge clk); while (!srsp.arready);
    #1 sreq.arvalid = 0;
    while (!srsp.rvalid) @(posedge clk);
    d = srsp.rdata; resp = srsp.rresp;
    @(posedge clk); #1 sreq.rready = 0;
  endtask
  initial begin
    logic [1:0] resp;
    logic [31:0] d;
    int hits0 [4];
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int m = 0; m < 4; m++)
      for (int r = 0; r < 4; r++) begin
        wr(32'(m * 4096 + r * 4), 32'(m * 100 + r), resp);
        chk(resp == RESP_OKAY, "write okay");
      end
    for (int m = 0; m < 4; m++)
      for (int r = 0; r < 4; r++) begin
        rd(32'(m * 4096 + r * 4), d, resp);
        chk(resp == RESP_OKAY && d == 32'(m * 100 + r), $sformatf("read m%0d r%0d = %0d", m, r, d));
      end
    for (int m = 0; m < 4; m++) chk(hits[m] == 8, $sformatf("hits %0d", hits[m]));
    hits0 = hits;
    wr(32'h0000_5000, 32'hDEAD, resp);
    chk(resp == RESP_DECERR, "write decerr");
    rd(32'h0001_0000, d, resp);
    chk(resp == RESP_DECERR, "read decerr");
    chk(hits == hits0, "no subordinate touched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

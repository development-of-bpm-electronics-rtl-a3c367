// tb_snapshot: packets pass by before Capture and are not stored; after a
// capture pulse (also one given in mid-packet) the next whole packet (header first) is written to the
// memory model and must come back in order, with tlast on its last word,
// under random back-pressure. A second capture with a short memory limit
// checks the truncation count.
module tb_snapshot;
  import bpm_pkg::*;
  localparam int AW = 24;
  logic clk = 0, rst = 1, cap = 0, sv = 0, sl = 0;
  logic [WORD_W-1:0] sd;
  logic we, re, rv, mtv, mtl, mtr = 0, busy;
  logic [AW-1:0] wa, ra;
  logic [WORD_W-1:0] wd, rd, mtd;
  logic [15:0] trunc;
  int checks = 0, failures = 0;
  logic [WORD_W:0] expq [$];
  snapshot #(.ADDR_W(AW), .MEM_WORDS(8)) dut (
    .clk, .rst, .capture_i(cap), .s_tdata(sd), .s_tvalid(sv), .s_tlast(sl),
    .mem_we(we), .mem_addr(wa), .mem_wdata(wd), .mem_re(re), .mem_raddr(ra),
    .mem_rvalid(rv), .mem_rdata(rd), .m_tdata(mtd), .m_tvalid(mtv), .m_tlast(mtl), .m_tready(mtr),
    .busy_o(busy), .truncated_o(trunc));
  ddr_model #(.ADDR_W(AW), .AW(8)) u_mem (.clk, .we, .addr(wa), .wdata(wd), .re, .raddr(ra), .rvalid(rv), .rdata(rd));
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    mtr <= ($urandom % 3) != 0;
    if (!rst && mtv && mtr) begin
      logic [WORD_W:0] w;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL unexpected word"); end
      else begin
        w = expq.pop_front();
        if ({mtl, mtd} != w) begin failures++; $display("FAIL readback mismatch"); end
      end
    end
  end
  task automatic send_pkt(int len, int tag, bit store, int limit);
    for (int w = 0; w < len; w++) begin
      #1;
      sv = 1; sd = {16'(tag), 480'(w), 16'hA5A5}; sl = (w == len - 1);
      if (store && w < limit) expq.push_back({(w == len - 1) || (w == limit - 1), sd});
      @(posedge clk);
    end
    #1 sv = 0; sl = 0;
    repeat (3) @(posedge clk);
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    send_pkt(4, 1, 0, 8);                // not armed
    chk(!busy, "idle without capture");
    fork
      send_pkt(4, 5, 0, 8);              // armed in mid-packet: this one is skipped
      begin @(posedge clk); #1 cap = 1; @(posedge clk); #1 cap = 0; end
    join
    chk(busy, "armed");
    send_pkt(5, 2, 1, 8);
    send_pkt(3, 3, 0, 8);                // arrives during readback: ignored
    wait (expq.size() == 0 && !busy);
    chk(trunc == 0, "no truncation");
    #1 cap = 1; @(posedge clk); #1 cap = 0;
    send_pkt(11, 4, 1, 8);               // longer than the 8-word memory
    wait (expq.size() == 0 && !busy);
    chk(trunc == 16'd1, "truncation counted");
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

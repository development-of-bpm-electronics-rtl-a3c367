// ddr_model: behavioural model of the PL DDR4 memory behind its controller,
// for testbenches only. Word port as used by snapshot: a write is stored in
// the clock it is presented; a read returns mem_rdata with mem_rvalid after a
// random latency of 2..5 clocks. Only the low AW address bits are decoded
// (the model holds 2^AW words).
module ddr_model #(
  parameter int unsigned ADDR_W = 24,
  parameter int unsigned AW     = 12
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [511:0]      wdata,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic              rvalid,
  output logic [511:0]      rdata
);
  logic [511:0] mem [1 << AW];
  int unsigned  wait_cnt = 0;
  logic [511:0] pend;
  bit           busy = 0;
  initial begin rvalid = 0; rdata = '0; end
  always @(posedge clk) begin
    rvalid <= 1'b0;
    if (we) mem[addr[AW-1:0]] <= wdata;
    if (re) begin
      busy     = 1;
      pend     = mem[raddr[AW-1:0]];
      wait_cnt = 1 + $urandom % 4;
    end else if (busy) begin
      if (wait_cnt == 0) begin
        rvalid <= 1'b1;
        rdata  <= pend;
        busy    = 0;
      end else wait_cnt--;
    end
  end
endmodule

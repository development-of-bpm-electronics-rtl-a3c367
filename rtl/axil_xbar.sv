// axil_xbar: AXI4-Lite crossbar from the processor to NM peripherals.
// One subordinate port (S0, driven by the processor's AXI4-Lite manager)
// fans out to NM manager ports M0..M3 (GPIO/application registers, SDIO to
// the PLL, SDIO to the ADC, JESD204B core). Port m serves byte addresses
// [m*2^WIN_BITS, (m+1)*2^WIN_BITS); the port sees the address with the
// window offset kept. An address beyond the last window is answered with
// DECERR without reaching any port. One write and one read are handled at a
// time: the write address and data are both taken, forwarded, and the
// response returned before the next write is accepted; reads likewise.
// The paper shows the crossbar and its four ports; the address map and the
// one-transaction scheme are this design's choices.
module axil_xbar
  import bpm_pkg::*;
#(
  parameter int unsigned NM       = 4,
  parameter int unsigned WIN_BITS = 12
) (
  input  logic      clk,
  input  logic      rst,
  input  axil_req_t s_req,
  output axil_rsp_t s_rsp,
  output axil_req_t m_req [NM],
  input  axil_rsp_t m_rsp [NM]
);
  typedef enum logic [1:0] {W_IDLE, W_FWD, W_RESP, W_ERR} wstate_e;
  typedef enum logic [1:0] {R_IDLE, R_FWD, R_RESP, R_ERR} rstate_e;
  localparam int unsigned SW = (NM > 1) ? $clog2(NM) : 1;

  wstate_e     wst;
  rstate_e     rst_st;
  logic [31:0] awaddr, wdata, araddr;
  logic [3:0]  wstrb;
  logic [SW-1:0] wsel, rsel;
  logic        aw_done, w_done;
  logic [1:0]  bresp, rresp;
  logic [31:0] rdata;

  function automatic logic in_range(logic [31:0] a);
    return (a >> WIN_BITS) < 32'(NM);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      wst <= W_IDLE; rst_st <= R_IDLE;
      awaddr <= '0; wdata <= '0; wstrb <= '0; araddr <= '0; wsel <= '0; rsel <= '0;
      aw_done <= 1'b0; w_done <= 1'b0; bresp <= '0; rresp <= '0; rdata <= '0;
    end else begin
      // ---- writes
      unique case (wst)
        W_IDLE: if (s_req.awvalid && s_req.wvalid) begin
          awaddr  <= s_req.awaddr;
          wdata   <= s_req.wdata;
          wstrb   <= s_req.wstrb;
          wsel    <= SW'(s_req.awaddr >> WIN_BITS);
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          wst     <= in_range(s_req.awaddr) ? W_FWD : W_ERR;
        end
        W_FWD: begin
          if (m_rsp[wsel].awready) aw_done <= 1'b1;
          if (m_rsp[wsel].wready)  w_done  <= 1'b1;
          if (m_rsp[wsel].bvalid) begin
            bresp <= m_rsp[wsel].bresp;
            wst   <= W_RESP;
          end
        end
        W_RESP: if (s_req.bready) wst <= W_IDLE;
        W_ERR: begin
          bresp <= RESP_DECERR;
          wst   <= W_RESP;
        end
        default: wst <= W_IDLE;
      endcase
      // ---- reads
      unique case (rst_st)
        R_IDLE: if (s_req.arvalid) begin
          araddr <= s_req.araddr;
          rsel   <= SW'(s_req.araddr >> WIN_BITS);
          rst_st <= in_range(s_req.araddr) ? R_FWD : R_ERR;
        end
        R_FWD: if (m_rsp[rsel].rvalid) begin
          rdata  <= m_rsp[rsel].rdata;
          rresp  <= m_rsp[rsel].rresp;
          rst_st <= R_RESP;
        end
        R_RESP: if (s_req.rready) rst_st <= R_IDLE;
        R_ERR: begin
          rdata  <= '0;
          rresp  <= RESP_DECERR;
          rst_st <= R_RESP;
        end
        default: rst_st <= R_IDLE;
      endcase
    end
  end

  // Track per-port address/read acceptance while forwarding.
  logic ar_done;
  always_ff @(posedge clk) begin
    if (rst || rst_st == R_IDLE) ar_done <= 1'b0;
    else if (rst_st == R_FWD && m_rsp[rsel].arready) ar_done <= 1'b1;
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_req[m] = '0;
      if (wst == W_FWD && wsel == SW'(m)) begin
        m_req[m].awaddr  = awaddr;
        m_req[m].awvalid = !aw_done;
        m_req[m].wdata   = wdata;
        m_req[m].wstrb   = wstrb;
        m_req[m].wvalid  = !w_done;
        m_req[m].bready  = 1'b1;
      end
      if (rst_st == R_FWD && rsel == SW'(m)) begin
        m_req[m].araddr  = araddr;
        m_req[m].arvalid = !ar_done;
        m_req[m].rready  = 1'b1;
      end
    end
    s_rsp = '0;
    s_rsp.awready = (wst == W_IDLE) && s_req.awvalid && s_req.wvalid;
    s_rsp.wready  = s_rsp.awready;
    s_rsp.bvalid  = (wst == W_RESP);
    s_rsp.bresp   = bresp;
    s_rsp.arready = (rst_st == R_IDLE);
    s_rsp.rvalid  = (rst_st == R_RESP);
    s_rsp.rdata   = rdata;
    s_rsp.rresp   = rresp;
  end

  a_bvalid_hold: assert property (@(posedge clk) disable iff (rst)
                                  s_rsp.bvalid && !s_req.bready |=> s_rsp.bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (rst)
                                  s_rsp.rvalid && !s_req.rready |=> s_rsp.rvalid && $stable(s_rsp.rdata));
endmodule

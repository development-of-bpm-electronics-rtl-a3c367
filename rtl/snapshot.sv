// snapshot: stores one raw ADC packet in the PL DDR and plays it back.
// A capture_i pulse arms the block. The next raw packet (header first, ends
// with s_tlast) is written to consecutive word addresses from 0 of the memory
// port, one word per clock, up to MEM_WORDS words (a longer packet is cut and
// its last stored word flagged as last; truncated_o counts such cuts). After
// the last word the block reads the words back and presents them as a
// 512-bit valid/ready stream with tlast on the final word, then returns to
// idle. The memory port is a simple word port (mem_we/mem_addr/mem_wdata for
// writes, mem_re/mem_raddr with a variable-latency mem_rvalid/mem_rdata for
// reads, one read in flight) standing in for the DDR4 controller.
// The paper names the Snapshot block, its Capture input and the PL DDR; the
// sequencing and the port protocol are this design's choices.
module snapshot
  import bpm_pkg::*;
#(
  parameter int unsigned ADDR_W    = 24,
  parameter int unsigned MEM_WORDS = 1 << 24
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               capture_i,
  input  logic [WORD_W-1:0]  s_tdata,
  input  logic               s_tvalid,
  input  logic               s_tlast,
  output logic               mem_we,
  output logic [ADDR_W-1:0]  mem_addr,
  output logic [WORD_W-1:0]  mem_wdata,
  output logic               mem_re,
  output logic [ADDR_W-1:0]  mem_raddr,
  input  logic               mem_rvalid,
  input  logic [WORD_W-1:0]  mem_rdata,
  output logic [WORD_W-1:0]  m_tdata,
  output logic               m_tvalid,
  output logic               m_tlast,
  input  logic               m_tready,
  output logic               busy_o,
  output logic [15:0]        truncated_o
);
  typedef enum logic [2:0] {IDLE, ARMED, WRITE, READ, WAIT, OUT} state_e;
  state_e            state;
  logic [ADDR_W:0]   wcount, rcount;
  logic              mid_pkt;   // the input stream is inside a packet

  always_ff @(posedge clk) begin
    if (rst)           mid_pkt <= 1'b0;
    else if (s_tvalid) mid_pkt <= !s_tlast;
  end

  assign busy_o = (state != IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE; wcount <= '0; rcount <= '0; truncated_o <= '0;
      mem_we <= 1'b0; mem_re <= 1'b0; mem_addr <= '0; mem_raddr <= '0; mem_wdata <= '0;
      m_tvalid <= 1'b0; m_tlast <= 1'b0; m_tdata <= '0;
    end else begin
      mem_we <= 1'b0;
      mem_re <= 1'b0;
      unique case (state)
        IDLE:  if (capture_i) state <= ARMED;
        ARMED, WRITE: begin
          // A packet starts with its header; in ARMED wait for a fresh one.
          if (s_tvalid && (state == WRITE || !mid_pkt)) begin
            mem_we    <= 1'b1;
            mem_addr  <= wcount[ADDR_W-1:0];
            mem_wdata <= s_tdata;
            wcount    <= wcount + 1'b1;
            state     <= WRITE;
            if (s_tlast || wcount == (ADDR_W+1)'(MEM_WORDS - 1)) begin
              if (!s_tlast) truncated_o <= truncated_o + 16'd1;
              state  <= READ;
              rcount <= '0;
            end
          end
        end
        READ: begin
          mem_re    <= 1'b1;
          mem_raddr <= rcount[ADDR_W-1:0];
          state     <= WAIT;
        end
        WAIT: if (mem_rvalid) begin
          m_tdata  <= mem_rdata;
          m_tvalid <= 1'b1;
          m_tlast  <= (rcount + 1'b1 == wcount);
          state    <= OUT;
        end
        OUT: if (m_tready) begin
          m_tvalid <= 1'b0;
          m_tlast  <= 1'b0;
          rcount   <= rcount + 1'b1;
          if (rcount + 1'b1 == wcount) begin
            state  <= IDLE;
            wcount <= '0;
          end else begin
            state <= READ;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
  a_tvalid_hold: assert property (@(posedge clk) disable iff (rst)
                                  m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));
endmodule

// async_fifo: dual-clock FIFO with Gray-coded pointers (helper).
// The write side (wclk) and the read side (rclk) each keep a binary and a
// Gray pointer one bit wider than the address; each Gray pointer is
// synchronised into the other domain through two flip-flops. full and empty
// are therefore conservative by up to three clocks of the other domain.
// First-word-fall-through on the read side. DEPTH must be a power of two.
module async_fifo #(
  parameter int unsigned WIDTH = 513,
  parameter int unsigned DEPTH = 16
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             push_i,
  input  logic [WIDTH-1:0] din_i,
  output logic             full_o,
  input  logic             rclk,
  input  logic             rrst,
  input  logic             pop_i,
  output logic [WIDTH-1:0] dout_o,
  output logic             valid_o
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wgray_r1, wgray_r2, rgray_w1, rgray_w2;

  function automatic logic [AW:0] b2g(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // Write domain
  assign full_o = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  always_ff @(posedge wclk) begin
    if (push_i && !full_o) mem[wbin[AW-1:0]] <= din_i;
    if (wrst) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (push_i && !full_o) begin
        wbin  <= wbin + 1'b1;
        wgray <= b2g(wbin + 1'b1);
      end
    end
  end

  // Read domain
  assign valid_o = (rgray != wgray_r2);
  assign dout_o  = mem[rbin[AW-1:0]];
  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (pop_i && valid_o) begin
        rbin  <= rbin + 1'b1;
        rgray <= b2g(rbin + 1'b1);
      end
    end
  end
  initial assert (DEPTH == (1 << AW) && AW >= 2);
endmodule

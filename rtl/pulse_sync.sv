// pulse_sync: carries single-clock pulses from one clock domain to another
// (helper). Each source pulse toggles a flag; the flag passes two
// flip-flops in the destination domain and every change there gives one
// destination pulse. Source pulses must be at least three destination clocks
// apart.
module pulse_sync (
  input  logic src_clk,
  input  logic src_rst,
  input  logic pulse_i,
  input  logic dst_clk,
  input  logic dst_rst,
  output logic pulse_o
);
  logic tgl, s1, s2, s3;
  always_ff @(posedge src_clk) begin
    if (src_rst)      tgl <= 1'b0;
    else if (pulse_i) tgl <= ~tgl;
  end
  always_ff @(posedge dst_clk) begin
    if (dst_rst) {s1, s2, s3} <= '0;
    else         {s1, s2, s3} <= {tgl, s1, s2};
  end
  assign pulse_o = s2 ^ s3;
endmodule

// cordic_phase: phase of an I/Q vector, atan2(q, i), by CORDIC vectoring.
// start_i loads the vector; the left half-plane is first turned by half a
// turn, then 16 micro-rotations drive q to zero while summing the rotation
// angles. done_o pulses 17 clocks after start_i with phase_o in units of
// 2^-16 turn (0x4000 = 90 degrees, two's complement wraps at +-180 degrees).
// Accuracy is about 2 units (0.01 degree). Helper of phase_autocal.
module cordic_phase
  import bpm_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start_i,
  input  iq_t         i_i,
  input  iq_t         q_i,
  output logic        done_o,
  output logic [15:0] phase_o
);
  localparam int unsigned XW = IQ_W + 3;
  localparam logic [15:0] ATAN [16] = '{16'd8192, 16'd4836, 16'd2555, 16'd1297, 16'd651, 16'd326,
                                        16'd163, 16'd81, 16'd41, 16'd20, 16'd10, 16'd5, 16'd3,
                                        16'd1, 16'd1, 16'd0};
  logic signed [XW-1:0] x, y;
  logic [15:0] z;
  logic [4:0]  it;
  logic        busy;

  always_ff @(posedge clk) begin
    done_o <= 1'b0;
    if (rst) begin
      busy <= 1'b0; it <= '0; x <= '0; y <= '0; z <= '0; phase_o <= '0;
    end else if (start_i) begin
      busy <= 1'b1;
      it   <= '0;
      if (i_i < 0) begin
        x <= -XW'(i_i); y <= -XW'(q_i); z <= 16'h8000;
      end else begin
        x <=  XW'(i_i); y <=  XW'(q_i); z <= 16'h0000;
      end
    end else if (busy) begin
      if (y >= 0) begin
        x <= x + (y >>> it);
        y <= y - (x >>> it);
        z <= z + ATAN[it[3:0]];
      end else begin
        x <= x - (y >>> it);
        y <= y + (x >>> it);
        z <= z - ATAN[it[3:0]];
      end
      it <= it + 5'd1;
      if (it == 5'd15) begin
        busy <= 1'b0;
        done_o <= 1'b1;
      end
    end
    if (busy && it == 5'd15) phase_o <= (y >= 0) ? z + ATAN[15] : z - ATAN[15];
  end
endmodule

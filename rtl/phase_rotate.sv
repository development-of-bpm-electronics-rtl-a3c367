// phase_rotate: drift compensation of the decimated I/Q. Each channel's
// vector (I, Q) is turned by minus its angle, angle_i[c] in units of 2^-16
// turn, so that the output phase is atan2(Q, I) - angle. Fed with the
// reference phases of the self-calibration this zeroes the clock-chip drift
// in the FPGA, instead of leaving the subtraction to the consumer.
//
// How: a fully pipelined CORDIC in rotation mode per channel. Stage 0 turns
// vectors whose residual angle exceeds a quarter turn by half a turn
// (negating I and Q), ITER micro-rotation stages follow, and a last stage
// multiplies by 1/K = 0.607253 (Q1.17, 79594) to undo the CORDIC gain. The
// datapath is IQ_W + 2 bits wide, enough for full-scale I/Q times
// K * sqrt(2), plus GB = 4 fraction bits that keep the truncation of the
// shifts below one output count. Phase error about 0.01 degree and gain
// error below 5e-4 for ITER = 16 (ITER may not exceed 16, the angle table's
// length).
//
// Interface and timing: one vector set per valid_i, any rate up to one per
// clock; valid_o and the results follow ITER + 2 clocks later. The angle is
// sampled with the data. That the FPGA compensates the drift is the paper's
// statement; the CORDIC, its widths and the stage count are this design's
// choices.
module phase_rotate
  import bpm_pkg::*;
#(
  parameter int unsigned NCH_P = NCH,
  parameter int unsigned ITER  = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        valid_i,
  input  iq_t         i_i     [NCH_P],
  input  iq_t         q_i     [NCH_P],
  input  logic [15:0] angle_i [NCH_P],
  output logic        valid_o,
  output iq_t         i_o     [NCH_P],
  output iq_t         q_o     [NCH_P]
);
  localparam int unsigned GB = 4;            // fraction bits against shift truncation
  localparam int unsigned XW = IQ_W + 2 + GB;
  localparam int unsigned ZW = 17;
  localparam logic signed [18:0] KINV = 19'sd79594;   // 0.607253 * 2^17
  // atan(2^-i) / (2 pi) * 2^16
  localparam logic [15:0] ATAN [16] = '{16'd8192, 16'd4836, 16'd2555, 16'd1297, 16'd651, 16'd326,
                                        16'd163, 16'd81, 16'd41, 16'd20, 16'd10, 16'd5, 16'd3,
                                        16'd1, 16'd1, 16'd0};

  logic signed [XW-1:0] xs [ITER+1][NCH_P];
  logic signed [XW-1:0] ys [ITER+1][NCH_P];
  logic signed [ZW-1:0] zs [ITER+1][NCH_P];
  logic [ITER+1:0]      vs;

  // stage 0: target rotation -angle, brought into +-90 degrees
  always_ff @(posedge clk) begin
    for (int c = 0; c < NCH_P; c++) begin
      logic [15:0] z;
      z = -angle_i[c];
      if ($signed(z) > 16'sh4000 || $signed(z) < -16'sh4000) begin
        xs[0][c] <= -(XW'(i_i[c]) <<< GB);
        ys[0][c] <= -(XW'(q_i[c]) <<< GB);
        zs[0][c] <= ZW'($signed(z + 16'h8000));
      end else begin
        xs[0][c] <= XW'(i_i[c]) <<< GB;
        ys[0][c] <= XW'(q_i[c]) <<< GB;
        zs[0][c] <= ZW'($signed(z));
      end
    end
  end

  // micro-rotations
  for (genvar s = 0; s < ITER; s++) begin : g_stage
    always_ff @(posedge clk) begin
      for (int c = 0; c < NCH_P; c++) begin
        if (zs[s][c] >= 0) begin
          xs[s+1][c] <= xs[s][c] - (ys[s][c] >>> s);
          ys[s+1][c] <= ys[s][c] + (xs[s][c] >>> s);
          zs[s+1][c] <= zs[s][c] - ZW'(ATAN[s % 16]);
        end else begin
          xs[s+1][c] <= xs[s][c] + (ys[s][c] >>> s);
          ys[s+1][c] <= ys[s][c] - (xs[s][c] >>> s);
          zs[s+1][c] <= zs[s][c] + ZW'(ATAN[s % 16]);
        end
      end
    end
  end

  // gain correction, rounded
  always_ff @(posedge clk) begin
    for (int c = 0; c < NCH_P; c++) begin
      logic signed [XW+18:0] px, py;
      px = xs[ITER][c] * KINV + (XW+19)'(1 << (16 + GB));
      py = ys[ITER][c] * KINV + (XW+19)'(1 << (16 + GB));
      i_o[c] <= iq_t'(px >>> (17 + GB));
      q_o[c] <= iq_t'(py >>> (17 + GB));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) vs <= '0;
    else     vs <= {vs[ITER:0], valid_i};
  end
  assign valid_o = vs[ITER+1];
endmodule

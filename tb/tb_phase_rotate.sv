// tb_phase_rotate: feeds random I/Q vectors (magnitudes from 1e3 to 5e8) and
// random angles to all 8 channels, in bursts of back-to-back samples and
// with gaps, and compares every output with the rotation worked out in real
// arithmetic: the output phase must equal the input phase minus the angle
// within 0.02 degree plus the angle of 4 counts of rounding, and the
// magnitude must be kept within 0.05 % (plus 4 counts). Also checked: each result leaves exactly ITER + 2 = 18 clocks after
// its input, and nothing leaves without an input.
module tb_phase_rotate;
  import bpm_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int  LAT = 18;
  logic clk = 0, rst = 1, vi = 0, vo;
  iq_t ii [NCH], qi [NCH], io [NCH], qo [NCH];
  logic [15:0] ang [NCH];
  int checks = 0, failures = 0, cyc = 0, n_in = 0, n_out = 0;
  phase_rotate dut (.clk, .rst, .valid_i(vi), .i_i(ii), .q_i(qi), .angle_i(ang),
                    .valid_o(vo), .i_o(io), .q_o(qo));
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct {int t; real i [NCH]; real q [NCH]; real a [NCH];} exp_t;
  exp_t q_exp [$];

  function automatic real wrap(real d);
    while (d > 180.0) d -= 360.0;
    while (d < -180.0) d += 360.0;
    return d;
  endfunction

  // scoreboard
  always @(posedge clk) if (!rst) begin
    if (vo) begin
      exp_t e;
      n_out++;
      if (q_exp.size() == 0) chk(1'b0, "output without input");
      else begin
        e = q_exp.pop_front();
        chk(cyc - e.t == LAT, $sformatf("latency %0d, expected %0d", cyc - e.t, LAT));
        for (int c = 0; c < NCH; c++) begin
          real pin, pout, min, mout, dp, tol;
          pin  = $atan2(e.q[c], e.i[c]) * 180.0 / PI;
          pout = $atan2(real'(qo[c]), real'(io[c])) * 180.0 / PI;
          min  = $sqrt(e.i[c] * e.i[c] + e.q[c] * e.q[c]);
          mout = $sqrt(real'(io[c]) * real'(io[c]) + real'(qo[c]) * real'(qo[c]));
          dp   = wrap(pout - (pin - e.a[c]));
          tol  = 0.02 + 4.0 / min * 180.0 / PI;
          chk(dp < tol && dp > -tol, $sformatf("ch%0d phase %f exp %f (|v| %f)", c, pout, wrap(pin - e.a[c]), min));
          chk(mout - min < 5.0e-4 * min + 4.0 && min - mout < 5.0e-4 * min + 4.0,
              $sformatf("ch%0d magnitude %f exp %f", c, mout, min));
        end
      end
    end
  end

  initial begin
    for (int c = 0; c < NCH; c++) begin ii[c] = '0; qi[c] = '0; ang[c] = '0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 600; n++) begin
      exp_t e;
      @(negedge clk);
      vi = ($urandom % 3 != 0) || (n < 50);
      if (vi) begin
        e.t = cyc + 1;
        for (int c = 0; c < NCH; c++) begin
          real m, p;
          m = 1000.0 * $pow(5.0e5, real'($urandom % 10001) / 10000.0);
          p = 2.0 * PI * real'($urandom % 100000) / 100000.0;
          ii[c]  = iq_t'($rtoi(m * $cos(p)));
          qi[c]  = iq_t'($rtoi(m * $sin(p)));
          ang[c] = 16'($urandom);
          if (n < 8) ang[c] = 16'(n * 16'h2000);   // the quadrant edges
          e.i[c] = real'(ii[c]);
          e.q[c] = real'(qi[c]);
          e.a[c] = real'(signed'(ang[c])) * 360.0 / 65536.0;
        end
        q_exp.push_back(e);
        n_in++;
      end
    end
    @(negedge clk) vi = 0;
    repeat (LAT + 5) @(posedge clk);
    chk(n_out == n_in && q_exp.size() == 0, $sformatf("%0d outputs for %0d inputs", n_out, n_in));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

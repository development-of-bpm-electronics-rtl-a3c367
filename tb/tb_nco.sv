// tb_nco: checks the polyphase NCO against cos/sin computed with real math.
// First a quarter-turn increment (exact table points), then the 162.5 MHz /
// 250 MSPS increment over 200 clocks, checking all four phases of each clock
// to within the table's quantisation, and the phase reset by sync.
module tb_nco;
  import bpm_pkg::*;
  logic clk = 0, rst = 1, valid = 0, sync = 0;
  logic [31:0] inc;
  adc_t c [SPC], s [SPC];
  int checks = 0, failures = 0;
  nco dut (.clk, .rst, .valid_i(valid), .sync_i(sync), .phase_inc_i(inc), .cos_o(c), .sin_o(s));
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real ph, rc, rs;
    longint acc;
    inc = 32'h4000_0000;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1;
    chk(c[0] == 32767 && s[0] == 0,      "q0");
    chk(c[1] == 0     && s[1] == 32767,  "q1");
    chk(c[2] == -32767 && s[2] == 0,     "q2");
    chk(c[3] == 0     && s[3] == -32767, "q3");
    // 162.5 MHz
    sync <= 1; @(posedge clk); sync <= 0;
    inc <= PHASE_INC_162M5; valid <= 1;
    acc = 0;
    for (int n = 0; n < 200; n++) begin
      #1;
      for (int k = 0; k < SPC; k++) begin
        ph = 2.0 * 3.14159265358979 * real'((acc + longint'(k) * PHASE_INC_162M5) % 64'h1_0000_0000) / 4294967296.0;
        rc = 32767.0 * $cos(ph); rs = 32767.0 * $sin(ph);
        chk((real'(c[k]) - rc) < 250.0 && (rc - real'(c[k])) < 250.0, $sformatf("cos n=%0d k=%0d %0d %f", n, k, c[k], rc));
        chk((real'(s[k]) - rs) < 250.0 && (rs - real'(s[k])) < 250.0, $sformatf("sin n=%0d k=%0d %0d %f", n, k, s[k], rs));
      end
      @(posedge clk);
      acc = (acc + 4 * longint'(PHASE_INC_162M5)) % 64'h1_0000_0000;
    end
    valid <= 0;
    // valid low holds the phase
    @(posedge clk); @(posedge clk); #1;
    ph = 2.0 * 3.14159265358979 * real'(acc) / 4294967296.0;
    chk((real'(c[0]) - 32767.0 * $cos(ph)) < 250.0 && (32767.0 * $cos(ph) - real'(c[0])) < 250.0, "hold");
    sync <= 1; @(posedge clk); sync <= 0; #1;
    chk(c[0] == 32767, "sync clears phase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

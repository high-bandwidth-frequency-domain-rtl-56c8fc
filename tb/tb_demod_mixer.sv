// tb_demod_mixer: self-checking testbench of the quadrature demodulator.
// Part 1 drives random samples and LO values and checks I = x*cos >> 7, Q = -(x*sin >> 7)
// one clock later. Part 2 demodulates a synthetic tone A*cos(phi + theta) with a matching
// LO and checks that the averaged output is (A/2)(cos theta, sin theta) in LO units.
module tb_demod_mixer;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic rst, in_valid, out_valid;
  logic [3:0] in_ch, out_ch;
  logic signed [15:0] adc, lo_cos, lo_sin;
  logic signed [23:0] out_i, out_q;

  demod_mixer dut (.clk, .rst, .in_valid, .in_ch, .adc, .lo_cos, .lo_sin,
                   .out_valid, .out_ch, .out_i, .out_q);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ei, eq;
    real si, sq, th, a;
    rst = 1; in_valid = 0; in_ch = 0; adc = 0; lo_cos = 0; lo_sin = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 2000; n++) begin
      @(posedge clk);
      in_valid <= 1; in_ch <= 4'(n % 10);
      adc <= 16'($urandom); lo_cos <= 16'($urandom); lo_sin <= 16'($urandom);
      if (n == 0) begin adc <= -16'sd32768; lo_cos <= 16'sd32767; lo_sin <= -16'sd32767; end
      @(posedge clk);
      in_valid <= 0;
      #1;
      ei = (longint'(adc) * longint'(lo_cos));
      eq = (longint'(adc) * longint'(lo_sin));
      ei = ei >>> 7; eq = -(eq >>> 7);
      check(out_valid && out_ch == 4'(n % 10), "valid/channel after one clock");
      check(longint'(out_i) == ei && longint'(out_q) == eq,
            $sformatf("x=%0d c=%0d s=%0d -> %0d %0d", adc, lo_cos, lo_sin, out_i, out_q));
    end
    // tone test
    a = 20000.0; th = 0.7; si = 0; sq = 0;
    for (int n = 0; n < 1000; n++) begin
      real phi;
      phi = 2.0 * 3.14159265358979 * 0.1234 * n;
      @(posedge clk);
      in_valid <= 1; in_ch <= 0;
      adc    <= 16'($rtoi(a * $cos(phi + th)));
      lo_cos <= 16'($rtoi(32767.0 * $cos(phi)));
      lo_sin <= 16'($rtoi(32767.0 * $sin(phi)));
      @(posedge clk); in_valid <= 0; #1;
      si += real'(out_i); sq += real'(out_q);
    end
    si = si / 1000.0 * 128.0 / 32767.0; sq = sq / 1000.0 * 128.0 / 32767.0;
    check((si - a / 2 * $cos(th)) < 50 && (si - a / 2 * $cos(th)) > -50, $sformatf("tone I %f", si));
    check((sq - a / 2 * $sin(th)) < 50 && (sq - a / 2 * $sin(th)) > -50, $sformatf("tone Q %f", sq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

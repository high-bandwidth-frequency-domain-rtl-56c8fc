// tb_synth_mixer: self-checking testbench of the carrier/nuller synthesiser.
// Random amplitudes and LO values; checks carrier = A*cos >> 15 and
// nuller = (I*cos - Q*sin) >> 15 one clock later, with the channel tag.
module tb_synth_mixer;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic rst, in_valid, out_valid;
  logic [3:0] in_ch, out_ch;
  logic signed [15:0] lo_cos, lo_sin, car_amp, nul_i, nul_q;
  logic signed [16:0] car_wave, nul_wave;

  synth_mixer dut (.clk, .rst, .in_valid, .in_ch, .lo_cos, .lo_sin, .car_amp, .nul_i, .nul_q,
                   .out_valid, .out_ch, .car_wave, .nul_wave);

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
    longint ec, en;
    rst = 1; in_valid = 0; in_ch = 0; lo_cos = 0; lo_sin = 0; car_amp = 0; nul_i = 0; nul_q = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk);
      in_valid <= 1; in_ch <= 4'(n % 10);
      lo_cos <= 16'($urandom); lo_sin <= 16'($urandom);
      car_amp <= 16'($urandom); nul_i <= 16'($urandom); nul_q <= 16'($urandom);
      if (n == 0) begin
        lo_cos <= 16'sd23170; lo_sin <= -16'sd23170; nul_i <= 16'sd32767; nul_q <= 16'sd32767;
      end
      @(posedge clk);
      in_valid <= 0;
      #1;
      ec = (longint'(car_amp) * longint'(lo_cos)) >>> 15;
      en = (longint'(nul_i) * longint'(lo_cos) - longint'(nul_q) * longint'(lo_sin)) >>> 15;
      check(out_valid && out_ch == 4'(n % 10), "valid/channel");
      check(longint'(car_wave) == ec, $sformatf("carrier %0d vs %0d", car_wave, ec));
      check(longint'(nul_wave) == en, $sformatf("nuller %0d vs %0d", nul_wave, en));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_comb_acc: self-checking testbench of the frequency-comb accumulator.
// Feeds random per-slot carrier and nuller samples in continuous slot order 0..9 and checks
// that every 10 clocks one DAC sample equal to the saturated sum of the 10 slots appears,
// that the clip flags are right, and that dac_valid comes exactly once per 10 clocks.
module tb_comb_acc;
  localparam int NCH = 10;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic rst, in_valid, dac_valid, car_clip, nul_clip;
  logic [3:0] in_ch;
  logic signed [16:0] car_wave, nul_wave;
  logic signed [15:0] dac_car, dac_nul;

  comb_acc dut (.clk, .rst, .in_valid, .in_ch, .car_wave, .nul_wave,
                .dac_valid, .dac_car, .dac_nul, .car_clip, .nul_clip);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int sat16(input int v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sc, sn, nvalid, last_valid_cyc, cyc;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    int big;
    cyc = 0; nvalid = 0; last_valid_cyc = -1;
    rst = 1; in_valid = 0; in_ch = 0; car_wave = 0; nul_wave = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 400; n++) begin
      sc = 0; sn = 0;
      big = (n % 4 == 0) ? 1 : 0;   // every fourth sample uses large values to force clipping
      for (int c = 0; c < NCH; c++) begin
        int a, b;
        a = big ? int'($urandom_range(16000, 0)) - 4000 : int'($urandom_range(6000, 0)) - 3000;
        b = big ? 4000 - int'($urandom_range(16000, 0)) : int'($urandom_range(6000, 0)) - 3000;
        sc += a; sn += b;
        @(posedge clk);
        in_valid <= 1; in_ch <= 4'(c); car_wave <= 17'(a); nul_wave <= 17'(b);
        #1;
        if (dac_valid) begin
          check(0, "dac_valid inside a period");
        end
      end
      @(posedge clk); #1;   // slot 0 of the next period enters; sum of previous is out
      in_valid <= 0;
      check(dac_valid, "dac_valid after slot 9");
      check(int'(dac_car) == sat16(sc) && int'(dac_nul) == sat16(sn),
            $sformatf("sum %0d/%0d got %0d/%0d", sc, sn, dac_car, dac_nul));
      check(car_clip == (sc != sat16(sc)) && nul_clip == (sn != sat16(sn)), "clip flags");
      if (sc != sat16(sc)) nvalid++;
    end
    check(nvalid > 0, "clipping was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

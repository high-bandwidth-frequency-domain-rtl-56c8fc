// tb_dan_ctrl: self-checking testbench of the DAN controller.
// Part 1 (open loop): random residuals on random channels with random gains and enables;
//   a reference integrator kept here predicts every readout word, the nuller and carrier
//   amplitudes, saturation and the clearing on disable.
// Part 2 (closed loop): a simple plant returns residual = K*(carrier - nuller) per channel;
//   with DAN on, the nuller must converge to the carrier amplitude and the readout must
//   switch from the residual to the nuller when DAN is turned on.
module tb_dan_ctrl;
  localparam int NCH = 10;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic rst, in_valid, ro_valid, ro_dan, cfg_we;
  logic [3:0] in_ch, ro_ch, rd_ch;
  logic signed [23:0] in_i, in_q, ro_i, ro_q;
  logic signed [15:0] car_amp, nul_i, nul_q;
  logic [7:0] cfg_addr;
  logic [31:0] cfg_data;
  logic [NCH-1:0] dan_en;

  dan_ctrl dut (.clk, .rst, .in_valid, .in_ch, .in_i, .in_q, .ro_valid, .ro_ch, .ro_i, .ro_q,
                .ro_dan, .rd_ch, .car_amp, .nul_i, .nul_q, .cfg_we, .cfg_addr, .cfg_data, .dan_en);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int field, input int ch, input int data);
    @(posedge clk); cfg_we <= 1; cfg_addr <= 8'(field * 16 + ch); cfg_data <= 32'(data);
    @(posedge clk); cfg_we <= 0;
  endtask

  localparam longint AMAX = (64'sd1 <<< 39) - 1;
  function automatic longint sat40(input longint v);
    return v > AMAX ? AMAX : v < -AMAX ? -AMAX : v;
  endfunction

  longint ai [NCH], aq [NCH];
  int g [NCH], car [NCH];
  bit en [NCH];
  int nsat = 0, nclear = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; in_valid = 0; in_ch = 0; in_i = 0; in_q = 0; rd_ch = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < NCH; c++) begin
      ai[c] = 0; aq[c] = 0; en[c] = 0;
      g[c] = $urandom_range(65535, 0); car[c] = int'($urandom_range(65535, 0)) - 32768;
      wr(0, c, car[c]); wr(1, c, g[c]);
    end
    // ---- part 1: open loop ----
    for (int n = 0; n < 6000; n++) begin
      int c;
      longint ri, rq;
      c = $urandom_range(NCH - 1, 0);
      if (n % 500 == 0) begin
        for (int k = 0; k < NCH; k++) begin
          bit e;
          e = $urandom_range(1, 0);
          if (n == 0) e = 1;
          wr(2, k, e);
          if (!e && en[k]) nclear++;
          en[k] = e;
        end
      end
      ri = longint'(int'($urandom_range(16777215, 0)) - 8388608);
      rq = longint'(int'($urandom_range(16777215, 0)) - 8388608);
      @(posedge clk);
      in_valid <= 1; in_ch <= 4'(c); in_i <= 24'(ri); in_q <= 24'(rq); rd_ch <= 4'(c);
      @(posedge clk);
      in_valid <= 0;
      #1;
      if (en[c]) begin
        longint ni, nq;
        ni = sat40(ai[c] + ri * g[c]);
        nq = sat40(aq[c] + rq * g[c]);
        if (ni != ai[c] + ri * g[c]) nsat++;
        ai[c] = ni; aq[c] = nq;
        check(ro_dan && longint'(ro_i) == (ni >>> 16) && longint'(ro_q) == (nq >>> 16), $sformatf("readout = integrator n=%0d c=%0d %0d %0d exp %0d %0d", n, c, ro_i, ro_q, ni>>>16, nq>>>16));
      end else begin
        ai[c] = 0; aq[c] = 0;
        check(!ro_dan && longint'(ro_i) == ri && longint'(ro_q) == rq, "readout = residual");
      end
      check(ro_valid && ro_ch == 4'(c), "readout valid/channel");
      check(longint'(nul_i) == (ai[c] >>> 24) && longint'(nul_q) == (aq[c] >>> 24), "nuller amplitude");
      check(int'(car_amp) == car[c], "carrier amplitude");
      check(dan_en[c] == en[c], "enable register");
    end
    check(nsat > 0, "saturation exercised");
    check(nclear > 0, "disable/clear exercised");
    // ---- part 2: closed loop, all channels, DAN switched on after 200 samples ----
    for (int c = 0; c < NCH; c++) begin
      car[c] = 1000 + 2500 * c;
      wr(2, c, 0); wr(0, c, car[c]); wr(1, c, 8192);
    end
    for (int n = 0; n < 1200; n++) begin
      if (n == 200) for (int c = 0; c < NCH; c++) wr(2, c, 1);
      for (int c = 0; c < NCH; c++) begin
        int r;
        @(posedge clk);
        rd_ch <= 4'(c);
        #1;
        r = 128 * (int'(car_amp) - int'(nul_i));   // plant: residual of carrier minus nuller
        in_valid <= 1; in_ch <= 4'(c); in_i <= 24'(r); in_q <= 24'(-128 * int'(nul_q));
        @(posedge clk); in_valid <= 0; #1;
        if (n == 199) check(!ro_dan && int'(ro_i) == 128 * car[c], "before DAN: residual read out");
      end
    end
    for (int c = 0; c < NCH; c++) begin
      rd_ch <= 4'(c); #1;
      check(int'(nul_i) - car[c] inside {[-2:2]} && int'(nul_q) inside {[-2:2]},
            $sformatf("ch%0d converged: nul=%0d,%0d car=%0d", c, nul_i, nul_q, car[c]));
    end
    check(ro_dan, "after DAN: nuller read out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

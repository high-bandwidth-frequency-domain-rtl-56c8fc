// tb_fmux_module: end-to-end self-checking testbench of one fMUX readout module,
// with the IRIG-B time code sped up (20 clocks per millisecond) so that it locks.
//
// Plant model: the SQUID summing junction is modelled as ADC = (1 - p) * carrier DAC -
// nuller DAC, with p a "pulse" that lowers the returned carrier (the sensor current) by 10 %
// on all channels at once. The ten carrier tones sit at the resonance frequencies of the
// 10-channel resonator design (1.472 to 4.460 MHz). The returned signal is two comb samples
// old when it is demodulated, so the demodulator phase offset of each channel is set to
// -2 * FTW.
// Sequence: program the LO and DAN registers over the 125 MHz buses with DAN off; check
// that the packets carry the residual of every channel (I = 32767 * A, Q = 0 after the
// CIC and FIR scaling); switch DAN on; check that the nuller converges, the ADC residual
// falls, and the packets then carry the nuller (I = 65536 * A); apply the pulse and check
// the nuller follows it, with 63 % of the step done after one loop time constant
// (3.1 kHz bandwidth); stall the packet output to force whole-packet drops.
// G_DAN is 128 on every channel, a loop gain of 2^-10 per sample or about 3 kHz of
// bandwidth, so the loop settles in a few hundred microseconds.
// Packet timing: consecutive headers must be 1280 clocks apart (156.25 ksps), and with the
// timestamp delay programmed to 2 each header must carry the time of the frame strobe two
// output samples before its own.
// The IRIG-B source sends minute 5 of day 7; once the decoder has locked, packet
// headers must carry the lock flag and that time.
// Each mechanism is counted and must occur at least once.
module tb_fmux_module;
  localparam int NCH = 10;
  localparam int CPM = 20;
  int checks = 0, failures = 0;
  logic clk = 1'b0, ctl_clk = 1'b0;
  always #2.5 clk = ~clk;       // 200 MHz
  always #4.0 ctl_clk = ~ctl_clk; // 125 MHz

  logic rst, ctl_rst;
  logic signed [15:0] adc_data, dac_car, dac_nul;
  logic adc_strobe, dac_valid, dac_clip;
  logic lo_ctl_valid, lo_ctl_ready, dan_ctl_valid, dan_ctl_ready;
  logic [7:0] lo_ctl_addr, dan_ctl_addr;
  logic [31:0] lo_ctl_data, dan_ctl_data;
  logic irig, ts_locked;
  logic [63:0] pkt_tdata;
  logic pkt_tvalid, pkt_tlast, pkt_tready;
  logic [15:0] pkt_drop_cnt;
  logic [NCH-1:0] dan_en;

  fmux_module #(.CLK_PER_MS(CPM)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", msg); end
  endtask

  // ---------------- plant ----------------
  real pulse = 0.0;
  always_comb begin
    real v;
    v = (1.0 - pulse) * real'(dac_car) - real'(dac_nul);
    adc_data = (v > 32767.0) ? 16'sd32767 : (v < -32768.0) ? -16'sd32768 : 16'($rtoi(v));
  end

  // ---------------- control bus drivers ----------------
  task automatic lo_wr(input int addr, input int data);
    @(posedge ctl_clk);
    lo_ctl_valid <= 1; lo_ctl_addr <= 8'(addr); lo_ctl_data <= 32'(data);
    @(posedge ctl_clk);
    while (!lo_ctl_ready) @(posedge ctl_clk);
    lo_ctl_valid <= 0;
  endtask
  task automatic dan_wr(input int addr, input int data);
    @(posedge ctl_clk);
    dan_ctl_valid <= 1; dan_ctl_addr <= 8'(addr); dan_ctl_data <= 32'(data);
    @(posedge ctl_clk);
    while (!dan_ctl_ready) @(posedge ctl_clk);
    dan_ctl_valid <= 0;
  endtask

  // ---------------- IRIG-B source ----------------
  task automatic symbol(input int hi_ms);
    irig <= 1'b1; repeat (hi_ms * CPM) @(posedge clk);
    irig <= 1'b0; repeat ((10 - hi_ms) * CPM) @(posedge clk);
  endtask
  int irig_sec = 10;
  initial begin
    irig = 0;
    if (1) begin
      repeat (100) @(posedge clk);
      symbol(8);
      forever begin
        logic [99:0] b;
        b = '0;
        b[4:1] = 4'(irig_sec % 10); b[8:6] = 3'(irig_sec / 10);
        b[13:10] = 4'd5; b[33:30] = 4'd7;       // minute 5, day 7
        for (int i = 0; i < 100; i++)
          if (i == 0 || i % 10 == 9) symbol(8); else symbol(b[i] ? 5 : 2);
        irig_sec++;
      end
    end
  end

  // ---------------- packet receiver ----------------
  logic [63:0] pkt [NCH + 1];
  logic [63:0] last_pkt [NCH + 1];
  int wcount = 0, npkt = 0, hold_off = 0, nlocked_hdr = 0, n_tsdly_seen = 0, n_rate = 0;
  logic [63:0] prev_hdr;
  logic [15:0] prev_drops;
  bit have_prev = 0;
  int quiet_from = 4;   // packets are checked for timing only away from start-up and stalls
  wire quiet = (hold_off == 0) && (npkt >= quiet_from);
  always @(posedge clk) begin
    pkt_tready <= (hold_off == 0);
    if (!rst && pkt_tvalid && pkt_tready) begin
      pkt[wcount] = pkt_tdata;
      check(pkt_tlast == (wcount == NCH), "tlast position");
      if (wcount == NCH) begin
        wcount = 0;
        npkt++;
        last_pkt = pkt;
        // header = {locked, 0, day, hour, min, sec (BCD), ticks}; it was written at the
        // frame strobe two output samples (2 x 1280 clocks) before this packet's own
        if (quiet && pkt[0][61:32] == dut.u_ts.live[61:32]) begin
          int d;
          d = int'(dut.u_ts.live[31:0] - pkt[0][31:0]);
          check(d >= 2560 && d < 2560 + 1280, $sformatf("timestamp delay: %0d ticks", d));
          n_tsdly_seen++;
        end
        if (quiet && have_prev && pkt[0][61:32] == prev_hdr[61:32] && pkt_drop_cnt == prev_drops) begin
          check(pkt[0][31:0] - prev_hdr[31:0] == 32'd1280, "one packet per 1280 clocks (156.25 ksps)");
          n_rate++;
        end
        have_prev = 1; prev_hdr = pkt[0]; prev_drops = pkt_drop_cnt;
        if (pkt[0][63]) begin
          nlocked_hdr++;
          // the decoded time is one of those sent: day 7, hour 0, minute 5, second >= 10
          check(pkt[0][61:39] == {10'h007, 6'h00, 7'h05} && pkt[0][35:32] < 4'd10 &&
                pkt[0][38:32] >= 7'h10, "timestamp BCD time");
        end
      end else wcount++;
    end
  end

  real fres [NCH] = '{1.472, 1.772, 2.144, 2.444, 2.816, 3.166, 3.488, 3.788, 4.160, 4.460};
  int amp [NCH];
  int n_modeswitch = 0, n_drop = 0, n_pulse = 0, n_tsdly = 0, n_bw = 0;
  real nul0 [NCH];

  task automatic wait_packets(input int n);
    int target;
    target = npkt + n;
    while (npkt < target) @(posedge clk);
  endtask

  task automatic check_readout(input real scale, input string what);
    for (int c = 0; c < NCH; c++) begin
      real ei, gi, gq;
      ei = scale * amp[c];
      gi = real'($signed(last_pkt[c + 1][63:32]));
      gq = real'($signed(last_pkt[c + 1][31:0]));
      check(gi > 0.99 * ei && gi < 1.01 * ei && gq < 0.01 * ei && gq > -0.01 * ei,
            $sformatf("%s ch%0d: I=%0.0f Q=%0.0f expected I=%0.0f", what, c, gi, gq, ei));
    end
  endtask

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int maxres;
    rst = 1; ctl_rst = 1;
    lo_ctl_valid = 0; lo_ctl_addr = 0; lo_ctl_data = 0;
    dan_ctl_valid = 0; dan_ctl_addr = 0; dan_ctl_data = 0;
    repeat (10) @(posedge clk);
    rst <= 0; ctl_rst <= 0;
    // ---- configuration over the control buses ----
    for (int c = 0; c < NCH; c++) begin
      int ftw;
      ftw = int'(longint'(fres[c] / 20.0 * 4294967296.0));
      amp[c] = 1500 + 100 * c;
      lo_wr(c, ftw);                 // frequency word
      lo_wr(16 + c, -2 * ftw);       // demodulator phase offset: two samples of loop delay
      dan_wr(c, amp[c]);             // carrier amplitude
      dan_wr(16 + c, 128);           // G_DAN: loop gain 2^-10 per sample, about 3 kHz
      dan_wr(32 + c, 0);             // DAN off
    end
    dan_wr(48, 2);                   // timestamp delay of 2 output samples
    n_tsdly++;
    // ---- DAN off: packets carry the residual (FIR settles in about 11 packets) ----
    wait_packets(16);
    check(dan_en == '0, "DAN off");
    check_readout(32767.0, "DAN off residual");
    // ---- switch DAN on ----
    for (int c = 0; c < NCH; c++) dan_wr(32 + c, 1);
    n_modeswitch++;
    repeat (10) @(posedge clk);
    check(dan_en == '1, "DAN on");
    // loop time constant 1024 samples (51 us, 8 packets): wait about six of them
    wait_packets(60);
    maxres = 0;
    repeat (2000) begin
      @(posedge clk);
      if (adc_strobe && (adc_data > maxres || -adc_data > maxres)) maxres = (adc_data > 0) ? adc_data : -adc_data;
    end
    check(maxres < 400, $sformatf("residual nulled: max |adc| = %0d", maxres));
    check_readout(65536.0, "DAN on nuller");
    // ---- pulse: the returned carrier drops by 10 %, the nuller follows ----
    for (int c = 0; c < NCH; c++) nul0[c] = real'($signed(dut.u_dan.acc_i[c][39:24]));
    pulse = 0.1;
    n_pulse++;
    // loop bandwidth: one time constant (1024 samples = 10240 clocks, 51.2 us, i.e.
    // 1 / (2 pi 51.2 us) = 3.1 kHz) later each nuller must have made 63 % of its step
    repeat (10240) @(posedge clk);
    for (int c = 0; c < NCH; c++) begin
      real frac;
      frac = (nul0[c] - real'($signed(dut.u_dan.acc_i[c][39:24]))) / (0.1 * amp[c]);
      check(frac > 0.55 && frac < 0.72, $sformatf("ch%0d step after one time constant: %0.3f of the way", c, frac));
      if (c == 0) $display("nuller step after 51.2 us: %0.3f of the way (0.632 expected)", frac);
      n_bw++;
    end
    wait_packets(60);
    check_readout(65536.0 * 0.9, "pulse");
    pulse = 0.0;
    // ---- stall the output: whole packets are dropped ----
    hold_off = 1;
    repeat (1280 * 6) @(posedge clk);
    hold_off = 0;
    quiet_from = npkt + 8;
    wait_packets(4);
    check(pkt_drop_cnt > 0, "packets dropped while stalled");
    if (pkt_drop_cnt > 0) n_drop++;
    // ---- timestamps: lock must have happened and reached the headers ----
    while (nlocked_hdr < 3) @(posedge clk);
    check(ts_locked, "IRIG-B locked");
    // ---- mechanisms ----
    check(n_modeswitch > 0, "mode switch DAN off -> on happened");
    check(n_pulse > 0 && n_bw > 0, "pulse tracked and loop bandwidth measured");
    check(n_drop > 0, "overflow drop happened");
    check(n_tsdly > 0 && n_tsdly_seen > 0, "timestamp delay programmed and seen");
    check(n_rate > 0, "packet rate checked");
    $display("mechanisms: mode_switch=%0d pulse=%0d drop=%0d (packets dropped %0d) ts_delay_checked=%0d rate_checked=%0d locked_headers=%0d packets=%0d",
             n_modeswitch, n_pulse, n_drop, pkt_drop_cnt, n_tsdly_seen, n_rate, nlocked_hdr, npkt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

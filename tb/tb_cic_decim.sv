// tb_cic_decim: self-checking testbench of the time-multiplexed 6-stage /64 CIC decimator.
// Random IQ samples on all 10 interleaved channels. The reference here is a direct FIR with
// the CIC impulse response (the 6-fold convolution of a 64-sample boxcar, 379 taps), applied
// to each channel's history and scaled by 2^-28; every output must match it exactly and
// come every 64 input samples per channel, one clock after the completing input.
// A second run measures the alias rejection at the edge of the first folding band, which
// must exceed 60 dB, and the DC gain of 2^8.
module tb_cic_decim;
  localparam int NCH = 10, R = 64, N = 6, L = N * (R - 1) + 1, NS = 64 * 40;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic rst, in_valid, out_valid;
  logic [3:0] in_ch, out_ch;
  logic signed [23:0] in_i, in_q;
  logic signed [31:0] out_i, out_q;

  cic_decim dut (.clk, .rst, .in_valid, .in_ch, .in_i, .in_q, .out_valid, .out_ch, .out_i, .out_q);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  longint h [L];
  int xi [NCH][NS], xq [NCH][NS];
  int nout [NCH];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t [L];
    // impulse response: boxcar convolved with itself N times
    for (int k = 0; k < L; k++) h[k] = (k < R) ? 1 : 0;
    for (int s = 1; s < N; s++) begin
      for (int k = 0; k < L; k++) begin
        t[k] = 0;
        for (int j = 0; j < R; j++) if (k - j >= 0) t[k] += h[k - j];
      end
      for (int k = 0; k < L; k++) h[k] = t[k];
    end
    for (int c = 0; c < NCH; c++) begin
      nout[c] = 0;
      for (int n = 0; n < NS; n++) begin
        // channel c: a DC level plus noise, the last channel full-scale random
        xi[c][n] = (c == NCH - 1) ? int'($urandom_range(16777215, 0)) - 8388608
                                  : 100000 * c + int'($urandom_range(2000, 0)) - 1000;
        xq[c][n] = int'($urandom_range(16777215, 0)) - 8388608;
      end
    end
    rst = 1; in_valid = 0; in_ch = 0; in_i = 0; in_q = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NS; n++)
      for (int c = 0; c < NCH; c++) begin
        @(posedge clk);
        in_valid <= 1; in_ch <= 4'(c); in_i <= 24'(xi[c][n]); in_q <= 24'(xq[c][n]);
        #1;
        // output belonging to the previous clock's input
        begin
          int pc, pn;
          pc = (c + NCH - 1) % NCH;
          pn = (c == 0) ? n - 1 : n;
          if (pn >= 0 && (pn % R) == R - 1) begin
            longint si, sq;
            si = 0; sq = 0;
            for (int k = 0; k < L; k++)
              if (pn - k >= 0) begin
                si += h[k] * longint'(xi[pc][pn - k]);
                sq += h[k] * longint'(xq[pc][pn - k]);
              end
            check(out_valid && out_ch == 4'(pc), $sformatf("output strobe ch%0d n%0d", pc, pn));
            check(longint'(out_i) == (si >>> 28) && longint'(out_q) == (sq >>> 28),
                  $sformatf("ch%0d n%0d: %0d %0d exp %0d %0d", pc, pn, out_i, out_q, si >>> 28, sq >>> 28));
            nout[pc]++;
          end else begin
            check(!out_valid, "no output between decimation points");
          end
        end
      end
    for (int c = 0; c < NCH - 1; c++) check(nout[c] == NS / R, "output count = inputs / 64");
    // ---- alias rejection: channel 0 gets DC on I and a tone at 234.375 kHz on Q, the lower
    // edge of the band that folds onto the 0-78 kHz science band (312.5 - 78.125 kHz).
    // The Q output must stay more than 60 dB below the DC output (-62.7 dB expected).
    rst <= 1;
    @(posedge clk);
    rst <= 0;
    begin
      real peak_q, dc_i;
      int nrej;
      peak_q = 0.0; dc_i = 0.0; nrej = 0;
      for (int n = 0; n < 64 * 40; n++)
        for (int c = 0; c < NCH; c++) begin
          @(posedge clk);
          in_valid <= 1; in_ch <= 4'(c);
          in_i <= (c == 0) ? 24'sd4194304 : 24'sd0;
          in_q <= (c == 0) ? 24'($rtoi(4194304.0 * $cos(2.0 * 3.14159265358979 * 234375.0 * n / 20.0e6))) : 24'sd0;
          #1;
          if (out_valid && out_ch == 4'd0 && n > 64 * 8) begin
            dc_i = real'(out_i);
            if (real'(out_q) > peak_q) peak_q = real'(out_q);
            if (-real'(out_q) > peak_q) peak_q = -real'(out_q);
            nrej++;
          end
        end
      check(dc_i > 0.999 * 4194304.0 * 256.0 && dc_i < 1.001 * 4194304.0 * 256.0, $sformatf("DC gain: %0.0f", dc_i));
      check(nrej > 20 && peak_q < 1.0e-3 * dc_i,
            $sformatf("alias rejection at 234.375 kHz: %0.1f dB", 20.0 * $log10(peak_q / dc_i + 1.0e-12)));
      $display("alias rejection at 234.375 kHz: %0.1f dB over %0d outputs", 20.0 * $log10(peak_q / dc_i + 1.0e-12), nrej);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

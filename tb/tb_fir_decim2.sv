// tb_fir_decim2: self-checking testbench of the compensating FIR decimator (/2).
// Random IQ on 10 interleaved channels: every second input of a channel must produce
// sum(h[k] x[n-k]) >> 17 exactly (reference filter here). Then the frequency response of
// the CIC+FIR chain is checked at a few frequencies from the tap formula: the FIR must
// undo the 6-stage /64 CIC droop within 2 % up to 50 kHz and have unit DC gain.
module tb_fir_decim2;
  localparam int NCH = 10, NT = 21, NS = 400;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic rst, in_valid, out_valid;
  logic [3:0] in_ch, out_ch;
  logic signed [31:0] in_i, in_q, out_i, out_q;

  fir_decim2 dut (.clk, .rst, .in_valid, .in_ch, .in_i, .in_q, .out_valid, .out_ch, .out_i, .out_q);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // taps of the design (CIC compensator, sum 2^17)
  int h [NT] = '{-46, 177, -617, -1558, 1975, 6068, -2755, -16978, -2409, 45093, 73170,
                 45093, -2409, -16978, -2755, 6068, 1975, -1558, -617, 177, -46};
  int xi [NCH][NS], xq [NCH][NS];
  int nout;

  function automatic real resp(input real f);   // |CIC(f) * FIR(f)|, f in Hz
    real re, im, x, cic;
    re = 0; im = 0;
    for (int k = 0; k < NT; k++) begin
      re += h[k] * $cos(2.0 * 3.14159265358979 * f * k / 312500.0);
      im -= h[k] * $sin(2.0 * 3.14159265358979 * f * k / 312500.0);
    end
    x = 3.14159265358979 * f / 20.0e6;
    cic = (f == 0) ? 1.0 : $sin(64 * x) / (64 * $sin(x));
    return $sqrt(re * re + im * im) / 131072.0 * (cic ** 6);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: the k-th output of channel c belongs to its input 2k+1
  int outcnt [NCH];
  int nin = 0;
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      longint si, sq, mx, mn;
      int c, n;
      c = int'(out_ch);
      n = 2 * outcnt[c] + 1;
      si = 0; sq = 0;
      mx = 64'sd2147483647; mn = -64'sd2147483648;
      for (int k = 0; k < NT; k++)
        if (n - k >= 0) begin
          si += longint'(h[k]) * xi[c][n - k];
          sq += longint'(h[k]) * xq[c][n - k];
        end
      si = si >>> 17; sq = sq >>> 17;
      si = si > mx ? mx : si < mn ? mn : si;
      sq = sq > mx ? mx : sq < mn ? mn : sq;
      check(longint'(out_i) == si && longint'(out_q) == sq,
            $sformatf("ch%0d n%0d: %0d %0d exp %0d %0d", c, n, out_i, out_q, si, sq));
      if (c == 0 && n > NT) check(out_i inside {[999980:1000000]}, "unit DC gain");
      // output one clock after the completing input: that input had this channel
      check(nin == NCH * n + c + 1, $sformatf("output follows its input by one clock %0d %0d", nin, NCH * n + c + 1));
      outcnt[c]++;
      nout++;
    end
    if (!rst && in_valid) nin++;
  end

  initial begin
    nout = 0;
    foreach (outcnt[c]) outcnt[c] = 0;
    for (int c = 0; c < NCH; c++)
      for (int n = 0; n < NS; n++) begin
        xi[c][n] = $urandom;
        xq[c][n] = int'($urandom) >>> 4;
        if (c == 0) xi[c][n] = 1000000;   // DC on channel 0
      end
    rst = 1; in_valid = 0; in_ch = 0; in_i = 0; in_q = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // channels back to back, with an idle clock after every third round
    for (int n = 0; n < NS; n++) begin
      for (int c = 0; c < NCH; c++) begin
        @(posedge clk);
        in_valid <= 1; in_ch <= 4'(c); in_i <= xi[c][n]; in_q <= xq[c][n];
      end
      if (n % 3 == 0) begin @(posedge clk); in_valid <= 0; end
    end
    @(posedge clk); in_valid <= 0;
    repeat (3) @(posedge clk);
    check(nout == NCH * NS / 2, "output count");
    check(resp(0) > 0.9999 && resp(0) < 1.0001, "DC response");
    for (int k = 1; k <= 5; k++)
      check(resp(10.0e3 * k) > 0.98 && resp(10.0e3 * k) < 1.02, $sformatf("flat at %0d kHz: %f", 10 * k, resp(10.0e3 * k)));
    check(resp(120.0e3) < 0.01, "stopband at 120 kHz");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

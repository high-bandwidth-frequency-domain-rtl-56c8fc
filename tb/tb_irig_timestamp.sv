// tb_irig_timestamp: self-checking testbench of the IRIG-B decoder and timestamp delay.
// Generates IRIG-B frames (scaled: CLK_PER_MS = 20 clocks per millisecond) for day 123,
// 12:34:56 and the following seconds, and checks: lock after the first full frame, the
// decoded BCD time, the tick count since the frame's on-time, loss of lock on a corrupted
// frame, and that the programmable delay returns the timestamp of dly strobes earlier.
module tb_irig_timestamp;
  localparam int CPM = 20;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic rst, irig, frame_stb, locked;
  logic [3:0] dly;
  logic [63:0] ts;

  irig_timestamp #(.CLK_PER_MS(CPM)) dut (.clk, .rst, .irig, .frame_stb, .dly, .ts, .locked);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int ontime_cyc [$];   // clock of each reference marker's rising edge

  // one symbol: high for hi_ms, low for the rest of 10 ms
  task automatic symbol(input int hi_ms);
    irig <= 1'b1; repeat (hi_ms * CPM) @(posedge clk);
    irig <= 1'b0; repeat ((10 - hi_ms) * CPM) @(posedge clk);
  endtask

  function automatic logic [99:0] frame_bits(input int day, input int hr, input int mn, input int sc);
    logic [99:0] b = '0;
    b[4:1] = 4'(sc % 10);  b[8:6] = 3'(sc / 10);
    b[13:10] = 4'(mn % 10); b[17:15] = 3'(mn / 10);
    b[23:20] = 4'(hr % 10); b[26:25] = 2'(hr / 10);
    b[33:30] = 4'(day % 10); b[38:35] = 4'((day / 10) % 10); b[41:40] = 2'(day / 100);
    return b;
  endfunction

  // a frame: the reference marker at index 0 follows the previous frame's P0 (index 99)
  task automatic send_frame(input int sc, input bit corrupt);
    logic [99:0] b;
    b = frame_bits(123, 12, 34, sc);
    ontime_cyc.push_back(cyc + 1);
    symbol(8);                                         // reference marker Pr
    for (int i = 1; i < 100; i++) begin
      if (i % 10 == 9) symbol(corrupt && i == 49 ? 2 : 8);
      else symbol(b[i] ? 5 : 2);
    end
  endtask

  function automatic logic [29:0] bcd(input int day, input int hr, input int mn, input int sc);
    return {2'(day / 100), 4'((day / 10) % 10), 4'(day % 10), 2'(hr / 10), 4'(hr % 10),
            3'(mn / 10), 4'(mn % 10), 3'(sc / 10), 4'(sc % 10)};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frame strobes with a running record of the live timestamp
  logic [63:0] hist [$];
  initial begin
    frame_stb = 0;
    forever begin
      repeat (997) @(posedge clk);
      frame_stb <= 1;
      @(posedge clk);
      frame_stb <= 0;
    end
  end

  initial begin
    rst = 1; irig = 0; dly = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    irig <= 0; repeat (200) @(posedge clk);
    symbol(8);                  // P0 of a previous frame
    send_frame(56, 0);
    check(!locked, "not locked before a full frame");
    send_frame(57, 0);          // its reference marker completes the 56 s frame
    fork
      send_frame(58, 0);
      begin
        repeat (9 * CPM) @(posedge clk);     // Pr of 58 s has been classified
        #1;
        check(locked, "locked");
        check(ts[61:32] == bcd(123, 12, 34, 57), $sformatf("decoded time %h", ts[61:32]));
        check(ts[63] == 1'b1, $sformatf("lock flag in timestamp %h dly=%0d", ts, dly));
        // ticks since the 57 s on-time; the input synchroniser adds 2 clocks of delay
        check(int'(ts[31:0]) == cyc - ontime_cyc[1] - 2, $sformatf("ticks %0d vs %0d", ts[31:0], cyc - ontime_cyc[1] - 2));
        // programmable delay: after three more strobes, dly = k returns the live value
        // recorded at the k-th last strobe
        repeat (3) @(posedge frame_stb);
        @(posedge clk); #1;
        for (int k = 1; k <= 3; k++) begin
          dly = 4'(k); #0.1;
          check(ts == hist[hist.size() - k], $sformatf("delay %0d frames %h %h", k, ts, hist[hist.size() - k]));
        end
        dly = 4'd0;
      end
    join
    send_frame(59, 1);          // frame with a misplaced marker
    send_frame(0, 0);           // its end: lock must be lost
    check(!locked, "lock lost after a corrupted frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // live timestamp (dly = 0) at each strobe
  always @(posedge clk) if (frame_stb && dly == 0) hist.push_back(ts);
endmodule

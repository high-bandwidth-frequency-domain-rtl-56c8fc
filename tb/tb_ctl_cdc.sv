// tb_ctl_cdc: self-checking testbench of the control-bus clock-domain crossing.
// A 125 MHz master issues random register writes, half of them back to back with valid
// held high and the rest after random gaps, holding each until ready; in the 200 MHz domain every write must appear exactly once, in order, as a
// one-cycle r_we with the same address and data. Also checks the write latency bound.
module tb_ctl_cdc;
  localparam int NW = 500;
  int checks = 0, failures = 0;
  logic wclk = 1'b0, rclk = 1'b0;
  always #4.0 wclk = ~wclk;   // 125 MHz
  always #2.5 rclk = ~rclk;   // 200 MHz

  logic wrst, rrst, r_we;
  logic [7:0] r_addr;
  logic [31:0] r_data;

  ctl_if #(.ADDR_W(8), .DATA_W(32)) bus ();
  ctl_cdc dut (.wclk, .wrst, .w(bus), .rclk, .rrst, .r_we, .r_addr, .r_data);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic [39:0] q [$];
  realtime t_acc [$];
  int nrx = 0, n_acc = 0;

  initial begin
    repeat (100000) @(posedge rclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wrst = 1; rrst = 1; bus.valid = 0; bus.addr = 0; bus.data = 0;
    repeat (4) @(posedge wclk);
    wrst <= 0; rrst <= 0;
    repeat (2) @(posedge wclk);
    for (int n = 0; n < NW; n++) begin
      bus.valid <= 1; bus.addr <= 8'($urandom); bus.data <= $urandom;
      #1;
      while (!bus.ready) begin @(posedge wclk); #1; end
      @(posedge wclk);                  // accepted on this edge
      if ($urandom_range(1, 0) == 0) begin
        bus.valid <= 0;
        repeat ($urandom_range(3, 0)) @(posedge wclk);
      end                               // else: back-to-back, next word presented at once

    end
    repeat (20) @(posedge wclk);
    check(nrx == n_acc && q.size() == 0 && n_acc > NW / 2, $sformatf("all writes delivered: %0d of %0d", nrx, n_acc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bus monitor: every accepted write
  always @(posedge wclk)
    if (!wrst && bus.valid && bus.ready) begin
      q.push_back({bus.addr, bus.data});
      t_acc.push_back($realtime);
      n_acc++;
    end

  always @(posedge rclk) begin
    if (r_we) begin
      logic [39:0] e;
      realtime t0;
      check(q.size() > 0, "write without a request");
      if (q.size() > 0) begin
        e = q.pop_front();
        t0 = t_acc.pop_front();
        check({r_addr, r_data} == e, $sformatf("write %0d: %h vs %h", nrx, {r_addr, r_data}, e));
        check($realtime - t0 < 30.0, "latency under 6 processing clocks");
      end
      nrx++;
    end
  end
endmodule

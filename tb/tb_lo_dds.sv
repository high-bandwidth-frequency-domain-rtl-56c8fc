// tb_lo_dds: self-checking testbench of the time-multiplexed DDS.
// Programs a frequency word and a demodulator phase offset per channel, runs the slot
// sequence 0..NCH-1 and checks every cos/sin output against sines computed here from an
// independent phase model (tolerance 1 LSB), plus the one-clock latency and channel tags.
module tb_lo_dds;
  localparam int NCH = 10;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic rst, slot_valid, cfg_we;
  logic [3:0] slot_ch;
  logic [5:0] cfg_addr;
  logic [31:0] cfg_data;
  logic lo_valid;
  logic [3:0] lo_ch;
  logic signed [15:0] lo_cos, lo_sin, dm_cos, dm_sin;

  lo_dds dut (.clk, .rst, .slot_valid, .slot_ch, .cfg_we, .cfg_addr, .cfg_data,
              .lo_valid, .lo_ch, .lo_cos, .lo_sin, .dm_cos, .dm_sin);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int ref_sin(input longint unsigned ph);
    longint unsigned idx = (ph >> 20) & 12'hfff;
    real v = 32767.0 * $sin(2.0 * 3.14159265358979 * (real'(idx) + 0.5) / 4096.0);
    return (v >= 0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  longint unsigned ftw [NCH], poff [NCH], ph [NCH];
  // Resonance frequencies of the 10-channel resonator design (MHz)
  real fres [NCH] = '{1.472, 1.772, 2.144, 2.444, 2.816, 3.166, 3.488, 3.788, 4.160, 4.460};

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; slot_valid = 0; slot_ch = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < NCH; c++) begin
      ftw[c]  = longint'(fres[c] / 20.0 * 4294967296.0);
      poff[c] = $urandom;
      ph[c]   = 0;
      @(posedge clk); cfg_we <= 1; cfg_addr <= 6'(c); cfg_data <= 32'(ftw[c]);
      @(posedge clk); cfg_we <= 1; cfg_addr <= 6'(16 + c); cfg_data <= 32'(poff[c]);
    end
    @(posedge clk); cfg_we <= 0;
    for (int n = 0; n < 500; n++)
      for (int c = 0; c < NCH; c++) begin
        @(posedge clk);
        slot_valid <= 1; slot_ch <= 4'(c);
        #1;
        if (n > 0 || c > 0) begin
          int pc;
          longint unsigned p;
          pc = (c + NCH - 1) % NCH;   // slot presented on the previous clock
          p  = ph[pc];
          check(lo_valid && lo_ch == 4'(pc), "valid/channel tag");
          check(int'(lo_sin) - ref_sin(p) inside {[-1:1]}, $sformatf("sin ch%0d", pc));
          check(int'(lo_cos) - ref_sin(p + 64'h4000_0000) inside {[-1:1]}, $sformatf("cos ch%0d", pc));
          check(int'(dm_sin) - ref_sin(p + poff[pc]) inside {[-1:1]}, $sformatf("dm sin ch%0d", pc));
          check(int'(dm_cos) - ref_sin(p + poff[pc] + 64'h4000_0000) inside {[-1:1]}, "dm cos");
          ph[pc] = (ph[pc] + ftw[pc]) & 64'hffff_ffff;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

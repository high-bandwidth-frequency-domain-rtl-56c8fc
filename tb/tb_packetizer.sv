// tb_packetizer: self-checking testbench of the packetizer.
// Sends 10-channel IQ samples with a changing timestamp, reads the stream with a ready
// that is mostly random and sometimes held low for long stretches. Every packet received
// must be exactly {timestamp, 10 IQ words} of one sent sample, in order, with tlast on the
// 11th word; packets may only be lost whole, and the drop counter must equal the number of
// samples that never arrived. At least one drop must happen.
module tb_packetizer;
  localparam int NCH = 10, NPKT = 300;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic rst, in_valid, m_tvalid, m_tlast, m_tready;
  logic [3:0] in_ch;
  logic signed [31:0] in_i, in_q;
  logic [63:0] ts, m_tdata;
  logic [15:0] drop_cnt;

  packetizer dut (.clk, .rst, .in_valid, .in_ch, .in_i, .in_q, .ts,
                  .m_tdata, .m_tvalid, .m_tlast, .m_tready, .drop_cnt);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic [63:0] sent [NPKT][NCH + 1];
  int rx_pkt = 0, rx_word = 0, expect_pkt = 0, done_tx = 0;
  logic [63:0] cur [NCH + 1];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sender
  initial begin
    rst = 1; in_valid = 0; in_ch = 0; in_i = 0; in_q = 0; ts = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int p = 0; p < NPKT; p++) begin
      sent[p][0] = {32'(p), $urandom};
      for (int c = 0; c < NCH; c++) sent[p][c + 1] = {$urandom, $urandom};
      for (int c = 0; c < NCH; c++) begin
        @(posedge clk);
        in_valid <= 1; in_ch <= 4'(c);
        {in_i, in_q} <= sent[p][c + 1];
        ts <= (c == 0) ? sent[p][0] : 64'hdead_beef_0000_0000;
      end
      @(posedge clk); in_valid <= 0;
      repeat ($urandom_range(40, 1)) @(posedge clk);
    end
    done_tx = 1;
  end

  // receiver: random ready with long stalls in the middle third
  always @(posedge clk) begin
    if (rst) m_tready <= 0;
    else if (rx_pkt > NPKT / 3 && rx_pkt < NPKT / 3 + 5 && ($urandom_range(99, 0) < 97)) m_tready <= 0;
    else m_tready <= ($urandom_range(3, 0) != 0);
  end

  always @(posedge clk) begin
    if (!rst && m_tvalid && m_tready) begin
      cur[rx_word] = m_tdata;
      if (rx_word == NCH) begin
        int p;
        check(m_tlast, "tlast on word 11");
        p = int'(cur[0][63:32]);           // sample number carried in the timestamp
        check(p >= expect_pkt && p < NPKT, "packets in order");
        for (int w = 0; w <= NCH; w++) check(cur[w] == sent[p][w], $sformatf("pkt %0d word %0d", p, w));
        expect_pkt = p + 1;
        rx_pkt++;
        rx_word = 0;
      end else begin
        check(!m_tlast, "no early tlast");
        rx_word++;
      end
    end
  end

  initial begin
    wait (done_tx == 1);
    repeat (2000) @(posedge clk);
    check(rx_word == 0, "no partial packet left");
    check(int'(drop_cnt) + rx_pkt == NPKT, $sformatf("drops %0d + received %0d = sent", drop_cnt, rx_pkt));
    check(drop_cnt > 0, "overflow drop exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

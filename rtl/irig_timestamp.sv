// irig_timestamp: IRIG-B time-code decoder and packet timestamp source.
//
// IRIG-B sends one 100-bit frame per second, one symbol per 10 ms, coded by pulse width:
// 2 ms high = 0, 5 ms = 1, 8 ms = position marker P. Two markers in a row mark the start of
// a frame; the leading edge of the second one (the reference marker) is the on-time instant
// of the second the frame encodes. Bits 1-41 hold BCD seconds, minutes, hours and day of year,
// least significant bit first; every tenth symbol (9, 19, ..., 99) is a marker.
//
// The decoder measures each pulse in clock cycles (CLK_PER_MS per millisecond, 200000 at
// 200 MHz), classifies it with thresholds at 3.5 ms and 6.5 ms, and collects the bits of a
// frame. When the next reference marker arrives and the frame was well formed (markers in
// the right places, 100 symbols), its time is taken over and 'locked' is set; a malformed
// frame clears 'locked'. Alongside, a counter of clock ticks since the on-time of the decoded
// second runs continuously, so the live time is
//   {locked, 1'b0, day[9:0], hour[5:0], min[6:0], sec[6:0] (all BCD), ticks[31:0]}.
//
// On each frame_stb (one per output sample) the live time is stored in a DLY_DEPTH ring. The
// ts output is the live time when dly = 0, or the value stored dly strobes earlier: this is
// the programmable delay that lines the timestamp up with the data, whose decimation latency
// is several output samples. ts is combinational from dly and the ring.
// The paper names the IRIG-B input and the programmable delay; the decoding follows the public
// IRIG-B format, and the timestamp format and the unit of the delay are this design's choice.
module irig_timestamp #(
  parameter int CLK_PER_MS = 200000,
  parameter int DLY_DEPTH  = 16
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         irig,
  input  logic                         frame_stb,
  input  logic [$clog2(DLY_DEPTH)-1:0] dly,
  output logic [63:0]                  ts,
  output logic                         locked
);
  typedef enum logic [1:0] {SYM_0, SYM_1, SYM_P} sym_e;
  localparam int T01 = CLK_PER_MS * 7 / 2;   // 3.5 ms
  localparam int T1P = CLK_PER_MS * 13 / 2;  // 6.5 ms
  localparam int DA_W = $clog2(DLY_DEPTH);

  logic [2:0]  sync;
  logic [31:0] width;      // length of the current high pulse
  logic [31:0] rise_cnt;   // ticks since the last rising edge
  logic [31:0] pr_cnt;     // ticks since the last reference marker's on-time
  logic [31:0] ticks;      // ticks since the on-time of the decoded second
  logic [29:0] tod;        // decoded BCD time
  logic        prev_p;     // previous symbol was a marker
  logic [6:0]  idx;        // symbol index within the frame, 0 = reference marker
  logic        in_frame;   // a reference marker has been seen
  logic        frame_ok;   // no framing error since the reference marker
  logic [41:0] bits;

  wire rise = sync[1] & ~sync[2];
  wire fall = ~sync[1] & sync[2];

  sym_e sym;
  assign sym = (width < 32'(T01)) ? SYM_0 : (width < 32'(T1P)) ? SYM_1 : SYM_P;

  function automatic logic [29:0] bcd_fields(input logic [41:0] b);
    // day: hundreds b[41:40], tens b[38:35], units b[33:30]; hour: tens b[26:25], units
    // b[23:20]; minute: tens b[17:15], units b[13:10]; second: tens b[8:6], units b[4:1]
    return {b[41:40], b[38:35], b[33:30], b[26:25], b[23:20], b[17:15], b[13:10], b[8:6], b[4:1]};
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      sync <= '0; width <= '0; rise_cnt <= '0; pr_cnt <= '0; ticks <= '0; tod <= '0;
      prev_p <= 1'b0; idx <= '0; in_frame <= 1'b0; frame_ok <= 1'b0; bits <= '0;
      locked <= 1'b0;
    end else begin
      sync     <= {sync[1:0], irig};
      rise_cnt <= rise ? 32'd1 : rise_cnt + 1'b1;
      pr_cnt   <= pr_cnt + 1'b1;
      ticks    <= ticks + 1'b1;
      if (rise) width <= 32'd1;
      else if (sync[1]) width <= width + 1'b1;

      if (fall) begin
        prev_p <= (sym == SYM_P);
        if (sym == SYM_P && prev_p) begin
          // reference marker: close the previous frame, start a new one
          if (in_frame && frame_ok && idx == 7'd100) begin
            tod    <= bcd_fields(bits);
            ticks  <= pr_cnt + 1'b1;     // ticks since the on-time of that frame
            locked <= 1'b1;
          end else if (in_frame) begin
            locked <= 1'b0;
          end
          pr_cnt   <= rise_cnt + 1'b1;   // on-time was this pulse's rising edge
          in_frame <= 1'b1;
          frame_ok <= 1'b1;
          idx      <= 7'd1;
          bits     <= '0;
        end else if (in_frame) begin
          if (idx < 7'd100) begin
            idx <= idx + 1'b1;
            // markers exactly at 9, 19, ..., 99
            if ((sym == SYM_P) != (idx % 10 == 9)) frame_ok <= 1'b0;
            if (idx < 7'd42) bits[idx[5:0]] <= (sym == SYM_1);
          end else begin
            frame_ok <= 1'b0;            // more than 100 symbols
          end
        end
      end
    end
  end

  // ---- programmable delay ----
  logic [63:0]     ring [DLY_DEPTH];
  logic [DA_W-1:0] wp;
  logic [63:0]     live;

  assign live = {locked, 1'b0, tod, ticks};
  assign ts   = (dly == '0) ? live : ring[wp - dly];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      for (int k = 0; k < DLY_DEPTH; k++) ring[k] <= '0;
    end else if (frame_stb) begin
      ring[wp] <= live;
      wp       <= wp + 1'b1;
    end
  end
endmodule

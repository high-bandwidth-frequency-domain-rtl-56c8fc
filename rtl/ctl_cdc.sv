// ctl_cdc: carries register writes from the 125 MHz control clock into the 200 MHz
// processing clock.
//
// The write side accepts one ctl_if write at a time: it latches address and data, flips a
// request toggle and drops ready until the toggle has come back as an acknowledge through a
// two-flop synchroniser. The read side synchronises the toggle with two flops and, on each
// change, presents the latched (by then stable) address and data for exactly one 200 MHz cycle
// on r_we/r_addr/r_data. A write therefore takes about three processing clocks to appear and
// the next write is accepted after about three control clocks more.
// The paper gives only the two clock rates; the handshake synchroniser is this design's choice.
module ctl_cdc #(
  parameter int ADDR_W = 8,
  parameter int DATA_W = 32
) (
  input  logic              wclk,
  input  logic              wrst,
  ctl_if.slave              w,
  input  logic              rclk,
  input  logic              rrst,
  output logic              r_we,
  output logic [ADDR_W-1:0] r_addr,
  output logic [DATA_W-1:0] r_data
);
  logic              req_tgl;   // flips once per accepted write (control domain)
  logic              ack_tgl;   // follows req_tgl once the write is issued (processing domain)
  logic [1:0]        req_sync;

  // ---- control clock domain ----
  logic [1:0]        ack_sync;
  logic [ADDR_W-1:0] hold_addr;
  logic [DATA_W-1:0] hold_data;

  assign w.ready = (req_tgl == ack_sync[1]);

  always_ff @(posedge wclk) begin
    if (wrst) begin
      req_tgl   <= 1'b0;
      ack_sync  <= '0;
      hold_addr <= '0;
      hold_data <= '0;
    end else begin
      ack_sync <= {ack_sync[0], ack_tgl};
      if (w.valid && w.ready) begin
        hold_addr <= w.addr;
        hold_data <= w.data;
        req_tgl   <= ~req_tgl;
      end
    end
  end

  // ---- processing clock domain ----
  always_ff @(posedge rclk) begin
    if (rrst) begin
      req_sync <= '0;
      ack_tgl  <= 1'b0;
      r_we     <= 1'b0;
      r_addr   <= '0;
      r_data   <= '0;
    end else begin
      req_sync <= {req_sync[0], req_tgl};
      r_we     <= 1'b0;
      if (req_sync[1] != ack_tgl) begin
        ack_tgl <= req_sync[1];
        r_we    <= 1'b1;
        r_addr  <= hold_addr;   // stable: held since the toggle was flipped
        r_data  <= hold_data;
      end
    end
  end

  // A master must hold its write until it is accepted.
  a_hold: assert property (@(posedge wclk) disable iff (wrst)
                           w.valid && !w.ready |=> w.valid && $stable(w.addr) && $stable(w.data));
endmodule

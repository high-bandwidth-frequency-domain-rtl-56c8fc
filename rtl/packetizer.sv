// packetizer: assembles the decimated IQ samples of one readout module into packets.
//
// For each output sample the FIR delivers the NCH channels in order 0..NCH-1 on consecutive
// (or spread) clocks. One packet is one 64-bit header word, the timestamp ts sampled when
// channel 0 arrives, followed by NCH data words {I[31:0], Q[31:0]}; m_tlast marks the last.
// One header word per ten data words is the 10 % packet overhead of the science stream.
//
// Words go through a DEPTH-word first-word-fall-through FIFO to a valid/ready stream
// (m_tvalid/m_tready/m_tdata/m_tlast). Whole packets are admitted: if, when channel 0
// arrives, fewer than NCH+1 words are free, the whole packet is dropped and drop_cnt counts
// it, so the receiver never sees a torn packet.
// Timing: the header is written in the cycle channel 0 arrives and each data word one cycle
// after its input, so the input needs at least one idle clock between the last channel of
// one sample and channel 0 of the next (the decimator spaces samples by hundreds of clocks).
// Packetizing follows the paper; the word layout, FIFO and drop policy are this design's.
module packetizer #(
  parameter int NCH   = fmux_pkg::NCH,
  parameter int W     = fmux_pkg::OUT_W,
  parameter int DEPTH = 32
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  fmux_pkg::ch_t       in_ch,
  input  logic signed [W-1:0] in_i,
  input  logic signed [W-1:0] in_q,
  input  logic [63:0]         ts,
  output logic [63:0]         m_tdata,
  output logic                m_tvalid,
  output logic                m_tlast,
  input  logic                m_tready,
  output logic [15:0]         drop_cnt
);
  localparam int A_W = $clog2(DEPTH);

  logic [64:0]  mem [DEPTH];    // {last, data}
  logic [A_W:0] wr_ptr, rd_ptr;
  logic [A_W:0] count;
  logic         dropping;
  logic         d1_valid, d1_last;
  logic [63:0]  d1_data;
  logic         hdr_we, dat_we, rd;
  logic [64:0]  wr_word;

  assign count    = wr_ptr - rd_ptr;
  assign m_tvalid = (count != 0);
  assign {m_tlast, m_tdata} = mem[rd_ptr[A_W-1:0]];
  assign rd       = m_tvalid && m_tready;

  wire start   = in_valid && in_ch == '0;
  wire room    = (int'(count) - (rd ? 1 : 0)) <= DEPTH - (NCH + 1);  // space after this cycle's read
  assign hdr_we  = start && room;
  assign dat_we  = d1_valid;
  assign wr_word = hdr_we ? {1'b0, ts} : {d1_last, d1_data};

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      dropping <= 1'b0;
      d1_valid <= 1'b0;
      d1_last  <= 1'b0;
      d1_data  <= '0;
      drop_cnt <= '0;
    end else begin
      if (rd) rd_ptr <= rd_ptr + 1'b1;
      if (hdr_we || dat_we) begin
        mem[wr_ptr[A_W-1:0]] <= wr_word;
        wr_ptr <= wr_ptr + 1'b1;
      end
      // stage the data word one cycle so the header goes first
      d1_valid <= 1'b0;
      if (in_valid) begin
        if (start) begin
          dropping <= !room;
          if (!room) drop_cnt <= drop_cnt + 1'b1;
        end
        d1_valid <= start ? room : !dropping;
        d1_last  <= int'(in_ch) == NCH - 1;
        d1_data  <= {in_i, in_q};
      end
    end
  end

  // The header and a staged data word must never need the write port together.
  a_spacing: assert property (@(posedge clk) disable iff (rst) !(hdr_we && dat_we));
endmodule

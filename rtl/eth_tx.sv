// eth_tx: Ethernet frame sender for the acquired data.
//
// Collects one frame's worth of 32-bit words (up to FRAME_WORDS, or fewer if
// the input marks 'in_last') into a frame buffer, then sends a complete
// Ethernet II frame one byte per clock on a GMII-style port (txd, tx_en):
//   7 x 0x55 preamble, 0xD5 start delimiter, destination MAC, source MAC,
//   EtherType, 16-bit frame sequence number, the words (big-endian), zero
//   padding up to the 60-byte minimum, and the CRC-32 frame check sequence
//   over everything after the start delimiter (sent least significant byte
//   first), followed by an inter-frame gap of IFG idle cycles.
// At a 125 MHz clock this is a 1 Gb/s stream for a gigabit PHY; the PHY's
// reduced-pin (RGMII) conversion uses FPGA output primitives and is not part
// of this module. in_ready is high only while the buffer is being filled.
// The frame layout, EtherType and addresses are this design's choices; the
// design specifies only that the data goes to the PC over Ethernet.
module eth_tx
  import mri_pkg::*;
#(
  parameter int          FRAME_WORDS = 256,
  parameter logic [47:0] DST_MAC     = 48'hFF_FF_FF_FF_FF_FF,
  parameter logic [47:0] SRC_MAC     = 48'h02_00_00_00_4D_52,
  parameter logic [15:0] ETHERTYPE   = 16'h88B5,
  parameter int          IFG         = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  input  logic        in_last,
  output logic [7:0]  txd,
  output logic        tx_en,
  output logic [15:0] frames_sent
);
  localparam int KW = $clog2(FRAME_WORDS + 1);
  localparam int PW = $clog2(4 * FRAME_WORDS + 96); // byte position counter
  localparam int BW = $clog2(FRAME_WORDS);

  typedef enum logic [1:0] {S_FILL, S_SEND, S_GAP} state_e;
  state_e state;

  logic [31:0]   fbuf [FRAME_WORDS];
  logic [KW-1:0] wcnt, nwords;
  logic [PW-1:0] pos, data_end, pad_end;
  logic [31:0]   crc;
  logic [15:0]   seq;
  logic [4:0]    gap;
  logic [7:0]    byte_c;
  logic          crc_en;

  assign in_ready = state == S_FILL;
  assign data_end = PW'(24) + (PW'(nwords) << 2);
  assign pad_end  = (data_end < PW'(68)) ? PW'(68) : data_end;

  // byte at position 'pos' of the frame
  always_comb begin
    logic [BW+1:0] off;
    logic [31:0]   w;
    logic [1:0]    fb;
    off    = (BW+2)'(pos - PW'(24));
    w      = fbuf[off[BW+1:2]];
    fb     = 2'(pos - pad_end);
    crc_en = pos >= PW'(8) && pos < pad_end;
    if (pos < PW'(7))           byte_c = 8'h55;
    else if (pos == PW'(7))     byte_c = 8'hD5;
    else if (pos < PW'(14))     byte_c = DST_MAC[8*(13 - int'(pos)) +: 8];
    else if (pos < PW'(20))     byte_c = SRC_MAC[8*(19 - int'(pos)) +: 8];
    else if (pos == PW'(20))    byte_c = ETHERTYPE[15:8];
    else if (pos == PW'(21))    byte_c = ETHERTYPE[7:0];
    else if (pos == PW'(22))    byte_c = seq[15:8];
    else if (pos == PW'(23))    byte_c = seq[7:0];
    else if (pos < data_end)    byte_c = w[8*(3 - int'(off[1:0])) +: 8];
    else if (pos < pad_end)     byte_c = 8'h00;
    else                        byte_c = ~crc[8*fb +: 8];
  end

  always_ff @(posedge clk) begin
    if (state == S_FILL && in_valid) fbuf[wcnt[BW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_FILL;
      wcnt        <= '0;
      nwords      <= '0;
      pos         <= '0;
      crc         <= '1;
      seq         <= '0;
      gap         <= '0;
      txd         <= '0;
      tx_en       <= 1'b0;
      frames_sent <= '0;
    end else begin
      txd   <= 8'h00;
      tx_en <= 1'b0;
      unique case (state)
        S_FILL: if (in_valid) begin
          if (in_last || wcnt == KW'(FRAME_WORDS - 1)) begin
            nwords <= wcnt + 1'b1;
            wcnt   <= '0;
            pos    <= '0;
            crc    <= '1;
            state  <= S_SEND;
          end else begin
            wcnt <= wcnt + 1'b1;
          end
        end
        S_SEND: begin
          txd   <= byte_c;
          tx_en <= 1'b1;
          if (crc_en) crc <= crc32_byte(crc, byte_c);
          if (pos == pad_end + PW'(3)) begin
            state       <= S_GAP;
            gap         <= 5'(IFG - 1);
            seq         <= seq + 1'b1;
            frames_sent <= frames_sent + 1'b1;
          end else begin
            pos <= pos + 1'b1;
          end
        end
        default: begin
          if (gap == 0) state <= S_FILL;
          else gap <= gap - 1'b1;
        end
      endcase
    end
  end
endmodule

// wiscop_pkg: constants and types shared by the flexible IEEE 802.15.4 PHY.
//
// The PHY sends and receives the 2.4 GHz O-QPSK waveform of IEEE 802.15.4:
// each 4-bit symbol is spread to a chip sequence (32 chips in the standard),
// chips go out at 2 Mchip/s and the sample rate is 8 Msps, so one chip lasts
// SPC = 4 samples. The 16 standard chip sequences are not stored as a table:
// symbols 1..7 are symbol 0 rotated by 4*k chips, and symbols 8..15 are
// symbols 0..7 with every odd-indexed chip inverted; chip_seq() computes them.
// Chip c0 (sent first) is bit 0 of a sequence word.
//
// The spreading factor can be shortened at run time (a choice of this design,
// the standard only has 32): SF_16 and SF_8 send the first 16 or 8 chips of
// each standard sequence, trading robustness for throughput.
//
// The register map and the interrupt bit positions used by axil_regs and
// irq_ctrl are also defined here; they are this design's own choice.
package wiscop_pkg;

  localparam int SAMPLE_W = 12;           // DAC/ADC sample width
  localparam int SPC      = 4;            // samples per chip (8 Msps / 2 Mchip/s)
  localparam logic [31:0] CHIP_SEQ0 = 32'h744A_C39B;  // symbol 0, c0 in bit 0

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // Spreading factor select
  typedef enum logic [1:0] {
    SF_32 = 2'd0,
    SF_16 = 2'd1,
    SF_8  = 2'd2,
    SF_8B = 2'd3   // treated as SF_8
  } sf_e;

  // Chips per symbol for a spreading-factor select value
  function automatic logic [5:0] sf_chips(input logic [1:0] sf);
    case (sf)
      2'd0:    return 6'd32;
      2'd1:    return 6'd16;
      default: return 6'd8;
    endcase
  endfunction

  // Mask of the chips in use (low sf_chips bits)
  function automatic logic [31:0] sf_mask(input logic [1:0] sf);
    case (sf)
      2'd0:    return 32'hFFFF_FFFF;
      2'd1:    return 32'h0000_FFFF;
      default: return 32'h0000_00FF;
    endcase
  endfunction

  // IEEE 802.15.4 2.4 GHz chip sequence of a symbol, c0 in bit 0
  function automatic logic [31:0] chip_seq(input logic [3:0] sym);
    logic [31:0] s;
    logic [4:0]  sh;
    sh = {sym[2:0], 2'b00};
    s  = (CHIP_SEQ0 << sh) | (CHIP_SEQ0 >> (6'd32 - {1'b0, sh}));
    if (sh == 5'd0) s = CHIP_SEQ0;
    if (sym[3]) s = s ^ 32'hAAAA_AAAA;
    return s;
  endfunction

  // Differential (MSK-view) form of a chip sequence, as seen by a receiver
  // that takes the sign of Im(s(t) * conj(s(t - 1 chip))) at each chip peak.
  // Bit j (j >= 1) is 1 when that product is positive: for odd j when chips
  // j and j-1 are equal, for even j when they differ. Bit 0 depends on the
  // previous symbol and is returned as 0; receivers must mask it.
  function automatic logic [31:0] diff_seq(input logic [31:0] c);
    logic [31:0] x;
    x = (c ^ (c << 1)) ^ 32'hAAAA_AAAA;
    x[0] = 1'b0;
    return x;
  endfunction

  // IEEE 802.15.4 FCS: CRC-16, x^16 + x^12 + x^5 + 1, LSB first (reflected
  // polynomial 0x8408), initial value 0, no final inversion.
  function automatic logic [15:0] crc16_byte(input logic [15:0] crc, input logic [7:0] d);
    logic [15:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) begin
      if (c[0] ^ d[i]) c = (c >> 1) ^ 16'h8408;
      else             c = c >> 1;
    end
    return c;
  endfunction

  // Register map (byte addresses on the AXI4-Lite control interface)
  localparam logic [7:0] REG_CTRL      = 8'h00; // [0] tx_start (W1S, self-clearing) [1] rx_en [2] pulse_sel [3] rx_coherent
  localparam logic [7:0] REG_SF        = 8'h04; // [1:0] spreading factor select
  localparam logic [7:0] REG_PREAMBLE  = 8'h08; // [3:0] preamble length in bytes
  localparam logic [7:0] REG_SFD       = 8'h0C; // [7:0] start-of-frame delimiter
  localparam logic [7:0] REG_TX_LEN    = 8'h10; // [6:0] PHR frame length (payload + 2 FCS bytes)
  localparam logic [7:0] REG_RX_THRESH = 8'h14; // [5:0] chip-error threshold for 32 chips
  localparam logic [7:0] REG_IRQ_EN    = 8'h18; // [4:0] interrupt enables
  localparam logic [7:0] REG_IRQ_STAT  = 8'h1C; // [4:0] latched events, write 1 to clear
  localparam logic [7:0] REG_STATUS    = 8'h20; // [0] tx_busy [1] rx_in_frame [2] last_crc_ok
  localparam logic [7:0] REG_RX_LEN    = 8'h24; // [6:0] length field of last received frame
  localparam logic [7:0] REG_RX_CHERR  = 8'h28; // chip errors summed over last received frame
  localparam logic [7:0] REG_TX_CNT    = 8'h2C; // frames sent
  localparam logic [7:0] REG_RX_CNT    = 8'h30; // frames received with good FCS
  localparam logic [7:0] REG_CRCERR    = 8'h34; // frames received with bad FCS
  localparam logic [7:0] REG_RX_OVF    = 8'h38; // received bytes dropped (data plane full)
  localparam logic [7:0] REG_RX_RSSI   = 8'h3C; // [12:0] mean |I|+|Q| after the SFD of the last received frame

  // Interrupt event bits
  localparam int N_EVT       = 5;
  localparam int EVT_TX_FIRST = 0;  // first sample of a frame sent to the DAC
  localparam int EVT_RX_SFD   = 1;  // SFD of a frame received
  localparam int EVT_TX_DONE  = 2;  // last sample of a frame sent
  localparam int EVT_RX_DONE  = 3;  // frame received (any FCS)
  localparam int EVT_CRC_ERR  = 4;  // frame received with bad FCS

endpackage

// crc16_154: the FCS engine of the IEEE 802.15.4 PHY.
//
// Computes the 16-bit frame check sequence of the standard (polynomial
// x^16 + x^12 + x^5 + 1, bits taken LSB first, register starting at zero,
// no final inversion), one byte per clock. The transmitter appends crc[7:0]
// and then crc[15:8] after the payload; a receiver that feeds the whole PSDU,
// FCS included, through the engine finds the register back at zero (zero = 1)
// when the frame is intact.
//
// Interface: init clears the register (it wins over en); en absorbs data.
// crc and zero reflect all bytes absorbed up to the previous clock edge.
// The polynomial and bit order follow the standard; the one-byte-per-clock
// structure is this design's choice.
module crc16_154 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic        en,
  input  logic [7:0]  data,
  output logic [15:0] crc,
  output logic        zero
);
  import wiscop_pkg::crc16_byte;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    crc <= '0;
    else if (init) crc <= '0;
    else if (en)   crc <= crc16_byte(crc, data);
  end

  assign zero = (crc == 16'h0000);
endmodule

// tb_ref_pkg: reference models for the PHY testbenches, written independently
// of the RTL. The chip table is the IEEE 802.15.4 2.4 GHz symbol-to-chip table
// as printed in the standard (c0 leftmost); the CRC is a plain MSB-first
// CRC-16/CCITT division on bit-reversed bytes; the pulse is computed with $sin.
package tb_ref_pkg;

  localparam string CHIP_TABLE [16] = '{
    "11011001110000110101001000101110",
    "11101101100111000011010100100010",
    "00101110110110011100001101010010",
    "00100010111011011001110000110101",
    "01010010001011101101100111000011",
    "00110101001000101110110110011100",
    "11000011010100100010111011011001",
    "10011100001101010010001011101101",
    "10001100100101100000011101111011",
    "10111000110010010110000001110111",
    "01111011100011001001011000000111",
    "01110111101110001100100101100000",
    "00000111011110111000110010010110",
    "01100000011101111011100011001001",
    "10010110000001110111101110001100",
    "11001001011000000111011110111000"
  };

  function automatic bit chip_ref(int sym, int j);
    return CHIP_TABLE[sym][j] == "1";
  endfunction

  function automatic logic [7:0] rev8(logic [7:0] b);
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[i] = b[7-i];
    return r;
  endfunction

  // FCS of IEEE 802.15.4 computed MSB-first on reflected data
  function automatic logic [15:0] crc_ref(byte unsigned msg[$]);
    logic [15:0] c;
    logic [15:0] r;
    c = 16'h0000;
    foreach (msg[n]) begin
      logic [7:0] b;
      b = rev8(msg[n]);
      for (int i = 7; i >= 0; i--) begin
        if (c[15] ^ b[i]) c = (c << 1) ^ 16'h1021;
        else              c = c << 1;
      end
    end
    for (int i = 0; i < 16; i++) r[i] = c[15-i];
    return r;
  endfunction

  // pulse sample m (0..7) of an 8-sample chip pulse
  function automatic int pulse_ref(int m, bit rect, int amp);
    if (m < 0 || m > 7) return 0;
    if (rect) return amp;
    return int'($floor(amp * $sin(3.14159265358979 * m / 8.0) + 1e-9));
  endfunction

  // chips per symbol for a spreading-factor select value
  function automatic int sf_ref(int sel);
    return (sel == 0) ? 32 : (sel == 1) ? 16 : 8;
  endfunction

endpackage

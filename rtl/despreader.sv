// despreader: maximum-likelihood symbol decision on hard chip decisions.
//
// The input is a window of chip decisions (chip 0 in bit 0). It is compared
// with the chip sequence of each of the 16 symbols, using only the first
// 32, 16 or 8 chips as set by sf_sel, and the symbol at the smallest Hamming
// distance wins (the lowest symbol number on a tie). The distance of the
// winner and the distance to symbol 0 (the preamble symbol, used for
// acquisition) are reported too.
//
// With diff = 1 the window holds differential chip decisions instead (see
// wiscop_pkg::diff_seq) and is compared with the differential form of each
// code, leaving out chip 0, which depends on the previous symbol.
//
// Purely combinational; the receiver samples the outputs once per symbol.
// Hard-decision minimum-distance despreading is this design's choice of
// receiver algorithm.
module despreader (
  input  logic [31:0] window,
  input  logic [1:0]  sf_sel,
  input  logic        diff,
  output logic [3:0]  sym,
  output logic [5:0]  sdist,
  output logic [5:0]  sdist0
);
  import wiscop_pkg::chip_seq, wiscop_pkg::diff_seq, wiscop_pkg::sf_mask;

  logic [5:0]  d [16];
  logic [31:0] mask;

  always_comb begin
    mask = diff ? (sf_mask(sf_sel) & ~32'h1) : sf_mask(sf_sel);
    for (int s = 0; s < 16; s++) begin
      d[s] = 6'($countones((window ^ (diff ? diff_seq(chip_seq(4'(s))) : chip_seq(4'(s)))) & mask));
    end
    sym  = 4'd0;
    sdist = d[0];
    for (int s = 1; s < 16; s++) begin
      if (d[s] < sdist) begin
        sdist = d[s];
        sym  = 4'(s);
      end
    end
    sdist0 = d[0];
  end
endmodule

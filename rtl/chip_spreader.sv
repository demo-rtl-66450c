// chip_spreader: direct-sequence spreading of 4-bit symbols into chips.
//
// Each symbol taken from the input stream is replaced by its IEEE 802.15.4
// chip sequence, sent c0 first as a valid/ready stream of single chips. The
// spreading factor is a run-time control: sf_sel = 0 sends the standard 32
// chips, 1 the first 16 and 2 (or 3) the first 8 chips of the sequence; the
// value is sampled when a symbol is loaded. The shortened codes are this
// design's reading of a "controllable spreading factor".
//
// Timing: a symbol is taken in the same cycle as the last chip of the previous
// one, so a continuous symbol stream gives a continuous chip stream.
// chip_last is high on the final chip of the symbol marked sym_last.
module chip_spreader (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] sf_sel,
  input  logic [3:0] sym_data,
  input  logic       sym_valid,
  input  logic       sym_last,
  output logic       sym_ready,
  output logic       chip,
  output logic       chip_valid,
  output logic       chip_last,
  input  logic       chip_ready
);
  import wiscop_pkg::chip_seq, wiscop_pkg::sf_chips;

  logic [31:0] seq;
  logic [5:0]  idx, nchips;
  logic        loaded, last_sym;
  logic        end_of_sym;

  assign end_of_sym = (idx == nchips - 6'd1);
  assign chip       = seq[0];
  assign chip_valid = loaded;
  assign chip_last  = loaded && end_of_sym && last_sym;
  assign sym_ready  = !loaded || (chip_ready && end_of_sym);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq <= '0; idx <= '0; nchips <= 6'd32; loaded <= 1'b0; last_sym <= 1'b0;
    end else begin
      if (loaded && chip_ready) begin
        seq <= seq >> 1;
        idx <= idx + 1'b1;
        if (end_of_sym) loaded <= 1'b0;
      end
      if (sym_valid && sym_ready) begin
        seq      <= chip_seq(sym_data);
        idx      <= '0;
        nchips   <= sf_chips(sf_sel);
        loaded   <= 1'b1;
        last_sym <= sym_last;
      end
    end
  end
endmodule

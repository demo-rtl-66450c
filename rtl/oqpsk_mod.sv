// oqpsk_mod: O-QPSK modulator with selectable pulse shaping, 8 Msps.
//
// Chips alternate between the branches: even-indexed chips (c0, c2, ...) go
// to I, odd-indexed chips to Q, so Q lags I by one chip period. Every chip is
// a pulse two chip periods (8 samples) long: a half-sine, as in the
// IEEE 802.15.4 2.4 GHz PHY, when pulse_sel = 0, or a rectangle when
// pulse_sel = 1. Chip 1 gives a positive pulse, chip 0 a negative one. At
// 4 samples per chip the pulse of chip k occupies samples 4k .. 4k+7 of the
// frame and peaks (value AMP) at sample 4k+4.
//
// Interface: the module takes a chip whenever it is idle or at the end of each
// 4-sample chip slot (chip_ready). It emits one sample per clock (the clock is
// the 8 MHz sample clock), registered: dac_valid is high for the 4*N+4 samples
// of a frame of N chips. first_sample pulses with the frame's first sample at
// the DAC, done with its last. A frame ends after the chip marked chip_last,
// or early if the chip stream runs dry mid-frame. AMP and the 12-bit width are
// this design's choice; the pulse is sin(pi*m/8) in Q15, scaled by AMP.
module oqpsk_mod #(
  parameter int AMP = 1800
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pulse_sel,
  input  logic       chip,
  input  logic       chip_valid,
  input  logic       chip_last,
  output logic       chip_ready,
  output logic signed [11:0] dac_i,
  output logic signed [11:0] dac_q,
  output logic       dac_valid,
  output logic       first_sample,
  output logic       done,
  output logic       active
);
  logic [1:0] phase;
  logic       odd, tail, cur, prev, cur_last, have_prev, shape;
  logic signed [12:0] p_cur, p_prev, a_cur, a_prev;

  // Pulse sample m (0..7): half-sine or rectangle, scaled by AMP
  function automatic logic signed [12:0] pulse(input logic [2:0] m, input logic rect);
    logic [15:0] q;
    case (m)
      3'd0:       q = 16'd0;
      3'd1, 3'd7: q = 16'd12540;   // sin(pi/8)  * 32768
      3'd2, 3'd6: q = 16'd23170;   // sin(pi/4)  * 32768
      3'd3, 3'd5: q = 16'd30274;   // sin(3pi/8) * 32768
      default:    q = 16'd32768 - 16'd1;
    endcase
    if (rect) return 13'(AMP);
    if (m == 3'd4) return 13'(AMP);
    return 13'((AMP * int'(q)) >>> 15);
  endfunction

  assign p_cur  = pulse({1'b0, phase}, shape);
  assign p_prev = pulse({1'b1, phase}, shape);
  assign a_cur  = tail ? 13'sd0 : (cur ? p_cur : -p_cur);
  assign a_prev = !have_prev ? 13'sd0 : (prev ? p_prev : -p_prev);

  assign chip_ready = !active || (phase == 2'd3 && !tail && !cur_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; phase <= '0; odd <= 1'b0; tail <= 1'b0; cur <= 1'b0;
      prev <= 1'b0; cur_last <= 1'b0; have_prev <= 1'b0; shape <= 1'b0;
    end else if (!active) begin
      if (chip_valid) begin
        active <= 1'b1; phase <= '0; odd <= 1'b0; tail <= 1'b0;
        cur <= chip; cur_last <= chip_last; have_prev <= 1'b0; shape <= pulse_sel;
      end
    end else begin
      phase <= phase + 1'b1;
      if (phase == 2'd3) begin
        if (tail) begin
          active <= 1'b0;
        end else begin
          prev      <= cur;
          have_prev <= 1'b1;
          odd       <= ~odd;
          if (!cur_last && chip_valid) begin
            cur      <= chip;
            cur_last <= chip_last;
          end else begin
            tail <= 1'b1;   // last chip sent (or stream ran dry): emit its tail
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_i <= '0; dac_q <= '0; dac_valid <= 1'b0; first_sample <= 1'b0; done <= 1'b0;
    end else begin
      dac_valid    <= active;
      dac_i        <= !active ? 12'sd0 : 12'(odd ? a_prev : a_cur);
      dac_q        <= !active ? 12'sd0 : 12'(odd ? a_cur : a_prev);
      first_sample <= active && !have_prev && !odd && !tail && phase == 2'd0;
      done         <= active && tail && phase == 2'd3;
    end
  end
endmodule

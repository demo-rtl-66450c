// rx_deframer: IEEE 802.15.4 O-QPSK receiver, from I/Q samples to PSDU bytes.
//
// How it works. Every sample a chip decision is shifted into a 128-sample
// history, and a chip window is read from it as if the current sample were
// the peak of the last chip of a symbol: chip j of an SF-chip symbol is taken
// 4*(SF-1-j) samples back. The despreader compares this window with all
// symbols. Two detectors are offered:
//   rx_coh = 0 (differential, default): the decision is the sign of
//           Im(s(t) * conj(s(t-4))), the direction in which the phase turned
//           over one chip. Half-sine O-QPSK is MSK, so this turn is +-90
//           degrees at the chip peaks. The decision does not depend on the
//           carrier phase, and a frequency offset f only adds 2*pi*f*0.5 us
//           per chip, which must stay under 90 degrees (|f| < 500 kHz before
//           noise; the standard allows +-40 ppm, about +-96 kHz per node).
//           Chip 0 of each symbol depends on the previous symbol and is not
//           compared. Needs the half-sine pulse.
//   rx_coh = 1 (coherent): the signs of I (even chips) and Q (odd chips).
//           Works with either pulse shape but needs a phase-locked baseband
//           with no frequency offset, e.g. a loopback.
//
//   SEARCH  each sample, look for the preamble symbol (0) within the chip-error
//           threshold (thresh for 32 chips, halved for 16 chips, divided by
//           8 for 8 chips: with only 7 usable differential chips a one-chip
//           tolerance lets noise match every 16th sample or so).
//   RUN     count how many consecutive samples match; the pulses are several
//           samples wide, so a run of matches appears. The symbol clock is set
//           to the middle of the run and then free-runs, one decision every
//           4*SF samples. There is no further timing or carrier tracking.
//   PRE     symbols 0 are preamble; the low SFD nibble moves on, anything else
//           (or too many chip errors) returns to SEARCH. At least one symbol 0
//           must be decided here first, so the preamble needs at least one
//           more symbol after the one acquired on (own choice); this keeps
//           noise from starting false frames at SF 8, where a match is easy.
//   SFD_HI  the high SFD nibble completes the SFD (sfd_det pulse).
//   PHR     two symbols give the frame length (bit 7 ignored; 0 aborts).
//   PSDU    pairs of symbols form bytes, low nibble first. Each byte goes
//           through the crc16_154 engine and out on the byte stream; the last
//           carries tlast and tuser = FCS good. rx_done and crc_ok follow.
//
// Interface: one sample per clock when adc_valid. The byte output is a
// one-deep AXI-Stream register; a byte arriving while the previous one has not
// been taken is dropped and flagged by ovf (bytes come every 8*SF samples, so
// this only happens when the data plane stalls). chip_err is the sum of
// decision distances over the last frame, reported as a link-quality figure.
// rssi is the mean of |I|+|Q| over the 64 samples that follow the SFD
// (ADC units, up to 4096), a signal-strength figure for the same frame. Both
// are updated together with rx_done.
// The receiver algorithm is this design's own; the paper gives only the
// standard it must meet, with SFD and preamble settable.
module rx_deframer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx_en,
  input  logic        rx_coh,
  input  logic [1:0]  sf_sel,
  input  logic [7:0]  sfd,
  input  logic [5:0]  thresh,
  input  logic signed [11:0] adc_i,
  input  logic signed [11:0] adc_q,
  input  logic        adc_valid,
  // PSDU bytes
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  output logic        m_tuser,
  input  logic        m_tready,
  // events and reports
  output logic        sfd_det,
  output logic        rx_done,
  output logic        crc_ok,
  output logic        ovf,
  output logic        in_frame,
  output logic [6:0]  last_len,
  output logic [15:0] chip_err,
  output logic [12:0] rssi
);
  import wiscop_pkg::sf_chips;

  typedef enum logic [2:0] {R_SEARCH, R_RUN, R_PRE, R_SFD_HI, R_PHR, R_PSDU} rstate_e;

  rstate_e     st;
  logic [127:0] hi, hq, hd;
  logic signed [11:0] di [4], dq [4];
  logic signed [24:0] im_prod;
  logic [31:0] window;
  logic [3:0]  sym;
  logic [5:0]  sdist, sdist0, thr;
  logic [7:0]  cnt, sym_len;
  logic [3:0]  run;
  logic        nib;
  logic        pre_ok;      // a preamble symbol was decided after acquisition
  logic [3:0]  lo_nib;
  logic [6:0]  len_q, bcnt;
  logic [15:0] err_acc;
  logic        match0, decide;
  logic [7:0]  byte_w;
  logic        crc_init, crc_en;
  logic [15:0] crc_val;
  logic        crc_zero;
  logic        pend, pend_last;
  logic [7:0]  pend_byte;

  // chip window for the current sample
  always_comb begin
    window = '0;
    for (int j = 0; j < 32; j++) begin
      if (!rx_coh) begin
        // differential decisions: chip j at 4*(SF-1-j) samples back
        case (sf_sel)
          2'd0: window[j] = hd[4*(31-j)];
          2'd1: if (j < 16) window[j] = hd[4*(15-j)];
          default: if (j < 8) window[j] = hd[4*(7-j)];
        endcase
      end else case (sf_sel)
        2'd0: window[j] = (j % 2 == 0) ? hi[4*(31-j)] : hq[4*(31-j)];
        2'd1: if (j < 16) window[j] = (j % 2 == 0) ? hi[4*(15-j)] : hq[4*(15-j)];
        default: if (j < 8) window[j] = (j % 2 == 0) ? hi[4*(7-j)] : hq[4*(7-j)];
      endcase
    end
  end

  despreader u_desp (.window, .sf_sel, .diff(!rx_coh), .sym, .sdist, .sdist0);

  assign thr     = thresh >> ((sf_sel == 2'd0) ? 2'd0 : (sf_sel == 2'd1) ? 2'd1 : 2'd3);
  assign match0  = (sdist0 <= thr);
  assign sym_len = {sf_chips(sf_sel), 2'b00};     // samples per symbol
  assign decide  = adc_valid && (cnt == 8'd1) &&
                   (st == R_PRE || st == R_SFD_HI || st == R_PHR || st == R_PSDU);
  assign byte_w  = {sym, lo_nib};
  assign crc_init = (st == R_PHR);
  assign crc_en   = decide && st == R_PSDU && nib;
  assign in_frame = (st == R_PHR || st == R_PSDU);

  crc16_154 u_crc (.clk, .rst_n, .init(crc_init), .en(crc_en), .data(byte_w),
                   .crc(crc_val), .zero(crc_zero));

  // Im(s(t) * conj(s(t-4))): positive when the phase turned counter-clockwise
  // over the last chip period
  assign im_prod = 25'(adc_q * di[3]) - 25'(adc_i * dq[3]);

  // sign histories, newest sample in bit 0, and the 4-sample I/Q delay line
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi <= '0; hq <= '0; hd <= '0;
      for (int k = 0; k < 4; k++) begin di[k] <= '0; dq[k] <= '0; end
    end else if (adc_valid) begin
      hi <= {hi[126:0], adc_i > 12'sd0};
      hq <= {hq[126:0], adc_q > 12'sd0};
      hd <= {hd[126:0], im_prod > 25'sd0};
      di[0] <= adc_i; dq[0] <= adc_q;
      for (int k = 1; k < 4; k++) begin di[k] <= di[k-1]; dq[k] <= dq[k-1]; end
    end
  end

  // signal strength: sum |I|+|Q| over the 64 samples after the SFD
  logic [11:0] abs_i, abs_q;
  logic [18:0] pw_acc;
  logic [6:0]  pw_cnt;
  logic [12:0] rssi_meas;
  assign abs_i = adc_i[11] ? 12'(-adc_i) : 12'(adc_i);
  assign abs_q = adc_q[11] ? 12'(-adc_q) : 12'(adc_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pw_acc <= '0; pw_cnt <= '0; rssi_meas <= '0;
    end else if (sfd_det) begin
      pw_acc <= '0; pw_cnt <= 7'd64;
    end else if (adc_valid && pw_cnt != 7'd0) begin
      pw_acc <= pw_acc + 19'(abs_i) + 19'(abs_q);
      pw_cnt <= pw_cnt - 7'd1;
      if (pw_cnt == 7'd1) rssi_meas <= 13'((pw_acc + 19'(abs_i) + 19'(abs_q)) >> 6);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_SEARCH; cnt <= '0; run <= '0; nib <= 1'b0; pre_ok <= 1'b0; lo_nib <= '0; len_q <= '0;
      bcnt <= '0; err_acc <= '0; sfd_det <= 1'b0; rx_done <= 1'b0; crc_ok <= 1'b0;
      ovf <= 1'b0; last_len <= '0; chip_err <= '0; rssi <= '0; pend <= 1'b0; pend_last <= 1'b0;
      pend_byte <= '0; m_tdata <= '0; m_tvalid <= 1'b0; m_tlast <= 1'b0; m_tuser <= 1'b0;
    end else begin
      sfd_det <= 1'b0;
      rx_done <= 1'b0;
      ovf     <= 1'b0;
      if (m_tvalid && m_tready) m_tvalid <= 1'b0;

      // byte output, one clock after the CRC engine absorbed it
      if (pend) begin
        pend <= 1'b0;
        if (m_tvalid && !m_tready) begin
          ovf <= 1'b1;
        end else begin
          m_tdata  <= pend_byte;
          m_tlast  <= pend_last;
          m_tuser  <= pend_last && crc_zero;
          m_tvalid <= 1'b1;
        end
        if (pend_last) begin
          rx_done  <= 1'b1;
          crc_ok   <= crc_zero;
          chip_err <= err_acc;
          rssi     <= rssi_meas;
        end
      end

      if (adc_valid && !(st == R_SEARCH || st == R_RUN)) begin
        cnt <= (cnt == 8'd1) ? sym_len : cnt - 8'd1;
      end

      if (!rx_en) begin
        st <= R_SEARCH;
      end else if (adc_valid) begin
        case (st)
          R_SEARCH: if (match0) begin
            st <= R_RUN; run <= 4'd1;
          end
          R_RUN: if (match0 && run != 4'd15) begin
            run <= run + 1'b1;
          end else begin
            // next decision at the middle of the run plus one symbol
            cnt     <= sym_len - 8'(run) + 8'(4'(run - 4'd1) >> 1);
            err_acc <= '0;
            pre_ok  <= 1'b0;
            st      <= R_PRE;
          end
          R_PRE: if (decide) begin
            err_acc <= err_acc + 16'(sdist);
            if (sdist > thr)          st <= R_SEARCH;
            else if (sym == 4'd0)    pre_ok <= 1'b1;
            else if (sym == sfd[3:0] && pre_ok) st <= R_SFD_HI;
            else                     st <= R_SEARCH;
          end
          R_SFD_HI: if (decide) begin
            err_acc <= err_acc + 16'(sdist);
            if (sym == sfd[7:4] && sdist <= thr) begin
              st <= R_PHR; nib <= 1'b0; sfd_det <= 1'b1;
            end else begin
              st <= R_SEARCH;
            end
          end
          R_PHR: if (decide) begin
            err_acc <= err_acc + 16'(sdist);
            if (!nib) begin
              lo_nib <= sym; nib <= 1'b1;
            end else begin
              nib <= 1'b0;
              len_q <= byte_w[6:0];
              bcnt  <= '0;
              if (byte_w[6:0] == 7'd0) st <= R_SEARCH;
              else begin
                st <= R_PSDU;
                last_len <= byte_w[6:0];
              end
            end
          end
          R_PSDU: if (decide) begin
            err_acc <= err_acc + 16'(sdist);
            if (!nib) begin
              lo_nib <= sym; nib <= 1'b1;
            end else begin
              nib       <= 1'b0;
              pend      <= 1'b1;
              pend_byte <= byte_w;
              pend_last <= (bcnt == len_q - 7'd1);
              bcnt      <= bcnt + 1'b1;
              if (bcnt == len_q - 7'd1) st <= R_SEARCH;
            end
          end
          default: st <= R_SEARCH;
        endcase
      end
    end
  end
endmodule

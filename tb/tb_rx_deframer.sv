// tb_rx_deframer: generates IEEE 802.15.4 O-QPSK waveforms in the testbench
// (chip table and $sin pulses, independent of the transmitter RTL), with a
// random start offset and optional noise, and checks the receiver:
// PSDU bytes, tlast, tuser/crc_ok, SFD event, reported length, chip
// errors and signal strength (against the pulse amplitude), the time from the last chip to rx_done, both chip detectors,
// carrier frequency offsets and phases (differential detector), a frame with a corrupted
// symbol (bad FCS), a non-standard SFD and preamble, all spreading factors,
// both pulse shapes, and byte drops when the output is not read.
module tb_rx_deframer;
  import tb_ref_pkg::*;
  localparam int AMP = 1800;
  logic clk = 0, rst_n = 0, rx_en = 1, rx_coh = 0;
  logic [1:0] sf_sel = 0;
  logic [7:0] sfd = 8'hA7;
  logic [5:0] thresh = 6'd4;
  logic signed [11:0] adc_i = 0, adc_q = 0;
  logic adc_valid = 0;
  logic [7:0] m_tdata;
  logic m_tvalid, m_tlast, m_tuser, m_tready = 1;
  logic sfd_det, rx_done, crc_ok, ovf, in_frame;
  logic [6:0] last_len;
  logic [15:0] chip_err;
  logic [12:0] rssi;
  int checks = 0, failures = 0;

  rx_deframer dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // monitor
  byte unsigned got[$];
  bit got_last, got_user;
  int n_sfd, n_done, n_ovf;
  longint cyc, done_cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && m_tvalid && m_tready) begin
      got.push_back(m_tdata);
      if (m_tlast) begin got_last = 1; got_user = m_tuser; end
    end
    if (rst_n && sfd_det) n_sfd++;
    if (rst_n && rx_done) begin n_done++; done_cyc = cyc; end
    if (rst_n && ovf) n_ovf++;
  end

  // send one frame; corrupt = index of a PSDU symbol to invert (-1: none)
  task automatic send_frame(int sel, bit rect, int pre, logic [7:0] sfd_b, int len,
                            int noise, int corrupt, real cfo_hz, output longint last_chip_cyc,
                            output byte unsigned psdu[$]);
    byte unsigned payload[$], fr[$];
    int syms[$];
    int sf = sf_ref(sel);
    int nchips, nsamp, lead;
    real ph0 = 6.2831853 * $urandom_range(0, 999) / 1000.0;
    logic [15:0] fcs;
    bit chips[$];
    payload.delete(); psdu.delete();
    for (int i = 0; i < len - 2; i++) payload.push_back(8'($urandom));
    fcs = crc_ref(payload);
    for (int i = 0; i < pre; i++) fr.push_back(8'h00);
    fr.push_back(sfd_b); fr.push_back(8'(len));
    foreach (payload[i]) begin fr.push_back(payload[i]); psdu.push_back(payload[i]); end
    fr.push_back(fcs[7:0]); fr.push_back(fcs[15:8]);
    psdu.push_back(fcs[7:0]); psdu.push_back(fcs[15:8]);
    foreach (fr[i]) begin syms.push_back(fr[i] & 15); syms.push_back(fr[i] >> 4); end
    if (corrupt >= 0) begin
      int k = 2 * (pre + 2) + corrupt;
      syms[k] = (syms[k] + 5) % 16;
    end
    foreach (syms[i]) for (int j = 0; j < sf; j++) chips.push_back(chip_ref(syms[i], j));
    nchips = chips.size();
    nsamp  = 4 * nchips + 4;
    lead   = $urandom_range(20, 200);
    for (int n = -lead; n < nsamp + 40; n++) begin
      int vi = 0, vq = 0;
      if (n >= 0) begin
        int k0 = (n / 4) - 1;
        for (int k = k0; k <= k0 + 1; k++) if (k >= 0 && k < nchips) begin
          int v = pulse_ref(n - 4 * k, rect, AMP) * (chips[k] ? 1 : -1);
          if (k % 2 == 0) vi += v; else vq += v;
        end
      end
      if (cfo_hz != 0.0) begin
        // carrier offset and phase: rotate by ph0 + 2*pi*f*n/8 MHz
        real a = ph0 + 6.2831853 * cfo_hz * (n + lead) / 8.0e6;
        int ri = int'(vi * $cos(a) - vq * $sin(a));
        int rq = int'(vi * $sin(a) + vq * $cos(a));
        vi = ri; vq = rq;
      end
      if (noise > 0) begin
        vi += $urandom_range(0, 2 * noise) - noise;
        vq += $urandom_range(0, 2 * noise) - noise;
      end
      @(negedge clk);
      adc_i = 12'(vi); adc_q = 12'(vq); adc_valid = 1;
      if (n == 4 * nchips) last_chip_cyc = cyc;
    end
  endtask

  task automatic run_case(string name, int sel, bit rect, int pre, logic [7:0] sfd_b,
                          int len, int noise, int corrupt, bit read, bit coh = 0,
                          real cfo = 0.0);
    byte unsigned psdu[$];
    longint lc;
    int sfd0 = n_sfd, done0 = n_done, ovf0 = n_ovf;
    got.delete(); got_last = 0; got_user = 0;
    sf_sel = 2'(sel); sfd = sfd_b; m_tready = read; rx_coh = coh;
    send_frame(sel, rect, pre, sfd_b, len, noise, corrupt, cfo, lc, psdu);
    repeat (20) @(negedge clk);
    chk(n_sfd == sfd0 + 1, {name, ": one SFD event"});
    chk(n_done == done0 + 1, {name, ": one rx_done"});
    chk(last_len == 7'(len), {name, ": reported length"});
    // signal strength: a constant-envelope signal of peak AMP has |I|+|Q|
    // between AMP and 2*AMP; half-sine O-QPSK without rotation averages
    // 4*AMP/pi, rectangular gives 2*AMP
    chk(rssi >= 13'(AMP * 9 / 10) && rssi <= 13'(2 * AMP + noise),
        $sformatf("%s: rssi %0d in range", name, rssi));
    if (noise == 0 && cfo == 0.0)
      chk(rect ? (rssi >= 13'(2 * AMP - 8) && rssi <= 13'(2 * AMP))
               : (rssi >= 13'(int'(4 * AMP * 0.97 / 3.14159)) && rssi <= 13'(int'(4 * AMP * 1.03 / 3.14159))),
          $sformatf("%s: rssi %0d matches the pulse", name, rssi));
    chk(done_cyc - lc >= 0 && done_cyc - lc <= 4,
        $sformatf("%s: rx_done %0d cycles after last chip peak", name, done_cyc - lc));
    if (read) begin
      chk(got.size() == psdu.size(), $sformatf("%s: %0d bytes vs %0d", name, got.size(), psdu.size()));
      for (int i = 0; i < psdu.size() && i < got.size(); i++)
        if (corrupt < 0 || i != corrupt / 2)
          chk(got[i] == psdu[i], $sformatf("%s: byte %0d %h vs %h", name, i, got[i], psdu[i]));
      chk(got_last, {name, ": tlast"});
      chk(got_user == (corrupt < 0), {name, ": tuser = FCS result"});
      chk(crc_ok == (corrupt < 0), {name, ": crc_ok"});
      if (noise == 0 && corrupt < 0) chk(chip_err == 0, {name, ": no chip errors"});
    end else begin
      chk(n_ovf - ovf0 == len - 1, $sformatf("%s: %0d bytes dropped, expected %0d", name, n_ovf - ovf0, len - 1));
      @(negedge clk); m_tready = 1; @(negedge clk);
    end
  endtask

  initial begin
    cyc = 0; n_sfd = 0; n_done = 0; n_ovf = 0; done_cyc = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // differential detector (default)
    run_case("sf32 half-sine",   0, 0, 4, 8'hA7, 20, 0,   -1, 1);
    run_case("sf32 noisy",       0, 0, 4, 8'hA7, 12, 300, -1, 1);
    run_case("sf32 offset 100k", 0, 0, 4, 8'hA7, 20, 100, -1, 1, 0, 100.0e3);
    run_case("sf32 offset -180k",0, 0, 4, 8'hA7, 20, 100, -1, 1, 0, -180.0e3);
    run_case("sf16 offset 60k",  1, 0, 4, 8'hA7, 16, 0,   -1, 1, 0, 60.0e3);
    run_case("sf32 bad fcs",     0, 0, 4, 8'hA7, 10, 0,    6, 1);
    run_case("sf8 custom sfd",   2, 0, 6, 8'h5B, 9,  0,   -1, 1);
    run_case("sf16 no reader",   1, 0, 4, 8'hA7, 8,  0,   -1, 0);
    // coherent detector
    run_case("coh sf32 noisy",   0, 0, 4, 8'hA7, 12, 500, -1, 1, 1);
    run_case("coh sf16 rect",    1, 1, 4, 8'hA7, 16, 0,   -1, 1, 1);
    run_case("coh sf8 sfd",      2, 0, 6, 8'h5B, 9,  0,   -1, 1, 1);
    run_case("coh short pre",    0, 1, 2, 8'hA7, 5,  0,   -1, 1, 1);
    // receiver disabled: nothing is received
    rx_en = 0;
    begin
      byte unsigned p[$]; longint lc; int d0;
      d0 = n_done;
      send_frame(0, 0, 4, 8'hA7, 6, 0, -1, 0.0, lc, p);
      chk(n_done == d0, "rx disabled: no frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

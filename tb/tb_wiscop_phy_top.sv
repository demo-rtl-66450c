// tb_wiscop_phy_top: end-to-end test of the PHY at its default parameters.
// The DAC output is looped back to the ADC input through a channel model
// (one clock of delay, uniform noise, optional carrier offset, optional
// conjugation of one symbol, which turns symbol s into s^8 for both chip
// detectors). The
// testbench acts as the processor: it writes registers over AXI4-Lite, feeds
// payload bytes as the DMA would, waits for interrupts and reads back the
// received PSDU stream and the status counters.
//
// Frames exercise: the three spreading factors, both pulse shapes, both
// receiver chip detectors, a carrier frequency offset in the channel, a
// non-standard preamble and SFD, a frame with a corrupted symbol (FCS error),
// a maximum-length 127-byte frame, and two maximum-length frames received
// while nobody reads the Rx stream (data-plane overflow). Each mechanism is
// counted and must occur at least once. Frame length on the DAC is checked
// against 4 samples per chip, i.e. 8 Msps at one sample per clock.
module tb_wiscop_phy_top;
  import wiscop_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [7:0]  s_axil_awaddr = 0, s_axil_araddr = 0;
  logic        s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 0;
  logic        s_axil_arvalid = 0, s_axil_rready = 0;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic [7:0]  s_axis_tx_tdata = 0;
  logic        s_axis_tx_tvalid = 0, s_axis_tx_tready;
  logic [7:0]  m_axis_rx_tdata;
  logic        m_axis_rx_tvalid, m_axis_rx_tlast, m_axis_rx_tuser, m_axis_rx_tready = 1;
  logic signed [11:0] dac_i, dac_q, adc_i = 0, adc_q = 0;
  logic        dac_valid, adc_valid = 0, irq;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_sf[3], n_rect, n_custom, n_crc_err, n_ovf, n_irq, n_maxlen, n_coh, n_diff, n_cfo;

  wiscop_phy_top dut (.*);
  always #62.5ns clk = ~clk;   // 8 MHz sample clock

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- channel: DAC -> ADC ----------------
  int noise = 200;
  real cfo_hz = 0.0, ph0 = 0.0;
  int corrupt_from = -1, corrupt_to = -1;
  int dac_n = 0;
  longint first_cyc, cyc;
  always @(posedge clk) begin
    int vi, vq;
    cyc <= cyc + 1;
    vi = dac_i; vq = dac_q;
    if (cfo_hz != 0.0) begin
      automatic real a = ph0 + 6.2831853 * cfo_hz * real'(cyc) / 8.0e6;
      automatic int ri = int'(vi * $cos(a) - vq * $sin(a));
      automatic int rq = int'(vi * $sin(a) + vq * $cos(a));
      vi = ri; vq = rq;
    end
    if (dac_valid) begin
      if (dac_n >= corrupt_from && dac_n < corrupt_to) vq = -vq;  // conjugate: symbol s turns into s^8
      if (dac_n == 0) first_cyc = cyc;
      dac_n++;
    end
    vi += $urandom_range(0, 2 * noise) - noise;
    vq += $urandom_range(0, 2 * noise) - noise;
    adc_i <= 12'(vi); adc_q <= 12'(vq); adc_valid <= 1'b1;
  end

  // ---------------- Rx stream monitor ----------------
  byte unsigned rx_bytes[$];
  bit rx_user[$], rx_last[$];
  always @(posedge clk) if (rst_n && m_axis_rx_tvalid && m_axis_rx_tready) begin
    rx_bytes.push_back(m_axis_rx_tdata);
    rx_user.push_back(m_axis_rx_tuser);
    rx_last.push_back(m_axis_rx_tlast);
  end

  // ---------------- AXI4-Lite master ----------------
  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d;
    s_axil_wvalid = 1; s_axil_bready = 1;
    do @(negedge clk); while (!s_axil_bvalid);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    @(negedge clk); s_axil_bready = 0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); s_axil_araddr = a; s_axil_arvalid = 1; s_axil_rready = 1;
    do begin @(posedge clk); #1; end while (!s_axil_rvalid);
    d = s_axil_rdata; s_axil_arvalid = 0;
    @(negedge clk); s_axil_rready = 0;
  endtask

  // ---------------- one frame ----------------
  task automatic frame(string name, int sel, bit rect, int pre, logic [7:0] sfd_b,
                       int len, int corrupt_sym, bit read, bit coh = 0, real cfo = 0.0);
    byte unsigned payload[$], psdu[$];
    logic [15:0] fcs;
    logic [31:0] d, rx0, err0, ovf0;
    int nchips, sf = sf_ref(sel);
    longint start_cyc;
    int rx_base;

    rd(REG_RX_CNT, rx0); rd(REG_CRCERR, err0); rd(REG_RX_OVF, ovf0);
    for (int i = 0; i < len - 2; i++) payload.push_back(8'($urandom));
    fcs = crc_ref(payload);
    psdu = payload; psdu.push_back(fcs[7:0]); psdu.push_back(fcs[15:8]);
    nchips = 2 * (pre + 2 + len) * sf;

    // data plane: load payload as the DMA would
    foreach (payload[i]) begin
      @(negedge clk); s_axis_tx_tdata = payload[i]; s_axis_tx_tvalid = 1;
      do @(posedge clk); while (!s_axis_tx_tready);
    end
    @(negedge clk); s_axis_tx_tvalid = 0;

    wr(REG_SF, 32'(sel));
    wr(REG_PREAMBLE, 32'(pre));
    wr(REG_SFD, 32'(sfd_b));
    wr(REG_TX_LEN, 32'(len));
    wr(REG_IRQ_STAT, 32'h1F);
    wr(REG_IRQ_EN, 32'h1F);
    m_axis_rx_tready = read;
    rx_base = rx_bytes.size();
    dac_n = 0;
    if (corrupt_sym >= 0) begin
      corrupt_from = (2 * (pre + 2) + corrupt_sym) * sf * 4;
      corrupt_to   = corrupt_from + sf * 4;
    end else begin
      corrupt_from = -1; corrupt_to = -1;
    end
    cfo_hz = cfo; ph0 = 6.2831853 * $urandom_range(0, 999) / 1000.0;
    start_cyc = cyc;
    wr(REG_CTRL, {28'd0, coh, rect, 1'b1, 1'b1});

    // first interrupt: first Tx sample on the DAC
    wait (irq); #1;
    rd(REG_IRQ_STAT, d);
    chk(d[EVT_TX_FIRST], {name, ": tx first-sample interrupt"});
    if (d[EVT_TX_FIRST]) n_irq++;
    chk(first_cyc - start_cyc < 10, $sformatf("%s: tx start latency %0d", name, first_cyc - start_cyc));
    wr(REG_IRQ_STAT, 32'h1F);
    // wait for the end of reception
    do begin
      wait (irq); #1;
      rd(REG_IRQ_STAT, d);
      wr(REG_IRQ_STAT, d);
    end while (!d[EVT_RX_DONE]);
    chk(dac_n == 4 * nchips + 4, $sformatf("%s: %0d DAC samples, expected %0d", name, dac_n, 4 * nchips + 4));
    repeat (10) @(negedge clk);

    if (read) begin
      int nb = rx_bytes.size() - rx_base;
      chk(nb == len, $sformatf("%s: %0d bytes received, expected %0d", name, nb, len));
      for (int i = 0; i < nb && i < len; i++) begin
        if (corrupt_sym < 0 || i != corrupt_sym / 2)
          chk(rx_bytes[rx_base + i] == psdu[i], $sformatf("%s: byte %0d", name, i));
      end
      if (nb == len) begin
        chk(rx_last[rx_base + len - 1], {name, ": tlast"});
        chk(rx_user[rx_base + len - 1] == (corrupt_sym < 0), {name, ": tuser FCS flag"});
      end
      if (corrupt_sym >= 0) begin
        chk(d[EVT_CRC_ERR], {name, ": CRC error interrupt"});
        rd(REG_CRCERR, d);
        chk(d == err0 + 1, {name, ": CRC error counter"});
        if (d == err0 + 1) n_crc_err++;
      end else begin
        chk(!d[EVT_CRC_ERR], {name, ": no CRC error interrupt"});
        rd(REG_RX_CNT, d);
        chk(d == rx0 + 1, {name, ": Rx frame counter"});
        rd(REG_RX_LEN, d);
        chk(d == 32'(len), {name, ": reported length"});
        // pulse peak 1800 (default AMP): |I|+|Q| lies between 1800 and 3600
        rd(REG_RX_RSSI, d);
        chk(d >= 32'(1800 * 9 / 10) && d <= 32'(2 * 1800 + noise),
            $sformatf("%s: signal strength %0d", name, d));
      end
    end
    if (sel < 3) n_sf[sel]++;
    if (rect) n_rect++;
    if (coh) n_coh++; else n_diff++;
    if (cfo != 0.0) n_cfo++;
    if (pre != 4 || sfd_b != 8'hA7) n_custom++;
    if (len == 127) n_maxlen++;
  endtask

  initial begin
    #2s; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d, ovf0;
    cyc = 0; first_cyc = 0;
    n_sf = '{0, 0, 0}; n_rect = 0; n_custom = 0; n_crc_err = 0; n_ovf = 0; n_irq = 0; n_maxlen = 0; n_coh = 0; n_diff = 0; n_cfo = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    frame("sf32 half-sine",   0, 0, 4, 8'hA7, 20,  -1, 1);
    frame("sf16 rectangular", 1, 1, 4, 8'hA7, 30,  -1, 1, 1);
    frame("carrier offset",   0, 0, 4, 8'hA7, 40,  -1, 1, 0, 120.0e3);
    frame("coherent sf32",    0, 0, 4, 8'hA7, 16,  -1, 1, 1);
    frame("sf8",              2, 0, 4, 8'hA7, 30,  -1, 1);
    frame("custom frame",     0, 0, 2, 8'h3B, 10,  -1, 1);
    frame("fcs error",        0, 0, 4, 8'hA7, 12,   5, 1);
    frame("max length",       0, 0, 4, 8'hA7, 127, -1, 1);
    // overflow: two maximum frames while the Rx stream is not read
    rd(REG_RX_OVF, ovf0);
    rx_bytes.delete(); rx_user.delete(); rx_last.delete();
    frame("overflow 1", 0, 0, 4, 8'hA7, 127, -1, 0);
    frame("overflow 2", 0, 0, 4, 8'hA7, 127, -1, 0);
    rd(REG_RX_OVF, d);
    chk(d - ovf0 == 32'(2 * 127 - 129), $sformatf("bytes dropped %0d, expected %0d", d - ovf0, 2 * 127 - 129));
    if (d != ovf0) n_ovf++;
    @(negedge clk); m_axis_rx_tready = 1;
    repeat (200) @(negedge clk);
    chk(rx_bytes.size() == 129, $sformatf("drained %0d bytes, expected 129", rx_bytes.size()));
    rd(REG_TX_CNT, d);
    chk(d == 10, $sformatf("frames sent %0d", d));

    // every mechanism must have happened
    chk(n_sf[0] > 0 && n_sf[1] > 0 && n_sf[2] > 0, "all spreading factors used");
    chk(n_rect > 0, "rectangular pulse shape used");
    chk(n_custom > 0, "custom preamble/SFD used");
    chk(n_crc_err > 0, "FCS error detected");
    chk(n_ovf > 0, "data-plane overflow seen");
    chk(n_irq > 0, "interrupts raised");
    chk(n_maxlen > 0, "maximum-length frame");
    chk(n_coh > 0 && n_diff > 0, "both chip detectors used");
    chk(n_cfo > 0, "carrier offset frame");
    $display("mechanisms: sf32=%0d sf16=%0d sf8=%0d rect=%0d custom=%0d fcs_err=%0d ovf=%0d irq=%0d maxlen=%0d coh=%0d diff=%0d cfo=%0d",
             n_sf[0], n_sf[1], n_sf[2], n_rect, n_custom, n_crc_err, n_ovf, n_irq, n_maxlen, n_coh, n_diff, n_cfo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// wiscop_phy_top: the flexible IEEE 802.15.4 PHY in the programmable logic.
//
// The PHY connects the processor's memory (through DMA streams) to the RF
// front-end's converters at 8 Msps, and exposes every setting to software.
//
//   Tx: s_axis_tx -> axis_fifo -> tx_framer (preamble, SFD, PHR, payload,
//       FCS from crc16_154) -> chip_spreader -> oqpsk_mod -> dac_i/dac_q
//   Rx: adc_i/adc_q -> rx_deframer (sync, despreader, SFD/PHR, FCS check)
//       -> axis_fifo -> m_axis_rx
//   Control: AXI4-Lite -> axil_regs; PHY events -> irq_ctrl -> irq
//
// Usage: software loads frame_len-2 payload bytes into the Tx stream, writes
// TX_LEN and then CTRL[0]; the frame starts on the DAC a few clocks later.
// Received PSDUs (FCS included) appear on m_axis_rx with tlast on the last
// byte and tuser = FCS good on it. The clock is the 8 MHz sample clock: one
// DAC sample and one ADC sample per clock. The DMA engine, processor,
// memory and RF front-end are outside this module.
module wiscop_phy_top #(
  parameter int TX_FIFO_DEPTH = 128,
  parameter int RX_FIFO_DEPTH = 128,
  parameter int AMP           = 1800
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite control
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // Tx payload stream from DMA
  input  logic [7:0]  s_axis_tx_tdata,
  input  logic        s_axis_tx_tvalid,
  output logic        s_axis_tx_tready,
  // Rx PSDU stream to DMA
  output logic [7:0]  m_axis_rx_tdata,
  output logic        m_axis_rx_tvalid,
  output logic        m_axis_rx_tlast,
  output logic        m_axis_rx_tuser,
  input  logic        m_axis_rx_tready,
  // RF front-end converters
  output logic signed [11:0] dac_i,
  output logic signed [11:0] dac_q,
  output logic        dac_valid,
  input  logic signed [11:0] adc_i,
  input  logic signed [11:0] adc_q,
  input  logic        adc_valid,
  // interrupt to the processor
  output logic        irq
);
  import wiscop_pkg::N_EVT, wiscop_pkg::EVT_TX_FIRST, wiscop_pkg::EVT_RX_SFD, wiscop_pkg::EVT_TX_DONE, wiscop_pkg::EVT_RX_DONE, wiscop_pkg::EVT_CRC_ERR;

  logic       tx_start, rx_en, rx_coh, pulse_sel;
  logic [1:0] sf_sel;
  logic [3:0] preamble_len;
  logic [7:0] sfd;
  logic [6:0] tx_len;
  logic [5:0] rx_thresh;
  logic [4:0] irq_en, irq_clr, irq_status, evt;

  // Tx side
  logic [7:0] txf_tdata;
  logic       txf_tvalid, txf_tready, txf_tlast_unused, txf_tuser_unused;
  logic [$clog2(TX_FIFO_DEPTH+1)-1:0] txf_count;
  logic [3:0] sym_data;
  logic       sym_valid, sym_last, sym_ready, framer_busy;
  logic       chip, chip_valid, chip_last, chip_ready;
  logic       tx_first, tx_done, mod_active, tx_busy;

  // Rx side
  logic [7:0] rxd_tdata;
  logic       rxd_tvalid, rxd_tlast, rxd_tuser, rxd_tready;
  logic [$clog2(RX_FIFO_DEPTH+1)-1:0] rxf_count;
  logic       sfd_det, rx_done, crc_ok, rx_ovf, rx_in_frame;
  logic [6:0] rx_last_len;
  logic [15:0] rx_chip_err;
  logic [12:0] rx_rssi;

  axil_regs u_regs (
    .clk, .rst_n,
    .awaddr(s_axil_awaddr), .awvalid(s_axil_awvalid), .awready(s_axil_awready),
    .wdata(s_axil_wdata), .wvalid(s_axil_wvalid), .wready(s_axil_wready),
    .bresp(s_axil_bresp), .bvalid(s_axil_bvalid), .bready(s_axil_bready),
    .araddr(s_axil_araddr), .arvalid(s_axil_arvalid), .arready(s_axil_arready),
    .rdata(s_axil_rdata), .rresp(s_axil_rresp), .rvalid(s_axil_rvalid), .rready(s_axil_rready),
    .tx_start, .rx_en, .rx_coh, .pulse_sel, .sf_sel, .preamble_len, .sfd, .tx_len, .rx_thresh,
    .irq_en, .irq_clr, .irq_status, .tx_busy, .rx_in_frame, .rx_crc_ok(crc_ok),
    .rx_last_len, .rx_chip_err, .rx_rssi, .tx_done_evt(tx_done), .rx_done_evt(rx_done),
    .rx_ovf_evt(rx_ovf)
  );

  axis_fifo #(.DEPTH(TX_FIFO_DEPTH), .W(8)) u_tx_fifo (
    .clk, .rst_n,
    .s_tdata(s_axis_tx_tdata), .s_tlast(1'b0), .s_tuser(1'b0),
    .s_tvalid(s_axis_tx_tvalid), .s_tready(s_axis_tx_tready),
    .m_tdata(txf_tdata), .m_tlast(txf_tlast_unused), .m_tuser(txf_tuser_unused),
    .m_tvalid(txf_tvalid), .m_tready(txf_tready), .count(txf_count)
  );

  tx_framer u_framer (
    .clk, .rst_n, .start(tx_start && !tx_busy), .preamble_len, .sfd,
    .frame_len(tx_len), .s_tdata(txf_tdata), .s_tvalid(txf_tvalid),
    .s_tready(txf_tready), .sym_data, .sym_valid, .sym_last, .sym_ready,
    .busy(framer_busy)
  );

  chip_spreader u_spread (
    .clk, .rst_n, .sf_sel, .sym_data, .sym_valid, .sym_last, .sym_ready,
    .chip, .chip_valid, .chip_last, .chip_ready
  );

  oqpsk_mod #(.AMP(AMP)) u_mod (
    .clk, .rst_n, .pulse_sel, .chip, .chip_valid, .chip_last, .chip_ready,
    .dac_i, .dac_q, .dac_valid, .first_sample(tx_first), .done(tx_done),
    .active(mod_active)
  );

  assign tx_busy = framer_busy || mod_active || chip_valid || dac_valid;

  rx_deframer u_rx (
    .clk, .rst_n, .rx_en, .rx_coh, .sf_sel, .sfd, .thresh(rx_thresh),
    .adc_i, .adc_q, .adc_valid,
    .m_tdata(rxd_tdata), .m_tvalid(rxd_tvalid), .m_tlast(rxd_tlast),
    .m_tuser(rxd_tuser), .m_tready(rxd_tready),
    .sfd_det, .rx_done, .crc_ok, .ovf(rx_ovf), .in_frame(rx_in_frame),
    .last_len(rx_last_len), .chip_err(rx_chip_err), .rssi(rx_rssi)
  );

  axis_fifo #(.DEPTH(RX_FIFO_DEPTH), .W(8)) u_rx_fifo (
    .clk, .rst_n,
    .s_tdata(rxd_tdata), .s_tlast(rxd_tlast), .s_tuser(rxd_tuser),
    .s_tvalid(rxd_tvalid), .s_tready(rxd_tready),
    .m_tdata(m_axis_rx_tdata), .m_tlast(m_axis_rx_tlast), .m_tuser(m_axis_rx_tuser),
    .m_tvalid(m_axis_rx_tvalid), .m_tready(m_axis_rx_tready), .count(rxf_count)
  );

  always_comb begin
    evt = '0;
    evt[EVT_TX_FIRST] = tx_first;
    evt[EVT_RX_SFD]   = sfd_det;
    evt[EVT_TX_DONE]  = tx_done;
    evt[EVT_RX_DONE]  = rx_done;
    evt[EVT_CRC_ERR]  = rx_done && !crc_ok;
  end

  irq_ctrl #(.N(N_EVT)) u_irq (
    .clk, .rst_n, .evt, .irq_en, .clr(irq_clr), .status(irq_status), .irq
  );
endmodule

// axil_regs: control and status registers of the PHY on an AXI4-Lite slave.
//
// This is the control interface through which the radio-controller software
// sets the PHY (spreading factor, pulse shape, receiver detector, preamble length, SFD, frame
// length, receiver threshold, interrupt enables) and reads back what the PHY
// reports (state, last frame length, chip-error count and signal strength,
// frame and error counters, interrupt status). The register map is in wiscop_pkg.
//
// Bus behaviour: a write is taken when address and data are both valid and no
// response is pending; the response (OKAY) follows one clock later. A read
// returns data one clock after the address. Unmapped addresses read as zero
// and ignore writes; byte strobes are ignored (full-word access). Writing
// CTRL[0] = 1 produces a one-cycle tx_start pulse; writing ones to IRQ_STAT
// clears those bits in irq_ctrl. The map and reset values are this design's
// choice: rx_en = 1, preamble 4 bytes, SFD 0xA7, threshold 4, SF 32.
module axil_regs (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [7:0]  araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rvalid,
  input  logic        rready,
  // configuration out
  output logic        tx_start,
  output logic        rx_en,
  output logic        rx_coh,
  output logic        pulse_sel,
  output logic [1:0]  sf_sel,
  output logic [3:0]  preamble_len,
  output logic [7:0]  sfd,
  output logic [6:0]  tx_len,
  output logic [5:0]  rx_thresh,
  output logic [4:0]  irq_en,
  output logic [4:0]  irq_clr,
  // status in
  input  logic [4:0]  irq_status,
  input  logic        tx_busy,
  input  logic        rx_in_frame,
  input  logic        rx_crc_ok,
  input  logic [6:0]  rx_last_len,
  input  logic [15:0] rx_chip_err,
  input  logic [12:0] rx_rssi,
  input  logic        tx_done_evt,
  input  logic        rx_done_evt,
  input  logic        rx_ovf_evt
);
  import wiscop_pkg::*;

  logic [31:0] tx_cnt, rx_cnt, crcerr_cnt, ovf_cnt;
  logic        wr;

  assign wr      = awvalid && wvalid && !bvalid;
  assign awready = wr;
  assign wready  = wr;
  assign bresp   = 2'b00;
  assign arready = !rvalid;
  assign rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid <= 1'b0; tx_start <= 1'b0; rx_en <= 1'b1; rx_coh <= 1'b0; pulse_sel <= 1'b0;
      sf_sel <= 2'd0; preamble_len <= 4'd4; sfd <= 8'hA7; tx_len <= 7'd0;
      rx_thresh <= 6'd4; irq_en <= '0; irq_clr <= '0;
    end else begin
      tx_start <= 1'b0;
      irq_clr  <= '0;
      if (bvalid && bready) bvalid <= 1'b0;
      if (wr) begin
        bvalid <= 1'b1;
        case (awaddr)
          REG_CTRL: begin
            tx_start  <= wdata[0];
            rx_en     <= wdata[1];
            pulse_sel <= wdata[2];
            rx_coh    <= wdata[3];
          end
          REG_SF:        sf_sel       <= wdata[1:0];
          REG_PREAMBLE:  preamble_len <= wdata[3:0];
          REG_SFD:       sfd          <= wdata[7:0];
          REG_TX_LEN:    tx_len       <= wdata[6:0];
          REG_RX_THRESH: rx_thresh    <= wdata[5:0];
          REG_IRQ_EN:    irq_en       <= wdata[4:0];
          REG_IRQ_STAT:  irq_clr      <= wdata[4:0];
          default: ;
        endcase
      end
    end
  end

  // reported PHY counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_cnt <= '0; rx_cnt <= '0; crcerr_cnt <= '0; ovf_cnt <= '0;
    end else begin
      if (tx_done_evt) tx_cnt <= tx_cnt + 1'b1;
      if (rx_done_evt && rx_crc_ok)  rx_cnt <= rx_cnt + 1'b1;
      if (rx_done_evt && !rx_crc_ok) crcerr_cnt <= crcerr_cnt + 1'b1;
      if (rx_ovf_evt)  ovf_cnt <= ovf_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0; rdata <= '0;
    end else begin
      if (rvalid && rready) rvalid <= 1'b0;
      if (arvalid && arready) begin
        rvalid <= 1'b1;
        case (araddr)
          REG_CTRL:      rdata <= {28'd0, rx_coh, pulse_sel, rx_en, 1'b0};
          REG_SF:        rdata <= {30'd0, sf_sel};
          REG_PREAMBLE:  rdata <= {28'd0, preamble_len};
          REG_SFD:       rdata <= {24'd0, sfd};
          REG_TX_LEN:    rdata <= {25'd0, tx_len};
          REG_RX_THRESH: rdata <= {26'd0, rx_thresh};
          REG_IRQ_EN:    rdata <= {27'd0, irq_en};
          REG_IRQ_STAT:  rdata <= {27'd0, irq_status};
          REG_STATUS:    rdata <= {29'd0, rx_crc_ok, rx_in_frame, tx_busy};
          REG_RX_LEN:    rdata <= {25'd0, rx_last_len};
          REG_RX_CHERR:  rdata <= {16'd0, rx_chip_err};
          REG_TX_CNT:    rdata <= tx_cnt;
          REG_RX_CNT:    rdata <= rx_cnt;
          REG_CRCERR:    rdata <= crcerr_cnt;
          REG_RX_OVF:    rdata <= ovf_cnt;
          REG_RX_RSSI:   rdata <= {19'd0, rx_rssi};
          default:       rdata <= '0;
        endcase
      end
    end
  end

  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  bvalid && !bready |=> bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  rvalid && !rready |=> rvalid && $stable(rdata));
endmodule

// tb_axil_regs: AXI4-Lite writes and reads of every register: reset values,
// read-back of written fields, the one-cycle tx_start and irq_clr pulses,
// status inputs, the frame/error/drop counters, unmapped addresses, and that
// responses stay valid while the master stalls.
module tb_axil_regs;
  import wiscop_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;
  logic tx_start, rx_en, rx_coh, pulse_sel;
  logic [1:0] sf_sel;
  logic [3:0] preamble_len;
  logic [7:0] sfd;
  logic [6:0] tx_len;
  logic [5:0] rx_thresh;
  logic [4:0] irq_en, irq_clr;
  logic [4:0] irq_status = 0;
  logic tx_busy = 0, rx_in_frame = 0, rx_crc_ok = 0;
  logic [6:0] rx_last_len = 0;
  logic [15:0] rx_chip_err = 0;
  logic [12:0] rx_rssi = 0;
  logic tx_done_evt = 0, rx_done_evt = 0, rx_ovf_evt = 0;
  int checks = 0, failures = 0, n_start = 0, n_clr = 0;
  logic [4:0] clr_seen;

  axil_regs dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n && tx_start) n_start++;
    if (rst_n && irq_clr != 0) begin n_clr++; clr_seen = irq_clr; end
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); awaddr = a; awvalid = 1; wdata = d; wvalid = 1; bready = 0;
    do begin @(negedge clk); end while (!bvalid);
    awvalid = 0; wvalid = 0;
    repeat (2) @(negedge clk);
    chk(bvalid && bresp == 2'b00, "bvalid held while bready low");
    bready = 1; @(negedge clk); bready = 0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1; rready = 0;
    do begin @(posedge clk); #1; end while (!(rvalid));
    arvalid = 0;
    @(negedge clk);
    d = rdata;
    chk(rvalid && rresp == 2'b00, "rvalid held while rready low");
    rready = 1; @(negedge clk); rready = 0;
  endtask

  task automatic expect_rd(logic [7:0] a, logic [31:0] e, string what);
    logic [31:0] d;
    rd(a, d);
    chk(d == e, $sformatf("%s: read %h expected %h", what, d, e));
  endtask

  initial begin
    #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // reset values
    expect_rd(REG_CTRL, 32'h2, "CTRL reset");
    expect_rd(REG_PREAMBLE, 32'h4, "PREAMBLE reset");
    expect_rd(REG_SFD, 32'hA7, "SFD reset");
    expect_rd(REG_RX_THRESH, 32'h4, "THRESH reset");
    expect_rd(REG_SF, 32'h0, "SF reset");
    // read-back
    wr(REG_SF, 32'h2);        expect_rd(REG_SF, 32'h2, "SF");
    chk(sf_sel == 2'd2, "sf_sel out");
    wr(REG_PREAMBLE, 32'h7);  expect_rd(REG_PREAMBLE, 32'h7, "PREAMBLE");
    chk(preamble_len == 4'd7, "preamble out");
    wr(REG_SFD, 32'h1235B);   expect_rd(REG_SFD, 32'h5B, "SFD masked");
    chk(sfd == 8'h5B, "sfd out");
    wr(REG_TX_LEN, 32'hFF);   expect_rd(REG_TX_LEN, 32'h7F, "TX_LEN masked");
    chk(tx_len == 7'h7F, "tx_len out");
    wr(REG_RX_THRESH, 32'h9); chk(rx_thresh == 6'd9, "thresh out");
    wr(REG_IRQ_EN, 32'h15);   expect_rd(REG_IRQ_EN, 32'h15, "IRQ_EN");
    chk(irq_en == 5'h15, "irq_en out");
    // CTRL: tx_start pulse, pulse shape, rx enable
    wr(REG_CTRL, 32'h5);
    chk(n_start == 1, "one tx_start pulse");
    chk(pulse_sel && !rx_en, "pulse_sel / rx_en");
    expect_rd(REG_CTRL, 32'h4, "CTRL read (start reads 0)");
    wr(REG_CTRL, 32'hA);
    chk(n_start == 1, "no start when bit 0 clear");
    chk(rx_coh && rx_en && !pulse_sel, "rx_coh / rx_en");
    expect_rd(REG_CTRL, 32'hA, "CTRL read with rx_coh");
    // IRQ status read and write-one-to-clear
    irq_status = 5'h0A;
    expect_rd(REG_IRQ_STAT, 32'h0A, "IRQ_STAT");
    wr(REG_IRQ_STAT, 32'h08);
    chk(n_clr == 1 && clr_seen == 5'h08, "irq_clr pulse");
    // status inputs
    tx_busy = 1; rx_crc_ok = 1; rx_last_len = 7'd42; rx_chip_err = 16'd17; rx_rssi = 13'd4321;
    expect_rd(REG_STATUS, 32'h5, "STATUS");
    expect_rd(REG_RX_LEN, 32'd42, "RX_LEN");
    expect_rd(REG_RX_CHERR, 32'd17, "RX_CHERR");
    expect_rd(REG_RX_RSSI, 32'd4321, "RX_RSSI");
    // counters
    repeat (3) begin @(negedge clk); tx_done_evt = 1; @(negedge clk); tx_done_evt = 0; end
    repeat (2) begin @(negedge clk); rx_done_evt = 1; rx_crc_ok = 1; @(negedge clk); rx_done_evt = 0; end
    repeat (4) begin @(negedge clk); rx_done_evt = 1; rx_crc_ok = 0; @(negedge clk); rx_done_evt = 0; end
    repeat (5) begin @(negedge clk); rx_ovf_evt = 1; @(negedge clk); rx_ovf_evt = 0; end
    expect_rd(REG_TX_CNT, 32'd3, "TX_CNT");
    expect_rd(REG_RX_CNT, 32'd2, "RX_CNT");
    expect_rd(REG_CRCERR, 32'd4, "CRCERR");
    expect_rd(REG_RX_OVF, 32'd5, "RX_OVF");
    expect_rd(8'hF0, 32'd0, "unmapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

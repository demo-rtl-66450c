// tb_tx_framer: sends frames with various preamble lengths, SFDs and lengths
// (including the standard 4 bytes / 0xA7) through a stalling symbol consumer
// and a payload source with gaps, rebuilds bytes from the nibbles and compares
// with preamble, SFD, PHR, payload and an independently computed FCS.
module tb_tx_framer;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] preamble_len = 4;
  logic [7:0] sfd = 8'hA7;
  logic [6:0] frame_len = 0;
  logic [7:0] s_tdata = 0;
  logic s_tvalid = 0, s_tready;
  logic [3:0] sym_data;
  logic sym_valid, sym_last, sym_ready = 0, busy;
  int checks = 0, failures = 0;

  tx_framer dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  byte unsigned payload[$], expect_b[$];

  task automatic source();
    int i = 0;
    while (i < payload.size()) begin
      @(negedge clk);
      s_tvalid = ($urandom_range(0, 3) != 0);
      s_tdata  = payload[i];
      @(posedge clk);
      if (s_tvalid && s_tready) i++;
    end
    @(negedge clk); s_tvalid = 0;
  endtask

  task automatic sink();
    byte unsigned got[$];
    logic [3:0] lo;
    bit hi = 0, seen_last = 0;
    while (!seen_last) begin
      @(negedge clk);
      sym_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (sym_valid && sym_ready) begin
        if (!hi) lo = sym_data;
        else got.push_back({sym_data, lo});
        if (sym_last) begin
          seen_last = 1;
          chk(hi, "sym_last on high nibble");
        end
        hi = !hi;
      end
    end
    @(negedge clk); sym_ready = 0;
    chk(got.size() == expect_b.size(), $sformatf("frame bytes %0d vs %0d", got.size(), expect_b.size()));
    foreach (expect_b[i])
      if (i < got.size()) chk(got[i] == expect_b[i], $sformatf("byte %0d: %h vs %h", i, got[i], expect_b[i]));
  endtask

  initial begin
    int pl[5] = '{4, 2, 1, 6, 4};
    int sf[5] = '{8'hA7, 8'h5B, 8'hA7, 8'h3C, 8'hA7};
    int ln[5] = '{20, 5, 127, 3, 2};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      logic [15:0] fcs;
      payload.delete(); expect_b.delete();
      for (int i = 0; i < ln[t] - 2; i++) payload.push_back(8'($urandom));
      fcs = crc_ref(payload);
      for (int i = 0; i < pl[t]; i++) expect_b.push_back(8'h00);
      expect_b.push_back(8'(sf[t]));
      expect_b.push_back(8'(ln[t]));
      foreach (payload[i]) expect_b.push_back(payload[i]);
      expect_b.push_back(fcs[7:0]); expect_b.push_back(fcs[15:8]);
      @(negedge clk);
      preamble_len = 4'(pl[t]); sfd = 8'(sf[t]); frame_len = 7'(ln[t]); start = 1;
      @(negedge clk); start = 0;
      // settings are latched: changing them mid-frame must not matter
      preamble_len = 4'd9; sfd = 8'hFF; frame_len = 7'd1;
      chk(busy, "busy after start");
      fork
        source();
        sink();
      join
      repeat (3) @(negedge clk);
      chk(!busy, "idle after frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_wiscop_pkg: checks the package functions against the standard's printed
// chip table (all 16 symbols), the FCS byte update against an independent
// CRC model, and the spreading-factor helpers.
module tb_wiscop_pkg;
  import wiscop_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < 16; s++) begin
      logic [31:0] w;
      w = chip_seq(4'(s));
      for (int j = 0; j < 32; j++)
        chk(w[j] == chip_ref(s, j), $sformatf("symbol %0d chip %0d", s, j));
    end
    for (int t = 0; t < 50; t++) begin
      byte unsigned m[$];
      logic [15:0] c;
      c = 16'h0;
      m.delete();
      for (int i = 0; i < 1 + t % 9; i++) begin
        m.push_back(8'($urandom));
        c = crc16_byte(c, m[i]);
      end
      chk(c == crc_ref(m), "crc16_byte");
    end
    for (int sel = 0; sel < 4; sel++) begin
      chk(int'(sf_chips(2'(sel))) == sf_ref(sel), "sf_chips");
      chk(sf_mask(2'(sel)) == 32'((64'd1 << sf_ref(sel)) - 1), "sf_mask");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

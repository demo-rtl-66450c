// tb_crc16_154: checks the FCS engine against the standard's check value
// (0x2189 for "123456789"), against an independent CRC model on random
// messages, and checks that appending the FCS (low byte first) leaves a zero
// register. Also checks init and that en = 0 holds the value.
module tb_crc16_154;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [7:0] data = 0;
  logic [15:0] crc;
  logic zero;
  int checks = 0, failures = 0;

  crc16_154 dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic feed(byte unsigned b);
    @(negedge clk); data = b; en = 1;
    @(negedge clk); en = 0;
  endtask

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    byte unsigned msg[$];
    string s = "123456789";
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    chk(crc == 0 && zero, "init");
    for (int i = 0; i < s.len(); i++) feed(s[i]);
    chk(crc == 16'h2189, $sformatf("check value %h", crc));
    repeat (3) @(negedge clk);
    chk(crc == 16'h2189, "hold without en");
    feed(8'h89); feed(8'h21);
    chk(zero, "residue after FCS");
    for (int t = 0; t < 40; t++) begin
      logic [15:0] ref_c;
      automatic int n = 1 + $urandom_range(0, 30);
      msg.delete();
      for (int i = 0; i < n; i++) msg.push_back(8'($urandom));
      @(negedge clk); init = 1; @(negedge clk); init = 0;
      foreach (msg[i]) feed(msg[i]);
      ref_c = crc_ref(msg);
      chk(crc == ref_c, $sformatf("random msg %0d: %h vs %h", t, crc, ref_c));
      feed(ref_c[7:0]); feed(ref_c[15:8]);
      chk(zero, "random residue");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

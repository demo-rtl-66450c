// tb_oqpsk_mod: feeds random chip frames, with half-sine and with rectangular
// pulses, and compares every DAC sample with an O-QPSK waveform computed from
// the chips with $sin (tolerance 1 LSB). Checks the frame length of 4*N+4
// samples at one sample per clock, first_sample on the first sample and done
// on the last.
module tb_oqpsk_mod;
  import tb_ref_pkg::*;
  localparam int AMP = 1800;
  logic clk = 0, rst_n = 0;
  logic pulse_sel = 0, chip = 0, chip_valid = 0, chip_last = 0, chip_ready;
  logic signed [11:0] dac_i, dac_q;
  logic dac_valid, first_sample, done, active;
  int checks = 0, failures = 0;

  oqpsk_mod #(.AMP(AMP)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit chips[$];

  task automatic drive(int n);
    @(posedge clk); #1;
    for (int k = 0; k < n; k++) begin
      chip = chips[k]; chip_last = (k == n - 1); chip_valid = 1;
      do begin @(negedge clk); #2; end while (!chip_ready);
      @(posedge clk); #1;
    end
    chip_valid = 0; chip_last = 0;
  endtask

  task automatic capture(int n, bit rect);
    int s = 0, ri, rq;
    int cycles = 0;
    while (!dac_valid) @(posedge clk) #1;
    while (dac_valid) begin
      ri = 0; rq = 0;
      for (int k = 0; k < n; k++) begin
        int v = pulse_ref(s - 4 * k, rect, AMP) * (chips[k] ? 1 : -1);
        if (k % 2 == 0) ri += v; else rq += v;
      end
      chk((dac_i - ri) <= 1 && (ri - dac_i) <= 1 && (dac_q - rq) <= 1 && (rq - dac_q) <= 1,
          $sformatf("sample %0d: I %0d/%0d Q %0d/%0d", s, dac_i, ri, dac_q, rq));
      if (s == 0) chk(first_sample, "first_sample");
      else if (first_sample) chk(0, "extra first_sample");
      if (s == 4 * n + 3) chk(done, "done on last sample");
      s++;
      @(posedge clk) #1;
    end
    chk(s == 4 * n + 4, $sformatf("frame length %0d vs %0d", s, 4 * n + 4));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      int n = 8 + 2 * $urandom_range(0, 40);
      chips.delete();
      for (int k = 0; k < n; k++) chips.push_back(1'($urandom));
      @(negedge clk); pulse_sel = t[0];
      fork
        drive(n);
        capture(n, t[0]);
      join
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

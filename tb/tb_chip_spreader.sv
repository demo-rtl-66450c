// tb_chip_spreader: sends random symbols at each spreading factor with a
// randomly stalling chip consumer, and compares every chip with the standard
// table. Checks chip_last on the last chip of the last symbol, and that with
// an always-ready consumer the chip stream has no gaps across symbols.
module tb_chip_spreader;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] sf_sel = 0;
  logic [3:0] sym_data = 0;
  logic sym_valid = 0, sym_last = 0, sym_ready;
  logic chip, chip_valid, chip_last, chip_ready = 0;
  int checks = 0, failures = 0;

  chip_spreader dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int syms[$];
  bit stall;

  // producer
  task automatic produce(int n);
    @(posedge clk); #1;
    for (int i = 0; i < n; i++) begin
      sym_data  = 4'(syms[i]);
      sym_last  = (i == n - 1);
      sym_valid = 1;
      do begin @(negedge clk); #2; end while (!sym_ready);
      @(posedge clk); #1;
    end
    sym_valid = 0; sym_last = 0;
  endtask

  // consumer
  task automatic consume(int n, int sf);
    int got = 0, gaps = 0;
    bit started = 0;
    while (got < n * sf) begin
      @(negedge clk);
      chip_ready = stall ? 1'($urandom) : 1'b1;
      #1;
      if (chip_ready && chip_valid) begin
        started = 1;
        chk(chip == chip_ref(syms[got / sf], got % sf),
            $sformatf("sf %0d chip %0d of sym %0d", sf, got % sf, syms[got / sf]));
        chk(chip_last == (got == n * sf - 1), "chip_last");
        got++;
      end else if (started && !stall) gaps++;
      @(posedge clk);
    end
    #1 chip_ready = 0;
    if (!stall) chk(gaps == 0, $sformatf("gaps in continuous stream: %0d", gaps));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int sel = 0; sel < 3; sel++) begin
      for (int rep = 0; rep < 2; rep++) begin
        stall = (rep == 1);
        syms.delete();
        for (int i = 0; i < 20; i++) syms.push_back(i < 16 ? i : $urandom_range(0, 15));
        @(negedge clk); sf_sel = 2'(sel);
        fork
          produce(20);
          consume(20, sf_ref(sel));
        join
        repeat (3) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_despreader: builds chip windows from the standard table for random
// symbols, flips fewer chips than half the code set's minimum distance (5 of
// 32, 2 of 16, 0 of 8) and checks the decided symbol, its distance (= number
// of flips) and the distance to symbol 0, at each spreading factor.
module tb_despreader;
  import tb_ref_pkg::*;
  logic [31:0] window;
  logic [1:0] sf_sel;
  logic diff;
  logic [3:0] sym;
  logic [5:0] sdist, sdist0;
  int checks = 0, failures = 0;

  despreader dut (.*);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // differential form of chip j (j >= 1) of a symbol: 1 when the phase
  // turns counter-clockwise from chip j-1 to chip j
  function automatic bit dchip(int s, int j);
    bit same = (chip_ref(s, j) == chip_ref(s, j - 1));
    return (j % 2 == 1) ? same : !same;
  endfunction

  function automatic bit ref_bit(bit df, int s, int j);
    return df ? dchip(s, j) : chip_ref(s, j);
  endfunction

  initial begin
    int maxerr [2][3] = '{'{5, 2, 0}, '{6, 1, 0}};
    for (int t = 0; t < 1200; t++) begin
      automatic int sel = t % 3;
      automatic bit df = (t / 3) % 2;
      automatic int sf = sf_ref(sel);
      automatic int j0 = df ? 1 : 0;
      automatic int s = $urandom_range(0, 15);
      automatic int e = $urandom_range(0, maxerr[df][sel]);
      int d0;
      logic [31:0] w;
      w = '0;
      if (df) w[0] = 1'($urandom);
      for (int j = j0; j < sf; j++) w[j] = ref_bit(df, s, j);
      for (int k = 0; k < e; k++) begin
        int p;
        do p = $urandom_range(j0, sf - 1); while (w[p] != ref_bit(df, s, p));
        w[p] = ~w[p];
      end
      d0 = 0;
      for (int j = j0; j < sf; j++) d0 += (w[j] != ref_bit(df, 0, j));
      window = w; sf_sel = 2'(sel); diff = df;
      #1;
      checks++;
      if (sym != 4'(s) || sdist != 6'(e) || sdist0 != 6'(d0)) begin
        failures++;
        $display("FAIL diff %0d sf %0d sym %0d/%0d dist %0d/%0d d0 %0d/%0d ", df, sf, sym, s, sdist, e, sdist0, d0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

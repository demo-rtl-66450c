// tb_irq_ctrl: random event, enable and clear patterns against a cycle model
// of the latched status register and the masked interrupt line.
module tb_irq_ctrl;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] evt = 0, irq_en = 0, clr = 0, status;
  logic irq;
  logic [N-1:0] m_status;
  logic m_irq;
  int checks = 0, failures = 0;

  irq_ctrl #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    m_status = 0; m_irq = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      evt    = ($urandom_range(0, 3) == 0) ? N'($urandom) : '0;
      clr    = ($urandom_range(0, 4) == 0) ? N'($urandom) : '0;
      if ($urandom_range(0, 20) == 0) irq_en = N'($urandom);
      @(posedge clk);
      m_irq    = |(((m_status & ~clr) | evt) & irq_en);
      m_status = (m_status & ~clr) | evt;
      #1;
      checks++;
      if (status !== m_status || irq !== m_irq) begin
        failures++;
        $display("FAIL t=%0d status %b/%b irq %b/%b", t, status, m_status, irq, m_irq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

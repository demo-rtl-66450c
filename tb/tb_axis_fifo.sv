// tb_axis_fifo: random pushes and pops against a queue model; checks data,
// tlast/tuser, count, that a full FIFO refuses writes and an empty one shows
// no data. Uses a small depth so full and empty both occur often.
module tb_axis_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic [7:0] s_tdata = 0, m_tdata;
  logic s_tlast = 0, s_tuser = 0, s_tvalid = 0, s_tready;
  logic m_tlast, m_tuser, m_tvalid, m_tready = 0;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [9:0] q[$];
  int checks = 0, failures = 0, fulls = 0, empties = 0;

  axis_fifo #(.DEPTH(DEPTH), .W(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      s_tvalid = ($urandom_range(0, 99) < ((t / 500) % 2 ? 70 : 30));
      s_tdata  = 8'($urandom); s_tlast = 1'($urandom); s_tuser = 1'($urandom);
      m_tready = ($urandom_range(0, 99) < ((t / 500) % 2 ? 30 : 70));
      #1;
      chk(count == q.size(), $sformatf("count %0d vs %0d", count, q.size()));
      chk(s_tready == (q.size() < DEPTH), "s_tready");
      chk(m_tvalid == (q.size() > 0), "m_tvalid");
      if (q.size() == DEPTH) fulls++;
      if (q.size() == 0) empties++;
      if (m_tvalid && q.size() > 0)
        chk({m_tuser, m_tlast, m_tdata} == q[0], "head data");
      @(posedge clk);
      if (m_tvalid && m_tready) void'(q.pop_front());
      if (s_tvalid && s_tready) q.push_back({s_tuser, s_tlast, s_tdata});
    end
    chk(fulls > 0 && empties > 0, "full and empty both reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// axis_fifo: AXI-Stream byte FIFO of the data plane.
//
// Sits between the DMA side (high-performance port to the processor's memory)
// and the Tx or Rx chain. It stores DEPTH bytes with their tlast flag and one
// tuser bit; the read side is first-word-fall-through (m_tvalid is high while
// the FIFO holds a byte, m_tdata shows it). A write is accepted when s_tready
// is high, i.e. the FIFO is not full; a read happens when m_tvalid and
// m_tready are both high. Read and write may happen in the same cycle.
// DEPTH defaults to 128, enough for one maximum-size 127-byte PSDU; the paper
// names the data plane interfaces but not their structure, so the FIFO is
// this design's choice.
module axis_fifo #(
  parameter int DEPTH = 128,
  parameter int W     = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] s_tdata,
  input  logic         s_tlast,
  input  logic         s_tuser,
  input  logic         s_tvalid,
  output logic         s_tready,
  output logic [W-1:0] m_tdata,
  output logic         m_tlast,
  output logic         m_tuser,
  output logic         m_tvalid,
  input  logic         m_tready,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W+1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign s_tready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign m_tvalid = (count != '0);
  assign do_wr    = s_tvalid && s_tready;
  assign do_rd    = m_tvalid && m_tready;
  assign {m_tuser, m_tlast, m_tdata} = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= {s_tuser, s_tlast, s_tdata};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= inc(wp);
      if (do_rd) rp <= inc(rp);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  // Handshake rules
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= DEPTH[$clog2(DEPTH+1)-1:0]);
endmodule

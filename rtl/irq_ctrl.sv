// irq_ctrl: configurable interrupt generation from PHY events.
//
// Each event input is a one-cycle pulse from the PHY (first Tx sample on the
// DAC, SFD received, Tx done, Rx done, FCS error). A pulse sets its bit in
// the status register, which holds until software writes a one to that bit
// (clr). The single interrupt line is high while any enabled status bit is
// set, so software chooses which events interrupt the processor. An event
// arriving in the same cycle as its clear wins, so none is lost.
// Timing: status and irq follow an event by one clock.
// Which events exist and the write-one-to-clear scheme are this design's
// choice; the interrupts themselves follow the platform description.
module irq_ctrl #(
  parameter int N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] evt,
  input  logic [N-1:0] irq_en,
  input  logic [N-1:0] clr,
  output logic [N-1:0] status,
  output logic         irq
);
  logic irq_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) status <= '0;
    else        status <= (status & ~clr) | evt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) irq_q <= 1'b0;
    else        irq_q <= |(((status & ~clr) | evt) & irq_en);
  end

  assign irq = irq_q;
endmodule

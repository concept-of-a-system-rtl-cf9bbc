// irq_ctrl: drives the interrupt output pin. Event pulses (a CA ready, a chip bridge
// FIFO overflow, a local memory overflow, a misrouted flit) set sticky status bits; the
// pin is high while any status bit whose enable bit is set is high. Writing ones to the
// clear register over JTAG clears those bits; an event in the same cycle wins.
// That the output interrupt signals a ready state or a soft error such as a memory
// overflow follows the architecture; the event set and the enable/clear scheme are this
// design's own. The pin is registered, one cycle after the status.
module irq_ctrl #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] evt,
  input  logic [N-1:0] en,
  input  logic [N-1:0] clr,
  output logic [N-1:0] status,
  output logic         irq
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      status <= '0;
      irq    <= 1'b0;
    end else begin
      status <= (status & ~clr) | evt;
      irq    <= |(status & en);
    end
  end
endmodule

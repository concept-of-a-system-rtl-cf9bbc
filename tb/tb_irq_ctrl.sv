// tb_irq_ctrl: self-checking test of the interrupt output. Random event pulses, enables and
// clears are applied; a reference model of the sticky status and of the registered pin
// is kept here and compared every cycle.
module tb_irq_ctrl;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n;
  logic [3:0] evt, en, clr, status;
  logic irq;
  logic [3:0] m_status;
  logic m_irq;
  int irq_high;

  irq_ctrl #(.N(4)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    evt = 0; en = 0; clr = 0; m_status = 0; m_irq = 0; irq_high = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      evt = ($urandom_range(5) == 0) ? 4'($urandom) : 4'd0;
      clr = ($urandom_range(7) == 0) ? 4'($urandom) : 4'd0;
      if (i % 100 == 0) en = 4'($urandom);
      @(posedge clk);
      m_irq    = |(m_status & en);
      m_status = (m_status & ~clr) | evt;
      #0.1;
      checks++;
      if (status != m_status || irq != m_irq) begin
        failures++;
        $display("FAIL cycle %0d status %b/%b irq %b/%b", i, status, m_status, irq, m_irq);
      end
      if (irq) irq_high++;
    end
    checks++;
    if (irq_high == 0) begin failures++; $display("FAIL interrupt never raised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

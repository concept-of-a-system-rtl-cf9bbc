// tb_cfg_regs: self-checking test of the two configuration banks. Writes random values to
// both banks, reads them back through the read port, checks the reset values, the
// read-only status words, and that the bank select pin switches the active bank two
// cycles after it changes.
module tb_cfg_regs;
  import soc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n;

  logic        bank_sel, wr, wr_bank, rd_bank, active_bank;
  logic [5:0]  wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [31:0] status [4];
  logic [31:0] cfg [CFG_NREG];
  logic [31:0] m [2][CFG_NREG];

  cfg_regs #(.NREG(CFG_NREG), .NSTAT(4)) dut (.*);

  task automatic fail(string s);
    failures++;
    $display("FAIL %s", s);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bank_sel = 0; wr = 0; wr_bank = 0; wr_addr = 0; wr_data = 0; rd_bank = 0; rd_addr = 0;
    for (int s = 0; s < 4; s++) status[s] = 32'hC0DE_0000 + s;
    for (int b = 0; b < 2; b++) for (int r = 0; r < CFG_NREG; r++)
      m[b][r] = (r == CFG_CTRL) ? 32'h7F00 : 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++) for (int r = 0; r < CFG_NREG; r++) begin
      @(negedge clk);
      rd_bank = 1'(b); rd_addr = 6'(r);
      #0.1 checks++;
      if (rd_data != m[b][r]) fail($sformatf("reset value bank %0d reg %0d: %h", b, r, rd_data));
    end
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      wr = 1; wr_bank = 1'($urandom); wr_addr = 6'($urandom_range(CFG_NREG + 2)); wr_data = $urandom;
      if (int'(wr_addr) < CFG_NREG) m[wr_bank][wr_addr[$clog2(CFG_NREG)-1:0]] = wr_data;
    end
    @(negedge clk);
    wr = 0;
    for (int b = 0; b < 2; b++) for (int r = 0; r < CFG_NREG; r++) begin
      @(negedge clk);
      rd_bank = 1'(b); rd_addr = 6'(r);
      #0.1 checks++;
      if (rd_data != m[b][r]) fail($sformatf("bank %0d reg %0d: %h expected %h", b, r, rd_data, m[b][r]));
    end
    for (int s = 0; s < 4; s++) begin
      @(negedge clk);
      rd_addr = 6'(32 + s);
      #0.1 checks++;
      if (rd_data != status[s]) fail("status word");
    end
    // active bank follows the pin
    for (int b = 0; b < 2; b++) begin
      @(negedge clk);
      bank_sel = 1'(b);
      @(posedge clk); @(posedge clk);
      #0.1 checks++;
      if (active_bank != 1'(b)) fail("bank switch later than two cycles");
      for (int r = 0; r < CFG_NREG; r++) begin
        checks++;
        if (cfg[r] != m[b][r]) fail($sformatf("active bank %0d reg %0d", b, r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

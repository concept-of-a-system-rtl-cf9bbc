// tb_jtag_tap: self-checking test of the JTAG port. TCK runs at a twentieth of the core
// clock. After a TMS reset the data register must be the 32-bit IDCODE; the BYPASS
// instruction must delay TDI by one bit; the instruction register must capture 0101. CFG
// scans must produce write pulses with the scanned bank, address and data, and a read
// must return the register selected by the previous scan. TRST must return the port to
// IDCODE.
module tb_jtag_tap;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n;

  logic        tck, tms, tdi, trst_n, tdo;
  logic        cfg_wr, cfg_bank, rd_bank;
  logic [5:0]  cfg_addr, rd_addr;
  logic [31:0] cfg_wdata, rd_data;
  logic [31:0] regs [2][64];
  int          wr_pulses;

  jtag_tap #(.IDCODE(32'h1000_0A4B)) dut (.*);

  assign rd_data = regs[rd_bank][rd_addr];

  always @(posedge clk) if (cfg_wr) begin
    regs[cfg_bank][cfg_addr] <= cfg_wdata;
    wr_pulses++;
  end

  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one TCK cycle: TMS/TDI set while TCK low, TDO sampled at the rising edge
  task automatic tick(logic m, logic d, output logic o);
    tms = m; tdi = d;
    #20 o = tdo; tck = 1;
    #20 tck = 0;
  endtask

  task automatic tms_seq(int n, logic [15:0] bits);
    logic o;
    for (int i = 0; i < n; i++) tick(bits[i], 1'b0, o);
  endtask

  // from Run-Test/Idle: shift n bits, end in Run-Test/Idle
  task automatic scan(bit ir, int n, logic [63:0] din, output logic [63:0] dout);
    logic o;
    dout = '0;
    tms_seq(ir ? 4 : 3, ir ? 16'b0011 : 16'b001);  // to Shift-IR / Shift-DR
    for (int i = 0; i < n; i++) begin
      tick(i == n - 1, din[i], o);
      dout[i] = o;
    end
    tms_seq(2, 16'b01);                              // Update, Run-Test/Idle
  endtask

  initial begin
    logic [63:0] o;
    tck = 0; tms = 1; tdi = 0; trst_n = 1; wr_pulses = 0;
    for (int b = 0; b < 2; b++) for (int a = 0; a < 64; a++) regs[b][a] = 32'h100 * b + a;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    tms_seq(6, 16'b011111);   // Test-Logic-Reset, then Run-Test/Idle
    scan(0, 32, 64'hFFFF_FFFF, o);
    checks++;
    if (o[31:0] != 32'h1000_0A4B) fail($sformatf("IDCODE %h", o[31:0]));
    // IR capture and BYPASS
    scan(1, 4, 64'hF, o);
    checks++;
    if (o[3:0] != 4'b0101) fail($sformatf("IR capture %b", o[3:0]));
    scan(0, 16, 64'hA5C3, o);
    checks++;
    if (o[15:1] != 15'(64'hA5C3) || o[0] != 1'b0) fail($sformatf("bypass %h", o[15:0]));
    // CFG writes
    scan(1, 4, 64'h2, o);
    for (int i = 0; i < 6; i++) begin
      logic [31:0] d;
      logic [5:0] a;
      logic b;
      d = $urandom; a = 6'($urandom_range(7)); b = 1'(i);
      scan(0, 40, {24'd0, d, a, b, 1'b1}, o);
      repeat (2) @(posedge clk);
      checks++;
      if (regs[b][a] != d || wr_pulses != i + 1) fail($sformatf("CFG write %0d", i));
    end
    // CFG read: select bank 1 address 40, then read
    scan(0, 40, {24'd0, 32'd0, 6'd40, 1'b1, 1'b0}, o);
    scan(0, 40, {24'd0, 32'd0, 6'd40, 1'b1, 1'b0}, o);
    checks++;
    if (o[39:8] != regs[1][40] || o[7:2] != 6'd40) fail($sformatf("CFG read %h", o[39:8]));
    checks++;
    if (wr_pulses != 6) fail("read scan wrote a register");
    // TRST brings back IDCODE
    trst_n = 0;
    #100 trst_n = 1;
    #20;
    tms_seq(1, 16'b0);
    scan(0, 32, 64'h0, o);
    checks++;
    if (o[31:0] != 32'h1000_0A4B) fail("IDCODE after TRST");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

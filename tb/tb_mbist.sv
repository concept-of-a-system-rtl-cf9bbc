// tb_mbist: self-checking test of the memory self-test. The memory here is a model with
// one-cycle reads into which faults can be injected. A fault-free memory must pass in
// exactly 11 x WORDS cycles; a stuck-at-one bit, a stuck-at-zero bit and an address
// decoder fault (two addresses sharing one word) must each be found at the right address.
module tb_mbist;
  localparam int WORDS = 256;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n;

  logic        start, busy, done, fail, mem_en, mem_we;
  logic [7:0]  fail_addr, mem_addr;
  logic [31:0] mem_wdata, mem_rdata;

  logic [31:0] mem [WORDS];
  int  fault_kind;   // 0 none, 1 stuck-at-1, 2 stuck-at-0, 3 decoder alias
  int  fault_addr;

  mbist #(.WORDS(WORDS), .W(32)) dut (.*);

  function automatic int phys(int a);
    return (fault_kind == 3 && a == fault_addr + 1) ? fault_addr : a;
  endfunction

  always @(posedge clk) begin
    if (mem_en && mem_we) mem[phys(int'(mem_addr))] <= mem_wdata;
    if (mem_en && !mem_we) begin
      logic [31:0] v;
      v = mem[phys(int'(mem_addr))];
      if (fault_kind == 1 && int'(mem_addr) == fault_addr) v[5] = 1'b1;
      if (fault_kind == 2 && int'(mem_addr) == fault_addr) v[17] = 1'b0;
      mem_rdata <= v;
    end
  end

  task automatic fail_msg(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    fail_msg("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int kind, int addr);
    int cyc;
    fault_kind = kind; fault_addr = addr;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 11 * WORDS + 1) fail_msg($sformatf("test took %0d cycles", cyc - 1));
    checks++;
    if (kind == 0 && fail) fail_msg("fault-free memory failed");
    if (kind != 0 && (!fail || int'(fail_addr) != addr + ((kind == 3) ? 1 : 0)))
      fail_msg($sformatf("fault %0d at %0d: fail=%b addr=%0d", kind, addr, fail, fail_addr));
  endtask

  initial begin
    start = 0; fault_kind = 0; fault_addr = 0; mem_rdata = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 0);
    run(1, 77);
    run(2, 200);
    run(3, 30);
    run(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

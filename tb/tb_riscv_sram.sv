// tb_riscv_sram: self-checking test of the RISC-V memory (two 64 kB banks) at full size.
// Writes distinct values to the same low address in both banks, uses byte enables, and
// checks that every read returns the value of the bank that was addressed. Then both
// banks' self-tests run and must pass.
module tb_riscv_sram;
  localparam int unsigned BW = 16384;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n;

  logic en, we;
  logic [3:0] be;
  logic [14:0] addr;
  logic [31:0] wdata, rdata;
  logic        mbist_start, mbist_done, mbist_fail;
  logic [31:0] ref_mem [int];

  riscv_sram #(.BANK_WORDS(BW)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [3:0] b, logic [31:0] d);
    @(negedge clk);
    en = 1; we = 1; be = b; addr = 15'(a); wdata = d;
    if (!ref_mem.exists(a)) ref_mem[a] = '0;
    for (int k = 0; k < 4; k++) if (b[k]) ref_mem[a][8*k +: 8] = d[8*k +: 8];
    @(negedge clk);
    en = 0;
  endtask

  initial begin
    en = 0; we = 0; be = 0; addr = 0; wdata = 0; mbist_start = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      int lo;
      lo = int'($urandom_range(BW-1));
      wr(lo, 4'hF, $urandom);
      wr(lo + BW, 4'hF, $urandom);     // same word in the other bank
      wr(lo, 4'($urandom), $urandom);  // partial overwrite
    end
    foreach (ref_mem[a]) begin
      @(negedge clk);
      en = 1; we = 0; addr = 15'(a);
      @(negedge clk);
      en = 0;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        $display("FAIL addr %0d read %h expected %h", a, rdata, ref_mem[a]);
      end
    end
    @(negedge clk);
    mbist_start = 1;
    repeat (11 * BW + 5) @(negedge clk);
    checks++;
    if (!mbist_done || mbist_fail) begin
      failures++;
      $display("FAIL self-test done=%b fail=%b", mbist_done, mbist_fail);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

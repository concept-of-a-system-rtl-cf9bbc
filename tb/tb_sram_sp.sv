// tb_sram_sp: self-checking test of the SRAM macro model at its full 32 kB size.
// Writes random words with random byte enables to random addresses, keeps a reference
// copy, and reads every touched address back one cycle after the read request.
module tb_sram_sp;
  localparam int unsigned WORDS = 8192;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;

  logic en, we;
  logic [3:0] be;
  logic [12:0] addr;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [int];

  sram_sp #(.WORDS(WORDS), .W(32)) dut (.clk, .en, .we, .be, .addr, .wdata, .rdata);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; be = 0; addr = 0; wdata = 0;
    // full writes first so every tested word is defined
    for (int i = 0; i < 300; i++) begin
      int a;
      a = (i < 4) ? ((i == 0) ? 0 : (i == 1) ? WORDS-1 : i) : int'($urandom_range(WORDS-1));
      @(negedge clk);
      en = 1; we = 1; be = 4'hF; addr = 13'(a); wdata = $urandom;
      ref_mem[a] = wdata;
    end
    // partial writes
    for (int i = 0; i < 300; i++) begin
      int a;
      int keys[$];
      foreach (ref_mem[k]) keys.push_back(k);
      a = keys[$urandom_range(keys.size()-1)];
      @(negedge clk);
      en = 1; we = 1; be = 4'($urandom); addr = 13'(a); wdata = $urandom;
      for (int b = 0; b < 4; b++) if (be[b]) ref_mem[a][8*b +: 8] = wdata[8*b +: 8];
    end
    // disabled cycle must not write
    @(negedge clk);
    en = 0; we = 1; be = 4'hF; addr = 0; wdata = ~ref_mem[0];
    // read back
    foreach (ref_mem[a]) begin
      @(negedge clk);
      en = 1; we = 0; addr = 13'(a);
      @(negedge clk);
      en = 0;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        $display("FAIL addr %0d read %h expected %h", a, rdata, ref_mem[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

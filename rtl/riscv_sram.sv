// riscv_sram: the RISC-V's on-chip memory, two 64 kB SRAM macros (16384 words of 32 bits
// each) behind one word-addressed port. The two-times-64 kB organisation follows the
// architecture; mapping the top address bit to the bank is this design's own choice. Only
// the addressed bank is enabled, so the other one draws no access current.
//
// Each bank has its own memory built-in self-test (mbist, March C-); a rising mbist_start
// starts both, and while they run they own the banks. mbist_done is high when both have
// finished, mbist_fail if either found a fault.
//
// Interface: as sram_sp, with a 15-bit word address; rdata is valid one cycle after a
// read and comes from the bank that was read.
module riscv_sram #(
  parameter int unsigned BANK_WORDS = 16384   // 64 kB per bank
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            en,
  input  logic                            we,
  input  logic [3:0]                      be,
  input  logic [$clog2(BANK_WORDS):0]     addr,
  input  logic [31:0]                     wdata,
  output logic [31:0]                     rdata,
  input  logic                            mbist_start,
  output logic                            mbist_done,
  output logic                            mbist_fail
);
  localparam int unsigned AW = $clog2(BANK_WORDS);
  logic [31:0] rd [2];
  logic        sel_q;
  logic        bank;

  assign bank = addr[AW];

  logic [1:0] t_busy, t_done, t_fail;

  for (genvar g = 0; g < 2; g++) begin : g_bank
    logic          t_en, t_we;
    logic [AW-1:0] t_addr, t_fail_addr;
    logic [31:0]   t_wdata;

    mbist #(.WORDS(BANK_WORDS), .W(32)) u_mbist (
      .clk, .rst_n, .start(mbist_start), .busy(t_busy[g]), .done(t_done[g]),
      .fail(t_fail[g]), .fail_addr(t_fail_addr), .mem_en(t_en), .mem_we(t_we),
      .mem_addr(t_addr), .mem_wdata(t_wdata), .mem_rdata(rd[g])
    );

    sram_sp #(.WORDS(BANK_WORDS), .W(32)) u_mem (
      .clk  (clk),
      .en   (t_busy[g] ? t_en    : (en && (bank == 1'(g)))),
      .we   (t_busy[g] ? t_we    : we),
      .be   (t_busy[g] ? 4'hF    : be),
      .addr (t_busy[g] ? t_addr  : addr[AW-1:0]),
      .wdata(t_busy[g] ? t_wdata : wdata),
      .rdata(rd[g])
    );
  end

  assign mbist_done = &t_done;
  assign mbist_fail = |t_fail;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             sel_q <= 1'b0;
    else if (en && !we)     sel_q <= bank;
  end

  assign rdata = rd[sel_q];
endmodule

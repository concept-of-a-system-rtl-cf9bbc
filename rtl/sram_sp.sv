// sram_sp: single-port synchronous SRAM with byte write enables, the model of one SRAM
// macro. Each computing array holds a 32 kB local memory (8192 words of 32 bits); the
// RISC-V memory is built from two 64 kB instances. The sizes follow the architecture; the
// one-cycle read latency and byte enables are this design's own choice, typical of a
// compiled SRAM macro, which a synthesis flow maps this array onto.
//
// Interface: en selects the memory in a cycle; with we set, bytes of wdata whose be bit
// is set are written to addr; with we clear, rdata holds mem[addr] after the next clock
// edge and keeps it until the next read.
module sram_sp #(
  parameter int unsigned WORDS = 8192,   // 32 kB of 32-bit words
  parameter int unsigned W     = 32
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [W/8-1:0]           be,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < W/8; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule

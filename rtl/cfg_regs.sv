// cfg_regs: two banks of configuration registers and the asynchronous bank switch.
//
// Both banks are written over JTAG. The interrupt input pin selects which bank drives the
// chip, so a setup can switch the whole chip between two prepared states at once without
// a JTAG access. The pin passes a two-flop synchronizer; the switch takes effect two core
// cycles after the pin changes. Reads over JTAG reach either bank (addresses 0 to NREG-1)
// and read-only status words (addresses 32 and up).
// Two banks selected by the interrupt input follow the architecture; the number of
// registers, their reset values and their meaning (soc_pkg CFG_*) are this design's own.
// Reset: register CFG_CTRL of both banks enables all seven CAs in monitor mode; all other
// registers are zero.
module cfg_regs
  import soc_pkg::*;
#(
  parameter int unsigned NREG  = CFG_NREG,
  parameter int unsigned NSTAT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bank_sel,          // interrupt input pin, asynchronous
  input  logic              wr,
  input  logic              wr_bank,
  input  logic [5:0]        wr_addr,
  input  logic [31:0]       wr_data,
  input  logic              rd_bank,
  input  logic [5:0]        rd_addr,
  output logic [31:0]       rd_data,
  input  logic [31:0]       status [NSTAT],
  output logic              active_bank,
  output logic [31:0]       cfg [NREG]
);
  localparam logic [31:0] CTRL_RESET = 32'h0000_7F00;

  logic [31:0] bank_r [2][NREG];

  sync2 #(.RESET_VAL(1'b0)) u_sel (.clk, .rst_n, .d(bank_sel), .q(active_bank));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++)
        for (int r = 0; r < NREG; r++)
          bank_r[b][r] <= (r == CFG_CTRL) ? CTRL_RESET : '0;
    end else if (wr && int'(wr_addr) < NREG) begin
      bank_r[wr_bank][wr_addr[$clog2(NREG)-1:0]] <= wr_data;
    end
  end

  always_comb begin
    for (int r = 0; r < NREG; r++) cfg[r] = bank_r[active_bank][r];
    rd_data = '0;
    if (int'(rd_addr) < NREG)
      rd_data = bank_r[rd_bank][rd_addr[$clog2(NREG)-1:0]];
    else if (int'(rd_addr) >= 32 && int'(rd_addr) < 32 + NSTAT)
      rd_data = status[int'(rd_addr) - 32];
  end
endmodule

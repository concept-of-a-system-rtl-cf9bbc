// ca_crossbar: behavioural model of the memristor crossbar of one computing array and
// its mixed-signal periphery (row DACs, column ADCs). It is not synthesizable logic in
// the real chip: the crossbar is a memristor array processed on top of the CMOS, the
// DACs and ADCs are analog circuits. The model gives the digital side the ports and the
// timing the controller sees.
//
// Function: each cross point holds a conductance level g[r][c] (GW bits). Programming
// writes one row of levels (the SET/RESET pulses of the real array are not modelled).
// An evaluation applies one DAC code vin[r] per row and, by Ohm's and Kirchhoff's laws,
// each column current is the sum over rows of vin[r]*g[r][c]; the ADC turns it into an
// AW-bit code, vout[c] = min(2^AW-1, sum >> SHIFT).
//
// Timing: start is accepted while not busy; done pulses CONV_CYCLES clocks later with
// vout valid from then on. The analog part runs at 100 MHz against a 1 GHz digital clock,
// so one conversion takes 10 digital cycles. Array size, code widths and the scaling
// shift are this design's own choices; the 100 MHz analog rate follows the architecture.
module ca_crossbar #(
  parameter int unsigned ROWS        = 32,
  parameter int unsigned COLS        = 32,
  parameter int unsigned GW          = 4,   // conductance level bits
  parameter int unsigned DW          = 4,   // DAC bits
  parameter int unsigned AW          = 8,   // ADC bits
  parameter int unsigned SHIFT       = 5,
  parameter int unsigned CONV_CYCLES = 10   // 1 GHz / 100 MHz
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      g_we,
  input  logic [$clog2(ROWS)-1:0]   g_row,
  input  logic [COLS*GW-1:0]        g_data,
  input  logic                      start,
  input  logic [ROWS*DW-1:0]        vin,
  output logic                      busy,
  output logic                      done,
  output logic [COLS*AW-1:0]        vout
);
  localparam int unsigned SW = GW + DW + $clog2(ROWS) + 1;

  logic [GW-1:0]  g [ROWS][COLS];
  logic [ROWS*DW-1:0] vin_q;
  logic [$clog2(CONV_CYCLES+1)-1:0] cnt;

  function automatic logic [COLS*AW-1:0] evaluate(input logic [ROWS*DW-1:0] v);
    logic [COLS*AW-1:0] r;
    for (int c = 0; c < COLS; c++) begin
      logic [SW-1:0] acc;
      acc = '0;
      for (int i = 0; i < ROWS; i++)
        acc += SW'(v[i*DW +: DW]) * SW'(g[i][c]);
      acc = acc >> SHIFT;
      r[c*AW +: AW] = (acc > SW'((1 << AW) - 1)) ? AW'((1 << AW) - 1) : acc[AW-1:0];
    end
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (g_we)
      for (int c = 0; c < COLS; c++) g[g_row][c] <= g_data[c*GW +: GW];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      cnt   <= '0;
      vin_q <= '0;
      vout  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        vin_q <= vin;
        cnt   <= ($clog2(CONV_CYCLES+1))'(CONV_CYCLES - 1);
      end else if (busy) begin
        if (cnt == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
          vout <= evaluate(vin_q);
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
    end
  end
endmodule

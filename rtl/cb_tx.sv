// cb_tx: transmit half of the chip bridge. It drives the LVDS output pairs CBTXDAT[15:0],
// CBTXADD[1:0] and CBTXVAL and listens to the LVDS input CBTXREA from the receiver.
//
// Two modes, chosen by a configuration bit:
//   monitor  every flit moved by the NoC is copied out, so the traffic on the network can
//            be recorded at speed. If the receiver holds CBTXREA low for longer than the
//            FIFO can absorb, flits are dropped and overflow pulses (a soft error that the
//            interrupt output can report).
//   link     only flits addressed to the bridge node leave the chip (chip-to-chip
//            connection); the NoC is back-pressured instead of losing data.
//
// Each 32-bit word leaves in one clock cycle as two 16-bit halves on the rising and the
// falling clock edge (rise: bits 15:0, fall: bits 31:16), so 16 lines at 2 Gbit/s carry the
// 1 GHz, 32-bit NoC. The two CBTXADD lines carry four address bits the same way (rise:
// bits 1:0, fall: bits 3:2): the destination node in monitor mode; in link mode bits 2:0
// are the source node and bit 3 is the flit's last flag, so a receiving chip can rebuild the
// packets. A flit can only reach the bridge from nodes 0-7, so three source bits suffice.
// The double-data-rate output cells themselves belong to the LVDS pads; this
// block hands them the two halves. Pin names, widths and line rates follow the pin list;
// the word split, the address meaning, the FIFO and the modes are this design's own.
//
// Timing: a flit that enters an empty FIFO is on the pins two cycles later. CBTXREA passes a
// two-flop synchronizer, so the receiver must lower it at least three words before it
// runs out of room. One word leaves per cycle while CBTXREA is high.
module cb_tx
  import soc_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mode_link,
  input  logic        mon_valid,
  input  flit_t       mon_flit,
  input  logic        link_valid,
  input  flit_t       link_flit,
  output logic        link_ready,
  input  logic        tx_rea,       // CBTXREA, asynchronous
  output logic [15:0] tx_dat_rise,  // CBTXDAT, first half of the cycle
  output logic [15:0] tx_dat_fall,  // CBTXDAT, second half of the cycle
  output logic [1:0]  tx_add_rise,  // CBTXADD, first half
  output logic [1:0]  tx_add_fall,  // CBTXADD, second half
  output logic        tx_val,       // CBTXVAL, high for both halves
  output logic        overflow
);
  typedef struct packed {
    node_t       addr;
    logic [31:0] data;
  } tx_word_t;

  logic     rea_s;
  logic     push, pop, full, empty;
  tx_word_t din, dout;
  logic [$clog2(DEPTH):0] count;

  sync2 #(.RESET_VAL(1'b0)) u_rea_sync (.clk, .rst_n, .d(tx_rea), .q(rea_s));

  always_comb begin
    if (mode_link) begin
      push       = link_valid && !full;
      din        = '{addr: {link_flit.last, link_flit.src[2:0]}, data: link_flit.data};
      link_ready = !full;
    end else begin
      push       = mon_valid;
      din        = '{addr: mon_flit.dest, data: mon_flit.data};
      link_ready = 1'b1;    // flits for the bridge are already in the monitor stream
    end
  end

  assign pop = rea_s && !empty;

  sync_fifo #(.W($bits(tx_word_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push, .din, .full, .pop, .dout, .empty, .count
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_val      <= 1'b0;
      tx_dat_rise <= '0;
      tx_dat_fall <= '0;
      tx_add_rise <= '0;
      tx_add_fall <= '0;
      overflow    <= 1'b0;
    end else begin
      overflow <= !mode_link && mon_valid && full;
      tx_val   <= pop;
      if (pop) begin
        tx_dat_rise <= dout.data[15:0];
        tx_dat_fall <= dout.data[31:16];
        tx_add_rise <= dout.addr[1:0];
        tx_add_fall <= dout.addr[3:2];
      end
    end
  end
endmodule

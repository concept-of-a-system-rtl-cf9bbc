// tb_link_relay: test model of the board glue that joins two chips through their chip
// bridges (on a demonstrator board this would sit in an FPGA). It is not part of the chip.
//
// It takes the words that one chip sends over its LVDS bridge output in link mode, with
// {last, source} on the address lines, and feeds each one into the other chip's TTL bridge
// input as four bytes with the four-phase VAL/REA handshake. The destination node on the
// receiving chip is fixed by the DEST parameter; the last flag is passed on, so packets
// arrive whole. The source node is not carried further.
//
// The relay holds words in a queue and lowers CBTXREA (tx_rea) once LIMIT words are
// waiting. Because the sending chip synchronizes CBTXREA, a few more words may still
// arrive; max_fill records the largest queue seen so a testbench can check that bound.
// The TTL side runs on delays (a few ns per phase), slower than the 1 GHz LVDS side, so
// the relay back-pressures the sending chip whenever a long packet passes.
module tb_link_relay #(
  parameter logic [2:0] DEST  = 3'd0,
  parameter int         LIMIT = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // LVDS side, from the sending chip
  input  logic [15:0] tx_dat_rise,
  input  logic [15:0] tx_dat_fall,
  input  logic [1:0]  tx_add_rise,
  input  logic [1:0]  tx_add_fall,
  input  logic        tx_val,
  output logic        tx_rea,
  // TTL side, into the receiving chip
  output logic [7:0]  rx_dat,
  output logic        rx_add,
  output logic        rx_val,
  input  logic        rx_rea,
  // statistics
  output int          words_in,
  output int          words_out,
  output int          stall_cycles,
  output int          max_fill
);
  typedef struct packed {
    logic        last;
    logic [2:0]  src;
    logic [31:0] data;
  } word_t;

  word_t q [$];

  initial begin
    tx_rea = 1'b1; rx_dat = '0; rx_add = 1'b0; rx_val = 1'b0;
    words_in = 0; words_out = 0; stall_cycles = 0; max_fill = 0;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (tx_val) begin
        q.push_back({tx_add_fall, tx_add_rise, tx_dat_fall, tx_dat_rise});
        words_in++;
      end
      if (q.size() > max_fill) max_fill = q.size();
      if (!tx_rea) stall_cycles++;
      tx_rea <= (q.size() < LIMIT);
    end
  end

  task automatic send_byte(logic [7:0] b, logic a);
    #3 rx_dat = b; rx_add = a;
    #5 rx_val = 1'b1;
    while (!rx_rea) #1;
    #4 rx_val = 1'b0;
    while (rx_rea) #1;
  endtask

  initial begin
    word_t w;
    forever begin
      while (q.size() == 0) @(posedge clk);
      w = q.pop_front();
      send_byte(w.data[7:0],   w.last);
      send_byte(w.data[15:8],  DEST[0]);
      send_byte(w.data[23:16], DEST[1]);
      send_byte(w.data[31:24], DEST[2]);
      words_out++;
    end
  end
endmodule

// cb_rx: receive half of the chip bridge. It takes the slow single-ended lines CBRXDAT[7:0],
// CBRXADD and CBRXVAL and answers on CBRXREA, and injects the words it assembles into the
// NoC, which gives an outside setup direct access to the computing arrays.
//
// The lines run at about 100 Mbit/s without a clock of their own, so the transfer is a
// four-phase handshake sampled by the core clock: the sender sets CBRXDAT and CBRXADD,
// then raises CBRXVAL; the bridge takes the byte and raises CBRXREA; the sender lowers
// CBRXVAL; the bridge lowers CBRXREA. Only CBRXVAL passes a synchronizer; data and
// address are stable while it is high. Four bytes make one 32-bit word, least significant
// byte first. The single address line carries one bit per byte: the bit of the first byte
// is the flit's last flag, the bits of bytes two to four are the destination node (bit 0
// first), so nodes 0 to 7 (RISC-V and the seven CAs) can be reached. The bridge holds
// CBRXREA low while a finished word waits for the NoC.
// Pin names and widths follow the pin list; the handshake and the byte and address
// packing are this design's own.
module cb_rx
  import soc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  rx_dat,   // CBRXDAT
  input  logic        rx_add,   // CBRXADD
  input  logic        rx_val,   // CBRXVAL, asynchronous
  output logic        rx_rea,   // CBRXREA
  output logic        out_valid,
  output flit_t       out_flit,
  input  logic        out_ready
);
  logic        val_s;
  logic [1:0]  beat;
  logic [31:0] word;
  logic [3:0]  abits;
  logic        hold;

  sync2 #(.RESET_VAL(1'b0)) u_val_sync (.clk, .rst_n, .d(rx_val), .q(val_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_rea <= 1'b0;
      beat   <= '0;
      word   <= '0;
      abits  <= '0;
      hold   <= 1'b0;
    end else begin
      if (hold && out_ready) hold <= 1'b0;
      if (!rx_rea && val_s && !hold) begin
        word[beat*8 +: 8] <= rx_dat;
        abits[beat]       <= rx_add;
        rx_rea            <= 1'b1;
        beat              <= beat + 1'b1;
        if (beat == 2'd3) hold <= 1'b1;
      end else if (rx_rea && !val_s) begin
        rx_rea <= 1'b0;
      end
    end
  end

  assign out_valid = hold;
  assign out_flit  = '{dest: {1'b0, abits[3:1]}, src: NODE_BRIDGE, last: abits[0], data: word};
endmodule

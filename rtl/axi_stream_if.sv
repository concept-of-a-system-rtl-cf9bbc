// axi_stream_if: the 15-pin AXI stream port through which an external processor reaches
// the RISC-V directly. The 15 pins are used as ACLK, TVALID, TREADY (output), TLAST,
// TID[2:0] and TDATA[7:0]: an 8-bit stream with its own clock of up to 100 MHz.
//
// The core clock (1 GHz) oversamples the port: every pin passes a two-flop synchronizer and
// a rising ACLK edge is detected in the core domain. At that moment a byte is taken if
// TVALID and TREADY were both high, which is what the sender saw at the same edge, because
// TREADY only changes just after a detected edge. Bytes are packed into 32-bit words, first
// byte in bits 7:0; a word is handed to the RISC-V after four bytes or at TLAST, with a
// byte mask (keep), the last flag and the stream id of its first byte. TREADY is low while a
// finished word waits for the RISC-V.
// The 15-bit width and the 100 MHz rate follow the pin list; the split of the 15 pins,
// the inbound direction and the packing are this design's own. The core clock must be at
// least six times ACLK.
module axi_stream_if (
  input  logic        clk,
  input  logic        rst_n,
  // pins
  input  logic        aclk,
  input  logic        tvalid,
  input  logic        tlast,
  input  logic [2:0]  tid,
  input  logic [7:0]  tdata,
  output logic        tready,
  // towards the RISC-V
  output logic        w_valid,
  output logic [31:0] w_data,
  output logic [3:0]  w_keep,
  output logic        w_last,
  output logic [2:0]  w_id,
  input  logic        w_ready
);
  localparam int unsigned PW = 1 + 1 + 1 + 3 + 8;

  logic [PW-1:0] p_meta, p_s;
  logic          aclk_q;
  logic          aclk_s, tvalid_s, tlast_s;
  logic [2:0]    tid_s;
  logic [7:0]    tdata_s;
  logic          edge_det;
  logic [1:0]    nbyte;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_meta <= '0;
      p_s    <= '0;
      aclk_q <= 1'b0;
    end else begin
      p_meta <= {aclk, tvalid, tlast, tid, tdata};
      p_s    <= p_meta;
      aclk_q <= aclk_s;
    end
  end

  assign {aclk_s, tvalid_s, tlast_s, tid_s, tdata_s} = p_s;
  assign edge_det = aclk_s && !aclk_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tready  <= 1'b0;
      w_valid <= 1'b0;
      w_data  <= '0;
      w_keep  <= '0;
      w_last  <= 1'b0;
      w_id    <= '0;
      nbyte   <= '0;
    end else begin
      logic full_next;
      full_next = w_valid && !w_ready;
      if (w_valid && w_ready) begin
        w_valid <= 1'b0;
        w_keep  <= '0;
      end
      if (edge_det) begin
        if (tvalid_s && tready) begin
          w_data[nbyte*8 +: 8] <= tdata_s;
          if (nbyte == 0) begin
            w_id   <= tid_s;
            w_keep <= 4'b0001;
          end else begin
            w_keep[nbyte] <= 1'b1;
          end
          w_last <= tlast_s;
          if (nbyte == 2'd3 || tlast_s) begin
            w_valid   <= 1'b1;
            nbyte     <= '0;
            full_next = 1'b1;
          end else begin
            nbyte <= nbyte + 1'b1;
          end
        end
        tready <= !full_next;
      end
    end
  end
endmodule

// ca_ctrl: local controller of one computing array (CA). It lets a CA work on its own:
// it takes commands from the NoC, moves data between the NoC and the CA's local memory,
// programs the memristor crossbar from an image in that memory, and runs one crossbar
// evaluation from an input vector in memory, writing the ADC results back to memory.
//
// That a CA has a local controller and a local memory and computes independently follows
// the architecture; the command set and its encoding (soc_pkg::ca_op_e) are this design's
// own. Commands, first flit of a packet, [31:28] opcode, [27:15] A, [14:2] B:
//   WRITE A       following flits of the packet are stored at A, A+1, ...
//   READ  A, B    B words from A are sent back to the sender as one packet
//   PROG  A       ROWS rows of COLS conductance levels (GW bits each, column 0 in the low
//                 bits, WPR words per row) are read from A and written into the crossbar
//   RUN   A, B    the input vector (ROWS DAC codes, DW bits each) is read from A, the
//                 crossbar evaluated, the COLS ADC codes (AW bits each) stored from B
// PROG and RUN answer the sender with one DONE flit; its bit 0 reports that an address
// ran past the memory. Such an access is suppressed and pulses mem_ovf.
//
// Timing: one NoC flit per cycle for WRITE; READ sends one word every two cycles; PROG
// reads one word per two cycles; RUN waits the crossbar conversion time. When enable is
// low the controller accepts nothing (the CA is shut off).
module ca_ctrl
  import soc_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned ROWS  = 32,
  parameter int unsigned COLS  = 32,
  parameter int unsigned GW    = 4,
  parameter int unsigned DW    = 4,
  parameter int unsigned AW    = 8,
  parameter node_t       NODE  = NODE_CA0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      enable,
  // NoC side
  input  logic                      in_valid,
  input  flit_t                     in_flit,
  output logic                      in_ready,
  output logic                      out_valid,
  output flit_t                     out_flit,
  input  logic                      out_ready,
  // local memory
  output logic                      mem_en,
  output logic                      mem_we,
  output logic [$clog2(DEPTH)-1:0]  mem_addr,
  output logic [31:0]               mem_wdata,
  input  logic [31:0]               mem_rdata,
  // crossbar
  output logic                      g_we,
  output logic [$clog2(ROWS)-1:0]   g_row,
  output logic [COLS*GW-1:0]        g_data,
  output logic                      xb_start,
  output logic [ROWS*DW-1:0]        xb_vin,
  input  logic                      xb_done,
  input  logic [COLS*AW-1:0]        xb_vout,
  // events
  output logic                      done_evt,
  output logic                      mem_ovf
);
  localparam int unsigned WPR   = COLS*GW/32;   // words per crossbar row image
  localparam int unsigned VINW  = ROWS*DW/32;   // words of one input vector
  localparam int unsigned VOUTW = COLS*AW/32;   // words of one result vector
  localparam int unsigned XA    = ADDR_FLD_W + 1;
  localparam int unsigned RW    = $clog2(ROWS);

  typedef enum logic [3:0] {
    S_IDLE, S_WRITE, S_RD_ISSUE, S_RD_SEND, S_PG_ISSUE, S_PG_WAIT,
    S_RUN_ISSUE, S_RUN_WAIT, S_RUN_CONV, S_RUN_STORE, S_DONE
  } state_e;

  state_e          st;
  node_t           req_src;
  logic [XA-1:0]   addr, addr_b;
  logic [ADDR_FLD_W-1:0] cnt;
  logic [RW-1:0]   row;
  logic [7:0]      wcnt;
  logic            ovf;
  logic            oob;
  ca_op_e          op;

  assign op  = ca_op_e'(in_flit.data[31:28]);
  assign oob = (addr >= XA'(DEPTH));

  // memory port
  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = addr[$clog2(DEPTH)-1:0];
    mem_wdata = in_flit.data;
    unique case (st)
      S_WRITE:     begin mem_en = in_valid && !oob; mem_we = 1'b1; end
      S_RD_ISSUE,
      S_PG_ISSUE,
      S_RUN_ISSUE: mem_en = !oob;
      S_RUN_STORE: begin
        mem_en    = !oob;
        mem_we    = 1'b1;
        mem_wdata = xb_vout[wcnt*32 +: 32];
      end
      default: ;
    endcase
  end

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_flit  = '{dest: req_src, src: NODE, last: 1'b1, data: '0};
    unique case (st)
      S_IDLE:    in_ready = enable;
      S_WRITE:   in_ready = 1'b1;
      S_RD_SEND: begin
        out_valid     = 1'b1;
        out_flit.last = (cnt == 1);
        out_flit.data = oob ? '0 : mem_rdata;
      end
      S_DONE: begin
        out_valid     = 1'b1;
        out_flit.data = {OP_DONE, 27'd0, ovf};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      req_src  <= '0;
      addr     <= '0;
      addr_b   <= '0;
      cnt      <= '0;
      row      <= '0;
      wcnt     <= '0;
      ovf      <= 1'b0;
      g_we     <= 1'b0;
      g_row    <= '0;
      g_data   <= '0;
      xb_start <= 1'b0;
      xb_vin   <= '0;
      done_evt <= 1'b0;
      mem_ovf  <= 1'b0;
    end else begin
      g_we     <= 1'b0;
      xb_start <= 1'b0;
      done_evt <= 1'b0;
      mem_ovf  <= 1'b0;
      unique case (st)
        S_IDLE: if (in_valid && enable) begin
          req_src <= in_flit.src;
          addr    <= XA'(in_flit.data[27:15]);
          addr_b  <= XA'(in_flit.data[14:2]);
          cnt     <= in_flit.data[14:2];
          row     <= '0;
          wcnt    <= '0;
          ovf     <= 1'b0;
          case (op)
            OP_WRITE: if (!in_flit.last) st <= S_WRITE;
            OP_READ:  if (in_flit.data[14:2] != 0) st <= S_RD_ISSUE;
            OP_PROG:  st <= S_PG_ISSUE;
            OP_RUN:   st <= S_RUN_ISSUE;
            default:  ;
          endcase
        end
        S_WRITE: if (in_valid) begin
          if (oob) begin ovf <= 1'b1; mem_ovf <= 1'b1; end
          addr <= addr + 1'b1;
          if (in_flit.last) st <= S_IDLE;
        end
        S_RD_ISSUE: begin
          if (oob) mem_ovf <= 1'b1;
          st <= S_RD_SEND;
        end
        S_RD_SEND: if (out_ready) begin
          addr <= addr + 1'b1;
          cnt  <= cnt - 1'b1;
          st   <= (cnt == 1) ? S_IDLE : S_RD_ISSUE;
        end
        S_PG_ISSUE: begin
          if (oob) begin ovf <= 1'b1; mem_ovf <= 1'b1; end
          st <= S_PG_WAIT;
        end
        S_PG_WAIT: begin
          g_data[wcnt*32 +: 32] <= oob ? '0 : mem_rdata;
          addr <= addr + 1'b1;
          if (int'(wcnt) == WPR-1) begin
            wcnt  <= '0;
            g_we  <= 1'b1;
            g_row <= row;
            row   <= row + 1'b1;
            st    <= (int'(row) == ROWS-1) ? S_DONE : S_PG_ISSUE;
          end else begin
            wcnt <= wcnt + 1'b1;
            st   <= S_PG_ISSUE;
          end
        end
        S_RUN_ISSUE: begin
          if (oob) begin ovf <= 1'b1; mem_ovf <= 1'b1; end
          st <= S_RUN_WAIT;
        end
        S_RUN_WAIT: begin
          xb_vin[wcnt*32 +: 32] <= oob ? '0 : mem_rdata;
          addr <= addr + 1'b1;
          if (int'(wcnt) == VINW-1) begin
            wcnt     <= '0;
            xb_start <= 1'b1;
            st       <= S_RUN_CONV;
          end else begin
            wcnt <= wcnt + 1'b1;
            st   <= S_RUN_ISSUE;
          end
        end
        S_RUN_CONV: if (xb_done) begin
          addr <= addr_b;
          st   <= S_RUN_STORE;
        end
        S_RUN_STORE: begin
          if (oob) begin ovf <= 1'b1; mem_ovf <= 1'b1; end
          addr <= addr + 1'b1;
          if (int'(wcnt) == VOUTW-1) begin
            wcnt <= '0;
            st   <= S_DONE;
          end else begin
            wcnt <= wcnt + 1'b1;
          end
        end
        S_DONE: if (out_ready) begin
          done_evt <= 1'b1;
          st       <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_flit));
endmodule

// jtag_tap: the JTAG port (TCK, TMS, TDI, TDO, TRST) that programs the chip's configuration
// registers and serves as its slow-control interface.
//
// A standard IEEE 1149.1 test access port state machine with a 4-bit instruction
// register. Instructions: IDCODE (0001, selected after reset) shifts a 32-bit device
// code, CFG (0010) selects a 40-bit configuration data register, every other code selects
// the 1-bit bypass register. The CFG register holds, from TDI side to TDO side,
// {data[31:0], addr[5:0], bank, wr}. Update-DR with wr set writes data into register addr
// of the given bank; with wr clear it only points the read port at (bank, addr). The next
// Capture-DR loads the pointed-at register into the data field, so a read takes two scans.
//
// JTAG runs at about 10 MHz, far below the 1 GHz core clock, so the core clock
// oversamples TCK, TMS and TDI through two-flop synchronizers and acts on the detected
// TCK edges: state and shift registers on a rising edge, TDO on a falling edge, as the
// standard requires. TRST, active low, is synchronized like the other pins and holds the
// port in Test-Logic-Reset. Each TCK phase must last at least three core cycles, so the
// core clock must be at least six times TCK (100 times at 10 MHz and 1 GHz).
// That the chip is configured over JTAG with five pins follows the architecture; the
// instruction set, the register layout and the oversampling are this design's own.
module jtag_tap #(
  parameter logic [31:0] IDCODE = 32'h1000_0A4B   // bit 0 must be one
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tck,
  input  logic        tms,
  input  logic        tdi,
  input  logic        trst_n,
  output logic        tdo,
  // configuration register access
  output logic        cfg_wr,      // one-cycle pulse
  output logic        cfg_bank,
  output logic [5:0]  cfg_addr,
  output logic [31:0] cfg_wdata,
  output logic        rd_bank,
  output logic [5:0]  rd_addr,
  input  logic [31:0] rd_data
);
  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PA_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PA_IR, EX2_IR, UPD_IR
  } tap_e;

  localparam logic [3:0] IR_IDCODE = 4'b0001;
  localparam logic [3:0] IR_CFG    = 4'b0010;
  localparam int unsigned CFG_W    = 40;

  logic tck_s, tms_s, tdi_s, tck_q, trst_s;
  logic rise, fall;

  tap_e             st;
  logic [3:0]       ir, ir_sr;
  logic [CFG_W-1:0] dr;

  sync2 #(.RESET_VAL(1'b0)) u_tck  (.clk, .rst_n, .d(tck),    .q(tck_s));
  sync2 #(.RESET_VAL(1'b1)) u_tms  (.clk, .rst_n, .d(tms),    .q(tms_s));
  sync2 #(.RESET_VAL(1'b0)) u_tdi  (.clk, .rst_n, .d(tdi),    .q(tdi_s));
  sync2 #(.RESET_VAL(1'b0)) u_trst (.clk, .rst_n, .d(trst_n), .q(trst_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tck_q <= 1'b0;
    else        tck_q <= tck_s;
  end
  assign rise = tck_s && !tck_q;
  assign fall = !tck_s && tck_q;

  function automatic tap_e next_state(tap_e s, logic m);
    unique case (s)
      TLR:    return m ? TLR    : RTI;
      RTI:    return m ? SEL_DR : RTI;
      SEL_DR: return m ? SEL_IR : CAP_DR;
      CAP_DR: return m ? EX1_DR : SH_DR;
      SH_DR:  return m ? EX1_DR : SH_DR;
      EX1_DR: return m ? UPD_DR : PA_DR;
      PA_DR:  return m ? EX2_DR : PA_DR;
      EX2_DR: return m ? UPD_DR : SH_DR;
      UPD_DR: return m ? SEL_DR : RTI;
      SEL_IR: return m ? TLR    : CAP_IR;
      CAP_IR: return m ? EX1_IR : SH_IR;
      SH_IR:  return m ? EX1_IR : SH_IR;
      EX1_IR: return m ? UPD_IR : PA_IR;
      PA_IR:  return m ? EX2_IR : PA_IR;
      EX2_IR: return m ? UPD_IR : SH_IR;
      UPD_IR: return m ? SEL_DR : RTI;
      default: return TLR;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= TLR;
      ir        <= IR_IDCODE;
      ir_sr     <= '0;
      dr        <= '0;
      tdo       <= 1'b0;
      cfg_wr    <= 1'b0;
      cfg_bank  <= 1'b0;
      cfg_addr  <= '0;
      cfg_wdata <= '0;
      rd_bank   <= 1'b0;
      rd_addr   <= '0;
    end else begin
      cfg_wr <= 1'b0;
      if (!trst_s) begin
        st <= TLR;
        ir <= IR_IDCODE;
      end else if (rise) begin
        st <= next_state(st, tms_s);
        unique case (st)
          TLR:    ir <= IR_IDCODE;
          CAP_IR: ir_sr <= 4'b0101;
          SH_IR:  ir_sr <= {tdi_s, ir_sr[3:1]};
          UPD_IR: ir <= ir_sr;
          CAP_DR: begin
            if (ir == IR_IDCODE)   dr <= CFG_W'(IDCODE);
            else if (ir == IR_CFG) dr <= {rd_data, rd_addr, rd_bank, 1'b0};
            else                   dr <= '0;
          end
          SH_DR: begin
            if (ir == IR_IDCODE)   dr <= {8'd0, tdi_s, dr[31:1]};
            else if (ir == IR_CFG) dr <= {tdi_s, dr[CFG_W-1:1]};
            else                   dr <= {39'd0, tdi_s};
          end
          UPD_DR: if (ir == IR_CFG) begin
            cfg_wr    <= dr[0];
            cfg_bank  <= dr[1];
            cfg_addr  <= dr[7:2];
            cfg_wdata <= dr[39:8];
            rd_bank   <= dr[1];
            rd_addr   <= dr[7:2];
          end
          default: ;
        endcase
      end else if (fall) begin
        if (st == SH_IR)      tdo <= ir_sr[0];
        else if (st == SH_DR) tdo <= dr[0];
        else                  tdo <= 1'b0;
      end
    end
  end
endmodule

// computing_array: one of the seven computing arrays (CAs) of the chip. It bundles the
// local controller (ca_ctrl), the 32 kB local memory (sram_sp, 8192 x 32 bits) and the
// memristor crossbar with its DACs and ADCs (ca_crossbar, a behavioural model), and
// appears on the NoC as one node.
//
// The floorplan holds three computing-in-memory (CiM), two content-addressable-memory
// (CaM) and two spiking-neural-network (SNN) arrays. KIND records which one an instance
// is; all seven share the same digital shell here, and the crossbar evaluates the
// column sums that all three paradigms build on. Kind-specific periphery is not modelled.
//
// A memory built-in self-test (mbist, March C-) can take over the local memory: a rising
// mbist_start begins it, the controller accepts no command while it runs, and mbist_done /
// mbist_fail report the result. Start it only while the array is idle.
//
// Interface: NoC valid/ready in and out; enable shuts the array off; done_evt pulses when
// a PROG or RUN command finishes, mem_ovf when an access ran past the local memory.
module computing_array
  import soc_pkg::*;
#(
  parameter ca_kind_e    KIND        = CA_CIM,
  parameter node_t       NODE        = NODE_CA0,
  parameter int unsigned DEPTH       = 8192,
  parameter int unsigned ROWS        = 32,
  parameter int unsigned COLS        = 32,
  parameter int unsigned CONV_CYCLES = 10
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  enable,
  input  logic  in_valid,
  input  flit_t in_flit,
  output logic  in_ready,
  output logic  out_valid,
  output flit_t out_flit,
  input  logic  out_ready,
  output logic  done_evt,
  output logic  mem_ovf,
  input  logic  mbist_start,
  output logic  mbist_done,
  output logic  mbist_fail
);
  localparam int unsigned GW = 4, DW = 4, AW = 8;

  logic                     mem_en, mem_we;
  logic [$clog2(DEPTH)-1:0] mem_addr;
  logic [31:0]              mem_wdata, mem_rdata;
  logic                     g_we, xb_start, xb_done, xb_busy;
  logic [$clog2(ROWS)-1:0]  g_row;
  logic [COLS*GW-1:0]       g_data;
  logic [ROWS*DW-1:0]       xb_vin;
  logic [COLS*AW-1:0]       xb_vout;
  logic                     c_en, c_we, t_en, t_we, t_busy;
  logic [$clog2(DEPTH)-1:0] c_addr, t_addr, t_fail_addr;
  logic [31:0]              c_wdata, t_wdata;

  // the self-test owns the memory while it runs
  assign mem_en    = t_busy ? t_en    : c_en;
  assign mem_we    = t_busy ? t_we    : c_we;
  assign mem_addr  = t_busy ? t_addr  : c_addr;
  assign mem_wdata = t_busy ? t_wdata : c_wdata;

  ca_ctrl #(.DEPTH(DEPTH), .ROWS(ROWS), .COLS(COLS), .GW(GW), .DW(DW), .AW(AW),
            .NODE(NODE)) u_ctrl (
    .clk, .rst_n, .enable(enable && !t_busy),
    .in_valid, .in_flit, .in_ready, .out_valid, .out_flit, .out_ready,
    .mem_en(c_en), .mem_we(c_we), .mem_addr(c_addr), .mem_wdata(c_wdata), .mem_rdata,
    .g_we, .g_row, .g_data, .xb_start, .xb_vin, .xb_done, .xb_vout,
    .done_evt, .mem_ovf
  );

  sram_sp #(.WORDS(DEPTH), .W(32)) u_mem (
    .clk, .en(mem_en), .we(mem_we), .be(4'hF), .addr(mem_addr),
    .wdata(mem_wdata), .rdata(mem_rdata)
  );

  mbist #(.WORDS(DEPTH), .W(32)) u_mbist (
    .clk, .rst_n, .start(mbist_start), .busy(t_busy), .done(mbist_done), .fail(mbist_fail),
    .fail_addr(t_fail_addr), .mem_en(t_en), .mem_we(t_we), .mem_addr(t_addr),
    .mem_wdata(t_wdata), .mem_rdata
  );

  ca_crossbar #(.ROWS(ROWS), .COLS(COLS), .GW(GW), .DW(DW), .AW(AW),
                .CONV_CYCLES(CONV_CYCLES)) u_xbar (
    .clk, .rst_n, .g_we, .g_row, .g_data, .start(xb_start), .vin(xb_vin),
    .busy(xb_busy), .done(xb_done), .vout(xb_vout)
  );
endmodule

// soc_top: the digital part of the memristor computing SoC.
//
// Seven computing arrays (CAs: three computing-in-memory, two content-addressable-memory,
// two spiking-neural-network arrays, NoC nodes 1 to 7), the port of the 32-bit RISC-V
// (node 0) and the chip bridge (node 8) share one 32-bit network on chip. The chip bridge
// copies the NoC traffic out over LVDS at full speed or links two chips, and takes words
// from a slow single-ended input that reaches the CAs directly. JTAG writes two banks of
// configuration registers; the interrupt input pin switches between the banks, the
// interrupt output pin reports ready states and soft errors. A 15-pin AXI stream port
// feeds the RISC-V.
//
// What is not logic of this module and appears as ports instead: the RISC-V core (its
// NoC port, its SRAM port and the words from the AXI stream port), the clock buffers behind
// the four clock pins and the reset (one buffered clock and an active-low reset come
// in), and the LVDS pads with their double-data-rate output cells (each LVDS output
// appears as the half driven in the first and the half driven in the second half of the
// clock cycle). The scan chain enabled by SCAN_EN is inserted later by the test flow.
//
// Block set, widths and pin list follow the architecture; node numbering, the register
// map and all protocols are this design's own (see soc_pkg). Configuration bit CTRL[1]
// starts the memory self-tests of all SRAMs (rising edge); status word 36 reports them.
module soc_top
  import soc_pkg::*;
#(
  parameter int unsigned CA_DEPTH       = 8192,   // 32 kB per CA
  parameter int unsigned CPU_BANK_WORDS = 16384,  // 64 kB per RISC-V SRAM bank
  parameter int unsigned CB_DEPTH       = 16,
  parameter int unsigned CONV_CYCLES    = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  // chip bridge, LVDS
  output logic [15:0] cbtx_dat_rise,
  output logic [15:0] cbtx_dat_fall,
  output logic [1:0]  cbtx_add_rise,
  output logic [1:0]  cbtx_add_fall,
  output logic        cbtx_val,
  input  logic        cbtx_rea,
  // chip bridge, TTL
  input  logic [7:0]  cbrx_dat,
  input  logic        cbrx_add,
  input  logic        cbrx_val,
  output logic        cbrx_rea,
  // AXI stream pins
  input  logic        axi_aclk,
  input  logic        axi_tvalid,
  input  logic        axi_tlast,
  input  logic [2:0]  axi_tid,
  input  logic [7:0]  axi_tdata,
  output logic        axi_tready,
  // JTAG
  input  logic        jtag_tck,
  input  logic        jtag_tms,
  input  logic        jtag_tdi,
  input  logic        jtag_trst_n,
  output logic        jtag_tdo,
  // interrupts
  input  logic        intrpt_in,
  output logic        intrpt_out,
  // RISC-V core boundary: NoC node 0
  input  logic        cpu_tx_valid,
  input  flit_t       cpu_tx_flit,
  output logic        cpu_tx_ready,
  output logic        cpu_rx_valid,
  output flit_t       cpu_rx_flit,
  input  logic        cpu_rx_ready,
  // RISC-V core boundary: on-chip SRAM
  input  logic        cpu_mem_en,
  input  logic        cpu_mem_we,
  input  logic [3:0]  cpu_mem_be,
  input  logic [$clog2(CPU_BANK_WORDS):0] cpu_mem_addr,
  input  logic [31:0] cpu_mem_wdata,
  output logic [31:0] cpu_mem_rdata,
  // RISC-V core boundary: words from the AXI stream port
  output logic        cpu_axi_valid,
  output logic [31:0] cpu_axi_data,
  output logic [3:0]  cpu_axi_keep,
  output logic        cpu_axi_last,
  output logic [2:0]  cpu_axi_id,
  input  logic        cpu_axi_ready
);
  localparam int unsigned N = NUM_NODES;
  localparam ca_kind_e CA_KIND [NUM_CA] = '{CA_CIM, CA_CIM, CA_CIM, CA_CAM, CA_CAM,
                                            CA_SNN, CA_SNN};

  // NoC
  logic [N-1:0]  n_in_valid, n_in_ready, n_out_valid, n_out_ready;
  flit_t [N-1:0] n_in_flit, n_out_flit;
  logic          mon_valid, route_err;
  flit_t         mon_flit;

  // configuration
  logic        cfg_wr, cfg_wbank, rd_bank, active_bank;
  logic [5:0]  cfg_waddr, rd_addr;
  logic [31:0] cfg_wdata, rd_data;
  logic [31:0] cfg [CFG_NREG];
  logic [31:0] status [5];

  // events
  logic [NUM_CA-1:0]  ca_done, ca_ovf;
  logic               cb_ovf;
  logic [NUM_EVT-1:0] evt, irq_status, irq_clr;
  logic [31:0]        ovf_count, route_count;
  logic               mbist_start;
  logic [NUM_CA-1:0]  ca_mbist_done, ca_mbist_fail;
  logic               cpu_mbist_done, cpu_mbist_fail;

  logic mode_link;
  logic [NUM_CA-1:0] ca_en;
  assign mode_link = cfg[CFG_CTRL][0];
  assign ca_en     = cfg[CFG_CTRL][8 +: NUM_CA];
  assign mbist_start = cfg[CFG_CTRL][1];

  noc #(.N(N)) u_noc (
    .clk, .rst_n,
    .in_valid(n_in_valid), .in_flit(n_in_flit), .in_ready(n_in_ready),
    .out_valid(n_out_valid), .out_flit(n_out_flit), .out_ready(n_out_ready),
    .mon_valid, .mon_flit, .route_err
  );

  // node 0: RISC-V
  assign n_in_valid[NODE_RISCV]  = cpu_tx_valid;
  assign n_in_flit[NODE_RISCV]   = cpu_tx_flit;
  assign cpu_tx_ready            = n_in_ready[NODE_RISCV];
  assign cpu_rx_valid            = n_out_valid[NODE_RISCV];
  assign cpu_rx_flit             = n_out_flit[NODE_RISCV];
  assign n_out_ready[NODE_RISCV] = cpu_rx_ready;

  // nodes 1..7: computing arrays
  for (genvar i = 0; i < NUM_CA; i++) begin : g_ca
    computing_array #(
      .KIND(CA_KIND[i]), .NODE(node_t'(i + 1)), .DEPTH(CA_DEPTH),
      .CONV_CYCLES(CONV_CYCLES)
    ) u_ca (
      .clk, .rst_n, .enable(ca_en[i]),
      .in_valid (n_out_valid[i+1]), .in_flit(n_out_flit[i+1]), .in_ready(n_out_ready[i+1]),
      .out_valid(n_in_valid[i+1]),  .out_flit(n_in_flit[i+1]),  .out_ready(n_in_ready[i+1]),
      .done_evt(ca_done[i]), .mem_ovf(ca_ovf[i]),
      .mbist_start, .mbist_done(ca_mbist_done[i]), .mbist_fail(ca_mbist_fail[i])
    );
  end

  // node 8: chip bridge
  cb_tx #(.DEPTH(CB_DEPTH)) u_cb_tx (
    .clk, .rst_n, .mode_link,
    .mon_valid, .mon_flit,
    .link_valid(n_out_valid[NODE_BRIDGE]), .link_flit(n_out_flit[NODE_BRIDGE]),
    .link_ready(n_out_ready[NODE_BRIDGE]),
    .tx_rea(cbtx_rea),
    .tx_dat_rise(cbtx_dat_rise), .tx_dat_fall(cbtx_dat_fall),
    .tx_add_rise(cbtx_add_rise), .tx_add_fall(cbtx_add_fall),
    .tx_val(cbtx_val), .overflow(cb_ovf)
  );

  cb_rx u_cb_rx (
    .clk, .rst_n,
    .rx_dat(cbrx_dat), .rx_add(cbrx_add), .rx_val(cbrx_val), .rx_rea(cbrx_rea),
    .out_valid(n_in_valid[NODE_BRIDGE]), .out_flit(n_in_flit[NODE_BRIDGE]),
    .out_ready(n_in_ready[NODE_BRIDGE])
  );

  // RISC-V memory and AXI stream port
  riscv_sram #(.BANK_WORDS(CPU_BANK_WORDS)) u_cpu_mem (
    .clk, .rst_n, .en(cpu_mem_en), .we(cpu_mem_we), .be(cpu_mem_be), .addr(cpu_mem_addr),
    .wdata(cpu_mem_wdata), .rdata(cpu_mem_rdata),
    .mbist_start, .mbist_done(cpu_mbist_done), .mbist_fail(cpu_mbist_fail)
  );

  axi_stream_if u_axi (
    .clk, .rst_n,
    .aclk(axi_aclk), .tvalid(axi_tvalid), .tlast(axi_tlast), .tid(axi_tid),
    .tdata(axi_tdata), .tready(axi_tready),
    .w_valid(cpu_axi_valid), .w_data(cpu_axi_data), .w_keep(cpu_axi_keep),
    .w_last(cpu_axi_last), .w_id(cpu_axi_id), .w_ready(cpu_axi_ready)
  );

  // JTAG and configuration
  jtag_tap u_jtag (
    .clk, .rst_n,
    .tck(jtag_tck), .tms(jtag_tms), .tdi(jtag_tdi), .trst_n(jtag_trst_n), .tdo(jtag_tdo),
    .cfg_wr, .cfg_bank(cfg_wbank), .cfg_addr(cfg_waddr), .cfg_wdata,
    .rd_bank, .rd_addr, .rd_data
  );

  assign status[0] = 32'(irq_status);
  assign status[1] = 32'(active_bank);
  assign status[2] = ovf_count;
  assign status[3] = route_count;
  assign status[4] = {14'd0, cpu_mbist_fail, cpu_mbist_done, 1'b0, ca_mbist_fail, 1'b0, ca_mbist_done};

  cfg_regs #(.NREG(CFG_NREG), .NSTAT(5)) u_cfg (
    .clk, .rst_n, .bank_sel(intrpt_in),
    .wr(cfg_wr), .wr_bank(cfg_wbank), .wr_addr(cfg_waddr), .wr_data(cfg_wdata),
    .rd_bank, .rd_addr, .rd_data, .status, .active_bank, .cfg
  );

  // interrupt output
  always_comb begin
    evt             = '0;
    evt[EVT_READY]  = |ca_done;
    evt[EVT_CBOVF]  = cb_ovf;
    evt[EVT_MEMOVF] = |ca_ovf;
    evt[EVT_ROUTE]  = route_err;
    irq_clr = (cfg_wr && int'(cfg_waddr) == CFG_IRQCL) ? cfg_wdata[NUM_EVT-1:0] : '0;
  end

  irq_ctrl #(.N(NUM_EVT)) u_irq (
    .clk, .rst_n, .evt, .en(cfg[CFG_IRQEN][NUM_EVT-1:0]), .clr(irq_clr),
    .status(irq_status), .irq(intrpt_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ovf_count   <= '0;
      route_count <= '0;
    end else begin
      if (cb_ovf)    ovf_count   <= ovf_count + 1'b1;
      if (route_err) route_count <= route_count + 1'b1;
    end
  end
endmodule

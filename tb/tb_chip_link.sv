// tb_chip_link: two chips joined through their chip bridges, the chip-to-chip use of the
// bridge. Both chips run at their default sizes in link mode. Chip A's LVDS output feeds
// chip B's TTL input through a relay that delivers to B's CA 1, and B's LVDS output comes
// back through a second relay to A's RISC-V port (node 0). The RISC-V of chip B stays idle.
//
// Chip A's RISC-V (a driver on its NoC port) runs a complete job on chip B's CA 1 by
// sending every packet to its own bridge node:
//   1. JTAG (wired to both chips) reads the IDCODE and switches both into link mode.
//   2. WRITE the conductance image, WRITE the input vector, PROG, wait for DONE.
//   3. RUN, wait for DONE, READ 8 words; compare with tb_pkg's reference.
// The replies must arrive at A from its bridge (source node 8) with the packet ends intact.
// Counted mechanisms: words carried each way, back-pressure on A's NoC while the slow TTL
// side drains, and the relay's CBTXREA stalls. The relay's queue must never exceed its
// limit by more than three words, the bound the bridge's CBTXREA synchronizer promises.
module tb_chip_link;
  import soc_pkg::*;
  import tb_pkg::*;
  localparam int LIMIT = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n;

  // chip A pins
  logic [15:0] a_dat_rise, a_dat_fall;
  logic [1:0]  a_add_rise, a_add_fall;
  logic        a_val, a_rea;
  logic [7:0]  a_rx_dat;
  logic        a_rx_add, a_rx_val, a_rx_rea;
  logic        a_irq, a_tdo;
  logic        a_tx_valid, a_tx_ready, a_rx_valid, a_rx_ready;
  flit_t       a_tx_flit, a_rx_flit;
  // chip B pins
  logic [15:0] b_dat_rise, b_dat_fall;
  logic [1:0]  b_add_rise, b_add_fall;
  logic        b_val, b_rea;
  logic [7:0]  b_rx_dat;
  logic        b_rx_add, b_rx_val, b_rx_rea;
  logic        b_irq, b_tdo;
  logic        b_tx_ready, b_rx_valid;
  flit_t       b_rx_flit;
  // shared
  logic        tck, tms, tdi, trst_n;
  logic        axi_tready_a, axi_tready_b;
  logic [31:0] a_mem_rdata, b_mem_rdata;
  logic        a_axi_valid, a_axi_last, b_axi_valid, b_axi_last;
  logic [31:0] a_axi_data, b_axi_data;
  logic [3:0]  a_axi_keep, b_axi_keep;
  logic [2:0]  a_axi_id, b_axi_id;

  soc_top chip_a (
    .clk, .rst_n,
    .cbtx_dat_rise(a_dat_rise), .cbtx_dat_fall(a_dat_fall),
    .cbtx_add_rise(a_add_rise), .cbtx_add_fall(a_add_fall),
    .cbtx_val(a_val), .cbtx_rea(a_rea),
    .cbrx_dat(a_rx_dat), .cbrx_add(a_rx_add), .cbrx_val(a_rx_val), .cbrx_rea(a_rx_rea),
    .axi_aclk(1'b0), .axi_tvalid(1'b0), .axi_tready(axi_tready_a), .axi_tlast(1'b0),
    .axi_tid(3'd0), .axi_tdata(8'd0),
    .jtag_tck(tck), .jtag_tms(tms), .jtag_tdi(tdi), .jtag_trst_n(trst_n), .jtag_tdo(a_tdo),
    .intrpt_in(1'b0), .intrpt_out(a_irq),
    .cpu_tx_valid(a_tx_valid), .cpu_tx_flit(a_tx_flit), .cpu_tx_ready(a_tx_ready),
    .cpu_rx_valid(a_rx_valid), .cpu_rx_flit(a_rx_flit), .cpu_rx_ready(a_rx_ready),
    .cpu_mem_en(1'b0), .cpu_mem_we(1'b0), .cpu_mem_be(4'd0), .cpu_mem_addr(15'd0),
    .cpu_mem_wdata(32'd0), .cpu_mem_rdata(a_mem_rdata),
    .cpu_axi_valid(a_axi_valid), .cpu_axi_data(a_axi_data), .cpu_axi_keep(a_axi_keep),
    .cpu_axi_last(a_axi_last), .cpu_axi_id(a_axi_id), .cpu_axi_ready(1'b1)
  );

  soc_top chip_b (
    .clk, .rst_n,
    .cbtx_dat_rise(b_dat_rise), .cbtx_dat_fall(b_dat_fall),
    .cbtx_add_rise(b_add_rise), .cbtx_add_fall(b_add_fall),
    .cbtx_val(b_val), .cbtx_rea(b_rea),
    .cbrx_dat(b_rx_dat), .cbrx_add(b_rx_add), .cbrx_val(b_rx_val), .cbrx_rea(b_rx_rea),
    .axi_aclk(1'b0), .axi_tvalid(1'b0), .axi_tready(axi_tready_b), .axi_tlast(1'b0),
    .axi_tid(3'd0), .axi_tdata(8'd0),
    .jtag_tck(tck), .jtag_tms(tms), .jtag_tdi(tdi), .jtag_trst_n(trst_n), .jtag_tdo(b_tdo),
    .intrpt_in(1'b0), .intrpt_out(b_irq),
    .cpu_tx_valid(1'b0), .cpu_tx_flit('0), .cpu_tx_ready(b_tx_ready),
    .cpu_rx_valid(b_rx_valid), .cpu_rx_flit(b_rx_flit), .cpu_rx_ready(1'b1),
    .cpu_mem_en(1'b0), .cpu_mem_we(1'b0), .cpu_mem_be(4'd0), .cpu_mem_addr(15'd0),
    .cpu_mem_wdata(32'd0), .cpu_mem_rdata(b_mem_rdata),
    .cpu_axi_valid(b_axi_valid), .cpu_axi_data(b_axi_data), .cpu_axi_keep(b_axi_keep),
    .cpu_axi_last(b_axi_last), .cpu_axi_id(b_axi_id), .cpu_axi_ready(1'b1)
  );

  int ab_in, ab_out, ab_stall, ab_max, ba_in, ba_out, ba_stall, ba_max;

  // A -> B, delivered to B's CA 1
  tb_link_relay #(.DEST(3'd1), .LIMIT(LIMIT)) u_ab (
    .clk, .rst_n,
    .tx_dat_rise(a_dat_rise), .tx_dat_fall(a_dat_fall), .tx_add_rise(a_add_rise),
    .tx_add_fall(a_add_fall), .tx_val(a_val), .tx_rea(a_rea),
    .rx_dat(b_rx_dat), .rx_add(b_rx_add), .rx_val(b_rx_val), .rx_rea(b_rx_rea),
    .words_in(ab_in), .words_out(ab_out), .stall_cycles(ab_stall), .max_fill(ab_max)
  );

  // B -> A, delivered to A's RISC-V
  tb_link_relay #(.DEST(3'd0), .LIMIT(LIMIT)) u_ba (
    .clk, .rst_n,
    .tx_dat_rise(b_dat_rise), .tx_dat_fall(b_dat_fall), .tx_add_rise(b_add_rise),
    .tx_add_fall(b_add_fall), .tx_val(b_val), .tx_rea(b_rea),
    .rx_dat(a_rx_dat), .rx_add(a_rx_add), .rx_val(a_rx_val), .rx_rea(a_rx_rea),
    .words_in(ba_in), .words_out(ba_out), .stall_cycles(ba_stall), .max_fill(ba_max)
  );

  int     n_noc_stall, a_sent, b_stray;
  flit_t  a_rxq [$];

  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (a_rx_valid && a_rx_ready) a_rxq.push_back(a_rx_flit);
      if (a_tx_valid && !a_tx_ready) n_noc_stall++;
      if (b_rx_valid) b_stray++;
    end
  end

  // ---------------------------------------------------------------- chip A's RISC-V port
  task automatic a_send(logic [31:0] d, logic last);
    @(negedge clk);
    a_tx_valid = 1;
    a_tx_flit  = '{dest: NODE_BRIDGE, src: NODE_RISCV, last: last, data: d};
    @(posedge clk);
    while (!a_tx_ready) @(posedge clk);
    a_sent++;
    @(negedge clk);
    a_tx_valid = 0;
  endtask

  task automatic a_expect(int n, output logic [31:0] d [$]);
    int guard;
    guard = 0;
    while (a_rxq.size() < n && guard < 50000) begin @(posedge clk); guard++; end
    d = {};
    for (int i = 0; i < n; i++) begin
      flit_t f;
      checks++;
      if (a_rxq.size() == 0) begin fail("reply missing"); return; end
      f = a_rxq.pop_front();
      if (f.src != NODE_BRIDGE || f.dest != NODE_RISCV || f.last != (i == n - 1))
        fail($sformatf("reply header %p", f));
      d.push_back(f.data);
    end
  endtask

  // ---------------------------------------------------------------- JTAG (both chips)
  task automatic tick(logic m, logic d, output logic o);
    tms = m; tdi = d;
    #20 o = a_tdo; tck = 1;
    #20 tck = 0;
  endtask

  task automatic tms_seq(int n, logic [15:0] bits);
    logic o;
    for (int i = 0; i < n; i++) tick(bits[i], 1'b0, o);
  endtask

  task automatic scan(bit ir, int n, logic [63:0] din, output logic [63:0] dout);
    logic o;
    dout = '0;
    tms_seq(ir ? 4 : 3, ir ? 16'b0011 : 16'b001);
    for (int i = 0; i < n; i++) begin
      tick(i == n - 1, din[i], o);
      dout[i] = o;
    end
    tms_seq(2, 16'b01);
  endtask

  initial begin
    logic [63:0] o;
    logic [31:0] d [$];
    localparam int GSEED = 4, VSEED = 9;
    n_noc_stall = 0; a_sent = 0; b_stray = 0;
    tck = 0; tms = 1; tdi = 0; trst_n = 1;
    a_tx_valid = 0; a_tx_flit = '0; a_rx_ready = 1;
    rst_n = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;

    // 1. both chips into link mode
    tms_seq(6, 16'b011111);
    scan(0, 32, 64'h0, o);
    checks++;
    if (o[31:0] != 32'h1000_0A4B) fail($sformatf("IDCODE %h", o[31:0]));
    scan(1, 4, 64'h2, o);
    scan(0, 40, {24'd0, 32'h7F01, 6'(CFG_CTRL), 1'b0, 1'b1}, o);
    scan(0, 40, {24'd0, 32'd0, 6'(CFG_CTRL), 1'b0, 1'b0}, o);
    scan(0, 40, {24'd0, 32'd0, 6'(CFG_CTRL), 1'b0, 1'b0}, o);
    checks++;
    if (o[39:8] != 32'h7F01) fail($sformatf("CTRL read back %h", o[39:8]));

    // 2. load and program chip B's CA 1 from chip A
    a_send(ca_cmd(OP_WRITE, 13'h000, 0), 0);
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < 4; k++) a_send(g_word(GSEED, r, k), (r == ROWS-1 && k == 3));
    a_send(ca_cmd(OP_WRITE, 13'h080, 0), 0);
    for (int k = 0; k < 4; k++) a_send(v_word(VSEED, k), k == 3);
    a_send(ca_cmd(OP_PROG, 13'h000, 0), 1);
    a_expect(1, d);
    checks++;
    if (d.size() != 1 || d[0] != {OP_DONE, 28'd0}) fail("PROG reply");

    // 3. run and read back
    a_send(ca_cmd(OP_RUN, 13'h080, 13'h100), 1);
    a_expect(1, d);
    checks++;
    if (d.size() != 1 || d[0] != {OP_DONE, 28'd0}) fail("RUN reply");
    a_send(ca_cmd(OP_READ, 13'h100, 13'd8), 1);
    a_expect(8, d);
    for (int k = 0; k < 8 && k < d.size(); k++) begin
      checks++;
      if (d[k] != r_word(GSEED, VSEED, k))
        fail($sformatf("result word %0d %h expected %h", k, d[k], r_word(GSEED, VSEED, k)));
    end
    repeat (50) @(posedge clk);

    // bookkeeping
    checks++;
    if (ab_in != a_sent || ab_out != a_sent)
      fail($sformatf("A->B words in %0d out %0d sent %0d", ab_in, ab_out, a_sent));
    checks++;
    if (ba_in != 10 || ba_out != 10) fail($sformatf("B->A words in %0d out %0d", ba_in, ba_out));
    checks++;
    if (ab_max > LIMIT + 3 || ba_max > LIMIT + 3)
      fail($sformatf("relay queue reached %0d / %0d", ab_max, ba_max));
    checks++;
    if (b_stray != 0) fail("chip B's RISC-V port received flits");
    checks++;
    if (a_rxq.size() != 0) fail("unexpected extra replies at A");

    $display("mechanisms: a_to_b_words=%0d b_to_a_words=%0d noc_stall=%0d relay_stall=%0d max_queue=%0d",
             ab_out, ba_out, n_noc_stall, ab_stall, ab_max);
    checks++; if (ab_out == 0)      fail("no word crossed from A to B");
    checks++; if (ba_out == 0)      fail("no word crossed from B to A");
    checks++; if (n_noc_stall == 0) fail("chip A's NoC was never held off");
    checks++; if (ab_stall == 0)    fail("the relay never lowered CBTXREA");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

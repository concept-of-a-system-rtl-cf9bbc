// tb_soc_top: end-to-end test of the whole SoC at its default sizes (seven CAs with 32 kB
// each, 2 x 64 kB RISC-V memory, 16-word bridge FIFO). The RISC-V is replaced by a driver
// on its NoC port, memory port and AXI word port; the outside world drives the pins.
//
// Sequence and what is checked:
//  1. JTAG reads the IDCODE and writes both configuration banks (bank 0: monitor mode,
//     bank 1: link mode; all interrupts enabled).
//  2. Monitor mode: every CA gets a conductance image and an input vector, is programmed
//     and run, and the results are read back and compared with tb_pkg's reference.
//     Meanwhile every NoC transfer must appear on the LVDS outputs, one word per transfer.
//  3. The interrupt output rises on the ready events and falls after a JTAG clear.
//  4. CBTXREA low during a burst: the bridge FIFO overflows, the interrupt reports it,
//     the overflow counter is read over JTAG.
//  5. A flit to a node that does not exist is reported.
//  6. The interrupt input switches to bank 1 (link mode): flits to the bridge leave with
//     their source and last flag as address and the NoC is held off while CBTXREA is low; a read command
//     entered over the TTL input reaches a CA and its reply leaves over LVDS.
//  7. A CA switched off over JTAG accepts nothing; switched on again it answers.
//  8. Bytes on the AXI stream pins arrive at the RISC-V side as words; the RISC-V memory
//     returns what was written.
//  9. The memory self-tests of all nine SRAMs are started over JTAG and pass.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_soc_top;
  import soc_pkg::*;
  import tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic aclk = 1'b0;
  always #10 aclk = ~aclk;
  logic rst_n;

  logic [15:0] cbtx_dat_rise, cbtx_dat_fall;
  logic [1:0]  cbtx_add_rise, cbtx_add_fall;
  logic        cbtx_val, cbtx_rea;
  logic [7:0]  cbrx_dat;
  logic        cbrx_add, cbrx_val, cbrx_rea;
  logic        axi_aclk, axi_tvalid, axi_tlast, axi_tready;
  logic [2:0]  axi_tid;
  logic [7:0]  axi_tdata;
  logic        jtag_tck, jtag_tms, jtag_tdi, jtag_trst_n, jtag_tdo;
  logic        intrpt_in, intrpt_out;
  logic        cpu_tx_valid, cpu_tx_ready, cpu_rx_valid, cpu_rx_ready;
  flit_t       cpu_tx_flit, cpu_rx_flit;
  logic        cpu_mem_en, cpu_mem_we;
  logic [3:0]  cpu_mem_be;
  logic [14:0] cpu_mem_addr;
  logic [31:0] cpu_mem_wdata, cpu_mem_rdata;
  logic        cpu_axi_valid, cpu_axi_last, cpu_axi_ready;
  logic [31:0] cpu_axi_data;
  logic [3:0]  cpu_axi_keep;
  logic [2:0]  cpu_axi_id;

  assign axi_aclk = aclk;

  soc_top dut (.*);

  // mechanism counters
  int n_monitor, n_ca_run, n_irq_rise, n_irq_clear, n_overflow, n_misroute, n_bank_switch,
      n_link_stall, n_rx_inject, n_ca_off_stall, n_axi_word, n_mem, n_mbist;

  flit_t       cpu_rxq [$];
  logic [35:0] txq [$];
  int          cpu_sent, rx_sent;
  logic        irq_q;
  bit          link_phase = 0;

  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  initial begin
    repeat (1500000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (cpu_rx_valid && cpu_rx_ready) cpu_rxq.push_back(cpu_rx_flit);
      if (cbtx_val) txq.push_back({cbtx_add_fall, cbtx_add_rise, cbtx_dat_fall, cbtx_dat_rise});
      if (intrpt_out && !irq_q) n_irq_rise++;
      irq_q <= intrpt_out;
      if (cpu_axi_valid && cpu_axi_ready) n_axi_word++;
      if (link_phase && cpu_tx_valid && !cpu_tx_ready) n_link_stall++;
    end
  end

  // ---------------------------------------------------------------- RISC-V port
  task automatic cpu_send(node_t dest, logic [31:0] d, logic last);
    @(negedge clk);
    cpu_tx_valid = 1;
    cpu_tx_flit  = '{dest: dest, src: NODE_RISCV, last: last, data: d};
    @(posedge clk);
    while (!cpu_tx_ready) @(posedge clk);
    cpu_sent++;
    @(negedge clk);
    cpu_tx_valid = 0;
  endtask

  task automatic cpu_expect(int n, node_t from, output logic [31:0] d [$]);
    int guard;
    guard = 0;
    while (cpu_rxq.size() < n && guard < 20000) begin @(posedge clk); guard++; end
    d = {};
    for (int i = 0; i < n; i++) begin
      flit_t f;
      if (cpu_rxq.size() == 0) begin fail("reply missing"); return; end
      f = cpu_rxq.pop_front();
      checks++;
      if (f.src != from || f.last != (i == n - 1)) fail($sformatf("reply header %p", f));
      d.push_back(f.data);
    end
  endtask

  // ---------------------------------------------------------------- JTAG
  task automatic tick(logic m, logic d, output logic o);
    jtag_tms = m; jtag_tdi = d;
    #20 o = jtag_tdo; jtag_tck = 1;
    #20 jtag_tck = 0;
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

  task automatic cfg_write(logic bank, int addr, logic [31:0] d);
    logic [63:0] o;
    scan(0, 40, {24'd0, d, 6'(addr), bank, 1'b1}, o);
  endtask

  task automatic cfg_read(logic bank, int addr, output logic [31:0] d);
    logic [63:0] o;
    scan(0, 40, {24'd0, 32'd0, 6'(addr), bank, 1'b0}, o);
    scan(0, 40, {24'd0, 32'd0, 6'(addr), bank, 1'b0}, o);
    d = o[39:8];
  endtask

  // ---------------------------------------------------------------- chip bridge input
  task automatic rx_byte(logic [7:0] b, logic a);
    #3 cbrx_dat = b; cbrx_add = a;
    #5 cbrx_val = 1;
    while (!cbrx_rea) #1;
    #4 cbrx_val = 0;
    while (cbrx_rea) #1;
  endtask

  task automatic rx_word(logic [31:0] d, logic [2:0] dest, logic last);
    rx_byte(d[7:0], last);
    rx_byte(d[15:8], dest[0]);
    rx_byte(d[23:16], dest[1]);
    rx_byte(d[31:24], dest[2]);
    rx_sent++;
    n_rx_inject++;
  endtask

  // ---------------------------------------------------------------- CA job
  task automatic ca_job(int ca, int gseed, int vseed);
    logic [31:0] d [$];
    node_t n;
    n = node_t'(ca + 1);
    cpu_send(n, ca_cmd(OP_WRITE, 13'h000, 0), 0);
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < 4; k++) cpu_send(n, g_word(gseed, r, k), (r == ROWS-1 && k == 3));
    cpu_send(n, ca_cmd(OP_WRITE, 13'h080, 0), 0);
    for (int k = 0; k < 4; k++) cpu_send(n, v_word(vseed, k), k == 3);
    cpu_send(n, ca_cmd(OP_PROG, 13'h000, 0), 1);
    cpu_expect(1, n, d);
    checks++;
    if (d.size() != 1 || d[0] != {OP_DONE, 28'd0}) fail("PROG reply");
    cpu_send(n, ca_cmd(OP_RUN, 13'h080, 13'h100), 1);
    cpu_expect(1, n, d);
    checks++;
    if (d.size() != 1 || d[0] != {OP_DONE, 28'd0}) fail("RUN reply");
    cpu_send(n, ca_cmd(OP_READ, 13'h100, 13'd8), 1);
    cpu_expect(8, n, d);
    for (int k = 0; k < 8 && k < d.size(); k++) begin
      checks++;
      if (d[k] != r_word(gseed, vseed, k))
        fail($sformatf("CA %0d result word %0d %h expected %h", ca, k, d[k], r_word(gseed, vseed, k)));
    end
    n_ca_run++;
  endtask

  initial begin
    logic [63:0] o;
    logic [31:0] v;
    logic [31:0] d [$];
    int axi_before;
    n_monitor = 0; n_ca_run = 0; n_irq_rise = 0; n_irq_clear = 0; n_overflow = 0;
    n_misroute = 0; n_bank_switch = 0; n_link_stall = 0; n_rx_inject = 0; n_ca_off_stall = 0;
    n_axi_word = 0; n_mem = 0; n_mbist = 0; cpu_sent = 0; rx_sent = 0; irq_q = 0;
    cbtx_rea = 1; cbrx_dat = 0; cbrx_add = 0; cbrx_val = 0;
    axi_tvalid = 0; axi_tlast = 0; axi_tid = 0; axi_tdata = 0;
    jtag_tck = 0; jtag_tms = 1; jtag_tdi = 0; jtag_trst_n = 1; intrpt_in = 0;
    cpu_tx_valid = 0; cpu_tx_flit = '0; cpu_rx_ready = 1;
    cpu_mem_en = 0; cpu_mem_we = 0; cpu_mem_be = 0; cpu_mem_addr = 0; cpu_mem_wdata = 0;
    cpu_axi_ready = 1;
    rst_n = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;

    // 1. JTAG
    tms_seq(6, 16'b011111);
    scan(0, 32, 64'h0, o);
    checks++;
    if (o[31:0] != 32'h1000_0A4B) fail($sformatf("IDCODE %h", o[31:0]));
    scan(1, 4, 64'h2, o);                       // CFG instruction
    cfg_write(0, CFG_IRQEN, 32'hF);
    cfg_write(1, CFG_IRQEN, 32'hF);
    cfg_write(1, CFG_CTRL, 32'h7F01);           // bank 1: link mode
    cfg_read(1, CFG_CTRL, v);
    checks++;
    if (v != 32'h7F01) fail("configuration read back");

    // 2. monitor mode, all seven CAs
    txq = {};
    for (int ca = 0; ca < NUM_CA; ca++) ca_job(ca, ca + 1, 2 * ca + 5);
    repeat (20) @(posedge clk);
    // every NoC transfer is one monitored word: RISC-V flits out and replies in
    checks++;
    if (txq.size() != cpu_sent + 7 * 10) fail($sformatf("monitor words %0d expected %0d",
                                                         txq.size(), cpu_sent + 70));
    n_monitor = txq.size();
    // the first monitored word is the first command, addressed to CA node 1
    checks++;
    if (txq.size() > 0 && txq[0] != {4'd1, ca_cmd(OP_WRITE, 13'h000, 0)}) fail("first monitored word");

    // 3. interrupt from ready events, then clear
    checks++;
    if (!intrpt_out) fail("interrupt not raised by ready events");
    cfg_write(0, CFG_IRQCL, 32'hF);
    repeat (4) @(posedge clk);
    checks++;
    if (intrpt_out) fail("interrupt not cleared");
    else n_irq_clear++;

    // 4. bridge overflow
    cbtx_rea = 0;
    repeat (5) @(posedge clk);
    cpu_send(node_t'(2), ca_cmd(OP_WRITE, 13'h400, 0), 0);
    for (int i = 0; i < 40; i++) cpu_send(node_t'(2), 32'h9000 + i, i == 39);
    repeat (5) @(posedge clk);
    cfg_read(0, 34, v);                          // overflow counter
    checks++;
    if (v == 0) fail("no overflow counted");
    else n_overflow = int'(v);
    cfg_read(0, 32, v);                          // interrupt status
    checks++;
    if (!v[EVT_CBOVF] || !intrpt_out) fail("overflow not reported");
    cbtx_rea = 1;
    repeat (40) @(posedge clk);

    // 5. misrouted flit
    cpu_send(node_t'(12), 32'hDEAD_BEEF, 1);
    repeat (5) @(posedge clk);
    cfg_read(0, 35, v);
    checks++;
    if (v != 1) fail("misroute not counted");
    else n_misroute++;
    cfg_write(0, CFG_IRQCL, 32'hF);

    // 6. bank switch to link mode
    intrpt_in = 1;
    repeat (4) @(posedge clk);
    cfg_read(0, 33, v);
    checks++;
    if (v != 1) fail("active bank not switched");
    else n_bank_switch++;
    txq = {};
    // traffic between the RISC-V and a CA is no longer copied out
    cpu_send(node_t'(1), ca_cmd(OP_READ, 13'h100, 13'd2), 1);
    cpu_expect(2, node_t'(1), d);
    // flits to the bridge leave the chip; CBTXREA low holds the NoC off
    cbtx_rea = 0;
    link_phase = 1;
    fork
      begin
        for (int i = 0; i < 30; i++) cpu_send(NODE_BRIDGE, 32'hB000 + i, i == 29);
      end
      begin
        repeat (80) @(posedge clk);
        cbtx_rea = 1;
      end
    join
    link_phase = 0;
    // cpu_send waits while cpu_tx_ready is low: count cycles stalled by sampling
    repeat (40) @(posedge clk);
    checks++;
    if (txq.size() != 30) fail($sformatf("link words %0d expected 30", txq.size()));
    for (int i = 0; i < 30 && i < txq.size(); i++) begin
      checks++;
      if (txq[i] != {i == 29, NODE_RISCV[2:0], 32'hB000 + i}) fail($sformatf("link word %0d %h", i, txq[i]));
    end
    // read command over the TTL input to CA node 1; the reply leaves over LVDS
    txq = {};
    rx_word(ca_cmd(OP_READ, 13'h100, 13'd8), 3'd1, 1'b1);
    repeat (100) @(posedge clk);
    checks++;
    if (txq.size() != 8) fail($sformatf("bridge read reply %0d words", txq.size()));
    for (int k = 0; k < 8 && k < txq.size(); k++) begin
      checks++;
      if (txq[k] != {k == 7, 3'd1, r_word(1, 5, k)}) fail($sformatf("bridge read word %0d %h", k, txq[k]));
    end

    // 7. CA 7 switched off in bank 1
    cfg_write(1, CFG_CTRL, 32'h3F01);
    @(negedge clk);
    cpu_tx_valid = 1;
    cpu_tx_flit  = '{dest: node_t'(7), src: NODE_RISCV, last: 1'b1, data: ca_cmd(OP_READ, 13'h100, 13'd1)};
    @(posedge clk);
    while (!cpu_tx_ready) @(posedge clk);
    cpu_sent++;
    @(negedge clk);
    cpu_tx_valid = 0;
    // the NoC holds the flit in its output register; the switched-off CA must not take it
    repeat (30) begin
      @(posedge clk);
      if (dut.g_ca[6].u_ca.in_valid && !dut.g_ca[6].u_ca.in_ready) n_ca_off_stall++;
    end
    checks++;
    if (n_ca_off_stall < 30) fail("switched-off CA accepted a flit");
    checks++;
    if (cpu_rxq.size() != 0) fail("switched-off CA answered");
    cfg_write(1, CFG_CTRL, 32'h7F01);
    cpu_expect(1, node_t'(7), d);
    checks++;
    if (d.size() != 1 || d[0] != r_word(7, 17, 0)) fail("CA 7 after switching on");

    // 8. AXI stream and RISC-V memory
    axi_before = n_axi_word;
    for (int b = 0; b < 6; b++) begin
      @(posedge aclk);
      #1 axi_tvalid = 1; axi_tdata = 8'(8'h30 + b); axi_tlast = (b == 5); axi_tid = 3'd2;
      @(posedge aclk);
      while (!axi_tready) @(posedge aclk);
      #1 axi_tvalid = 0;
    end
    repeat (100) @(posedge clk);
    checks++;
    if (n_axi_word - axi_before != 2) fail($sformatf("AXI words %0d", n_axi_word - axi_before));
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      cpu_mem_en = 1; cpu_mem_we = 1; cpu_mem_be = 4'hF; cpu_mem_addr = 15'(i * 9000);
      cpu_mem_wdata = 32'h600D_0000 + i;
    end
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      cpu_mem_en = 1; cpu_mem_we = 0; cpu_mem_addr = 15'(i * 9000);
      @(negedge clk);
      cpu_mem_en = 0;
      checks++;
      if (cpu_mem_rdata != 32'h600D_0000 + i) fail("RISC-V memory");
      else n_mem++;
    end

    // 9. memory self-tests
    cfg_write(1, CFG_CTRL, 32'h7F03);
    repeat (11 * 16384 + 100) @(posedge clk);
    cfg_read(1, 36, v);
    checks++;
    if (v != 32'h0001_007F) fail($sformatf("self-test status %h", v));
    else n_mbist++;

    // mechanisms
    $display("mechanisms: monitor_words=%0d ca_runs=%0d irq_rise=%0d irq_clear=%0d overflow=%0d",
             n_monitor, n_ca_run, n_irq_rise, n_irq_clear, n_overflow);
    $display("            misroute=%0d bank_switch=%0d link_stall=%0d rx_inject=%0d ca_off_stall=%0d axi_words=%0d mem=%0d mbist=%0d",
             n_misroute, n_bank_switch, n_link_stall, n_rx_inject, n_ca_off_stall, n_axi_word, n_mem, n_mbist);
    checks++; if (n_monitor == 0)      fail("monitor never ran");
    checks++; if (n_ca_run != NUM_CA)  fail("not every CA ran");
    checks++; if (n_irq_rise == 0)     fail("interrupt never rose");
    checks++; if (n_irq_clear == 0)    fail("interrupt never cleared");
    checks++; if (n_overflow == 0)     fail("overflow never happened");
    checks++; if (n_misroute == 0)     fail("misroute never happened");
    checks++; if (n_bank_switch == 0)  fail("bank switch never happened");
    checks++; if (n_link_stall == 0)   fail("link back-pressure never happened");
    checks++; if (n_rx_inject == 0)    fail("bridge input never used");
    checks++; if (n_ca_off_stall == 0) fail("CA shut-off never seen");
    checks++; if (n_mbist == 0)        fail("self-test never ran");
    checks++; if (n_axi_word == 0)     fail("AXI port never used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

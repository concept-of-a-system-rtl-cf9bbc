// tb_cb_tx: self-checking test of the chip bridge transmitter.
// Monitor mode: a burst of NoC flits must leave one word per cycle, split into the two
// 16-bit halves and the two 2-bit halves of the destination; with CBTXREA held low the
// FIFO fills, further flits are dropped and overflow pulses once per lost flit. Link
// mode: flits for the bridge leave with {last, source} as address and the NoC side is held
// off (link_ready low) when the FIFO is full, so nothing is lost.
module tb_cb_tx;
  import soc_pkg::*;
  localparam int DEPTH = 16;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n;

  logic        mode_link, mon_valid, link_valid, link_ready, tx_rea, tx_val, overflow;
  flit_t       mon_flit, link_flit;
  logic [15:0] tx_dat_rise, tx_dat_fall;
  logic [1:0]  tx_add_rise, tx_add_fall;

  cb_tx #(.DEPTH(DEPTH)) dut (.*);

  logic [35:0] expq [$];
  int ovf_cnt, out_cnt, first_out, last_out;

  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (overflow) ovf_cnt++;
      if (tx_val) begin
        logic [35:0] e;
        checks++;
        if (out_cnt == 0) first_out = cyc;
        last_out = cyc;
        out_cnt++;
        if (expq.size() == 0) fail("unexpected word");
        else begin
          e = expq.pop_front();
          if ({tx_add_fall, tx_add_rise, tx_dat_fall, tx_dat_rise} != e)
            fail($sformatf("word %h expected %h", {tx_add_fall, tx_add_rise, tx_dat_fall,
                                                   tx_dat_rise}, e));
        end
      end
    end
  end

  initial begin
    cyc = 0; ovf_cnt = 0; out_cnt = 0;
    mode_link = 0; mon_valid = 0; link_valid = 0; tx_rea = 1; mon_flit = '0; link_flit = '0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    // 40 back-to-back monitor flits, receiver ready
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      mon_valid = 1;
      mon_flit  = '{dest: node_t'(i % 9), src: node_t'(0), last: 1'b1, data: $urandom};
      expq.push_back({mon_flit.dest, mon_flit.data});
    end
    @(negedge clk);
    mon_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (out_cnt != 40 || last_out - first_out != 39)
      fail($sformatf("burst of 40 took %0d cycles for %0d words", last_out - first_out + 1, out_cnt));
    // receiver not ready: 16 (FIFO) + in-flight words survive, the rest is dropped
    @(negedge clk);
    tx_rea = 0;
    repeat (4) @(negedge clk);
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      mon_valid = 1;
      mon_flit  = '{dest: node_t'(3), src: node_t'(1), last: 1'b1, data: 32'h5000 + i};
      if (i < DEPTH) expq.push_back({mon_flit.dest, mon_flit.data});
    end
    @(negedge clk);
    mon_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (ovf_cnt != 30 - DEPTH) fail($sformatf("overflow pulses %0d expected %0d", ovf_cnt, 30 - DEPTH));
    tx_rea = 1;
    repeat (30) @(posedge clk);
    checks++;
    if (expq.size() != 0) fail("words kept in the FIFO were not sent");
    // link mode
    mode_link = 1;
    tx_rea = 0;
    begin
      int acc, blocked;
      acc = 0; blocked = 0;
      for (int i = 0; i < 24; i++) begin
        @(negedge clk);
        link_valid = 1;
        link_flit  = '{dest: NODE_BRIDGE, src: node_t'(i % 8), last: (i % 3 == 2), data: 32'h7000 + i};
        @(posedge clk);
        while (!link_ready) begin blocked++; @(posedge clk); if (blocked == 20) tx_rea = 1; end
        expq.push_back({link_flit.last, link_flit.src[2:0], link_flit.data});
        acc++;
      end
      @(negedge clk);
      link_valid = 0;
      tx_rea = 1;
      repeat (30) @(posedge clk);
      checks++;
      if (blocked == 0) fail("link mode never applied back-pressure");
      checks++;
      if (expq.size() != 0 || ovf_cnt != 30 - DEPTH) fail("link mode lost or dropped words");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ca_ctrl: test of the CA local controller, connected here to an SRAM model and the
// crossbar model as inside a computing array, at full size (8192-word memory). Over the NoC it writes a
// conductance image and an input vector, programs the crossbar, runs an evaluation,
// reads the results back and compares them with tb_pkg's reference. It also checks the
// DONE replies, the done and overflow events, the time a RUN takes (at least the 10-cycle
// conversion) and that a disabled array accepts nothing.
module tb_ca_ctrl;
  import soc_pkg::*;
  import tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n, enable;

  logic  in_valid, in_ready, out_valid, out_ready, done_evt, mem_ovf;
  flit_t in_flit, out_flit;
  int    done_cnt, ovf_cnt;
  flit_t rxq [$];

  logic        mem_en, mem_we, g_we, xb_start, xb_done, xb_busy;
  logic [12:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  logic [4:0]  g_row;
  logic [127:0] g_data, xb_vin;
  logic [255:0] xb_vout;

  ca_ctrl #(.NODE(node_t'(6))) dut (.*);
  sram_sp #(.WORDS(8192)) u_mem (.clk, .en(mem_en), .we(mem_we), .be(4'hF), .addr(mem_addr),
                                 .wdata(mem_wdata), .rdata(mem_rdata));
  ca_crossbar u_xb (.clk, .rst_n, .g_we, .g_row, .g_data, .start(xb_start), .vin(xb_vin),
                    .busy(xb_busy), .done(xb_done), .vout(xb_vout));

  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && out_ready) rxq.push_back(out_flit);
      if (done_evt) done_cnt++;
      if (mem_ovf)  ovf_cnt++;
      out_ready <= ($urandom_range(3) != 0);
    end
  end

  task automatic send(logic [31:0] d, logic last);
    @(negedge clk);
    in_valid = 1; in_flit = '{dest: 4'd6, src: 4'd0, last: last, data: d};
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic expect_flits(int n, output logic [31:0] d [$]);
    int guard;
    guard = 0;
    while (rxq.size() < n && guard < 5000) begin @(posedge clk); guard++; end
    d = {};
    for (int i = 0; i < n; i++) begin
      flit_t f;
      if (rxq.size() == 0) begin fail("reply missing"); return; end
      f = rxq.pop_front();
      checks++;
      if (f.dest != 0 || f.src != 6 || f.last != (i == n-1)) fail($sformatf("reply header %p", f));
      d.push_back(f.data);
    end
  endtask

  initial begin
    logic [31:0] d [$];
    int t0, t1;
    in_valid = 0; in_flit = '0; out_ready = 1; enable = 1; done_cnt = 0; ovf_cnt = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // conductance image at 0x100, input vector at 0x200
    send(ca_cmd(OP_WRITE, 13'h100, 0), 0);
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < 4; k++) send(g_word(3, r, k), (r == ROWS-1 && k == 3));
    send(ca_cmd(OP_WRITE, 13'h200, 0), 0);
    for (int k = 0; k < 4; k++) send(v_word(9, k), k == 3);
    send(ca_cmd(OP_PROG, 13'h100, 0), 1);
    expect_flits(1, d);
    checks++;
    if (d.size() != 1 || d[0] != {OP_DONE, 28'd0}) fail("PROG reply");
    t0 = int'($time);
    send(ca_cmd(OP_RUN, 13'h200, 13'h300), 1);
    expect_flits(1, d);
    t1 = int'($time);
    checks++;
    if (d.size() != 1 || d[0] != {OP_DONE, 28'd0}) fail("RUN reply");
    checks++;
    if ((t1 - t0) / 2 < 10 + 8) fail($sformatf("RUN took only %0d cycles", (t1 - t0) / 2));
    send(ca_cmd(OP_READ, 13'h300, 13'd8), 1);
    expect_flits(8, d);
    for (int k = 0; k < 8 && k < d.size(); k++) begin
      checks++;
      if (d[k] != r_word(3, 9, k)) fail($sformatf("result word %0d %h exp %h", k, d[k], r_word(3, 9, k)));
    end
    // image read back
    send(ca_cmd(OP_READ, 13'h17C, 13'd4), 1);
    expect_flits(4, d);
    for (int k = 0; k < 4 && k < d.size(); k++) begin
      checks++;
      if (d[k] != g_word(3, 31, k)) fail("image read back");
    end
    // second evaluation with another vector
    send(ca_cmd(OP_WRITE, 13'h200, 0), 0);
    for (int k = 0; k < 4; k++) send(v_word(4, k), k == 3);
    send(ca_cmd(OP_RUN, 13'h200, 13'h300), 1);
    expect_flits(1, d);
    send(ca_cmd(OP_READ, 13'h300, 13'd8), 1);
    expect_flits(8, d);
    for (int k = 0; k < 8 && k < d.size(); k++) begin
      checks++;
      if (d[k] != r_word(3, 4, k)) fail("second result");
    end
    checks++;
    if (done_cnt != 3) fail($sformatf("done events %0d", done_cnt));
    // write running past the end of the 8192-word memory
    send(ca_cmd(OP_WRITE, 13'd8190, 0), 0);
    for (int k = 0; k < 4; k++) send(32'hA0 + k, k == 3);
    repeat (3) @(posedge clk);
    checks++;
    if (ovf_cnt != 2) fail($sformatf("overflow events %0d", ovf_cnt));
    send(ca_cmd(OP_READ, 13'd8190, 13'd2), 1);
    expect_flits(2, d);
    checks++;
    if (d.size() != 2 || d[0] != 32'hA0 || d[1] != 32'hA1) fail("words before the end");
    // RUN with a result address near the end reports the overflow in DONE
    send(ca_cmd(OP_RUN, 13'h200, 13'd8188), 1);
    expect_flits(1, d);
    checks++;
    if (d.size() != 1 || d[0] != {OP_DONE, 28'd1}) fail("overflow flag in DONE");
    // disabled array accepts nothing
    enable = 0;
    @(negedge clk);
    in_valid = 1; in_flit = '{dest: 4'd6, src: 4'd0, last: 1'b1, data: ca_cmd(OP_READ, 0, 1)};
    repeat (5) begin
      @(posedge clk);
      checks++;
      if (in_ready) fail("disabled array accepted a flit");
    end
    @(negedge clk);
    in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cb_rx: self-checking test of the chip bridge receiver. A model of the outside sender
// runs the four-phase handshake on CBRXVAL/CBRXREA with data changing only while CBRXVAL
// is low, at a slow rate like the 100 Mbit/s lines. Every four bytes must appear as one
// NoC flit with the right data, destination and last flag; while the NoC holds the flit
// off, the next byte must not be acknowledged.
module tb_cb_rx;
  import soc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n;

  logic [7:0] rx_dat;
  logic       rx_add, rx_val, rx_rea, out_valid, out_ready;
  flit_t      out_flit;

  cb_rx dut (.*);

  flit_t expq [$];
  int got, blocked_seen;

  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      flit_t e;
      got++;
      checks++;
      if (expq.size() == 0) fail("unexpected flit");
      else begin
        e = expq.pop_front();
        if (out_flit != e) fail($sformatf("flit %p expected %p", out_flit, e));
      end
    end
  end

  task automatic send_byte(logic [7:0] b, logic a);
    int w;
    #3.3 rx_dat = b; rx_add = a;
    #5   rx_val = 1;
    w = 0;
    while (!rx_rea) begin #1; w++; end
    #4.1 rx_val = 0;
    while (rx_rea) #1;
  endtask

  task automatic send_word(logic [31:0] d, logic [2:0] dest, logic last);
    expq.push_back('{dest: {1'b0, dest}, src: NODE_BRIDGE, last: last, data: d});
    send_byte(d[7:0],   last);
    send_byte(d[15:8],  dest[0]);
    send_byte(d[23:16], dest[1]);
    send_byte(d[31:24], dest[2]);
  endtask

  initial begin
    got = 0; blocked_seen = 0;
    rx_dat = 0; rx_add = 0; rx_val = 0; out_ready = 1;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) send_word($urandom, 3'($urandom), 1'($urandom));
    // NoC not ready: the first byte of the next word must wait
    out_ready = 0;
    send_word(32'hCAFE_F00D, 3'd5, 1'b1);
    #2 rx_dat = 8'h11; rx_add = 1'b1;
    #5 rx_val = 1;
    repeat (20) @(posedge clk);
    checks++;
    if (rx_rea) fail("byte acknowledged while a word was waiting");
    out_ready = 1;
    while (!rx_rea) #1;
    #3 rx_val = 0;
    while (rx_rea) #1;
    expq.push_back('{dest: 4'd2, src: NODE_BRIDGE, last: 1'b1, data: 32'h4433_2211});
    send_byte(8'h22, 1'b0);
    send_byte(8'h33, 1'b1);
    send_byte(8'h44, 1'b0);
    repeat (10) @(posedge clk);
    checks++;
    if (got != 22 || expq.size() != 0) fail($sformatf("received %0d of 22 words", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

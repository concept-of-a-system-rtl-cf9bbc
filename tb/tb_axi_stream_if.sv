// tb_axi_stream_if: self-checking test of the AXI stream port. An outside master with its
// own 100 MHz ACLK (the core runs at 1 GHz here) sends packets of 1 to 9 bytes, changing
// its outputs only just after ACLK rises and counting a byte as sent when TVALID and
// TREADY are both high at a rising ACLK edge. The RISC-V side takes words with random
// delays. Every word must hold the sent bytes, the right keep mask, last flag and id; no
// byte may be lost or doubled; TREADY must fall while a word waits.
module tb_axi_stream_if;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #0.5 clk = ~clk;     // 1 GHz
  logic aclk = 1'b0;
  always #5 aclk = ~aclk;     // 100 MHz
  logic rst_n;

  logic        tvalid, tlast, tready, w_valid, w_last, w_ready;
  logic [2:0]  tid, w_id;
  logic [7:0]  tdata;
  logic [31:0] w_data;
  logic [3:0]  w_keep;

  axi_stream_if dut (.*);

  typedef struct { logic [31:0] data; logic [3:0] keep; logic last; logic [2:0] id; } word_t;
  word_t expq [$];
  int words, stalls;

  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (w_valid && w_ready) begin
        word_t e;
        words++;
        checks++;
        if (expq.size() == 0) fail("unexpected word");
        else begin
          e = expq.pop_front();
          if (w_keep != e.keep || w_last != e.last || w_id != e.id ||
              (w_data & {{8{w_keep[3]}}, {8{w_keep[2]}}, {8{w_keep[1]}}, {8{w_keep[0]}}}) != e.data)
            fail($sformatf("word %h/%b/%b/%0d expected %h/%b/%b/%0d", w_data, w_keep, w_last, w_id,
                           e.data, e.keep, e.last, e.id));
        end
      end
      w_ready <= ($urandom_range(40) == 0);
    end
  end

  // master
  initial begin
    words = 0; stalls = 0;
    tvalid = 0; tlast = 0; tid = 0; tdata = 0; w_ready = 0;
    rst_n = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 12; p++) begin
      int len;
      logic [2:0] id;
      word_t w;
      len = int'($urandom_range(1, 9));
      id  = 3'($urandom);
      w.data = 0; w.keep = 0; w.last = 0; w.id = id;
      for (int b = 0; b < len; b++) begin
        @(posedge aclk);
        #1;
        tvalid = 1; tdata = 8'($urandom); tlast = (b == len - 1); tid = id;
        @(posedge aclk);
        while (!tready) begin stalls++; @(posedge aclk); end
        w.data[(b%4)*8 +: 8] = tdata;
        w.keep[b%4] = 1'b1;
        if (b % 4 == 3 || b == len - 1) begin
          w.last = (b == len - 1);
          expq.push_back(w);
          w.data = 0; w.keep = 0; w.last = 0;
        end
        #1 tvalid = 0;
      end
    end
    repeat (400) @(posedge clk);
    checks++;
    if (expq.size() != 0) fail($sformatf("%0d words missing", expq.size()));
    checks++;
    if (stalls == 0) fail("TREADY never held the master off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

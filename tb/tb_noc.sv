// tb_noc: self-checking test of the network on chip with all nine nodes.
// Every node sends random packets (one to four flits) to random nodes, a few to a node that
// does not exist. A scoreboard per (source, destination) pair checks that every flit
// arrives once, in order, and that packets never interleave at a receiver. The monitor
// port must show every delivered flit, route_err every misrouted one. In a first phase all
// receivers are ready and the network must move a flit in every cycle in which some
// input is valid (one 32-bit word per cycle); in a second phase receivers stall at random.
module tb_noc;
  import soc_pkg::*;
  localparam int N = 9;
  localparam int PKTS = 60;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n;

  logic [N-1:0]  in_valid, in_ready, out_valid, out_ready;
  flit_t [N-1:0] in_flit, out_flit;
  logic          mon_valid, route_err;
  flit_t         mon_flit;

  noc #(.N(N)) dut (.*);

  logic [31:0] q [N][N][$];
  int  remain [N];
  int  npk [N];
  int  seq [N];
  int  owner [N];
  int  sent, misrouted, delivered, mon_cnt, rerr_cnt, stall_cycles;
  bit  phase2;

  task automatic fail(string m);
    failures++;
    $display("FAIL %s", m);
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources: decide at the clock edge, drive right after it
  always @(posedge clk) begin
    if (rst_n) begin
      if (!phase2 && |in_valid) begin
        checks++;
        if (!(|in_ready)) begin fail("no grant although all receivers ready"); end
      end
      for (int i = 0; i < N; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          if (int'(in_flit[i].dest) < N) q[i][in_flit[i].dest].push_back(in_flit[i].data);
          else misrouted++;
          sent++;
          remain[i]--;
          if (remain[i] == 0) in_valid[i] <= 1'b0;
          else begin
            in_flit[i].data <= {4'(i), 28'(seq[i])};
            in_flit[i].last <= (remain[i] == 1);
            seq[i]++;
          end
        end
        if ((!in_valid[i] || (in_ready[i] && remain[i] == 0)) && npk[i] < PKTS &&
            $urandom_range(3) != 0) begin
          int len;
          node_t d;
          len = int'($urandom_range(1, 4));
          d   = ($urandom_range(19) == 0) ? node_t'(12) : node_t'($urandom_range(N-1));
          if (d == 12) len = 1;
          remain[i]      = len;
          npk[i]++;
          in_valid[i]   <= 1'b1;
          in_flit[i]    <= '{dest: d, src: node_t'(i), last: (len == 1),
                            data: {4'(i), 28'(seq[i])}};
          seq[i]++;
        end
      end
    end
  end

  // receivers
  always @(posedge clk) begin
    if (rst_n) begin
      if (mon_valid) mon_cnt++;
      if (route_err) rerr_cnt++;
      for (int d = 0; d < N; d++) begin
        if (out_valid[d] && out_ready[d]) begin
          int s;
          s = int'(out_flit[d].src);
          delivered++;
          checks++;
          if (owner[d] >= 0 && owner[d] != s) fail($sformatf("packets interleaved at %0d", d));
          owner[d] = out_flit[d].last ? -1 : s;
          checks++;
          if (int'(out_flit[d].dest) != d) fail("flit at wrong output");
          else if (q[s][d].size() == 0) fail($sformatf("unexpected flit %0d->%0d", s, d));
          else begin
            logic [31:0] e;
            e = q[s][d].pop_front();
            if (e != out_flit[d].data) fail($sformatf("order %0d->%0d got %h exp %h", s, d,
                                                      out_flit[d].data, e));
          end
        end
      end
      if (phase2) out_ready <= N'($urandom) | N'($urandom);
      else        out_ready <= '1;
      if (phase2 && out_ready != '1) stall_cycles++;
    end
  end

  initial begin
    in_valid = '0; in_flit = '0; out_ready = '1; phase2 = 0;
    sent = 0; misrouted = 0; delivered = 0; mon_cnt = 0; rerr_cnt = 0; stall_cycles = 0;
    for (int i = 0; i < N; i++) begin remain[i] = 0; npk[i] = 0; seq[i] = 0; owner[i] = -1; end
    rst_n = 0;
    repeat (3) @(posedge clk);
    #0.5 rst_n = 1;
    wait (npk[0] >= PKTS/2);
    phase2 = 1;
    wait (npk.sum() == N*PKTS && in_valid == '0);
    phase2 = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (delivered + misrouted != sent) fail($sformatf("sent %0d delivered %0d misrouted %0d",
                                                        sent, delivered, misrouted));
    checks++;
    if (mon_cnt != delivered) fail($sformatf("monitor saw %0d of %0d", mon_cnt, delivered));
    checks++;
    if (rerr_cnt != misrouted || misrouted == 0) fail($sformatf("route_err %0d misrouted %0d",
                                                               rerr_cnt, misrouted));
    checks++;
    if (stall_cycles == 0) fail("no receiver stall happened");
    $display("noc: sent=%0d delivered=%0d misrouted=%0d stalls=%0d", sent, delivered, misrouted,
             stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

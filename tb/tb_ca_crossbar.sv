// tb_ca_crossbar: self-checking test of the crossbar model. Programs random conductance
// levels row by row, applies random input vectors and compares every ADC code with a
// reference sum computed here; also checks that done comes exactly CONV_CYCLES clocks
// after start (1 GHz digital clock against the 100 MHz analog rate).
module tb_ca_crossbar;
  localparam int ROWS = 32, COLS = 32, GW = 4, DW = 4, AW = 8, SHIFT = 5, CONV = 10;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic rst_n;

  logic g_we, start, busy, done;
  logic [4:0] g_row;
  logic [COLS*GW-1:0] g_data;
  logic [ROWS*DW-1:0] vin;
  logic [COLS*AW-1:0] vout;
  int g_ref [ROWS][COLS];

  ca_crossbar #(.ROWS(ROWS), .COLS(COLS), .GW(GW), .DW(DW), .AW(AW), .SHIFT(SHIFT),
                .CONV_CYCLES(CONV)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    g_we = 0; start = 0; g_row = 0; g_data = 0; vin = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        g_we = 1; g_row = 5'(r);
        for (int c = 0; c < COLS; c++) begin
          // trial 0 uses the largest levels and codes, the largest column sum
          g_ref[r][c] = (trial == 0) ? 15 : int'($urandom_range(15));
          g_data[c*GW +: GW] = GW'(g_ref[r][c]);
        end
      end
      @(negedge clk);
      g_we = 0;
      for (int v = 0; v < 3; v++) begin
        int cyc;
        for (int r = 0; r < ROWS; r++) vin[r*DW +: DW] = (trial == 0) ? 4'hF : 4'($urandom);
        @(negedge clk);
        start = 1;
        @(negedge clk);
        start = 0;
        cyc = 0;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != CONV) begin
          failures++;
          $display("FAIL conversion took %0d cycles, expected %0d", cyc, CONV);
        end
        for (int c = 0; c < COLS; c++) begin
          int acc, exp_code;
          acc = 0;
          for (int r = 0; r < ROWS; r++) acc += int'(vin[r*DW +: DW]) * g_ref[r][c];
          exp_code = acc >> SHIFT;
          if (exp_code > 255) exp_code = 255;
          checks++;
          if (int'(vout[c*AW +: AW]) != exp_code) begin
            failures++;
            $display("FAIL col %0d code %0d expected %0d", c, vout[c*AW +: AW], exp_code);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

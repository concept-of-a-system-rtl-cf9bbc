// mbist: memory built-in self-test for one single-port SRAM, running the March C- algorithm
// with solid backgrounds (all-zero and all-one words):
//   up(w0); up(r0,w1); up(r1,w0); down(r0,w1); down(r1,w0); up(r0)
// It finds stuck-at, transition and most coupling faults of the cells and the address
// decoder. That the chip includes memory built-in self-tests follows the architecture; the
// algorithm and the interface are this design's own.
//
// Interface: a rising start begins a test; busy is high while it runs and the MBIST owns
// the memory port; done stays high afterwards until the next start, with fail set if any
// read returned a wrong word and fail_addr holding the first failing address. The memory
// must return read data one cycle after the read.
// Timing: element up(w0) takes one cycle per word, every element with a read two, so a test
// takes 11 x WORDS cycles.
module mbist #(
  parameter int unsigned WORDS = 8192,
  parameter int unsigned W     = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic                     fail,
  output logic [$clog2(WORDS)-1:0] fail_addr,
  output logic                     mem_en,
  output logic                     mem_we,
  output logic [$clog2(WORDS)-1:0] mem_addr,
  output logic [W-1:0]             mem_wdata,
  input  logic [W-1:0]             mem_rdata
);
  localparam int unsigned AW = $clog2(WORDS);
  localparam logic [AW-1:0] LAST = AW'(WORDS - 1);

  logic [2:0]    elem;
  logic          phase;
  logic [AW-1:0] addr;
  logic          start_q;
  logic          rd_val, wr_val, has_write, down;

  // element table: value expected by the read, value written, direction
  always_comb begin
    rd_val    = 1'b0;
    wr_val    = 1'b0;
    has_write = 1'b1;
    down      = 1'b0;
    unique case (elem)
      3'd0: begin wr_val = 1'b0; end
      3'd1: begin rd_val = 1'b0; wr_val = 1'b1; end
      3'd2: begin rd_val = 1'b1; wr_val = 1'b0; end
      3'd3: begin rd_val = 1'b0; wr_val = 1'b1; down = 1'b1; end
      3'd4: begin rd_val = 1'b1; wr_val = 1'b0; down = 1'b1; end
      default: begin rd_val = 1'b0; has_write = 1'b0; end
    endcase
  end

  always_comb begin
    mem_addr  = addr;
    mem_wdata = {W{wr_val}};
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    if (busy) begin
      if (elem == 3'd0)   begin mem_en = 1'b1; mem_we = 1'b1; end   // write only
      else if (!phase)    begin mem_en = 1'b1; mem_we = 1'b0; end   // read
      else if (has_write) begin mem_en = 1'b1; mem_we = 1'b1; end   // write after compare
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      fail      <= 1'b0;
      fail_addr <= '0;
      elem      <= '0;
      phase     <= 1'b0;
      addr      <= '0;
      start_q   <= 1'b0;
    end else begin
      start_q <= start;
      if (start && !start_q && !busy) begin
        busy  <= 1'b1;
        done  <= 1'b0;
        fail  <= 1'b0;
        elem  <= '0;
        phase <= 1'b0;
        addr  <= '0;
      end else if (busy) begin
        logic step;
        step = 1'b0;
        if (elem == 3'd0) step = 1'b1;
        else if (!phase) phase <= 1'b1;
        else begin
          phase <= 1'b0;
          step  = 1'b1;
          if (mem_rdata != {W{rd_val}} && !fail) begin
            fail      <= 1'b1;
            fail_addr <= addr;
          end
        end
        if (step) begin
          if ((down && addr == '0) || (!down && addr == LAST)) begin
            if (elem == 3'd5) begin
              busy <= 1'b0;
              done <= 1'b1;
            end else begin
              elem <= elem + 1'b1;
              // elements 3 and 4 run downwards
              addr <= (elem == 3'd2 || elem == 3'd3) ? LAST : '0;
            end
          end else begin
            addr <= down ? addr - 1'b1 : addr + 1'b1;
          end
        end
      end
    end
  end
endmodule

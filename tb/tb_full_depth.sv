`timescale 1ns/1fs
// tb_full_depth: one complete operation of the generator at its default size,
// using the whole 28000-word memory.
//
// With a 10 MHz reference the PLL makes an 80 MHz memory clock, so the full
// memory plays a 350 us sequence, the longest pattern quoted for the design.
// Every word is filled through the write port with a pseudo-random pattern,
// word i = low 18 bits of ((i + 1) * 2654435761) xor (i << 5), which gives every
// channel its own sequence; the sequence then runs a little over once. Each
// cycle the channels are compared with the formula, the wrap flag is checked
// on the last word, and the time from word 0 to word 0 of the next pass must
// be 350 us.
module tb_full_depth;
  import pulse_gen_pkg::*;
  localparam int unsigned ADDR_W = $clog2(DEPTH);
  localparam realtime T_EXT = 100.0, T_MEM = T_EXT / MULT, TOL = 0.001;

  logic              ext_clk = 1'b0, pll_areset, mem_clk, pll_locked;
  logic [PR_W-1:0]   pr;
  logic              rst_n, run;
  logic [ADDR_W-1:0] seq_last;
  logic              wr_clk = 1'b0, wr_en;
  logic [ADDR_W-1:0] wr_addr;
  logic [N_INT-1:0]  wr_data, int_ch;
  logic              seq_wrap;
  int unsigned       checks = 0, failures = 0;

  pulse_gen_top dut (.*);

  always #(T_EXT / 2.0) ext_clk = ~ext_clk;
  always #5 wr_clk = ~wr_clk;

  initial begin : watchdog
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  function automatic logic [N_INT-1:0] word(input int unsigned i);
    logic [31:0] h = ((i + 1) * 32'd2654435761) ^ (i << 5);
    return h[N_INT-1:0];
  endfunction

  initial begin
    realtime t0, err;
    int unsigned lat = 0, wraps = 0;
    pll_areset = 1'b1; pr = '0; rst_n = 1'b0; run = 1'b0; seq_last = ADDR_W'(DEPTH - 1);
    wr_en = 1'b0; wr_addr = '0; wr_data = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge wr_clk);
      wr_en = 1'b1; wr_addr = ADDR_W'(i); wr_data = word(i);
    end
    @(negedge wr_clk) wr_en = 1'b0;
    pll_areset = 1'b0;
    @(posedge pll_locked);
    rst_n = 1'b1;
    repeat (4) @(posedge mem_clk);
    @(negedge mem_clk) run = 1'b1;
    do begin @(posedge mem_clk); #0.01; lat++; end while (int_ch != word(0) && lat < 20);
    check(lat == 4, "start latency");
    t0 = $realtime;
    for (int c = 1; c <= DEPTH + 100; c++) begin
      @(posedge mem_clk); #0.01;
      check(int_ch == word(c % DEPTH), "channel word");
      if (seq_wrap) wraps++;
      if (c == DEPTH) begin
        err = ($realtime - t0) - 350000.0;
        check(err < TOL && err > -TOL, "sequence length 350 us");
      end
    end
    check(wraps == 1, "one wrap per pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

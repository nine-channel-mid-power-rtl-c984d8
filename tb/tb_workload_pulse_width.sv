`timescale 1ns/1fs
// tb_workload_pulse_width: the pulse-width sweep measured on the hardware,
// played by the full generator and timed in nanoseconds.
//
// The generator powers up with its memory preset from pattern_width_sweep.hex (the
// path a configuration flash would take), so no word is written. The pattern,
// 16 words at 640 MHz = 25 ns, gives bipolar output k (k = 0..6) a positive
// pulse starting at 0 ns and a negative one starting at 12.5 ns, both k+2
// memory periods long: 3.125 ns to 12.5 ns in steps of 1.5625 ns. Outputs 7
// and 8 stay at 0. The testbench forms each output's level as the external
// 180 degree combiner would (positive channel minus negative channel), times
// every rising and falling edge of that level over several repeats, and checks
// widths, start times and the 25 ns repeat to 1 ps.
module tb_workload_pulse_width;
  import pulse_gen_pkg::*;
  localparam int unsigned ADDR_W = $clog2(DEPTH);
  localparam realtime T_EXT = 12.5, T_MEM = T_EXT / MULT, TOL = 0.001;
  localparam int unsigned REPEATS = 6;

  logic              ext_clk = 1'b0, pll_areset, mem_clk, pll_locked;
  logic [PR_W-1:0]   pr;
  logic              rst_n, run;
  logic [ADDR_W-1:0] seq_last;
  logic              wr_clk = 1'b0, wr_en;
  logic [ADDR_W-1:0] wr_addr;
  logic [N_INT-1:0]  wr_data, int_ch;
  logic              seq_wrap;
  int unsigned       checks = 0, failures = 0;

  pulse_gen_top #(.INIT_FILE("tb/pattern_width_sweep.hex")) dut (.*);

  always #(T_EXT / 2.0) ext_clk = ~ext_clk;
  always #5 wr_clk = ~wr_clk;

  initial begin : watchdog
    #20000;
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

  function automatic bit near(input realtime a, input realtime b);
    return (a - b < TOL) && (b - a < TOL);
  endfunction

  // Edge times of each output's positive and negative pulses.
  realtime pos_rise [N_OUT][$], pos_fall [N_OUT][$], neg_rise [N_OUT][$], neg_fall [N_OUT][$];
  int signed level [N_OUT];
  bit        logging = 1'b0;

  always @(posedge mem_clk) begin
    #0.01;
    if (logging)
      for (int k = 0; k < N_OUT; k++) begin
        int signed now_level;
        realtime t;
        now_level = bipolar_level(int_ch, k);
        t = $realtime - 0.01;
        if (now_level != level[k]) begin
          if (level[k] == 1)  pos_fall[k].push_back(t);
          if (level[k] == -1) neg_fall[k].push_back(t);
          if (now_level == 1)  pos_rise[k].push_back(t);
          if (now_level == -1) neg_rise[k].push_back(t);
          level[k] = now_level;
        end
      end
  end

  initial begin
    realtime t0, w;
    pll_areset = 1'b1; pr = '0; rst_n = 1'b0; run = 1'b0; seq_last = ADDR_W'(15);
    wr_en = 1'b0; wr_addr = '0; wr_data = '0;
    for (int k = 0; k < N_OUT; k++) level[k] = 0;
    #(3 * T_EXT);
    pll_areset = 1'b0;
    @(posedge pll_locked);
    rst_n = 1'b1;
    repeat (4) @(posedge mem_clk);
    logging = 1'b1;
    @(negedge mem_clk) run = 1'b1;
    repeat (4 + REPEATS * 16) @(posedge mem_clk);
    #0.1;
    logging = 1'b0;
    t0 = pos_rise[0][0];
    for (int k = 0; k < N_OUT; k++) begin
      if (k >= 7) begin
        check(pos_rise[k].size() == 0 && neg_rise[k].size() == 0, "unused output stays at 0");
        continue;
      end
      // the window ends just after word 0 of repeat REPEATS+1
      check(pos_rise[k].size() == REPEATS + 1 && neg_rise[k].size() == REPEATS
            && neg_fall[k].size() == REPEATS, "one pulse of each sign per repeat");
      for (int r = 0; r < REPEATS && r < pos_rise[k].size() && r < neg_rise[k].size()
                                   && r < pos_fall[k].size() && r < neg_fall[k].size(); r++) begin
        w = real'(k + 2) * T_MEM;
        check(near(pos_rise[k][r], t0 + r * 25.0), "positive start, 25 ns repeat");
        check(near(pos_fall[k][r] - pos_rise[k][r], w), "positive width");
        check(near(neg_rise[k][r], t0 + r * 25.0 + 12.5), "negative start 12.5 ns later");
        check(near(neg_fall[k][r] - neg_rise[k][r], w), "negative width");
      end
    end
    // widths run from 3.125 ns to 12.5 ns in 1.5625 ns steps
    check(near(2 * T_MEM, 3.125) && near(8 * T_MEM, 12.5), "width range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

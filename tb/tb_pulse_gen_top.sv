`timescale 1ns/1fs
// tb_pulse_gen_top: end-to-end test of the pattern generator at its default
// size (nine outputs, 28000-word memory, 640 MHz from an 80 MHz reference).
//
// It loads the synchronisation pattern of the paper's multi-channel test
// through the write port: 6.25 ns (4-word) pulses on a 12.5 ns (8-word) grid,
// eleven slots in all so the sequence repeats every 137.5 ns (88 words); in
// slots 0 and 1 every output pulses positive, in slot 2+k output k pulses
// negative. It runs it, reloads the pulse-width sweep pattern (16 words,
// 25 ns) and runs that, changes the PLL phase and stops and restarts. Each
// memory-clock cycle the channels are compared with the loaded words, and
// every bipolar output is turned into +1/0/-1 the way the external 180 degree
// combiner would (pulse_gen_pkg::bipolar_level) and checked too.
// Also checked: the start latency (word 0 appears 4 memory-clock edges after
// `run` is seen high at a falling edge), the repeat time of the sequence in
// ns, the wrap flag period, the phase of the channel edges against the
// reference clock, and all-zero channels while stopped. Each mechanism (lock,
// load, run, wrap, stop, restart, phase change, pattern change) is counted,
// and one that never happened is a failure.
module tb_pulse_gen_top;
  import pulse_gen_pkg::*;
  localparam int unsigned ADDR_W = $clog2(DEPTH);
  localparam realtime T_EXT = 12.5, T_MEM = T_EXT / MULT, TOL = 0.001;

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

  realtime t_ext_edge;
  always @(posedge ext_clk) t_ext_edge = $realtime;

  initial begin : watchdog
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int unsigned n_lock = 0, n_load = 0, n_run = 0, n_wrap = 0, n_stop = 0,
               n_restart = 0, n_phase = 0, n_pattern = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  logic [N_INT-1:0] pat [$];

  function automatic logic [N_INT-1:0] sync_word(input int unsigned i);
    logic [N_INT-1:0] w = '0;
    int unsigned slot = i / 8;
    if (i % 8 < 4) begin
      if (slot < 2) for (int k = 0; k < N_OUT; k++) w[pos_bit(k)] = 1'b1;
      else w[neg_bit(slot - 2)] = 1'b1;
    end
    return w;
  endfunction

  function automatic logic [N_INT-1:0] sweep_word(input int unsigned i);
    logic [N_INT-1:0] w = '0;
    for (int k = 0; k < 7; k++) begin
      if (i <= k + 1) w[pos_bit(k)] = 1'b1;
      if (i >= 8 && i <= k + 9) w[neg_bit(k)] = 1'b1;
    end
    return w;
  endfunction

  task automatic load(input bit sweep, input int unsigned len);
    pat.delete();
    for (int i = 0; i < len; i++) pat.push_back(sweep ? sweep_word(i) : sync_word(i));
    for (int i = 0; i < len; i++) begin
      @(negedge wr_clk);
      wr_en = 1'b1; wr_addr = ADDR_W'(i); wr_data = pat[i];
    end
    @(negedge wr_clk) wr_en = 1'b0;
    seq_last = ADDR_W'(len - 1);
    n_load++;
  endtask

  // Bipolar level of output k as the external combiner would form it, from
  // the loaded word itself (independent of the read path).
  function automatic int signed expected_level(input int unsigned i, input int unsigned k);
    return int'(pat[i][pos_bit(k)]) - int'(pat[i][neg_bit(k)]);
  endfunction

  // Run `periods` full sequences and check every cycle.
  task automatic play(input int unsigned periods, input int unsigned p);
    int unsigned len = pat.size();
    int unsigned lat = 0, wraps = 0, last_wrap = 0;
    realtime t_start, t_first_word0, err;
    @(negedge mem_clk) run = 1'b1;
    // start latency
    do begin @(posedge mem_clk); #0.01; lat++; end while (int_ch == '0 && lat < 20);
    check(lat == 4, "start latency");
    check(int_ch == pat[0], "first word");
    t_first_word0 = $realtime - 0.01;
    // phase of the channel edges against the reference clock
    err = (t_first_word0 - t_ext_edge) - real'(p) * T_MEM / PHASE_DIV;
    err = err - $floor(err / T_MEM + 0.5) * T_MEM;
    check(err < TOL && err > -TOL, "edge phase");
    n_run++;
    for (int c = 1; c < periods * len; c++) begin
      @(posedge mem_clk); #0.01;
      check(int_ch == pat[c % len], "channel word");
      for (int k = 0; k < N_OUT; k++)
        check(bipolar_level(int_ch, k) == expected_level(c % len, k), "bipolar level");
      if (c % len == 0) begin
        err = ($realtime - 0.01 - t_first_word0) - real'(c) * T_MEM;
        check(err < TOL && err > -TOL, "repeat time");
      end
      if (seq_wrap) begin
        if (wraps > 0) check(c - last_wrap == len, "wrap period");
        wraps++; last_wrap = c; n_wrap++;
      end
    end
    check(wraps >= periods - 1, "wrap seen");
    @(negedge mem_clk) run = 1'b0;
    repeat (4) @(posedge mem_clk);
    #0.01;
    check(int_ch == '0, "idle after stop");
    repeat (10) begin
      @(posedge mem_clk); #0.01;
      check(int_ch == '0, "idle after stop");
    end
    n_stop++;
  endtask

  task automatic relock(input int unsigned p);
    pll_areset = 1'b1;
    pr = PR_W'(p);
    #(4 * T_EXT);
    pll_areset = 1'b0;
    @(posedge pll_locked);
    n_lock++;
    repeat (4) @(posedge mem_clk);
  endtask

  initial begin
    pll_areset = 1'b1; pr = '0; rst_n = 1'b0; run = 1'b0; seq_last = '0;
    wr_en = 1'b0; wr_addr = '0; wr_data = '0;
    load(1'b0, 88);
    relock(0);
    rst_n = 1'b1;
    repeat (4) @(posedge mem_clk);
    check(int_ch == '0, "idle after reset");

    // synchronisation pattern, 137.5 ns
    check(88.0 * T_MEM == 137.5, "sequence length 137.5 ns");
    play(3, 0);
    // restart from word 0
    play(2, 0);
    n_restart++;
    // pulse-width sweep, 25 ns
    load(1'b1, 16);
    n_pattern++;
    play(4, 0);
    // phase shift: 3/8 of a memory clock, then most of a reference period
    relock(3);
    n_phase++;
    play(2, 3);
    relock(61);
    n_phase++;
    play(2, 61);

    check(n_lock > 0, "lock happened");
    check(n_load > 0, "load happened");
    check(n_run > 0, "run happened");
    check(n_wrap > 0, "wrap happened");
    check(n_stop > 0, "stop happened");
    check(n_restart > 0, "restart happened");
    check(n_phase > 0, "phase change happened");
    check(n_pattern > 0, "pattern change happened");
    $display("mechanisms: lock=%0d load=%0d run=%0d wrap=%0d stop=%0d restart=%0d phase=%0d pattern=%0d",
             n_lock, n_load, n_run, n_wrap, n_stop, n_restart, n_phase, n_pattern);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

`timescale 1ns/1fs
// tb_pll_model: self-checking test of the PLL model.
//
// For external clocks of 80 MHz and 10 MHz and several phase settings it
// checks that `locked` rises within a few reference periods, that the first
// output edge comes pr/8 of an output period after the reference edge that
// locked it (up to almost two reference periods for pr = 127), that the
// output runs at 8 x the reference with a 50 % duty cycle, that every output
// rising edge keeps that phase, and that `areset` stops the output.
module tb_pll_model;
  localparam int unsigned MULT = 8, PHASE_DIV = 8, PR_W = 7;
  localparam realtime TOL = 0.001;   // 1 ps

  logic            ext_clk = 1'b0, areset;
  logic [PR_W-1:0] pr;
  logic            clk_out, locked;
  int unsigned     checks = 0, failures = 0;
  realtime         t_ext_half = 6.25;   // 80 MHz

  pll_model #(.MULT(MULT), .PHASE_DIV(PHASE_DIV), .PR_W(PR_W)) dut (.*);

  always #(t_ext_half) ext_clk = ~ext_clk;

  realtime t_ext_edge;
  always @(posedge ext_clk) t_ext_edge = $realtime;

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $realtime); end
  endtask

  task automatic run_case(input realtime t_ext, input int unsigned p);
    realtime t_lock, t_first, t_prev, t_fall, t_out, delay, err;
    int unsigned edges;
    t_out = t_ext / MULT;
    delay = p * t_out / PHASE_DIV;
    areset = 1'b1;
    pr = PR_W'(p);
    t_ext_half = t_ext / 2.0;
    #(3 * t_ext);
    areset = 1'b0;
    // lock within LOCK_CYCLES + 2 reference edges
    fork
      begin @(posedge locked); t_lock = $realtime; end
      begin repeat (8) @(posedge ext_clk); end
    join_any
    disable fork;
    check(locked, "lock");
    check(t_lock == t_ext_edge, "lock on a reference edge");
    @(posedge clk_out) t_first = $realtime;
    check(t_first - t_lock > delay - TOL && t_first - t_lock < delay + TOL, "first edge delay");
    // period, duty cycle and phase of the following edges
    t_prev = t_first;
    edges = 0;
    repeat (5 * MULT) begin
      @(negedge clk_out) t_fall = $realtime;
      @(posedge clk_out);
      err = ($realtime - t_prev) - t_out;
      check(err < TOL && err > -TOL, "output period");
      err = (t_fall - t_prev) - t_out / 2.0;
      check(err < TOL && err > -TOL, "duty cycle");
      t_prev = $realtime;
      edges++;
    end
    err = (t_prev - t_lock - delay) - $floor((t_prev - t_lock - delay) / t_out + 0.5) * t_out;
    check(err < TOL && err > -TOL, "phase held");
    check(edges == 5 * MULT, "edge count");
  endtask

  initial begin
    areset = 1'b1; pr = '0;
    run_case(12.5, 0);
    run_case(12.5, 3);
    run_case(12.5, 8);
    run_case(12.5, 63);
    run_case(12.5, 127);
    run_case(100.0, 0);
    run_case(100.0, 21);
    // reset stops the output
    areset = 1'b1;
    #(t_ext_half * 4);
    check(!locked, "areset drops lock");
    begin
      int unsigned n = 0;
      fork
        begin forever begin @(posedge clk_out); n++; end end
        begin #(t_ext_half * 20); end
      join_any
      disable fork;
      check(n == 0, "no output in reset");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

`timescale 1ns/1fs
// tb_addr_counter: self-checking test of the address counter.
//
// Drives random run/last sequences into a 10-word counter and compares the
// address and the wrap flag, every cycle, with a reference count kept here.
// Also checks the sequence period (last+1 cycles between wraps), the clamp
// of `last` to the memory size, and that `run` low returns the address to 0.
module tb_addr_counter;
  localparam int unsigned DEPTH  = 10;
  localparam int unsigned ADDR_W = $clog2(DEPTH);

  logic              clk = 1'b0;
  logic              rst_n, run;
  logic [ADDR_W-1:0] last, addr;
  logic              wrap;
  int unsigned       checks = 0, failures = 0;

  addr_counter #(.DEPTH(DEPTH)) dut (.*);

  always #1 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned exp_addr;
  int unsigned eff_last;

  task automatic check_now();
    eff_last = (int'(last) > DEPTH - 1) ? DEPTH - 1 : int'(last);
    checks++;
    if (int'(addr) != exp_addr || wrap != (exp_addr >= eff_last)) begin
      failures++;
      $display("mismatch t=%0t addr=%0d exp=%0d wrap=%b last=%0d", $time, addr, exp_addr, wrap, last);
    end
  endtask

  // reference model of the next address
  task automatic step_model();
    eff_last = (int'(last) > DEPTH - 1) ? DEPTH - 1 : int'(last);
    if (!rst_n || !run) exp_addr = 0;
    else if (exp_addr >= eff_last) exp_addr = 0;
    else exp_addr = exp_addr + 1;
  endtask

  initial begin
    rst_n = 1'b0; run = 1'b0; last = 4'd9;
    @(posedge clk); #0.1;
    exp_addr = 0;
    rst_n = 1'b1;
    // 1. period check: with last = 5 the wrap comes every 6 cycles
    last = 4'd5; run = 1'b1;
    begin
      int unsigned n = 0, first = 0, second = 0;
      for (int c = 0; c < 40; c++) begin
        check_now();
        if (wrap) begin n++; if (n == 1) first = c; if (n == 2) second = c; end
        step_model();
        @(posedge clk); #0.1;
      end
      checks++;
      if (second - first != 6) begin failures++; $display("period %0d, expected 6", second - first); end
    end
    // 2. last beyond the memory clamps to DEPTH-1
    run = 1'b0; @(posedge clk); #0.1; exp_addr = 0;
    last = 4'd15; run = 1'b1;
    for (int c = 0; c < 25; c++) begin
      check_now(); step_model(); @(posedge clk); #0.1;
    end
    // 3. random run / last / reset
    for (int c = 0; c < 3000; c++) begin
      check_now();
      step_model();
      @(posedge clk); #0.1;
      if ($urandom_range(0, 19) == 0) run = ~run;
      if ($urandom_range(0, 49) == 0) last = ADDR_W'($urandom_range(0, 15));
      rst_n = ($urandom_range(0, 199) != 0);
      #0.1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

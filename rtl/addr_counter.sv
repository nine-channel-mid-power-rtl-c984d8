`timescale 1ns/1fs
// addr_counter: count-up address counter for the pattern memory.
//
// Clocked by the PLL's memory clock, it steps the memory address (the CTRL
// bus) by one every cycle while `run` is high and goes back to address 0
// after `last`, so a sequence of last+1 words repeats for as long as the clock
// runs. That is how one pattern repeats every 25 ns or 137.5 ns in the
// measurements: the count-up counter is the paper's, the programmable wrap
// point `last` and the `run` enable are this design's choices (the paper
// fixes the sequence length when the FPGA is configured).
//
// Interface: `addr` is registered; `wrap` is high in the cycle in which `addr`
// holds `last`, i.e. the last word of the sequence is being addressed (or a
// later one, if `last` was lowered while running: the count then wraps at once).
// While `run` is low the address is held at 0, so every start plays the
// sequence from its first word; `rst_n` (synchronous) also clears it.
// `last` above DEPTH-1 is clamped to DEPTH-1.
module addr_counter #(
  parameter int unsigned DEPTH  = pulse_gen_pkg::DEPTH,
  parameter int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic [ADDR_W-1:0] last,
  output logic [ADDR_W-1:0] addr,
  output logic              wrap
);

  localparam logic [ADDR_W-1:0] MAX_ADDR = ADDR_W'(DEPTH - 1);

  logic [ADDR_W-1:0] end_addr;

  always_comb begin
    end_addr = (last > MAX_ADDR) ? MAX_ADDR : last;
    wrap     = (addr >= end_addr);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)
      addr <= '0;
    else if (!run)
      addr <= '0;
    else
      addr <= wrap ? '0 : addr + 1'b1;
  end

  // The address never leaves the memory.
  a_in_range: assert property (@(posedge clk) disable iff (!rst_n) addr <= MAX_ADDR);

endmodule

`timescale 1ns/1fs
// pattern_mem: the pattern memory (an M9K array in the FPGA) with its output
// registers.
//
// Each word holds one bit per intermediate channel for one memory clock
// period; reading the words in order plays the pulse pattern on all channels
// at once, so every channel changes on the same clock edge. The read side
// follows the block diagram: the address from the counter is taken in by the
// memory, and the data are registered once more at the memory output before
// they leave the chip. The write port stands for the path by which the host
// PC fills the memory at initialisation; it has its own clock. INIT_FILE, if
// set, gives the power-up contents (what the configuration flash would hold).
//
// Timing: rd_addr sampled on clk edge n appears on `channels` after edge n+1
// (two-cycle latency). `rd_en` travels with the address; while it is low the
// output registers load 0, so all channels rest low when the pattern is
// stopped (this idle level is this design's choice). Writes take effect on the
// wr_clk edge at which wr_en is high. Reset is synchronous to clk and clears
// only the read pipeline, not the array.
module pattern_mem #(
  parameter int unsigned DEPTH     = pulse_gen_pkg::DEPTH,
  parameter int unsigned WIDTH     = pulse_gen_pkg::N_INT,
  parameter int unsigned ADDR_W    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter string       INIT_FILE = ""
) (
  // read side, memory clock
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [WIDTH-1:0]  channels,
  // write side, loader clock
  input  logic              wr_clk,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [WIDTH-1:0]  wr_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    if (INIT_FILE != "")
      $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH))
      mem[wr_addr] <= wr_data;
  end

  // Synchronous read (memory data register) ...
  logic [WIDTH-1:0] q;
  logic             q_valid;

  always_ff @(posedge clk) begin
    q <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) q_valid <= 1'b0;
    else        q_valid <= rd_en;
  end

  // ... followed by the output registers that drive the channels.
  always_ff @(posedge clk) begin
    if (!rst_n)       channels <= '0;
    else if (q_valid) channels <= q;
    else              channels <= '0;
  end

  a_wr_in_range: assert property (@(posedge wr_clk) wr_en |-> 32'(wr_addr) < DEPTH);

endmodule

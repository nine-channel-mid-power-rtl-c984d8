`timescale 1ns/1fs
// pulse_gen_top: the FPGA half of a nine-channel bipolar pulse pattern
// generator.
//
// A pulse pattern for 2N intermediate channels is stored in an on-chip
// memory, one bit per channel per memory-clock period. A PLL multiplies the
// external clock up to the memory clock (640 MHz from 80 MHz, so a pulse edge
// can be placed in steps of about 1.6 ns) and delays it by `pr` so the output
// lines up with the external system. A count-up counter walks the memory
// addresses and the memory words, registered at the memory output, drive the
// intermediate channels all on the same clock edge. Outside the FPGA each pair
// of intermediate channels (bit 2k positive, bit 2k+1 negative, see
// pulse_gen_pkg) is attenuated, subtracted by a 180 degree combiner and
// amplified into one bipolar output; those analog parts are not in this RTL.
// This chain (PLL -> counter -> memory -> output registers) follows the
// paper's block diagram.
//
// Own choices: the external reset `rst_n` and the `run` enable are
// asynchronous inputs, brought into the memory-clock domain by two-flop
// synchronisers, and the logic is held in reset until the PLL reports lock.
// The sequence length is set at run time by `seq_last` (index of the last
// word); the memory is filled through a write port with its own clock, which
// stands for the host PC's initialisation path.
//
// Timing: after `run` rises, the first word reaches `int_ch` about five
// memory-clock cycles later (two synchroniser stages, the counter and the
// two-stage memory read); from then on one word per cycle, word 0 following
// word seq_last without a gap. When `run` falls, the channels go to 0 and
// the next start begins again at word 0.
module pulse_gen_top #(
  parameter int unsigned N_OUT     = pulse_gen_pkg::N_OUT,
  parameter int unsigned DEPTH     = pulse_gen_pkg::DEPTH,
  parameter int unsigned MULT      = pulse_gen_pkg::MULT,
  parameter int unsigned PHASE_DIV = pulse_gen_pkg::PHASE_DIV,
  parameter int unsigned PR_W      = pulse_gen_pkg::PR_W,
  parameter int unsigned ADDR_W    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter string       INIT_FILE = ""
) (
  // clocking
  input  logic                 ext_clk,
  input  logic                 pll_areset,
  input  logic [PR_W-1:0]      pr,
  output logic                 mem_clk,
  output logic                 pll_locked,
  // control
  input  logic                 rst_n,
  input  logic                 run,
  input  logic [ADDR_W-1:0]    seq_last,
  // pattern loading from the host
  input  logic                 wr_clk,
  input  logic                 wr_en,
  input  logic [ADDR_W-1:0]    wr_addr,
  input  logic [2*N_OUT-1:0]   wr_data,
  // 2N intermediate channels to the analog stages
  output logic [2*N_OUT-1:0]   int_ch,
  output logic                 seq_wrap
);

  pll_model #(
    .MULT      (MULT),
    .PHASE_DIV (PHASE_DIV),
    .PR_W      (PR_W)
  ) u_pll (
    .ext_clk (ext_clk),
    .areset  (pll_areset),
    .pr      (pr),
    .clk_out (mem_clk),
    .locked  (pll_locked)
  );

  // Reset and run enable, synchronised to the memory clock.
  logic [1:0] rst_sync;
  logic [1:0] run_sync;
  logic       rst_n_mem;

  always_ff @(posedge mem_clk) begin
    if (!rst_n || !pll_locked) begin
      rst_sync <= '0;
      run_sync <= '0;
    end else begin
      rst_sync <= {rst_sync[0], 1'b1};
      run_sync <= {run_sync[0], run};
    end
  end
  assign rst_n_mem = rst_sync[1];

  logic [ADDR_W-1:0] addr;
  logic              addr_valid;

  addr_counter #(
    .DEPTH  (DEPTH),
    .ADDR_W (ADDR_W)
  ) u_counter (
    .clk   (mem_clk),
    .rst_n (rst_n_mem),
    .run   (run_sync[1]),
    .last  (seq_last),
    .addr  (addr),
    .wrap  (seq_wrap)
  );

  // The counter moves on the edge that the memory samples its address, so the
  // word read on an edge belongs to the counter value before it: `addr` is
  // read while run is high.
  assign addr_valid = run_sync[1] && rst_n_mem;

  pattern_mem #(
    .DEPTH     (DEPTH),
    .WIDTH     (2 * N_OUT),
    .ADDR_W    (ADDR_W),
    .INIT_FILE (INIT_FILE)
  ) u_mem (
    .clk      (mem_clk),
    .rst_n    (rst_n_mem),
    .rd_en    (addr_valid),
    .rd_addr  (addr),
    .channels (int_ch),
    .wr_clk   (wr_clk),
    .wr_en    (wr_en),
    .wr_addr  (wr_addr),
    .wr_data  (wr_data)
  );

endmodule

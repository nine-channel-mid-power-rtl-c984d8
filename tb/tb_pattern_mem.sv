`timescale 1ns/1fs
// tb_pattern_mem: self-checking test of the pattern memory.
//
// Instance `dut` (64 words, 18 bits) is written through its write port on a
// clock unrelated to the read clock, then read with random addresses and a
// random read enable. A shadow copy kept here predicts each output: the word
// whose address was sampled on the previous read-clock edge (so it appears
// after the second edge), or 0 when that read was not
// enabled. The two-cycle latency is checked exactly this way.
// Instance `dut_init` (16 words) powers up from pattern_width_sweep.hex; its
// contents are checked against the formula the file was made from: bipolar
// output k (k = 0..6) has a positive pulse in words 0..k+1 (bit 2k) and a
// negative pulse in words 8..k+9 (bit 2k+1).
module tb_pattern_mem;
  localparam int unsigned DEPTH  = 64;
  localparam int unsigned WIDTH  = 18;
  localparam int unsigned ADDR_W = $clog2(DEPTH);

  logic              clk = 1'b0, wr_clk = 1'b0;
  logic              rst_n, rd_en, wr_en;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  logic [WIDTH-1:0]  wr_data, channels;
  int unsigned       checks = 0, failures = 0;

  pattern_mem #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  logic            rd_en_i;
  logic [3:0]      rd_addr_i;
  logic [WIDTH-1:0] ch_i;
  pattern_mem #(.DEPTH(16), .WIDTH(WIDTH), .INIT_FILE("tb/pattern_width_sweep.hex")) dut_init (
    .clk(clk), .rst_n(rst_n), .rd_en(rd_en_i), .rd_addr(rd_addr_i), .channels(ch_i),
    .wr_clk(wr_clk), .wr_en(1'b0), .wr_addr('0), .wr_data('0));

  always #0.78125 clk = ~clk;   // 640 MHz
  always #5 wr_clk = ~wr_clk;   // 100 MHz

  initial begin : watchdog
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WIDTH-1:0] shadow [DEPTH];

  function automatic logic [WIDTH-1:0] sweep_word(input int unsigned a);
    logic [WIDTH-1:0] w = '0;
    for (int k = 0; k < 7; k++) begin
      if (a <= k + 1) w[2 * k] = 1'b1;
      if (a >= 8 && a <= k + 9) w[2 * k + 1] = 1'b1;
    end
    return w;
  endfunction

  initial begin
    rst_n = 1'b0; rd_en = 1'b0; rd_addr = '0; wr_en = 1'b0; wr_addr = '0; wr_data = '0;
    rd_en_i = 1'b0; rd_addr_i = '0;
    repeat (4) @(posedge clk);
    #0.1 rst_n = 1'b1;

    // fill through the write port
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge wr_clk);
      wr_en = 1'b1; wr_addr = ADDR_W'(a); wr_data = WIDTH'($urandom);
      shadow[a] = wr_data;
    end
    @(negedge wr_clk) wr_en = 1'b0;

    // random reads; expected output two edges later
    begin
      logic [WIDTH-1:0] exp_q [1];
      exp_q[0] = '0;
      for (int c = 0; c < 2000; c++) begin
        @(negedge clk);
        rd_en   = ($urandom_range(0, 3) != 0);
        rd_addr = ADDR_W'($urandom_range(0, DEPTH - 1));
        @(posedge clk); #0.1;
        checks++;
        if (channels !== exp_q[0]) begin
          failures++;
          if (failures < 10) $display("read mismatch t=%0t got %h exp %h", $time, channels, exp_q[0]);
        end
        // sampled on this edge, visible after the next one
        exp_q[0] = rd_en ? shadow[rd_addr] : '0;
      end
    end

    // rewrite a few words while reading continues elsewhere
    for (int a = 0; a < 8; a++) begin
      @(negedge wr_clk);
      wr_en = 1'b1; wr_addr = ADDR_W'(a); wr_data = WIDTH'(~a);
      shadow[a] = wr_data;
    end
    @(negedge wr_clk) wr_en = 1'b0;
    for (int a = 0; a < 8; a++) begin
      @(negedge clk); rd_en = 1'b1; rd_addr = ADDR_W'(a);
      @(negedge clk); rd_en = 1'b0;
      @(negedge clk);
      checks++;
      if (channels !== shadow[a]) begin failures++; $display("rewrite mismatch %0d", a); end
    end

    // power-up contents
    for (int a = 0; a < 16; a++) begin
      @(negedge clk); rd_en_i = 1'b1; rd_addr_i = 4'(a);
      @(negedge clk); rd_en_i = 1'b0;
      @(negedge clk);
      checks++;
      if (ch_i !== sweep_word(a)) begin failures++; $display("init word %0d got %h exp %h", a, ch_i, sweep_word(a)); end
    end

    // reset clears the output registers
    @(negedge clk); rd_en = 1'b1; rd_addr = '0;
    @(negedge clk); rst_n = 1'b0;
    @(negedge clk); @(negedge clk);
    checks++;
    if (channels !== '0) begin failures++; $display("reset did not clear the outputs"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_gf2_extractor: self-checking test of the streaming GF(2) extractor at
// its default sizes (512 raw bits, 256 output bits, 32-bit words).
//
// The testbench keeps its own random matrix as column vectors and serves the
// segment the extractor asks for. For every block it keeps the raw bits and
// computes the expected result directly from the definition,
// y[r] = parity over c of (M[r][c] AND x[c]), one bit at a time. It checks
// every output block, that out_valid comes exactly one cycle after the last
// word of a block and at no other time, and that at one word per cycle the
// blocks follow each other every RAW_BITS/WORD_W cycles (the 2:1 rate). The
// second half of the test inserts random gaps in in_valid, which must only
// delay the blocks. Special inputs (all-zero and all-one blocks) are fed
// first.
module tb_gf2_extractor;
  localparam int unsigned RAW = 512, OUTB = 256, W = 32, SEGS = RAW / W;
  localparam int unsigned NBLK = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic [W-1:0] in_word;
  logic [3:0] seg;
  logic [W-1:0][OUTB-1:0] cols;
  logic out_valid;
  logic [OUTB-1:0] out_block;

  int checks = 0, failures = 0;
  logic [OUTB-1:0] colv [RAW];
  logic [RAW-1:0]  xq   [$];
  logic [RAW-1:0]  xcur;
  int              wcnt = 0;
  longint          cyc = 0, last_word_cyc = -1, prev_out_cyc = -1;
  int              nout = 0, rate_checks = 0;
  bit              gaps = 1'b0;

  gf2_extractor dut (
    .clk, .rst_n, .in_valid, .in_word, .seg, .cols, .out_valid, .out_block);

  always #5 clk = ~clk;

  always_comb
    for (int j = 0; j < W; j++) cols[j] = colv[seg*W + j];

  function automatic logic [OUTB-1:0] ref_mul(input logic [RAW-1:0] x);
    logic [OUTB-1:0] y;
    for (int r = 0; r < OUTB; r++) begin
      y[r] = 1'b0;
      for (int c = 0; c < RAW; c++) y[r] ^= colv[c][r] & x[c];
    end
    return y;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // Output checker.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [RAW-1:0] x;
      checks++;
      if (xq.size() == 0) begin
        failures++;
        $display("out_valid with no completed block");
      end else begin
        x = xq.pop_front();
        if (out_block !== ref_mul(x)) begin
          failures++;
          $display("block %0d mismatch", nout);
        end
      end
      checks++;
      if (cyc != last_word_cyc + 1) begin
        failures++;
        $display("latency wrong: out at %0d, last word at %0d", cyc, last_word_cyc);
      end
      if (!gaps && prev_out_cyc >= 0) begin
        checks++; rate_checks++;
        if (cyc - prev_out_cyc != longint'(SEGS)) begin
          failures++;
          $display("rate wrong: blocks %0d cycles apart", cyc - prev_out_cyc);
        end
      end
      prev_out_cyc = cyc;
      nout++;
    end
  end

  task automatic send_word(input logic [W-1:0] w);
    in_valid <= 1'b1;
    in_word  <= w;
    @(posedge clk);
    xcur[wcnt*W +: W] = w;
    wcnt++;
    if (wcnt == SEGS) begin
      xq.push_back(xcur);
      wcnt = 0;
      last_word_cyc = cyc;
    end
  endtask

  task automatic idle();
    in_valid <= 1'b0;
    in_word  <= $urandom;
    @(posedge clk);
  endtask

  initial begin
    for (int c = 0; c < RAW; c++)
      for (int k = 0; k < OUTB / 32; k++) colv[c][k*32 +: 32] = $urandom;
    in_valid = 1'b0;
    in_word  = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // all-zero block, all-one block (result: XOR of all columns)
    for (int s = 0; s < SEGS; s++) send_word('0);
    for (int s = 0; s < SEGS; s++) send_word('1);
    // back-to-back random blocks
    for (int b = 0; b < NBLK / 2; b++)
      for (int s = 0; s < SEGS; s++) send_word($urandom);
    // random blocks with gaps in in_valid
    idle();
    gaps = 1'b1;
    for (int b = 0; b < NBLK / 2; b++)
      for (int s = 0; s < SEGS; s++) begin
        send_word($urandom);
        repeat ($urandom_range(2)) idle();
      end
    repeat (5) idle();
    checks++;
    if (nout != NBLK + 2 || xq.size() != 0) begin
      failures++;
      $display("expected %0d blocks, got %0d", NBLK + 2, nout);
    end
    checks++;
    if (rate_checks < NBLK / 2) begin
      failures++;
      $display("too few back-to-back blocks: %0d", rate_checks);
    end
    $display("blocks=%0d rate_checks=%0d", nout, rate_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

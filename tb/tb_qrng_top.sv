// tb_qrng_top: end-to-end test of the FPGA part of the generator, with every
// parameter at its default (512-bit raw blocks, 256-bit extracted blocks,
// 32-bit receiver words, 32-bit matrix load words).
//
// A behavioural raw source stands in for the ASE source, the SFP receiver
// and the FPGA transceiver: biased (P(0) about 0.492) and correlated
// (neighbour correlation about 0.13) bits, 32 per word. The test goes
// through one complete operation:
//   1. reset, with the raw stream already running: words must be discarded
//      while the matrix is incomplete and no block may come out;
//   2. the random matrix is written through the load port (4096 words);
//   3. the raw stream runs without gaps: every extracted block is compared
//      with a reference computed bit by bit from the definition
//      y[r] = parity(M[r][c] AND x[c]), and consecutive blocks must be
//      exactly 16 cycles apart (256 extracted bits per 512 raw bits, i.e.
//      1.25 Gbit/s out of 2.5 Gbit/s);
//   4. the raw stream runs with random gaps: blocks are still checked.
// It counts how often each mechanism happened (discarded words, matrix
// load, full-rate blocks, blocks spanning a gap) and fails if one never
// did. Finally it compares the fraction of ones before and after
// extraction: the raw stream is biased, the extracted one must be within
// 0.5 +- 0.02, and the correlation between neighbouring bits: the raw
// stream's is about 0.13, the extracted stream's must be within +-0.04 of 0
// (bits taken in order, bit 0 of each block first).
module tb_qrng_top;
  import qrng_pkg::*;
  localparam int unsigned SEGS = RAW_BITS / WORD_W;
  localparam int unsigned QPC = OUT_BITS / LOAD_W, NLOAD = RAW_BITS * QPC;
  localparam int unsigned NFULL = 64, NGAP = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic src_en = 1'b0;
  logic rx_valid;
  logic [WORD_W-1:0] rx_data;
  logic mat_ld_en = 1'b0;
  logic [11:0] mat_ld_addr = '0;
  logic [LOAD_W-1:0] mat_ld_data = '0;
  logic mat_loaded;
  logic rn_valid;
  logic [OUT_BITS-1:0] rn_data;

  int checks = 0, failures = 0;
  logic [OUT_BITS-1:0] colv [RAW_BITS];
  logic [RAW_BITS-1:0] xq [$];
  logic [RAW_BITS-1:0] xcur;
  int     wcnt = 0;
  longint cyc = 0, prev_out_cyc = -1;
  bit     gap_phase = 1'b0, gap_in_block = 1'b0;
  bit     gapq [$];
  // mechanism counters
  int n_dropped = 0, n_loads = 0, n_full_rate = 0, n_gap_blocks = 0, n_blocks = 0;
  longint raw_ones = 0, raw_bits = 0, out_ones = 0, out_bits = 0;

  // Running sums for the lag-1 correlation of a bit stream.
  typedef struct {
    bit     prev;
    longint n, s0, s1, s01;
  } corr_t;
  corr_t raw_c = '{default: 0}, out_c = '{default: 0};

  function automatic void corr_add(ref corr_t c, input bit b);
    c.s0  += longint'(c.prev);
    c.s1  += longint'(b);
    c.s01 += longint'(bit'(c.prev & b));
    c.n   += 1;
    c.prev = b;
  endfunction

  function automatic real corr_r1(input corr_t c);
    real n, m0, m1;
    n  = real'(c.n);
    m0 = real'(c.s0) / n;
    m1 = real'(c.s1) / n;
    return (real'(c.s01) / n - m0 * m1) / $sqrt(m0 * (1.0 - m0) * m1 * (1.0 - m1));
  endfunction

  raw_source_model #(.WORD_W(WORD_W)) u_src (
    .clk, .enable(src_en), .valid(rx_valid), .data(rx_data));

  qrng_top dut (
    .clk, .rst_n, .rx_valid, .rx_data,
    .mat_ld_en, .mat_ld_addr, .mat_ld_data, .mat_loaded,
    .rn_valid, .rn_data);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [OUT_BITS-1:0] ref_mul(input logic [RAW_BITS-1:0] x);
    logic [OUT_BITS-1:0] y;
    for (int r = 0; r < OUT_BITS; r++) begin
      y[r] = 1'b0;
      for (int c = 0; c < RAW_BITS; c++) y[r] ^= colv[c][r] & x[c];
    end
    return y;
  endfunction

  // Input monitor: rebuild the raw blocks the extractor should see.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (rx_valid && !mat_loaded) n_dropped++;
      if (!rx_valid && mat_loaded && wcnt != 0) gap_in_block = 1'b1;
      if (rx_valid && mat_loaded) begin
        xcur[wcnt*WORD_W +: WORD_W] = rx_data;
        raw_ones += longint'($countones(rx_data));
        for (int j = 0; j < WORD_W; j++) corr_add(raw_c, rx_data[j]);
        raw_bits += longint'(WORD_W);
        wcnt++;
        if (wcnt == SEGS) begin
          xq.push_back(xcur);
          gapq.push_back(gap_in_block);
          gap_in_block = 1'b0;
          wcnt = 0;
        end
      end
    end
  end

  // Output checker.
  always @(posedge clk) begin
    if (rst_n && rn_valid) begin
      logic [RAW_BITS-1:0] x;
      bit g;
      checks++;
      if (xq.size() == 0) begin
        failures++;
        $display("block out with no raw block complete");
      end else begin
        x = xq.pop_front();
        g = gapq.pop_front();
        if (rn_data !== ref_mul(x)) begin
          failures++;
          $display("block %0d wrong", n_blocks);
        end
        if (g) n_gap_blocks++;
        if (!g && !gap_phase && prev_out_cyc >= 0) begin
          checks++;
          if (cyc - prev_out_cyc == longint'(SEGS)) n_full_rate++;
          else begin
            failures++;
            $display("blocks %0d cycles apart at full rate, expected %0d",
                     cyc - prev_out_cyc, SEGS);
          end
        end
      end
      out_ones += longint'($countones(rn_data));
      for (int j = 0; j < OUT_BITS; j++) corr_add(out_c, rn_data[j]);
      out_bits += longint'(OUT_BITS);
      prev_out_cyc = cyc;
      n_blocks++;
    end
  end

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    real p_raw, p_out, r_raw, r_out;
    for (int c = 0; c < RAW_BITS; c++)
      for (int k = 0; k < QPC; k++) colv[c][k*LOAD_W +: LOAD_W] = $urandom;
    src_en <= 1'b1;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (20) @(posedge clk);
    // 2. load the matrix while the raw stream is running
    for (int a = 0; a < NLOAD; a++) begin
      mat_ld_en   <= 1'b1;
      mat_ld_addr <= 12'(a);
      mat_ld_data <= colv[a / QPC][(a % QPC)*LOAD_W +: LOAD_W];
      @(posedge clk);
    end
    mat_ld_en <= 1'b0;
    @(posedge clk);
    checks++;
    if (!mat_loaded) begin
      failures++;
      $display("matrix not reported loaded");
    end else n_loads++;
    checks++;
    if (n_blocks != 0) begin
      failures++;
      $display("%0d blocks came out before the matrix was loaded", n_blocks);
    end
    // 3. full-rate stream
    wait (n_blocks >= NFULL);
    // 4. stream with gaps
    gap_phase = 1'b1;
    while (n_blocks < NFULL + NGAP) begin
      src_en <= ($urandom_range(3) != 0);
      @(posedge clk);
    end
    src_en <= 1'b0;
    repeat (SEGS + 4) @(posedge clk);

    need("raw words discarded before the matrix was complete", n_dropped);
    need("matrix load", n_loads);
    need("blocks at full rate", n_full_rate);
    need("blocks spanning gaps in the raw stream", n_gap_blocks);
    p_raw = real'(raw_ones) / real'(raw_bits);
    p_out = real'(out_ones) / real'(out_bits);
    checks++;
    if (p_out < 0.48 || p_out > 0.52) begin
      failures++;
      $display("extracted fraction of ones %f out of range", p_out);
    end
    r_raw = corr_r1(raw_c);
    r_out = corr_r1(out_c);
    checks++;
    if (r_out < -0.04 || r_out > 0.04) begin
      failures++;
      $display("extracted neighbour correlation %f out of range", r_out);
    end
    $display("blocks=%0d full_rate=%0d gap_blocks=%0d dropped_words=%0d",
             n_blocks, n_full_rate, n_gap_blocks, n_dropped);
    $display("fraction of ones: raw %f, extracted %f", p_raw, p_out);
    $display("neighbour correlation: raw %f, extracted %f", r_raw, r_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

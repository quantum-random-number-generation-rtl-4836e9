// qrng_top: FPGA part of a quantum random number generator fed by
// amplified spontaneous emission (ASE) through an SFP receiver.
//
// Outside the FPGA, light from an erbium-doped fibre ASE source is
// band-pass filtered and falls on the avalanche photodiode of a standard SFP
// module, whose limiting amplifier turns each sample of the fluctuating
// intensity into a bit (1 above the average, 0 below). The FPGA's
// multi-gigabit receiver samples that stream at 2.5 Gbit/s and hands it to
// this module as WORD_W-bit parallel words (rx_data, rx_valid) on the
// receiver's parallel clock `clk`. The raw bits are biased and correlated;
// the extractor turns every 512 of them into 256 nearly uniform bits by a
// GF(2) multiplication with a fixed random 256x512 matrix, which gives
// 1.25 Gbit/s of extracted bits for the QKD system.
//
// Inside: matrix_store holds the matrix, written through the mat_ld_* port
// from an external seed generator; gf2_extractor accumulates one raw word per
// cycle against the matching matrix columns and emits one OUT_BITS-bit block
// every RAW_BITS/WORD_W words.
//
// Until the whole matrix has been written (mat_loaded low) the raw words are
// discarded and the extractor stays at the start of a block, so no block is
// ever produced from a partly written matrix. This gating, the load port and
// the one-cycle valid pulse on rn_valid are this design's choices; the
// paper gives the function of the extractor, its sizes and its rate.
//
// Timing: rn_valid pulses for one cycle, one cycle after the clock edge that
// accepted the last raw word of a block; rn_data holds the block until the
// next one. With rx_valid high every cycle, a block leaves every
// RAW_BITS/WORD_W cycles (16 at the default sizes: 256 bits per 16 words of
// 32 raw bits, i.e. 1.25 Gbit/s at a 78.125 MHz word clock). The QKD system
// must take each block when rn_valid pulses: there is no backpressure, as the
// raw stream from the receiver cannot be paused either.
//
// A concurrent assertion checks that the matrix is not written again once it
// is complete. It is disabled during reset, which is why lint reports rst_n
// as used both asynchronously (the flip-flops) and synchronously (the
// assertion); the assertion is not hardware, so the warning stands.
module qrng_top
  import qrng_pkg::*;
#(
  parameter int unsigned RAW_BITS_P = RAW_BITS,
  parameter int unsigned OUT_BITS_P = OUT_BITS,
  parameter int unsigned WORD_W_P   = WORD_W,
  parameter int unsigned LOAD_W_P   = LOAD_W,
  localparam int unsigned SEGS      = RAW_BITS_P / WORD_W_P,
  localparam int unsigned NLOAD     = RAW_BITS_P * (OUT_BITS_P / LOAD_W_P),
  localparam int unsigned AW        = $clog2(NLOAD),
  localparam int unsigned SW        = (SEGS > 1) ? $clog2(SEGS) : 1
) (
  input  logic                   clk,          // receiver parallel clock
  input  logic                   rst_n,        // asynchronous, active low
  // raw words from the FPGA receiver (deserialised SFP stream)
  input  logic                   rx_valid,
  input  logic [WORD_W_P-1:0]    rx_data,
  // extractor matrix load, from the external seed generator
  input  logic                   mat_ld_en,
  input  logic [AW-1:0]          mat_ld_addr,
  input  logic [LOAD_W_P-1:0]    mat_ld_data,
  output logic                   mat_loaded,
  // extracted random blocks to the QKD system
  output logic                   rn_valid,
  output logic [OUT_BITS_P-1:0]  rn_data
);

  logic [SW-1:0]                        seg;
  logic [WORD_W_P-1:0][OUT_BITS_P-1:0]  cols;
  logic                                 ext_in_valid;

  matrix_store #(
    .RAW_BITS_P(RAW_BITS_P), .OUT_BITS_P(OUT_BITS_P),
    .WORD_W_P(WORD_W_P), .LOAD_W_P(LOAD_W_P)
  ) u_matrix (
    .clk, .rst_n,
    .ld_en   (mat_ld_en),
    .ld_addr (mat_ld_addr),
    .ld_data (mat_ld_data),
    .loaded  (mat_loaded),
    .rd_seg  (seg),
    .rd_cols (cols)
  );

  // Raw words are used only once the matrix is complete.
  assign ext_in_valid = rx_valid && mat_loaded;

  gf2_extractor #(
    .RAW_BITS_P(RAW_BITS_P), .OUT_BITS_P(OUT_BITS_P), .WORD_W_P(WORD_W_P)
  ) u_extractor (
    .clk, .rst_n,
    .in_valid  (ext_in_valid),
    .in_word   (rx_data),
    .seg       (seg),
    .cols      (cols),
    .out_valid (rn_valid),
    .out_block (rn_data)
  );

  // The matrix must not change while blocks are being extracted.
  property p_no_load_after_done;
    @(posedge clk) disable iff (!rst_n) mat_loaded |-> !mat_ld_en;
  endproperty
  a_no_load_after_done: assert property (p_no_load_after_done)
    else $error("matrix written after it was complete");

endmodule

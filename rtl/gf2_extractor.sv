// gf2_extractor: streaming randomness extractor, y = M * x over GF(2).
//
// Every RAW_BITS consecutive raw bits x form one block; the block is
// multiplied by the random matrix M (OUT_BITS rows, RAW_BITS columns) over
// GF(2), so output bit r is the parity of (row r of M) AND x. With the
// published sizes, 512 raw bits give 256 extracted bits.
//
// How: the product is the XOR of the matrix columns whose raw bit is 1. The
// raw bits arrive as WORD_W-bit words, one per cycle with in_valid, so the
// block is processed word by word: for the s-th word of a block the module
// asks for matrix segment s (columns s*WORD_W .. s*WORD_W+WORD_W-1) on
// `seg`, XORs the selected columns of that segment together and XORs the
// result into an OUT_BITS-bit accumulator. After the last word of the block
// (s = RAW_BITS/WORD_W - 1) the finished result is registered on out_block
// and the accumulator restarts from zero. No raw bit is dropped and there is
// no backpressure: one word per cycle is accepted forever.
//
// Bit order (this design's choice): bit j of the s-th word of a block is raw
// bit x[s*WORD_W + j]; bit j of the word is the earlier-received one for
// lower j.
//
// Timing: out_valid is a one-cycle pulse on the cycle after the clock edge
// that accepted the last word of a block; out_block holds its value until
// the next block ends. At one word per cycle a block ends every
// RAW_BITS/WORD_W cycles, i.e. OUT_BITS/RAW_BITS extracted bits per raw bit.
//
// The word-by-word accumulation is this design's choice: the paper gives
// only the function (512-bit raw block times a random 512x256 matrix) and
// the rate; this structure keeps the logic to WORD_W column selects per
// cycle instead of a 512-input parity tree per output bit.
module gf2_extractor
  import qrng_pkg::*;
#(
  parameter int unsigned RAW_BITS_P = RAW_BITS,
  parameter int unsigned OUT_BITS_P = OUT_BITS,
  parameter int unsigned WORD_W_P   = WORD_W,
  localparam int unsigned SEGS      = RAW_BITS_P / WORD_W_P,
  localparam int unsigned SW        = (SEGS > 1) ? $clog2(SEGS) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // raw words
  input  logic                                 in_valid,
  input  logic [WORD_W_P-1:0]                  in_word,
  // matrix segment request and the columns of that segment
  output logic [SW-1:0]                        seg,
  input  logic [WORD_W_P-1:0][OUT_BITS_P-1:0]  cols,
  // extracted blocks
  output logic                                 out_valid,
  output logic [OUT_BITS_P-1:0]                out_block
);

  if (RAW_BITS_P % WORD_W_P != 0) begin : gen_chk_word
    $error("RAW_BITS must be a multiple of WORD_W");
  end

  logic [OUT_BITS_P-1:0] acc;
  logic [OUT_BITS_P-1:0] partial;
  logic                  last_word;

  // XOR of the columns selected by the 1 bits of the current word.
  always_comb begin
    partial = '0;
    for (int j = 0; j < WORD_W_P; j++)
      if (in_word[j]) partial ^= cols[j];
  end

  assign last_word = (seg == SW'(SEGS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seg       <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
      out_block <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (last_word) begin
          seg       <= '0;
          acc       <= '0;
          out_block <= acc ^ partial;
          out_valid <= 1'b1;
        end else begin
          seg <= seg + 1'b1;
          acc <= acc ^ partial;
        end
      end
    end
  end

endmodule

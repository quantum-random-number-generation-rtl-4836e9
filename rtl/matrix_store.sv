// matrix_store: holds the random binary extractor matrix.
//
// The extractor multiplies each RAW_BITS-bit raw block by a matrix with
// OUT_BITS rows and RAW_BITS columns over GF(2). The matrix itself is random
// and is produced outside the FPGA by a separate random number generator
// (a commercial QRNG in the published setup); this block only stores it.
//
// Storage is organised for the streaming extractor: the matrix is kept as
// column vectors (column c is the OUT_BITS-bit vector that raw bit c adds
// into the result when it is 1), grouped into RAW_BITS/WORD_W segments of
// WORD_W columns each. Segment s holds the columns of raw bits
// s*WORD_W .. s*WORD_W+WORD_W-1, which is exactly what the extractor needs
// while it processes the s-th raw word of a block.
//
// Load port (this design's choice; the paper does not say how the matrix
// reaches the FPGA): one LOAD_W-bit word per cycle with ld_en high.
//   ld_addr = c * (OUT_BITS/LOAD_W) + q
//   ld_data bit b = matrix[row q*LOAD_W + b][column c]
// The matrix is meant to be written once after reset, in increasing address
// order; `loaded` goes high on the cycle after the last address
// (RAW_BITS*OUT_BITS/LOAD_W - 1) is written and stays high until reset.
//
// Read port: rd_cols is the content of segment rd_seg, combinational (the
// store is a register array), so the extractor sees the columns in the same
// cycle as the raw word they belong to.
module matrix_store
  import qrng_pkg::*;
#(
  parameter int unsigned RAW_BITS_P = RAW_BITS,
  parameter int unsigned OUT_BITS_P = OUT_BITS,
  parameter int unsigned WORD_W_P   = WORD_W,
  parameter int unsigned LOAD_W_P   = LOAD_W,
  localparam int unsigned SEGS      = RAW_BITS_P / WORD_W_P,
  localparam int unsigned QPC       = OUT_BITS_P / LOAD_W_P,        // load words per column
  localparam int unsigned NLOAD     = RAW_BITS_P * QPC,             // load words in all
  localparam int unsigned AW        = $clog2(NLOAD),
  localparam int unsigned SW        = (SEGS > 1) ? $clog2(SEGS) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // matrix load
  input  logic                                 ld_en,
  input  logic [AW-1:0]                        ld_addr,
  input  logic [LOAD_W_P-1:0]                  ld_data,
  output logic                                 loaded,
  // column read for the extractor
  input  logic [SW-1:0]                        rd_seg,
  output logic [WORD_W_P-1:0][OUT_BITS_P-1:0]  rd_cols
);

  if (RAW_BITS_P % WORD_W_P != 0) begin : gen_chk_word
    $error("RAW_BITS must be a multiple of WORD_W");
  end
  if (OUT_BITS_P % LOAD_W_P != 0) begin : gen_chk_load
    $error("OUT_BITS must be a multiple of LOAD_W");
  end

  logic [WORD_W_P-1:0][OUT_BITS_P-1:0] mem [SEGS];

  // Split the load address into segment, column within the segment and
  // LOAD_W-bit slice of the column.
  logic [AW-1:0] col_idx;
  logic [SW-1:0] wr_seg;
  logic [AW-1:0] wr_col;
  logic [AW-1:0] wr_q;
  always_comb begin
    col_idx = ld_addr / AW'(QPC);
    wr_q    = ld_addr % AW'(QPC);
    wr_seg  = SW'(col_idx / AW'(WORD_W_P));
    wr_col  = col_idx % AW'(WORD_W_P);
  end

  always_ff @(posedge clk) begin
    if (ld_en)
      mem[wr_seg][wr_col][wr_q*LOAD_W_P +: LOAD_W_P] <= ld_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                    loaded <= 1'b0;
    else if (ld_en && ld_addr == AW'(NLOAD - 1))   loaded <= 1'b1;
  end

  assign rd_cols = mem[rd_seg];

endmodule

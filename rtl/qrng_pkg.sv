// qrng_pkg: sizes shared by the FPGA part of the fibre-ASE quantum random
// number generator.
//
// The raw bit stream from the SFP receiver is cut into blocks of RAW_BITS
// bits, and every block is compressed into OUT_BITS extracted bits by a
// multiplication with a fixed random binary matrix (OUT_BITS rows,
// RAW_BITS columns) over GF(2). RAW_BITS = 512 and OUT_BITS = 256 are the
// sizes of the published generator; with a raw line rate of 2.5 Gbit/s the
// 2:1 compression gives the 1.25 Gbit/s of extracted bits it was built for.
//
// WORD_W, the width of the parallel words delivered by the FPGA transceiver,
// and LOAD_W, the width of the port through which the matrix is written, are
// not given by the published design; 32 bits is this design's choice for both
// (a 32-bit transceiver word at 2.5 Gbit/s means a 78.125 MHz word clock).
package qrng_pkg;

  localparam int unsigned RAW_BITS = 512;  // raw bits per extractor block
  localparam int unsigned OUT_BITS = 256;  // extracted bits per block
  localparam int unsigned WORD_W   = 32;   // transceiver parallel word width
  localparam int unsigned LOAD_W   = 32;   // matrix load port width

endpackage

// raw_source_model: behavioural stand-in for the ASE source, the SFP
// receiver and the FPGA transceiver, for simulation only.
//
// It produces the raw bit stream as the extractor sees it: WORD_W-bit words
// on the parallel clock, bit 0 of a word being the earliest sample. The bits
// imitate the measured statistics of the physical source: a bias towards 1
// (probability of a 0 about 0.492) and a positive correlation between
// neighbouring bits (about 0.13). Each new bit repeats the previous bit with
// probability REPEAT_PPM/1e6, and otherwise is drawn afresh with
// P(1) = ONE_PPM/1e6; the neighbour correlation then equals REPEAT_PPM/1e6.
//
// With `enable` high, `valid` is high every cycle except for random gaps
// (probability GAP_PPM/1e6 per cycle), which model a receiver that is not
// yet aligned; with `enable` low no words are produced.
module raw_source_model #(
  parameter int unsigned WORD_W     = 32,
  parameter int unsigned REPEAT_PPM = 130000,
  parameter int unsigned ONE_PPM    = 508000,
  parameter int unsigned GAP_PPM    = 0
) (
  input  logic              clk,
  input  logic              enable,
  output logic              valid,
  output logic [WORD_W-1:0] data
);
  logic prev_bit = 1'b0;

  initial begin
    valid = 1'b0;
    data  = '0;
  end

  always @(posedge clk) begin
    logic [WORD_W-1:0] w;
    logic b;
    b = prev_bit;
    if (enable && ($urandom_range(1000000, 1) > GAP_PPM)) begin
      for (int j = 0; j < WORD_W; j++) begin
        if ($urandom_range(999999) >= REPEAT_PPM)
          b = ($urandom_range(999999) < ONE_PPM);
        w[j] = b;
      end
      prev_bit <= b;
      data     <= w;
      valid    <= 1'b1;
    end else begin
      data  <= $urandom;
      valid <= 1'b0;
    end
  end
endmodule

// tb_matrix_store: self-checking test of the extractor matrix store at its
// default sizes (512 columns of 256 bits, 32-bit segments and load words).
//
// A random matrix is kept in the testbench as column vectors and written
// through the load port in address order (address = column * 8 + slice).
// The test checks that `loaded` stays low until the last address has been
// written and goes high right after it, then reads every segment and
// compares each of its 32 columns with the testbench's copy. A reset must
// clear `loaded` again while the contents are kept.
module tb_matrix_store;
  localparam int unsigned RAW = 512, OUTB = 256, W = 32, LW = 32;
  localparam int unsigned SEGS = RAW / W, QPC = OUTB / LW, NLOAD = RAW * QPC;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ld_en = 1'b0;
  logic [11:0] ld_addr = '0;
  logic [LW-1:0] ld_data = '0;
  logic loaded;
  logic [3:0] rd_seg = '0;
  logic [W-1:0][OUTB-1:0] rd_cols;

  int checks = 0, failures = 0;
  logic [OUTB-1:0] colv [RAW];

  matrix_store dut (.clk, .rst_n, .ld_en, .ld_addr, .ld_data, .loaded, .rd_seg, .rd_cols);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input string tag);
    for (int s = 0; s < SEGS; s++) begin
      rd_seg = 4'(s);
      #1;
      for (int j = 0; j < W; j++) begin
        checks++;
        if (rd_cols[j] !== colv[s*W + j]) begin
          failures++;
          if (failures < 10) $display("%s: segment %0d column %0d wrong", tag, s, j);
        end
      end
    end
  endtask

  initial begin
    for (int c = 0; c < RAW; c++)
      for (int k = 0; k < QPC; k++) colv[c][k*LW +: LW] = $urandom;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int a = 0; a < NLOAD; a++) begin
      ld_en   <= 1'b1;
      ld_addr <= 12'(a);
      ld_data <= colv[a / QPC][(a % QPC)*LW +: LW];
      @(posedge clk);
      if (a % 1024 == 0 || a == NLOAD - 1) begin
        checks++;
        if (loaded !== 1'b0) begin
          failures++;
          $display("loaded high before the last write (address %0d)", a);
        end
      end
    end
    ld_en <= 1'b0;
    @(posedge clk);
    checks++;
    if (loaded !== 1'b1) begin
      failures++;
      $display("loaded not set after the last write");
    end
    check_all("after load");
    // reset clears the flag, keeps the matrix
    rst_n <= 1'b0;
    @(posedge clk);
    checks++;
    if (loaded !== 1'b0) begin
      failures++;
      $display("loaded not cleared by reset");
    end
    rst_n <= 1'b1;
    check_all("after reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_transpose_buffer: fills the K rows of the buffer with known samples,
// row beat by row beat in a shuffled row order, then reads every column and
// checks that the vector holds the K rows' samples of that column, one clock
// after the read enable. A second fill checks that data is overwritten.
module tb_transpose_buffer;
  import ap_pkg::*;
  localparam int unsigned LOG2_NMAX = 6;
  localparam int unsigned NMAX = 2 ** LOG2_NMAX;

  logic clk = 1'b0;
  logic wr_en, rd_en;
  logic [$clog2(K)-1:0] wr_row;
  logic [LOG2_NMAX-3:0] wr_beat;
  logic [LOG2_NMAX-1:0] rd_col;
  vec_t wr_data, rd_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  transpose_buffer #(.LOG2_NMAX(LOG2_NMAX)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sample_t pattern(int row, int col, int seed);
    sample_t s;
    s.re = 32'(seed * 100000 + row * 1000 + col);
    s.im = -32'(seed * 7 + row * 3 + col * 5);
    return s;
  endfunction

  task automatic fill(int seed);
    for (int i = 0; i < K; i++) begin
      int r = (i * 3 + seed) % K;           // shuffled row order
      for (int b = 0; b < NMAX / K; b++) begin
        wr_en = 1'b1; wr_row = 2'(r); wr_beat = (LOG2_NMAX-2)'(b);
        for (int m = 0; m < K; m++) wr_data[m] = pattern(r, b*K + m, seed);
        @(posedge clk); #1;
      end
    end
    wr_en = 1'b0;
  endtask

  task automatic drain(int seed);
    for (int c = 0; c < NMAX; c++) begin
      rd_en = 1'b1; rd_col = LOG2_NMAX'(c);
      @(posedge clk); #1;
      rd_en = 1'b0;
      for (int m = 0; m < K; m++) begin
        checks++;
        if (rd_data[m] != pattern(m, c, seed)) begin
          failures++;
          if (failures < 10) $display("col %0d row %0d: got %h want %h", c, m, rd_data[m], pattern(m, c, seed));
        end
      end
    end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_row = 0; wr_beat = 0; rd_col = 0; wr_data = '0;
    @(posedge clk); #1;
    fill(1); drain(1);
    fill(2); drain(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// transpose_buffer: on-chip buffer that turns K row results into transposed
// memory vectors.
//
// It holds the 1D FFT results of K consecutive rows, one bank per row, each
// bank NMAX samples deep. The write side takes one row beat at a time: K
// consecutive samples of row wr_row, columns wr_beat*K .. wr_beat*K+K-1. The
// read side returns, for one column c, the K samples of that column from the
// K rows, packed as a single memory vector (sample m = row m). Writing such a
// vector to address c*N/K + g of the output matrix stores row group g of
// the transposed matrix, so the transpose happens on the fly during
// write-back. Reads are synchronous: rd_data is valid the clock after rd_en,
// as in a block RAM. Holding K rows, with K the number of samples in one
// access vector, follows the paper; the banking is this design's own choice.
module transpose_buffer #(
  parameter int unsigned LOG2_NMAX = 15
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(ap_pkg::K)-1:0] wr_row,
  input  logic [LOG2_NMAX-3:0]         wr_beat,
  input  ap_pkg::vec_t                 wr_data,
  input  logic                         rd_en,
  input  logic [LOG2_NMAX-1:0]         rd_col,
  output ap_pkg::vec_t                 rd_data
);
  import ap_pkg::*;
  localparam int unsigned NMAX  = 2 ** LOG2_NMAX;
  localparam int unsigned LOG2K = $clog2(K);

  for (genvar r = 0; r < K; r++) begin : g_bank
    sample_t bank [NMAX];

    always_ff @(posedge clk) begin
      if (wr_en && wr_row == LOG2K'(r)) begin
        for (int m = 0; m < K; m++) bank[{wr_beat, LOG2K'(m)}] <= wr_data[m];
      end
      if (rd_en) rd_data[r] <= bank[rd_col];
    end
  end
endmodule

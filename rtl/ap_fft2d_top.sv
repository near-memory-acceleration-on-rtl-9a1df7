// ap_fft2d_top: FPGA near-memory 2D FFT engine.
//
// The Access Processor (access_processor) drives the off-chip memory port and
// feeds NSETS sets of K = 4 1D FFT accelerators (fft1d_acc); each set takes
// one group of K consecutive rows, one row per accelerator, and several
// groups are computed while the memory port loads and writes others.
// A 2D FFT of an N x N matrix (N = 2**cfg_log2n, up to 2**LOG2_NMAX) is run
// as a row pass and a column pass, each followed by an on-the-fly transpose:
//   source --(row FFTs, transpose)--> temporary --(column FFTs, transpose)--> destination
// The destination holds the 2D FFT (cfg_dir = forward) or inverse 2D FFT
// (cfg_dir = inverse) of the source in the same orientation, scaled by 1/N^2.
// Matrices are row-major, K samples per 256-bit vector, and each base address
// counts vectors. All logical vector addresses go through the programmable
// bank mapping (cfg_bank_pos, cfg_xor_en, cfg_xor_pos) before they leave on
// mem_req_addr.
//
// Ports: host control (where the CAPI/OCAPI host link would attach): pulse
// `start` for one clock while `busy` is low; `done` pulses when the
// destination is complete. Memory port (where a DDR4 or HBM2 controller would
// attach): one request per clock under valid/ready, writes carry a 256-bit
// vector, read data returns in request order on mem_rsp_valid, one vector per
// clock, with no back-pressure. Reset is synchronous and active low.
//
// The blocks and their connections follow the paper's system: memory, Access
// Processor with programmable address mapping, several 1D FFT accelerators,
// an on-chip buffer of K rows, write-back transposed, and enough accelerators
// to keep the memory port busy. The number of accelerators (K*NSETS = 20),
// the port protocols and the number formats are this design's own choices.
module ap_fft2d_top #(
  parameter int unsigned LOG2_NMAX = 15,
  parameter int unsigned BANK_BITS = 5,
  parameter int unsigned NSETS     = 5
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host control
  input  logic                      start,
  input  logic [4:0]                cfg_log2n,
  input  ap_pkg::fft_dir_e          cfg_dir,
  input  logic [ap_pkg::ADDR_W-1:0] cfg_src_base,
  input  logic [ap_pkg::ADDR_W-1:0] cfg_tmp_base,
  input  logic [ap_pkg::ADDR_W-1:0] cfg_dst_base,
  input  logic [4:0]                cfg_bank_pos,
  input  logic                      cfg_xor_en,
  input  logic [4:0]                cfg_xor_pos,
  output logic                      busy,
  output logic                      done,
  // memory port
  output logic                      mem_req_valid,
  input  logic                      mem_req_ready,
  output logic                      mem_req_we,
  output logic [ap_pkg::ADDR_W-1:0] mem_req_addr,
  output ap_pkg::vec_t              mem_req_wdata,
  input  logic                      mem_rsp_valid,
  input  ap_pkg::vec_t              mem_rsp_data
);
  import ap_pkg::*;

  localparam int unsigned NACC = K * NSETS;

  mem_req_t        mem_req;
  logic [4:0]      acc_log2n;
  fft_dir_e        acc_dir;
  logic [NACC-1:0] acc_in_valid, acc_in_ready, acc_out_valid, acc_out_ready;
  vec_t            acc_in_data;
  vec_t            acc_out_data [NACC];

  access_processor #(.LOG2_NMAX(LOG2_NMAX), .BANK_BITS(BANK_BITS), .NSETS(NSETS)) u_ap (
    .clk(clk), .rst_n(rst_n),
    .start(start), .cfg_log2n(cfg_log2n), .cfg_dir(cfg_dir),
    .cfg_src_base(cfg_src_base), .cfg_tmp_base(cfg_tmp_base), .cfg_dst_base(cfg_dst_base),
    .cfg_bank_pos(cfg_bank_pos), .cfg_xor_en(cfg_xor_en), .cfg_xor_pos(cfg_xor_pos),
    .busy(busy), .done(done),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_req(mem_req),
    .mem_rsp_valid(mem_rsp_valid), .mem_rsp_data(mem_rsp_data),
    .acc_log2n(acc_log2n), .acc_dir(acc_dir),
    .acc_in_valid(acc_in_valid), .acc_in_ready(acc_in_ready), .acc_in_data(acc_in_data),
    .acc_out_valid(acc_out_valid), .acc_out_ready(acc_out_ready), .acc_out_data(acc_out_data));

  for (genvar i = 0; i < NACC; i++) begin : g_acc
    fft1d_acc #(.LOG2_NMAX(LOG2_NMAX)) u_acc (
      .clk(clk), .rst_n(rst_n), .cfg_log2n(acc_log2n), .cfg_dir(acc_dir),
      .in_valid(acc_in_valid[i]), .in_ready(acc_in_ready[i]), .in_data(acc_in_data),
      .out_valid(acc_out_valid[i]), .out_ready(acc_out_ready[i]), .out_data(acc_out_data[i]),
      .busy());
  end

  assign mem_req_we    = mem_req.we;
  assign mem_req_addr  = mem_req.addr;
  assign mem_req_wdata = mem_req.wdata;
endmodule

// tb_access_processor: runs the Access Processor with stand-in accelerators
// (acc_model) and a behavioural memory with random back-pressure. For several
// matrix sizes and address mappings it fills the source matrix, runs both
// passes and checks, element by element: the temporary matrix is the
// transpose of the row-processed input, and the destination matrix is the
// column-processed result back in the input's orientation. It also checks the
// number of memory reads and writes (2*N*N/K each), that the run takes at
// least the 4*N*N/K clocks the single memory port needs, and that loading
// overlapped with computation on another accelerator.
module tb_access_processor;
  import ap_pkg::*;
  localparam int unsigned LOG2_NMAX = 6;
  localparam int unsigned BANK_BITS = 5;
  localparam int unsigned NSETS = 3;
  localparam int unsigned NACC = K * NSETS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [4:0] cfg_log2n, cfg_bank_pos, cfg_xor_pos, acc_log2n;
  fft_dir_e cfg_dir, acc_dir;
  logic [ADDR_W-1:0] cfg_src_base, cfg_tmp_base, cfg_dst_base;
  logic cfg_xor_en;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  vec_t mem_rsp_data, acc_in_data;
  logic [NACC-1:0] acc_in_valid, acc_in_ready, acc_out_valid, acc_out_ready, acc_busy;
  vec_t acc_out_data [NACC];
  int checks = 0, failures = 0;
  int overlap_cycles = 0;

  always #5 clk = ~clk;

  access_processor #(.LOG2_NMAX(LOG2_NMAX), .BANK_BITS(BANK_BITS), .NSETS(NSETS)) dut (.*);

  mem_model #(.LAT(5), .STALL_PCT(25)) u_mem (
    .clk(clk), .rst_n(rst_n), .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  for (genvar i = 0; i < NACC; i++) begin : g_acc
    acc_model u_acc (
      .clk(clk), .rst_n(rst_n), .cfg_log2n(acc_log2n),
      .in_valid(acc_in_valid[i]), .in_ready(acc_in_ready[i]), .in_data(acc_in_data),
      .out_valid(acc_out_valid[i]), .out_ready(acc_out_ready[i]), .out_data(acc_out_data[i]),
      .busy(acc_busy[i]));
  end

  // a row being loaded into one accelerator while another computes
  always @(posedge clk)
    if (rst_n && (|acc_in_valid) && (|(acc_busy & ~acc_in_valid))) overlap_cycles++;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference address mapping, built bit by bit
  function automatic logic [ADDR_W-1:0] pmap(logic [ADDR_W-1:0] la, int bp, bit xe, int xp);
    logic [BANK_BITS-1:0] b;
    logic [ADDR_W-1:0] l = '0;
    int li = 0;
    for (int i = 0; i < BANK_BITS; i++) begin
      b[i] = la[bp + i];
      if (xe) b[i] ^= la[xp + i];
    end
    for (int i = 0; i < ADDR_W; i++)
      if (i < bp || i >= bp + BANK_BITS) begin l[li] = la[i]; li++; end
    return {b, (ADDR_W-BANK_BITS)'(l)};
  endfunction

  function automatic sample_t elem(int r, int c, int seed);
    sample_t s;
    s.re = 32'(seed * 1000003 + r * 4099 + c);
    s.im = 32'(seed * 17 + r * 131 - c * 7);
    return s;
  endfunction

  task automatic run(int l2n, int bp, bit xe, int xp, int seed);
    int n = 1 << l2n, nv = n / K;
    logic [ADDR_W-1:0] src = 32'h0000_1000 * seed, tmp = src + 32'h0010_0000, dst = src + 32'h0020_0000;
    longint r0, w0;
    int t0, cycles;
    // fill the source matrix
    for (int r = 0; r < n; r++)
      for (int v = 0; v < nv; v++) begin
        vec_t d;
        for (int m = 0; m < K; m++) d[m] = elem(r, v*K + m, seed);
        u_mem.poke(pmap(src + r*nv + v, bp, xe, xp), d);
      end
    r0 = u_mem.n_reads; w0 = u_mem.n_writes;
    cfg_log2n = 5'(l2n); cfg_dir = FFT_FWD;
    cfg_src_base = src; cfg_tmp_base = tmp; cfg_dst_base = dst;
    cfg_bank_pos = 5'(bp); cfg_xor_en = xe; cfg_xor_pos = 5'(xp);
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    t0 = 0;
    while (!done) begin @(posedge clk); #1; t0++; end
    cycles = t0;
    // temporary matrix: tmp[c][r] = in[r][c] + i*c
    for (int c = 0; c < n; c++)
      for (int r = 0; r < n; r++) begin
        vec_t d = u_mem.peek(pmap(tmp + c*nv + r/K, bp, xe, xp));
        sample_t e = elem(r, c, seed);
        e.im = e.im + c;
        checks++;
        if (d[r%K] != e) begin
          failures++;
          if (failures < 10) $display("N=%0d tmp[%0d][%0d] got %h want %h", n, c, r, d[r%K], e);
        end
      end
    // destination: out[r][c] = in[r][c] + i*(r+c)
    for (int r = 0; r < n; r++)
      for (int c = 0; c < n; c++) begin
        vec_t d = u_mem.peek(pmap(dst + r*nv + c/K, bp, xe, xp));
        sample_t e = elem(r, c, seed);
        e.im = e.im + r + c;
        checks++;
        if (d[c%K] != e) begin
          failures++;
          if (failures < 10) $display("N=%0d out[%0d][%0d] got %h want %h", n, r, c, d[c%K], e);
        end
      end
    checks += 3;
    if (u_mem.n_reads - r0 != 2*n*nv) begin failures++; $display("reads %0d", u_mem.n_reads - r0); end
    if (u_mem.n_writes - w0 != 2*n*nv) begin failures++; $display("writes %0d", u_mem.n_writes - w0); end
    if (cycles < 4*n*nv) begin failures++; $display("finished in %0d clocks, below the memory bound", cycles); end
    $display("N=%0d: %0d clocks, memory-bound minimum %0d", n, cycles, 4*n*nv);
    repeat (3) @(posedge clk); #1;
  endtask

  initial begin
    start = 0; cfg_log2n = 5'd3; cfg_dir = FFT_FWD; cfg_src_base = '0; cfg_tmp_base = '0;
    cfg_dst_base = '0; cfg_bank_pos = '0; cfg_xor_en = 0; cfg_xor_pos = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk); #1;
    run(3, 0, 0, 0, 1);
    run(4, 2, 1, 12, 2);
    run(6, 4, 1, 20, 3);
    run(5, 1, 0, 0, 4);
    checks++;
    if (overlap_cycles == 0) begin failures++; $display("no load/compute overlap seen"); end
    $display("overlap cycles %0d, memory stalls %0d", overlap_cycles, u_mem.n_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

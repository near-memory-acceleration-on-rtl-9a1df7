// tb_ap_fft2d_top: end-to-end test of the near-memory 2D FFT engine with a
// behavioural memory that applies random back-pressure. Each run writes a
// random complex N x N matrix into memory, starts the engine and waits for
// done. It then compares every sample of the temporary matrix (row FFTs,
// transposed) and of the destination matrix (full 2D FFT) with a
// double-precision reference computed here, scaled by 1/N and 1/N^2 as the
// engine scales each butterfly stage by 1/2. Runs cover forward and inverse
// transforms, several sizes and both plain and XOR bank mappings.
// Only the top's ports are observed. Mechanisms counted (a mechanism never
// seen is a failure): rows computed concurrently (a run finishing in fewer
// clocks than its row FFTs would need one after another), memory
// back-pressure, a correct row pass followed by the column pass, transposed
// write-back, inverse mode, XOR bank mapping, and memory-bound runs (for
// N >= 32 the port, apart from stall clocks, is busy at least 85% of the
// time). A run must also take at least the 4*N*N/K clocks of its memory
// traffic over the single port.
module tb_ap_fft2d_top;
  import ap_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned LOG2_NMAX = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [4:0] cfg_log2n, cfg_bank_pos, cfg_xor_pos;
  fft_dir_e cfg_dir;
  logic [ADDR_W-1:0] cfg_src_base, cfg_tmp_base, cfg_dst_base, mem_req_addr;
  logic cfg_xor_en, mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  vec_t mem_req_wdata, mem_rsp_data;
  mem_req_t req;
  int checks = 0, failures = 0;
  int n_membound = 0, n_overlap = 0, n_pass_switch = 0, n_twrites = 0, n_inverse = 0, n_xor = 0;
  longint stalls0;

  always #5 clk = ~clk;

  ap_fft2d_top #(.LOG2_NMAX(LOG2_NMAX)) dut (.*);

  assign req = '{we: mem_req_we, addr: mem_req_addr, wdata: mem_req_wdata};
  mem_model #(.LAT(7), .STALL_PCT(20)) u_mem (
    .clk(clk), .rst_n(rst_n), .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(req), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always @(posedge clk) if (rst_n) begin
    if (mem_req_valid && mem_req_ready && mem_req_we) n_twrites++;
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] pmap(logic [ADDR_W-1:0] la, int bp, bit xe, int xp);
    logic [4:0] b;
    logic [ADDR_W-1:0] l = '0;
    int li = 0;
    for (int i = 0; i < 5; i++) begin
      b[i] = la[bp + i];
      if (xe) b[i] ^= la[xp + i];
    end
    for (int i = 0; i < ADDR_W; i++)
      if (i < bp || i >= bp + 5) begin l[li] = la[i]; li++; end
    return {b, (ADDR_W-5)'(l)};
  endfunction

  task automatic run(int l2n, fft_dir_e d, int bp, bit xe, int xp, int amp);
    int n = 1 << l2n, nv = n / K;
    logic [ADDR_W-1:0] src = 32'h0001_0000, tmp = 32'h0100_0000, dst = 32'h0200_0000;
    real xr[], xi[], rr[], ri[], tr[], ti[];
    int bad_t = 0;
    real tol = 8.0 + real'(amp >> 18) * real'(2 * l2n);
    int cycles = 0, bad = 0;
    xr = new[n*n]; xi = new[n*n];
    for (int i = 0; i < n*n; i++) begin
      xr[i] = real'(int'($urandom_range(2*amp)) - amp);
      xi[i] = real'(int'($urandom_range(2*amp)) - amp);
    end
    for (int r = 0; r < n; r++)
      for (int v = 0; v < nv; v++) begin
        vec_t w;
        for (int m = 0; m < K; m++) begin
          w[m].re = $rtoi(xr[r*n + v*K + m]);
          w[m].im = $rtoi(xi[r*n + v*K + m]);
        end
        u_mem.poke(pmap(src + r*nv + v, bp, xe, xp), w);
      end
    // reference: rows, then columns, then 1/N^2
    rr = new[n]; ri = new[n];
    for (int r = 0; r < n; r++) begin
      for (int c = 0; c < n; c++) begin rr[c] = xr[r*n+c]; ri[c] = xi[r*n+c]; end
      fft_inplace(rr, ri, n, (d == FFT_FWD) ? -1.0 : 1.0);
      for (int c = 0; c < n; c++) begin xr[r*n+c] = rr[c]; xi[r*n+c] = ri[c]; end
    end
    // after the row pass: row results divided by N, stored transposed
    tr = new[n*n]; ti = new[n*n];
    for (int i = 0; i < n*n; i++) begin tr[i] = xr[i] / real'(n); ti[i] = xi[i] / real'(n); end
    for (int c = 0; c < n; c++) begin
      for (int r = 0; r < n; r++) begin rr[r] = xr[r*n+c]; ri[r] = xi[r*n+c]; end
      fft_inplace(rr, ri, n, (d == FFT_FWD) ? -1.0 : 1.0);
      for (int r = 0; r < n; r++) begin
        xr[r*n+c] = rr[r] / real'(n*n); xi[r*n+c] = ri[r] / real'(n*n);
      end
    end
    stalls0 = u_mem.n_stalls;
    cfg_log2n = 5'(l2n); cfg_dir = d;
    cfg_src_base = src; cfg_tmp_base = tmp; cfg_dst_base = dst;
    cfg_bank_pos = 5'(bp); cfg_xor_en = xe; cfg_xor_pos = 5'(xp);
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    while (!done) begin @(posedge clk); #1; cycles++; end
    for (int r = 0; r < n; r++)
      for (int c = 0; c < n; c++) begin
        vec_t w = u_mem.peek(pmap(dst + r*nv + c/K, bp, xe, xp));
        checks++;
        if (fabs(real'(w[c%K].re) - xr[r*n+c]) > tol || fabs(real'(w[c%K].im) - xi[r*n+c]) > tol) begin
          failures++; bad++;
          if (bad < 6) $display("N=%0d dir=%0d out[%0d][%0d] got (%0d,%0d) want (%0.1f,%0.1f)",
                                n, d, r, c, w[c%K].re, w[c%K].im, xr[r*n+c], xi[r*n+c]);
        end
      end
    // temporary matrix: tmp[c][r] = row-FFT(in)[r][c] / N
    for (int c = 0; c < n; c++)
      for (int r = 0; r < n; r++) begin
        vec_t w = u_mem.peek(pmap(tmp + c*nv + r/K, bp, xe, xp));
        checks++;
        if (fabs(real'(w[r%K].re) - tr[r*n+c]) > tol || fabs(real'(w[r%K].im) - ti[r*n+c]) > tol) begin
          failures++; bad_t++;
          if (bad_t < 6) $display("N=%0d tmp[%0d][%0d] got (%0d,%0d) want (%0.1f,%0.1f)",
                                  n, c, r, w[r%K].re, w[r%K].im, tr[r*n+c], ti[r*n+c]);
        end
      end
    if (bad_t == 0) n_pass_switch++;
    // row FFTs one after another would need N*N*log2(N)/2 clocks per pass
    if (cycles < n*n*l2n) n_overlap++;
    checks++;
    if (cycles < 4*n*nv) begin failures++; $display("N=%0d done after %0d clocks, below memory bound", n, cycles); end
    // with enough accelerators the run is memory bound: apart from stalls,
    // the port must be busy at least 85% of the time for N >= 32
    if (n >= 32) begin
      checks++;
      if (real'(4*n*nv) < 0.85 * real'(cycles - int'(u_mem.n_stalls - stalls0))) begin
        failures++;
        $display("N=%0d not memory bound: %0d clocks without stalls for %0d transfers",
                 n, cycles - int'(u_mem.n_stalls - stalls0), 4*n*nv);
      end else n_membound++;
    end
    if (d == FFT_INV) n_inverse++;
    if (xe) n_xor++;
    $display("N=%0d dir=%0d: %0d clocks (memory traffic alone %0d), %0d stalls, %0d mismatches",
             n, d, cycles, 4*n*nv, u_mem.n_stalls - stalls0, bad);
    repeat (2) @(posedge clk); #1;
  endtask

  initial begin
    start = 0; cfg_log2n = 5'd3; cfg_dir = FFT_FWD; cfg_src_base = '0; cfg_tmp_base = '0;
    cfg_dst_base = '0; cfg_bank_pos = '0; cfg_xor_en = 0; cfg_xor_pos = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk); #1;
    run(3, FFT_FWD, 0, 0, 0, 1 << 20);
    run(4, FFT_INV, 3, 1, 15, 1 << 20);
    run(6, FFT_FWD, 6, 1, 20, 1 << 22);
    run(5, FFT_INV, 0, 0, 0, 1 << 16);
    checks += 7;
    if (n_membound == 0)    begin failures++; $display("no run was memory bound"); end
    if (n_overlap == 0)     begin failures++; $display("load/compute overlap never happened"); end
    if (u_mem.n_stalls == 0) begin failures++; $display("memory back-pressure never happened"); end
    if (n_pass_switch == 0) begin failures++; $display("column pass never reached"); end
    if (n_twrites == 0)     begin failures++; $display("no transposed write-back"); end
    if (n_inverse == 0)     begin failures++; $display("inverse mode never run"); end
    if (n_xor == 0)         begin failures++; $display("XOR bank mapping never used"); end
    $display("mechanisms: memory-bound=%0d overlap=%0d stalls=%0d column-pass=%0d transposed-writes=%0d inverse=%0d xor-map=%0d",
             n_membound, n_overlap, u_mem.n_stalls, n_pass_switch, n_twrites, n_inverse, n_xor);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

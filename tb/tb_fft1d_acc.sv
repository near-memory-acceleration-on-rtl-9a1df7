// tb_fft1d_acc: self-checking test of the 1D FFT accelerator.
// Loads random complex rows of several lengths, forward and inverse, compares
// every output sample with a double-precision DFT computed here (divided by N,
// as the accelerator scales by 1/2 per stage) and checks that the compute phase
// takes log2(N)*N/2 clocks. Also checks load/unload beat counts.
module tb_fft1d_acc;
  import ap_pkg::*;
  localparam int unsigned LOG2_NMAX = 7;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0] cfg_log2n;
  fft_dir_e cfg_dir;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  vec_t in_data, out_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fft1d_acc #(.LOG2_NMAX(LOG2_NMAX)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic run(input int l2n, input fft_dir_e d, input int amp);
    int n = 1 << l2n;
    int xr[], xi[];
    real er, ei, ang, sgn;
    int calc_cycles;
    // rounding bound: a few LSBs plus twiddle quantisation (2^-17) growing per stage
    real tol = 8.0 + real'(amp >> 18) * real'(l2n);
    xr = new[n]; xi = new[n];
    for (int i = 0; i < n; i++) begin
      xr[i] = int'($urandom_range(2*amp)) - amp;
      xi[i] = int'($urandom_range(2*amp)) - amp;
    end
    // load
    cfg_log2n = 5'(l2n); cfg_dir = d;
    for (int b = 0; b < n / K; b++) begin
      in_valid = 1'b1;
      for (int m = 0; m < K; m++) begin
        in_data[m].re = xr[b*K+m];
        in_data[m].im = xi[b*K+m];
      end
      do @(posedge clk); while (!in_ready);
      #1;
    end
    in_valid = 1'b0;
    // compute: count busy clocks
    calc_cycles = 0;
    while (!out_valid) begin
      @(posedge clk); #1;
      if (busy || out_valid) calc_cycles++;
    end
    checks++;
    if (calc_cycles != l2n * n / 2) begin
      failures++;
      $display("N=%0d: compute took %0d clocks, expected %0d", n, calc_cycles, l2n * n / 2);
    end
    // unload with some back-pressure
    sgn = (d == FFT_FWD) ? -1.0 : 1.0;
    for (int b = 0; b < n / K; b++) begin
      out_ready = 1'b0;
      if ($urandom_range(3) == 0) begin @(posedge clk); #1; end
      checks++;
      if (!out_valid) begin failures++; $display("out_valid dropped at beat %0d", b); end
      for (int m = 0; m < K; m++) begin
        int k = b*K + m;
        er = 0.0; ei = 0.0;
        for (int i = 0; i < n; i++) begin
          ang = sgn * 2.0 * PI * real'((i * k) % n) / real'(n);
          er += real'(xr[i]) * $cos(ang) - real'(xi[i]) * $sin(ang);
          ei += real'(xr[i]) * $sin(ang) + real'(xi[i]) * $cos(ang);
        end
        er /= real'(n); ei /= real'(n);
        checks++;
        if (fabs(real'(out_data[m].re) - er) > tol || fabs(real'(out_data[m].im) - ei) > tol) begin
          failures++;
          if (failures < 10)
            $display("N=%0d dir=%0d k=%0d got (%0d,%0d) want (%0.1f,%0.1f)", n, d, k,
                     out_data[m].re, out_data[m].im, er, ei);
        end
      end
      out_ready = 1'b1;
      @(posedge clk); #1;
    end
    out_ready = 1'b0;
    checks++;
    if (!in_ready) begin failures++; $display("not back in LOAD after unload"); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0; cfg_log2n = 5'd3; cfg_dir = FFT_FWD;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    #1;
    run(3, FFT_FWD, 1000);
    run(4, FFT_FWD, 1 << 20);
    run(7, FFT_FWD, 1 << 20);
    run(7, FFT_INV, 1 << 20);
    run(5, FFT_INV, 1 << 24);
    run(6, FFT_FWD, 1 << 28);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// fft1d_acc: near-memory 1D FFT accelerator.
//
// One accelerator transforms one row (or, in the second pass, one column) of
// the image. It works in three phases on a local sample memory of NMAX words:
//   LOAD   - accepts N/K beats of K samples (one 256-bit memory vector per beat)
//            and stores sample i at address bitreverse(i), ready for an
//            in-place decimation-in-time FFT.
//   CALC   - runs log2(N) radix-2 stages, one butterfly per clock, N/2
//            butterflies per stage: log2(N)*N/2 clocks in all. Each stage scales
//            by 1/2, so the result is X[k]/N (forward) or x[n]/N (inverse,
//            which uses conjugated twiddles).
//   UNLOAD - presents the result in natural order, K samples per beat.
// The length N = 2**cfg_log2n (3 <= cfg_log2n <= LOG2_NMAX) and the direction
// are taken at the first beat of a load. Reset is synchronous, active low.
// Handshakes are valid/ready; a beat
// moves on a clock edge where both are high. `busy` is high during CALC, so a
// controller can see that this accelerator computes while it loads others.
//
// The paper uses several 1D FFT accelerators in parallel and takes their
// design from earlier work without describing it; only their function (a 1D
// FFT, and its inverse) is the paper's. The memory-based radix-2 structure,
// the fixed-point format and the beat-wise load/unload are this design's own.
module fft1d_acc #(
  parameter int unsigned LOG2_NMAX = 15
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [4:0]           cfg_log2n,
  input  ap_pkg::fft_dir_e     cfg_dir,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  ap_pkg::vec_t         in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output ap_pkg::vec_t         out_data,
  output logic                 busy
);
  import ap_pkg::*;
  localparam int unsigned NMAX  = 2 ** LOG2_NMAX;
  localparam int unsigned LOG2K = $clog2(K);

  typedef enum logic [1:0] { S_LOAD, S_CALC, S_UNLOAD } state_e;

  state_e                 state;
  logic [4:0]             log2n;
  fft_dir_e               dir;
  logic [LOG2_NMAX-1:0]   beat;      // beat counter for LOAD / UNLOAD
  logic [4:0]             stage;     // current stage s
  logic [LOG2_NMAX-2:0]   bfly;      // butterfly index within the stage
  sample_t                mem [NMAX];

  logic [4:0]             cur_log2n;
  logic [LOG2_NMAX-1:0]   last_beat, last_bfly_full;
  logic [LOG2_NMAX-1:0]   i0, i1, jmask;
  logic [LOG2_NMAX-2:0]   tw_idx;
  logic signed [TW_W-1:0] w_re, w_im_raw, w_im;
  sample_t                y0, y1;

  // Length of the transform being loaded (first beat) or already latched.
  assign cur_log2n = (state == S_LOAD && beat == '0) ? cfg_log2n : log2n;
  assign last_beat = LOG2_NMAX'((1 << (cur_log2n - 5'(LOG2K))) - 1);
  assign last_bfly_full = LOG2_NMAX'((1 << (log2n - 5'd1)) - 1);

  function automatic logic [LOG2_NMAX-1:0] bitrev(input logic [LOG2_NMAX-1:0] x,
                                                   input logic [4:0] n);
    logic [LOG2_NMAX-1:0] r;
    for (int b = 0; b < LOG2_NMAX; b++) r[b] = x[LOG2_NMAX-1-b];
    return r >> (5'(LOG2_NMAX) - n);
  endfunction

  // Butterfly addressing for stage s: pairs (i0, i0 + 2**s).
  always_comb begin
    jmask  = LOG2_NMAX'((1 << stage) - 1);
    i0     = ((LOG2_NMAX'(bfly) >> stage) << (stage + 5'd1)) | (LOG2_NMAX'(bfly) & jmask);
    i1     = i0 | LOG2_NMAX'(1 << stage);
    tw_idx = (LOG2_NMAX-1)'((LOG2_NMAX'(bfly) & jmask) << (5'(LOG2_NMAX) - 5'd1 - stage));
  end

  twiddle_rom #(.LOG2_NMAX(LOG2_NMAX)) u_tw (.idx(tw_idx), .w_re(w_re), .w_im(w_im_raw));
  assign w_im = (dir == FFT_INV) ? -w_im_raw : w_im_raw;

  fft_butterfly u_bf (.a(mem[i0]), .b(mem[i1]), .w_re(w_re), .w_im(w_im), .y0(y0), .y1(y1));

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_UNLOAD);
  assign busy      = (state == S_CALC);

  always_comb begin
    for (int m = 0; m < K; m++) out_data[m] = mem[(beat << LOG2K) | LOG2_NMAX'(m)];
  end

  // Sample memory: K writes per load beat, two per butterfly.
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      for (int m = 0; m < K; m++)
        mem[bitrev((beat << LOG2K) | LOG2_NMAX'(m), cur_log2n)] <= in_data[m];
    end else if (state == S_CALC) begin
      mem[i0] <= y0;
      mem[i1] <= y1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_LOAD;
      log2n <= 5'd3;
      dir   <= FFT_FWD;
      beat  <= '0;
      stage <= '0;
      bfly  <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (beat == '0) begin
            log2n <= cfg_log2n;
            dir   <= cfg_dir;
          end
          if (beat == last_beat) begin
            beat  <= '0;
            stage <= '0;
            bfly  <= '0;
            state <= S_CALC;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_CALC: begin
          if (LOG2_NMAX'(bfly) == last_bfly_full) begin
            bfly <= '0;
            if (stage == log2n - 5'd1) state <= S_UNLOAD;
            else                       stage <= stage + 5'd1;
          end else begin
            bfly <= bfly + 1'b1;
          end
        end
        S_UNLOAD: if (out_ready) begin
          if (beat == last_beat) begin
            beat  <= '0;
            state <= S_LOAD;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // The configured length must fit the local memory and hold at least 2K samples.
  a_len: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LOAD && in_valid && beat == '0) |-> (cfg_log2n >= 5'(LOG2K + 1) && cfg_log2n <= 5'(LOG2_NMAX)));
endmodule

// acc_model: stand-in for a 1D FFT accelerator, for testing the Access
// Processor alone. It has the accelerator's ports and phases (load N/K beats,
// stay busy for a random time, unload N/K beats), but instead of an FFT it
// adds the sample's index inside the row to the imaginary part, so the
// testbench can tell which index each sample had when it was processed.
module acc_model (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [4:0]       cfg_log2n,
  input  logic             in_valid,
  output logic             in_ready,
  input  ap_pkg::vec_t     in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output ap_pkg::vec_t     out_data,
  output logic             busy
);
  import ap_pkg::*;
  typedef enum logic [1:0] { M_LOAD, M_CALC, M_UNLOAD } st_e;
  st_e  st;
  int   nb, beat, wait_cnt;
  vec_t buf_q [];

  assign in_ready  = (st == M_LOAD);
  assign out_valid = (st == M_UNLOAD);
  assign busy      = (st == M_CALC);
  always_comb out_data = (st == M_UNLOAD) ? buf_q[beat] : '0;

  always @(posedge clk) begin
    if (!rst_n) begin
      st <= M_LOAD; beat <= 0; nb <= 0; wait_cnt <= 0;
      buf_q = new[1];
    end else begin
      case (st)
        M_LOAD: if (in_valid) begin
          vec_t v;
          if (beat == 0) begin
            nb = (1 << cfg_log2n) / K;
            buf_q = new[nb];
          end
          v = in_data;
          for (int m = 0; m < K; m++) v[m].im = v[m].im + (beat * K + m);
          buf_q[beat] = v;
          if (beat == nb - 1) begin
            beat <= 0; wait_cnt <= $urandom_range(40); st <= M_CALC;
          end else beat <= beat + 1;
        end
        M_CALC: if (wait_cnt == 0) st <= M_UNLOAD; else wait_cnt <= wait_cnt - 1;
        M_UNLOAD: if (out_ready) begin
          if (beat == nb - 1) begin beat <= 0; st <= M_LOAD; end
          else beat <= beat + 1;
        end
        default: st <= M_LOAD;
      endcase
    end
  end
endmodule

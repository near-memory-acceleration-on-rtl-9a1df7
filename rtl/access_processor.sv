// access_processor: memory-side scheduler of the near-memory 2D FFT.
//
// The Access Processor owns the memory port and runs a 2D FFT of an N x N
// matrix of complex samples as two passes of 1D FFTs plus an on-the-fly
// transpose (row pass: source -> temporary, column pass: temporary ->
// destination). Each pass walks the matrix in groups of K consecutive rows,
// K being the number of samples in one 256-bit memory vector. There are
// NSETS sets of K accelerators; group g uses set g mod NSETS, row i of the
// group goes to accelerator i of that set. Four activities run concurrently:
//   load   - reads the K rows of the next group (N vectors, contiguous in
//            memory) as soon as its accelerator set is free. An accelerator
//            starts computing the moment its row is in, so rows and whole
//            groups are loaded while earlier ones are still being computed.
//   route  - read data returns in order; each vector goes to the accelerator
//            of the row it belongs to.
//   drain  - when the transpose buffer is empty, moves the results of the
//            oldest loaded group from its accelerators into the buffer (this
//            frees the set for a new group).
//   write  - when the buffer holds a group g, reads it column by column;
//            column c is one vector, written to address c*N/K + g of the output
//            matrix, so the matrix is stored transposed.
// Writes have priority over reads on the memory port; a request that is not
// accepted is held unchanged. A pass ends when all N/K groups are written;
// the column pass only starts then, because each of its rows depends on every
// group of the row pass. After the second pass `done` pulses for one clock.
// As each pass transposes, the result is in the input's orientation:
// out = FFT_cols(FFT_rows(in)), scaled by 1/N^2 by the accelerators.
// Logical addresses pass through addr_map before reaching the memory port.
//
// Interfaces: `start` (one clock, while !busy) latches the configuration:
// log2 of N, direction, the three matrix base addresses (in vectors) and the
// bank mapping. Memory requests use valid/ready; read data returns in order
// on mem_rsp_valid, one vector per clock, without back-pressure (the
// accelerator receiving it is always in its load phase). Accelerator ports
// are valid/ready per accelerator. Reset is synchronous, active low.
//
// From the paper: loading rows into some accelerators while others compute,
// buffering K row results on chip, the transposing write-back and the repeat
// for the columns, and enough accelerators to keep the memory busy. The
// paper's AP is programmed through a B-FSM whose workings it does not give;
// here the schedule is a fixed set of counters. NSETS, the write-first
// arbitration and the single transpose buffer are this design's own choices.
// NSETS = 5 is the smallest number of sets for which a row FFT of the
// largest size (log2(N)*N/2 clocks, N = 2**15) finishes while the other
// NSETS-1 groups pass through the port (2N clocks each).
module access_processor #(
  parameter int unsigned LOG2_NMAX = 15,
  parameter int unsigned BANK_BITS = 5,
  parameter int unsigned NSETS     = 5,
  localparam int unsigned NACC     = ap_pkg::K * NSETS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // control (host side)
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
  output ap_pkg::mem_req_t          mem_req,
  input  logic                      mem_rsp_valid,
  input  ap_pkg::vec_t              mem_rsp_data,
  // accelerators: accelerator s*K + i serves row i of the groups of set s
  output logic [4:0]                acc_log2n,
  output ap_pkg::fft_dir_e          acc_dir,
  output logic [NACC-1:0]           acc_in_valid,
  input  logic [NACC-1:0]           acc_in_ready,
  output ap_pkg::vec_t              acc_in_data,
  input  logic [NACC-1:0]           acc_out_valid,
  output logic [NACC-1:0]           acc_out_ready,
  input  ap_pkg::vec_t              acc_out_data [NACC]
);
  import ap_pkg::*;
  localparam int unsigned LOG2K = $clog2(K);
  localparam int unsigned CW    = LOG2_NMAX + 1;          // counts 0 .. N
  localparam int unsigned SW    = (NSETS > 1) ? $clog2(NSETS) : 1;
  localparam int unsigned AW    = $clog2(NACC);

  typedef enum logic [1:0] { S_IDLE, S_RUN } state_e;

  state_e              state;
  logic                pass;                 // 0: rows, 1: columns
  logic [4:0]          log2n;
  fft_dir_e            dir;
  logic [ADDR_W-1:0]   src_base, tmp_base, dst_base, rd_base, wr_base;
  logic [4:0]          bank_pos, xor_pos;
  logic                xor_en;
  logic [CW-1:0]       n_all, n_grps;        // N and N/K
  logic [4:0]          bsh;                  // log2(N/K): beats per row

  // group counters of the current pass (all count 0 .. N/K)
  logic [CW-1:0]       ld_grp;               // groups whose reads were all issued
  logic [CW-1:0]       dr_grp;               // groups drained into the buffer
  logic [CW-1:0]       wr_grp;               // groups written back
  logic [SW-1:0]       ld_set, rs_set, dr_set;
  // beat counters inside a group
  logic [CW-1:0]       rd_cnt, rsp_cnt, drn_cnt, wr_cnt;
  logic [CW-1:0]       col_q;
  logic                tb_valid_q;

  // transpose buffer
  logic                 tb_wr_en, tb_rd_en;
  logic [LOG2K-1:0]     tb_wr_row;
  logic [LOG2_NMAX-3:0] tb_wr_beat;
  vec_t                 tb_wr_data, tb_rd_data;

  // address mapping
  logic [ADDR_W-1:0]           laddr, paddr;
  logic [BANK_BITS-1:0]        map_bank;
  logic [ADDR_W-BANK_BITS-1:0] map_local;

  logic             load_ok, drain_ok, write_ok, sel_wr, lock_q, lock_wr_q;
  logic             mem_fire, rd_fire, wr_fire;
  logic [AW-1:0]    rsp_acc, drn_acc;

  assign bsh       = log2n - 5'(LOG2K);
  assign n_all     = CW'(1) << log2n;
  assign n_grps    = CW'(1) << bsh;
  assign rd_base   = pass ? tmp_base : src_base;
  assign wr_base   = pass ? dst_base : tmp_base;
  assign busy      = (state != S_IDLE);
  assign acc_log2n = log2n;
  assign acc_dir   = dir;

  // ---------------- activity conditions ----------------
  // load: groups left, and the set of the next group has been drained
  assign load_ok  = (state == S_RUN) && (ld_grp != n_grps) &&
                    (ld_grp < dr_grp + CW'(NSETS));
  // drain: a loaded group waits and the transpose buffer is empty
  assign drain_ok = (state == S_RUN) && (dr_grp != ld_grp) && (dr_grp == wr_grp);
  // write: the buffer holds a whole group
  assign write_ok = (state == S_RUN) && (dr_grp != wr_grp);

  // ---------------- memory port arbitration ----------------
  // Writes first; a presented request keeps its owner until accepted.
  assign sel_wr   = lock_q ? lock_wr_q : tb_valid_q;
  assign mem_fire = mem_req_valid && mem_req_ready;
  assign rd_fire  = mem_fire && !sel_wr;
  assign wr_fire  = mem_fire && sel_wr;

  always_comb begin
    mem_req.we    = sel_wr;
    mem_req.wdata = sel_wr ? tb_rd_data : '0;
    if (sel_wr) begin
      mem_req_valid = tb_valid_q;
      laddr         = wr_base + (ADDR_W'(col_q) << bsh) + ADDR_W'(wr_grp);
    end else begin
      mem_req_valid = load_ok && (rd_cnt != n_all);
      laddr         = rd_base + (ADDR_W'(ld_grp) << log2n) + ADDR_W'(rd_cnt);
    end
    mem_req.addr = paddr;
  end

  addr_map #(.ADDR_W(ADDR_W), .BANK_BITS(BANK_BITS)) u_map (
    .laddr(laddr), .cfg_bank_pos(bank_pos), .cfg_xor_en(xor_en), .cfg_xor_pos(xor_pos),
    .bank(map_bank), .local_addr(map_local), .paddr(paddr));

  // ---------------- read data -> accelerators ----------------
  assign rsp_acc     = AW'({rs_set, LOG2K'(rsp_cnt >> bsh)});
  assign acc_in_data = mem_rsp_data;
  always_comb begin
    acc_in_valid = '0;
    if (mem_rsp_valid) acc_in_valid[rsp_acc] = 1'b1;
  end

  // ---------------- accelerators -> transpose buffer ----------------
  assign drn_acc = AW'({dr_set, LOG2K'(drn_cnt >> bsh)});
  always_comb begin
    acc_out_ready = '0;
    if (drain_ok) acc_out_ready[drn_acc] = 1'b1;
  end
  assign tb_wr_en   = drain_ok && acc_out_valid[drn_acc];
  assign tb_wr_row  = LOG2K'(drn_cnt >> bsh);
  assign tb_wr_beat = (LOG2_NMAX-2)'(drn_cnt & (n_grps - 1'b1));
  assign tb_wr_data = acc_out_data[drn_acc];

  // ---------------- transpose buffer -> memory ----------------
  assign tb_rd_en = write_ok && (wr_cnt != n_all) && (!tb_valid_q || wr_fire);

  transpose_buffer #(.LOG2_NMAX(LOG2_NMAX)) u_tbuf (
    .clk(clk), .wr_en(tb_wr_en), .wr_row(tb_wr_row), .wr_beat(tb_wr_beat), .wr_data(tb_wr_data),
    .rd_en(tb_rd_en), .rd_col(LOG2_NMAX'(wr_cnt)), .rd_data(tb_rd_data));

  function automatic logic [SW-1:0] next_set(input logic [SW-1:0] s);
    return (s == SW'(NSETS - 1)) ? '0 : s + 1'b1;
  endfunction

  // ---------------- sequencing ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pass       <= 1'b0;
      log2n      <= 5'(LOG2K + 1);
      dir        <= FFT_FWD;
      src_base   <= '0;
      tmp_base   <= '0;
      dst_base   <= '0;
      bank_pos   <= '0;
      xor_en     <= 1'b0;
      xor_pos    <= '0;
      ld_grp     <= '0;
      dr_grp     <= '0;
      wr_grp     <= '0;
      ld_set     <= '0;
      rs_set     <= '0;
      dr_set     <= '0;
      rd_cnt     <= '0;
      rsp_cnt    <= '0;
      drn_cnt    <= '0;
      wr_cnt     <= '0;
      col_q      <= '0;
      tb_valid_q <= 1'b0;
      lock_q     <= 1'b0;
      lock_wr_q  <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;

      // request ownership is held while a request waits for ready
      lock_q    <= mem_req_valid && !mem_req_ready;
      lock_wr_q <= sel_wr;

      // load: issue reads of group ld_grp
      if (rd_fire) begin
        if (rd_cnt == n_all - 1'b1) begin
          rd_cnt <= '0;
          ld_grp <= ld_grp + 1'b1;
          ld_set <= next_set(ld_set);
        end else begin
          rd_cnt <= rd_cnt + 1'b1;
        end
      end

      // route: count returning read data, group by group
      if (mem_rsp_valid) begin
        if (rsp_cnt == n_all - 1'b1) begin
          rsp_cnt <= '0;
          rs_set  <= next_set(rs_set);
        end else begin
          rsp_cnt <= rsp_cnt + 1'b1;
        end
      end

      // drain: accelerators of set dr_set into the buffer
      if (tb_wr_en) begin
        if (drn_cnt == n_all - 1'b1) begin
          drn_cnt <= '0;
          dr_grp  <= dr_grp + 1'b1;
          dr_set  <= next_set(dr_set);
        end else begin
          drn_cnt <= drn_cnt + 1'b1;
        end
      end

      // write: buffer columns to memory
      if (tb_rd_en) begin
        col_q      <= wr_cnt;
        wr_cnt     <= wr_cnt + 1'b1;
        tb_valid_q <= 1'b1;
      end else if (wr_fire) begin
        tb_valid_q <= 1'b0;
      end
      if (write_ok && wr_cnt == n_all && !tb_valid_q) begin
        wr_cnt <= '0;
        wr_grp <= wr_grp + 1'b1;
      end

      unique case (state)
        S_IDLE: if (start) begin
          log2n    <= cfg_log2n;
          dir      <= cfg_dir;
          src_base <= cfg_src_base;
          tmp_base <= cfg_tmp_base;
          dst_base <= cfg_dst_base;
          bank_pos <= cfg_bank_pos;
          xor_en   <= cfg_xor_en;
          xor_pos  <= cfg_xor_pos;
          pass     <= 1'b0;
          ld_grp   <= '0;
          dr_grp   <= '0;
          wr_grp   <= '0;
          ld_set   <= '0;
          rs_set   <= '0;
          dr_set   <= '0;
          state    <= S_RUN;
        end
        S_RUN: if (wr_grp == n_grps) begin
          // all groups of this pass are in memory
          ld_grp <= '0;
          dr_grp <= '0;
          wr_grp <= '0;
          ld_set <= '0;
          rs_set <= '0;
          dr_set <= '0;
          if (pass) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            pass  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Read data must always find its accelerator in the load phase.
  a_rsp_accepted: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> acc_in_ready[rsp_acc]);
  // A request held by back-pressure must not change.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req_valid && !mem_req_ready) |=> (mem_req_valid && $stable(mem_req)));
  // The configured length must fit the accelerators and the buffer.
  a_len: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == S_IDLE) |-> (cfg_log2n >= 5'(LOG2K + 1) && cfg_log2n <= 5'(LOG2_NMAX)));
endmodule

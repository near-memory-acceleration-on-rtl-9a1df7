// mem_model: behavioural model of the off-chip memory (DDR4 DIMM or HBM2
// channel) seen through its controller, for simulation only. It stores
// 256-bit vectors in a sparse array keyed by physical vector address,
// accepts one request per clock when ready, lowers ready at random for about
// STALL_PCT percent of the clocks, and returns read data in order LAT clocks
// after the request was accepted. Unwritten addresses read as zero.
// peek/poke give the testbench direct access to the contents.
module mem_model #(
  parameter int unsigned LAT       = 6,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  ap_pkg::mem_req_t req,
  output logic             rsp_valid,
  output ap_pkg::vec_t     rsp_data
);
  import ap_pkg::*;

  typedef struct { vec_t data; longint due; } pend_t;

  vec_t    store [logic [ADDR_W-1:0]];
  pend_t   pending [$];
  longint  cycle = 0;
  longint  n_reads = 0, n_writes = 0, n_stalls = 0;

  function automatic vec_t peek(logic [ADDR_W-1:0] a);
    return store.exists(a) ? store[a] : '0;
  endfunction

  function automatic void poke(logic [ADDR_W-1:0] a, vec_t d);
    store[a] = d;
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst_n) begin
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      pending.delete();
    end else begin
      if (req_valid && req_ready) begin
        if (req.we) begin
          store[req.addr] = req.wdata;
          n_writes++;
        end else begin
          pending.push_back('{data: peek(req.addr), due: cycle + LAT});
          n_reads++;
        end
      end
      if (req_valid && !req_ready) n_stalls++;
      req_ready <= ($urandom_range(99) >= STALL_PCT);
      rsp_valid <= 1'b0;
      if (pending.size() > 0 && pending[0].due <= cycle) begin
        pend_t p;
        p = pending.pop_front();
        rsp_valid <= 1'b1;
        rsp_data  <= p.data;
      end
    end
  end
endmodule

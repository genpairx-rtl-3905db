// ref_mem_model -- behavioural model of the reference-genome DRAM. Not
// synthesizable. The testbench fills `genome` (one 2-bit base per entry).
// A request for address a returns, LATENCY cycles later and in request
// order, the REF_WIN bases a .. a+REF_WIN-1 packed base 0 in the low bits
// (bases past the end read as 0).
module ref_mem_model
  import genpairx_pkg::*;
#(
  parameter int LATENCY = 12
) (
  input  logic     clk,
  input  logic     req_valid,
  output logic     req_ready,
  input  loc_t     req_addr,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output ref_win_t rsp_data
);
  base_t genome [$];

  typedef struct {
    longint   t;
    ref_win_t d;
  } win_t;
  win_t q[$];
  longint cyc = 0;

  initial rsp_valid = 0;
  assign req_ready = (q.size() < 64);

  always @(posedge clk) begin
    win_t w;
    int a;
    cyc++;
    if (rsp_valid && rsp_ready) void'(q.pop_front());
    if (req_valid && req_ready) begin
      w.t = cyc + LATENCY;
      for (int i = 0; i < REF_WIN; i++) begin
        a = int'(req_addr) + i;
        if (a >= 0 && a < genome.size()) w.d[2*i +: 2] = genome[a];
        else w.d[2*i +: 2] = 2'b00;
      end
      q.push_back(w);
    end
    if (q.size() != 0 && q[0].t <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_data  <= q[0].d;
    end else begin
      rsp_valid <= 1'b0;
    end
  end
endmodule

// hbm_channel_model -- behavioural model of one HBM channel with its memory
// controller, holding one channel's slice of SeedMap. Not synthesizable.
//
// Word addresses below LOC_BASE read the Seed Table slice: entry k returns
// the cumulative number of locations of all seeds with local index <= k,
// stored sparsely in st_cum (only indices that own locations are present).
// Addresses from LOC_BASE on read the Location Table slice, stored in lt.
// A request (addr, len) is answered by len beats of one 32-bit word, in
// request order, the first LATENCY cycles after the request; up to MAX_Q
// beats may be queued. The testbench fills st_cum and lt directly.
module hbm_channel_model #(
  parameter int ADDR_W  = 28,
  parameter int LATENCY = 24,
  parameter int MAX_Q   = 256
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [15:0]       req_len,
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output logic [31:0]       rsp_data,
  output logic              rsp_last
);
  localparam longint LOC_BASE = longint'(1) << (ADDR_W - 1);

  logic [31:0] st_cum [int unsigned];
  logic [31:0] lt     [int unsigned];

  typedef struct {
    longint      t;
    logic [31:0] d;
    logic        last;
  } beat_t;
  beat_t q[$];
  longint cyc = 0;
  int unsigned n_req = 0;

  function automatic logic [31:0] rd_word(longint a);
    int unsigned k;
    if (a >= LOC_BASE) begin
      k = int'(a - LOC_BASE);
      return lt.exists(k) ? lt[k] : 32'hDEAD_BEEF;
    end
    k = int'(a);
    if (st_cum.exists(k)) return st_cum[k];
    if (st_cum.prev(k)) return st_cum[k];
    return 32'd0;
  endfunction

  initial begin
    rsp_valid = 0;
    rsp_data  = 0;
    rsp_last  = 0;
  end

  assign req_ready = (q.size() < MAX_Q);

  always @(posedge clk) begin
    beat_t b;
    cyc++;
    if (rsp_valid && rsp_ready) void'(q.pop_front());
    if (req_valid && req_ready) begin
      n_req++;
      for (int i = 0; i < int'(req_len); i++) begin
        b.t    = cyc + LATENCY + i;
        b.d    = rd_word(longint'(req_addr) + i);
        b.last = (i == int'(req_len) - 1);
        q.push_back(b);
      end
    end
    if (q.size() != 0 && q[0].t <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_data  <= q[0].d;
      rsp_last  <= q[0].last;
    end else begin
      rsp_valid <= 1'b0;
    end
  end
endmodule

// nmsl_channel -- the seed locator's port to one memory channel.
//
// Each memory channel holds one slice of SeedMap: the Seed Table entries of
// the seed hashes that map to this channel (word addresses 0 .. LOC_BASE-1)
// and, from word LOC_BASE on, the Location Table entries of those seeds.
// Seed Table entry k holds the end (exclusive) of seed k's location list
// inside the channel's Location Table; the list starts at entry k-1's value
// (0 for k = 0), so one two-word read returns a seed's whole range.
//
// Flow: a seed query (window slot, seed number, local table index) enters
// the seed FIFO. The channel reads the Seed Table words [k-1, k], turns them
// into a location request (start, length) in the location FIFO, then reads
// the location list as one burst and forwards each location, tagged with
// slot and seed, to the centralized buffer (cb_*), flagging the last one. A
// seed with no locations, or with more than MAX_LOCS (the index filtering
// threshold), is closed with a single cb event with cb_has_loc = 0. Location
// requests have priority over seed requests at the memory port.
//
// Memory port: mem_req_* (valid/ready; word address and burst length in
// 32-bit words) and mem_rsp_* (valid/ready; one word per beat, in request
// order, mem_rsp_last on the final beat). Up to MAX_OUT requests may be in
// flight. The cb_* port is valid/ready; the switch in front of the
// centralized buffer may hold it off, which stalls the memory responses.
//
// From the paper: SeedMap's two tables and the range lookup (Fig. 8), one
// slice per memory channel, a FIFO in front of each channel, and the index
// filtering threshold of 500. This design's choices: placing a seed's
// Seed Table and Location Table slices in the same channel, the 32-bit word
// interface, FIFO depths and the in-flight limit, and repeating the index
// filter check in hardware.
module nmsl_channel
  import genpairx_pkg::*;
#(
  parameter int FIFO_DEPTH = 1024,
  parameter int MAX_OUT    = 16,
  parameter int SLOT_W     = 10,
  parameter int IDX_W      = 27,
  parameter int ADDR_W     = 28,
  parameter int MAX_LOCS   = INDEX_FILTER
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              q_valid,
  output logic              q_ready,
  input  logic [SLOT_W-1:0] q_slot,
  input  logic [2:0]        q_seed,
  input  logic [IDX_W-1:0]  q_idx,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [15:0]       mem_req_len,
  input  logic              mem_rsp_valid,
  output logic              mem_rsp_ready,
  input  logic [31:0]       mem_rsp_data,
  input  logic              mem_rsp_last,
  output logic              cb_valid,
  input  logic              cb_ready,
  output logic [SLOT_W-1:0] cb_slot,
  output logic [2:0]        cb_seed,
  output loc_t              cb_loc,
  output logic              cb_has_loc,
  output logic              cb_last
);
  localparam logic [ADDR_W-1:0] LOC_BASE = ADDR_W'(1) << (ADDR_W - 1);

  typedef struct packed {
    logic [SLOT_W-1:0] slot;
    logic [2:0]        seed;
    logic [IDX_W-1:0]  idx;
  } squery_t;

  typedef struct packed {
    logic [SLOT_W-1:0] slot;
    logic [2:0]        seed;
    logic [ADDR_W-1:0] addr;
    logic [15:0]       len;
  } lreq_t;

  typedef struct packed {
    logic              is_loc;
    logic              two;    // seed lookup reads two words
    logic [SLOT_W-1:0] slot;
    logic [2:0]        seed;
  } pend_t;

  squery_t sq_in, sq_head;
  lreq_t   lr_in, lr_head;
  pend_t   pd_in, pd_head;
  logic    sq_valid, sq_pop;
  logic    lr_valid, lr_push, lr_ready, lr_pop;
  logic    pd_valid, pd_ready, pd_push, pd_pop;
  logic    issue_loc, issue_seed, zero_pop, loc_beat, seed_last;
  logic [31:0] start_q, start_w;
  logic [31:0] range_len;

  assign sq_in = '{slot: q_slot, seed: q_seed, idx: q_idx};
  logic [$clog2(FIFO_DEPTH+1)-1:0] sq_count, lr_count;
  logic [$clog2(MAX_OUT+1)-1:0]    pd_count;

  sync_fifo #(.WIDTH($bits(squery_t)), .DEPTH(FIFO_DEPTH)) u_seed_fifo (
    .clk, .rst_n,
    .wr_valid(q_valid), .wr_ready(q_ready), .wr_data(sq_in),
    .rd_valid(sq_valid), .rd_ready(sq_pop), .rd_data(sq_head), .count(sq_count));

  sync_fifo #(.WIDTH($bits(lreq_t)), .DEPTH(FIFO_DEPTH)) u_loc_fifo (
    .clk, .rst_n,
    .wr_valid(lr_push), .wr_ready(lr_ready), .wr_data(lr_in),
    .rd_valid(lr_valid), .rd_ready(lr_pop), .rd_data(lr_head), .count(lr_count));

  sync_fifo #(.WIDTH($bits(pend_t)), .DEPTH(MAX_OUT)) u_pend_fifo (
    .clk, .rst_n,
    .wr_valid(pd_push), .wr_ready(pd_ready), .wr_data(pd_in),
    .rd_valid(pd_valid), .rd_ready(pd_pop), .rd_data(pd_head), .count(pd_count));

  // ---- request side ----
  always_comb begin
    issue_loc  = lr_valid && (lr_head.len != '0) && pd_ready;
    issue_seed = !issue_loc && sq_valid && pd_ready;
    mem_req_valid = issue_loc || issue_seed;
    if (issue_loc) begin
      mem_req_addr = lr_head.addr;
      mem_req_len  = lr_head.len;
      pd_in        = '{is_loc: 1'b1, two: 1'b0, slot: lr_head.slot, seed: lr_head.seed};
    end else begin
      mem_req_addr = (sq_head.idx == '0) ? '0 : ADDR_W'(sq_head.idx) - 1'b1;
      mem_req_len  = (sq_head.idx == '0) ? 16'd1 : 16'd2;
      pd_in        = '{is_loc: 1'b0, two: (sq_head.idx != '0), slot: sq_head.slot, seed: sq_head.seed};
    end
    pd_push = mem_req_valid && mem_req_ready;
    sq_pop  = issue_seed && mem_req_ready;
  end

  // ---- response side ----
  always_comb begin
    loc_beat      = pd_valid && pd_head.is_loc && mem_rsp_valid;
    seed_last     = pd_valid && !pd_head.is_loc && mem_rsp_valid && mem_rsp_last;
    mem_rsp_ready = pd_valid && (pd_head.is_loc ? cb_ready : (!mem_rsp_last || lr_ready));
    pd_pop        = mem_rsp_valid && mem_rsp_ready && mem_rsp_last;
    // Seed Table words give [start, end) in the channel's Location Table.
    start_w   = pd_head.two ? start_q : 32'd0;
    range_len = mem_rsp_data - start_w;
    lr_push   = seed_last && lr_ready;
    lr_in.slot = pd_head.slot;
    lr_in.seed = pd_head.seed;
    lr_in.addr = LOC_BASE + ADDR_W'(start_w);
    lr_in.len  = (range_len > 32'(MAX_LOCS)) ? 16'd0 : 16'(range_len);
    // Empty or filtered seeds close without a memory access, in a cycle
    // the cb port is free.
    zero_pop  = lr_valid && (lr_head.len == '0) && !loc_beat && cb_ready;
    lr_pop    = (issue_loc && mem_req_ready) || zero_pop;
  end

  always_ff @(posedge clk) begin
    if (pd_valid && !pd_head.is_loc && mem_rsp_valid && !mem_rsp_last)
      start_q <= mem_rsp_data;
  end

  assign cb_valid   = loc_beat || (lr_valid && (lr_head.len == '0));
  assign cb_slot    = loc_beat ? pd_head.slot : lr_head.slot;
  assign cb_seed    = loc_beat ? pd_head.seed : lr_head.seed;
  assign cb_loc     = mem_rsp_data;
  assign cb_has_loc = loc_beat;
  assign cb_last    = loc_beat ? mem_rsp_last : 1'b1;

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> pd_valid) else $error("memory response without a request");
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid);
endmodule

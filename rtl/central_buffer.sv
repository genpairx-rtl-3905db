// central_buffer -- the seed locator's centralized buffer and the switch in
// front of it.
//
// W pair buffers (Buffer_0 .. Buffer_W-1), one per slot of the read-pair
// sliding window, each holding the six seed FIFOs of one pair. Location
// results from the NCH memory channels arrive in any order; the switch
// routes each to the buffer of its slot. A buffer takes one location per
// cycle, so when several channels target the same slot in a cycle the
// lowest-numbered channel wins and the others are held (wr_ready low).
// Channels writing different slots proceed in parallel.
//
// The dispatcher reads the slot rd_slot: its six fill counts, done flags and
// the six words at rd_ptr. free_valid clears slot free_slot.
//
// W buffers of six FIFOs each, depth 500, and the switch follow the paper's
// Fig. 11 and text; the fixed-priority arbitration is this design's choice.
module central_buffer
  import genpairx_pkg::*;
#(
  parameter int W     = 1024,
  parameter int NCH   = 32,
  parameter int DEPTH = INDEX_FILTER,
  localparam int SLOT_W = $clog2(W),
  localparam int CW     = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_valid   [NCH],
  output logic              wr_ready   [NCH],
  input  logic [SLOT_W-1:0] wr_slot    [NCH],
  input  logic [2:0]        wr_seed    [NCH],
  input  loc_t              wr_loc     [NCH],
  input  logic              wr_has_loc [NCH],
  input  logic              wr_last    [NCH],
  input  logic [SLOT_W-1:0] rd_slot,
  input  logic [CW-1:0]     rd_ptr  [SEEDS_PER_PAIR],
  output loc_t              rd_loc  [SEEDS_PER_PAIR],
  output logic [CW-1:0]     rd_cnt  [SEEDS_PER_PAIR],
  output logic [SEEDS_PER_PAIR-1:0] rd_done,
  input  logic              free_valid,
  input  logic [SLOT_W-1:0] free_slot
);
  logic grant [NCH];

  // Switch arbitration: a channel is granted unless a lower channel writes
  // the same slot in this cycle.
  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      grant[c] = wr_valid[c];
      for (int o = 0; o < c; o++)
        if (wr_valid[o] && wr_slot[o] == wr_slot[c]) grant[c] = 1'b0;
      wr_ready[c] = grant[c];
    end
  end

  loc_t                      b_loc  [W][SEEDS_PER_PAIR];
  logic [CW-1:0]             b_cnt  [W][SEEDS_PER_PAIR];
  logic [SEEDS_PER_PAIR-1:0] b_done [W];

  for (genvar k = 0; k < W; k++) begin : g_buf
    logic       we, has, last;
    logic [2:0] seed;
    loc_t       loc;
    always_comb begin
      we = 1'b0; has = 1'b0; last = 1'b0; seed = '0; loc = '0;
      for (int c = 0; c < NCH; c++) begin
        if (grant[c] && wr_slot[c] == SLOT_W'(k)) begin
          we = 1'b1; has = wr_has_loc[c]; last = wr_last[c];
          seed = wr_seed[c]; loc = wr_loc[c];
        end
      end
    end
    pair_buffer #(.DEPTH(DEPTH)) u_buf (
      .clk, .rst_n,
      .wr_valid(we), .wr_seed(seed), .wr_loc(loc), .wr_has_loc(has), .wr_last(last),
      .clear(free_valid && free_slot == SLOT_W'(k)),
      .rd_ptr(rd_ptr), .rd_loc(b_loc[k]), .cnt(b_cnt[k]), .done(b_done[k]));
  end

  assign rd_loc  = b_loc[rd_slot];
  assign rd_cnt  = b_cnt[rd_slot];
  assign rd_done = b_done[rd_slot];
endmodule

// paf_unit -- one Paired-Adjacency Filtering instance.
//
// Holds the sorted seed-location list of read 1 in FIFO1 and that of read 2
// in FIFO2 (each a dual-port SRAM of DEPTH entries) and walks both lists
// together, one comparison per cycle: the two head locations a and b are
// compared, the pair is emitted as a candidate when |a - b| < delta, and the
// smaller of the two heads is then dropped (a on a tie). The walk ends when
// either list runs out; a pair that produced no candidate is reported on the
// fallback port (reason FB_NO_ADJACENT) for DP-based mapping.
//
// Load: while `idle` is high the dispatcher may write up to one location per
// read per cycle (ld_valid[r], ld_loc[r], in ascending order), then pulses
// ld_done with the pair's id and reads; the walk starts on the next cycle.
// Outputs: cand_* and fb_* are valid/ready; a stalled cand_ready freezes the
// walk. Timing: a pair with n1 and n2 locations takes at most n1 + n2 - 1
// compare cycles plus two cycles of overhead.
//
// The FIFO pair, the single comparator, one compare per cycle, the
// advance-one-list rule and the Delta test follow the paper. Which list
// advances (the smaller head), the strict "< delta", carrying the reads with
// the candidate and the fallback report are this design's choices. DEPTH
// defaults to 3 x 500: three seeds per read, each with at most 500
// locations after index filtering.
module paf_unit
  import genpairx_pkg::*;
#(
  parameter int DEPTH = SEEDS_PER_READ * INDEX_FILTER
) (
  input  logic      clk,
  input  logic      rst_n,
  input  loc_t      delta,
  output logic      idle,
  input  logic      ld_valid [2],
  input  seed_loc_t ld_loc   [2],
  input  logic      ld_done,
  input  pair_id_t  ld_pair_id,
  input  read_seq_t ld_r1,
  input  read_seq_t ld_r2,
  output logic      cand_valid,
  input  logic      cand_ready,
  output paf_cand_t cand,
  output logic      fb_valid,
  input  logic      fb_ready,
  output fallback_t fb
);
  localparam int AW = $clog2(DEPTH + 1);

  typedef enum logic [1:0] {S_LOAD, S_WALK, S_FB} state_t;
  state_t state;

  seed_loc_t fifo1 [DEPTH];
  seed_loc_t fifo2 [DEPTH];
  logic [AW-1:0] wptr [2];
  logic [AW-1:0] rptr [2];
  pair_id_t  pair_id_q;
  read_seq_t r1_q, r2_q;
  logic      any_cand;

  seed_loc_t a, b;
  loc_t      gap;
  logic      both, close, stall;

  assign a     = fifo1[rptr[0]];
  assign b     = fifo2[rptr[1]];
  assign both  = (rptr[0] < wptr[0]) && (rptr[1] < wptr[1]);
  assign gap  = (a.loc > b.loc) ? a.loc - b.loc : b.loc - a.loc;
  assign close = gap < delta;
  assign stall = cand_valid && !cand_ready;

  assign idle     = (state == S_LOAD) && (wptr[0] == '0) && (wptr[1] == '0);
  assign fb_valid = (state == S_FB);
  assign fb       = '{pair_id: pair_id_q, reason: FB_NO_ADJACENT};

  always_ff @(posedge clk) begin
    if (state == S_LOAD && ld_valid[0]) fifo1[wptr[0]] <= ld_loc[0];
    if (state == S_LOAD && ld_valid[1]) fifo2[wptr[1]] <= ld_loc[1];
    if (state == S_LOAD && ld_done) begin
      pair_id_q <= ld_pair_id;
      r1_q      <= ld_r1;
      r2_q      <= ld_r2;
    end
    if (state == S_WALK && !stall && both && close)
      cand <= '{pair_id: pair_id_q, l1: a, l2: b, r1: r1_q, r2: r2_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_LOAD;
      wptr[0]    <= '0;
      wptr[1]    <= '0;
      rptr[0]    <= '0;
      rptr[1]    <= '0;
      cand_valid <= 1'b0;
      any_cand   <= 1'b0;
    end else begin
      if (cand_valid && cand_ready) cand_valid <= 1'b0;
      case (state)
        S_LOAD: begin
          for (int r = 0; r < 2; r++)
            if (ld_valid[r]) wptr[r] <= wptr[r] + 1'b1;
          if (ld_done) begin
            state    <= S_WALK;
            any_cand <= 1'b0;
          end
        end
        S_WALK: if (!stall) begin
          if (both) begin
            if (close) begin
              cand_valid <= 1'b1;
              any_cand   <= 1'b1;
            end
            if (a.loc <= b.loc) rptr[0] <= rptr[0] + 1'b1;
            else                rptr[1] <= rptr[1] + 1'b1;
          end else if (any_cand) begin
            state   <= S_LOAD;
            wptr[0] <= '0; wptr[1] <= '0;
            rptr[0] <= '0; rptr[1] <= '0;
          end else begin
            state <= S_FB;
          end
        end
        S_FB: if (fb_ready) begin
          state   <= S_LOAD;
          wptr[0] <= '0; wptr[1] <= '0;
          rptr[0] <= '0; rptr[1] <= '0;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LOAD && ld_valid[0]) |-> (wptr[0] < AW'(DEPTH)));
endmodule

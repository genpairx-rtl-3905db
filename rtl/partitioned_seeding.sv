// partitioned_seeding -- Partitioned Seeding module.
//
// Takes one read pair per cycle and cuts each read into its first, middle
// and last 50 bases: seeds 0..2 come from read 1 and seeds 3..5 from read 2.
// Six xxhash32_unit instances hash the six seeds in parallel, so the module
// returns the six 32-bit seed hashes of a pair LATENCY = 10 cycles after the
// pair was accepted, together with the pair's id and both reads (which
// travel with the pair to the later stages).
//
// Interface: valid/ready on both sides. The ten pipeline stages advance
// together whenever the output register is empty or being read
// (en = !out_valid || out_ready), so in_ready = en and a stalled output
// freezes the whole pipeline without losing data.
//
// Six parallel pipelined hashing units follow the paper. The paper's
// throughput of 333 MPair/s at 2 GHz equals one pair per 6 cycles; this
// pipeline itself accepts a pair per cycle, and the rate into the memory
// stage is set by the seed locator, which issues one seed per cycle.
module partitioned_seeding
  import genpairx_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  pair_id_t  in_pair_id,
  input  read_seq_t in_r1,
  input  read_seq_t in_r2,
  output logic      out_valid,
  input  logic      out_ready,
  output pair_id_t  out_pair_id,
  output hash_t     out_hash [SEEDS_PER_PAIR],
  output read_seq_t out_r1,
  output read_seq_t out_r2
);
  localparam int LATENCY = 10;

  typedef struct packed {
    pair_id_t  id;
    read_seq_t r1;
    read_seq_t r2;
  } side_t;

  logic  en;
  logic  hv [SEEDS_PER_PAIR];
  side_t side [1:LATENCY];

  assign en       = !out_valid || out_ready;
  assign in_ready = en;

  for (genvar s = 0; s < SEEDS_PER_PAIR; s++) begin : g_hash
    seed_seq_t seed;
    if (s < SEEDS_PER_READ) begin : g_r1
      assign seed = in_r1[2*SEED_LEN*s +: 2*SEED_LEN];
    end else begin : g_r2
      assign seed = in_r2[2*SEED_LEN*(s-SEEDS_PER_READ) +: 2*SEED_LEN];
    end
    xxhash32_unit u_hash (
      .clk      (clk),
      .rst_n    (rst_n),
      .en       (en),
      .in_valid (in_valid),
      .in_seed  (seed),
      .out_valid(hv[s]),
      .out_hash (out_hash[s])
    );
  end

  // The pair id and reads ride alongside the hash pipeline.
  always_ff @(posedge clk) begin
    if (en) begin
      side[1] <= '{id: in_pair_id, r1: in_r1, r2: in_r2};
      for (int i = 2; i <= LATENCY; i++) side[i] <= side[i-1];
    end
  end

  assign out_valid   = hv[0];
  assign out_pair_id = side[LATENCY].id;
  assign out_r1      = side[LATENCY].r1;
  assign out_r2      = side[LATENCY].r2;

  // All six units share one enable and one input valid.
  for (genvar s = 1; s < SEEDS_PER_PAIR; s++) begin : g_chk
    a_step: assert property (@(posedge clk) disable iff (!rst_n) hv[s] == hv[0])
      else $error("hash units out of step");
  end
endmodule

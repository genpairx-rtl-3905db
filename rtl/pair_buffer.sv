// pair_buffer -- one buffer of the centralized buffer: the six seed FIFOs of
// one in-flight read pair.
//
// Holds up to DEPTH genome locations for each of the pair's six seeds in one
// single-write-port memory (seed s owns words s*DEPTH .. s*DEPTH+DEPTH-1),
// a fill count per seed and a done flag per seed, set when the seed's last
// location (or its empty-list marker) arrives. Six asynchronous read ports
// give the dispatcher the words at rd_ptr[s]. `clear` empties the buffer
// when the dispatcher has moved the pair on.
//
// The six FIFOs per pair, sized by the index filtering threshold (500),
// follow the paper; packing them in one memory is this design's choice.
module pair_buffer
  import genpairx_pkg::*;
#(
  parameter int DEPTH = INDEX_FILTER
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_valid,
  input  logic [2:0] wr_seed,
  input  loc_t       wr_loc,
  input  logic       wr_has_loc,
  input  logic       wr_last,
  input  logic       clear,
  input  logic [$clog2(DEPTH+1)-1:0] rd_ptr [SEEDS_PER_PAIR],
  output loc_t       rd_loc  [SEEDS_PER_PAIR],
  output logic [$clog2(DEPTH+1)-1:0] cnt [SEEDS_PER_PAIR],
  output logic [SEEDS_PER_PAIR-1:0]  done
);
  localparam int CW = $clog2(DEPTH + 1);
  localparam int AW = $clog2(SEEDS_PER_PAIR * DEPTH);

  loc_t mem [SEEDS_PER_PAIR * DEPTH];

  function automatic logic [AW-1:0] addr(logic [2:0] s, logic [CW-1:0] p);
    return AW'(s) * AW'(DEPTH) + AW'(p);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_valid && wr_has_loc && cnt[wr_seed] < CW'(DEPTH))
      mem[addr(wr_seed, cnt[wr_seed])] <= wr_loc;
  end

  for (genvar s = 0; s < SEEDS_PER_PAIR; s++) begin : g_rd
    assign rd_loc[s] = mem[addr(3'(s), rd_ptr[s])];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= '0;
      for (int s = 0; s < SEEDS_PER_PAIR; s++) cnt[s] <= '0;
    end else if (clear) begin
      done <= '0;
      for (int s = 0; s < SEEDS_PER_PAIR; s++) cnt[s] <= '0;
    end else if (wr_valid) begin
      if (wr_has_loc && cnt[wr_seed] < CW'(DEPTH)) cnt[wr_seed] <= cnt[wr_seed] + 1'b1;
      if (wr_last) done[wr_seed] <= 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && wr_has_loc |-> cnt[wr_seed] < CW'(DEPTH)) else $error("seed FIFO overflow");
endmodule

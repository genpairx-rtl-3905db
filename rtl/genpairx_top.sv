// genpairx_top -- the GenPairX paired-end read mapping accelerator.
//
// Pipeline, one block per step of the mapping algorithm:
//   partitioned_seeding  six seeds per pair, six pipelined xxHash32 units
//   nmsl                 SeedMap lookups over NCH memory channels, sliding
//                        window of W pairs, centralized buffer, dispatcher
//   paf_unit x NPAF      Paired-Adjacency Filtering of the two location lists
//   light_align_array    NLA Light Alignment units behind a circular buffer
//
// External interfaces (plain valid/ready streams; the off-chip memories,
// the HBM with its controllers and PHY, and the GenDP fallback accelerator
// are outside this design):
//   in_*       read pairs from the host (pair id, two 150-base reads)
//   mem_*      one request/response port per HBM channel holding SeedMap
//   ref_*      reference-window reads for light alignment
//   res_*      one light alignment result per read per candidate location;
//              aligned = 0 means "run DP alignment at this location"
//   fb_*       read pairs that need the full DP pipeline (no seed hit, or no
//              location pair within Delta)
//   cfg_delta  the paired-adjacency distance threshold Delta, in bases
//
// Default sizes follow the paper: 32 HBM channels, a window of 1024 pairs,
// FIFOs of depth 500 in the centralized buffer, 1 seeding module, 3 PAF
// instances and 174 Light Alignment instances. The fixed-priority fallback
// merge and the round-robin candidate merge are this design's choices.
module genpairx_top
  import genpairx_pkg::*;
#(
  parameter int NCH        = 32,
  parameter int W          = 1024,
  parameter int DEPTH      = INDEX_FILTER,
  parameter int FIFO_DEPTH = 1024,
  parameter int MAX_OUT    = 16,
  parameter int NPAF       = 3,
  parameter int NLA        = 174,
  parameter int CBUF_DEPTH = 1024,
  parameter int ADDR_W     = 28
) (
  input  logic              clk,
  input  logic              rst_n,
  input  loc_t              cfg_delta,
  input  logic              in_valid,
  output logic              in_ready,
  input  pair_id_t          in_pair_id,
  input  read_seq_t         in_r1,
  input  read_seq_t         in_r2,
  output logic              mem_req_valid [NCH],
  input  logic              mem_req_ready [NCH],
  output logic [ADDR_W-1:0] mem_req_addr  [NCH],
  output logic [15:0]       mem_req_len   [NCH],
  input  logic              mem_rsp_valid [NCH],
  output logic              mem_rsp_ready [NCH],
  input  logic [31:0]       mem_rsp_data  [NCH],
  input  logic              mem_rsp_last  [NCH],
  output logic              ref_req_valid,
  input  logic              ref_req_ready,
  output loc_t              ref_req_addr,
  input  logic              ref_rsp_valid,
  output logic              ref_rsp_ready,
  input  ref_win_t          ref_rsp_data,
  output logic              res_valid,
  input  logic              res_ready,
  output la_result_t        res,
  output logic              fb_valid,
  input  logic              fb_ready,
  output fallback_t         fb
);
  // ---- Partitioned Seeding ----
  logic      s_valid, s_ready;
  pair_id_t  s_pair_id;
  hash_t     s_hash [SEEDS_PER_PAIR];
  read_seq_t s_r1, s_r2;

  partitioned_seeding u_seed (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_pair_id, .in_r1, .in_r2,
    .out_valid(s_valid), .out_ready(s_ready), .out_pair_id(s_pair_id),
    .out_hash(s_hash), .out_r1(s_r1), .out_r2(s_r2));

  // ---- Near Memory Seed Locator ----
  logic      paf_idle     [NPAF];
  logic      paf_ld_valid [NPAF][2];
  seed_loc_t paf_ld_loc   [2];
  logic      paf_ld_done  [NPAF];
  pair_id_t  paf_ld_pair_id;
  read_seq_t paf_ld_r1, paf_ld_r2;
  logic      nfb_valid, nfb_ready;
  fallback_t nfb;

  nmsl #(
    .NCH(NCH), .W(W), .DEPTH(DEPTH), .FIFO_DEPTH(FIFO_DEPTH),
    .MAX_OUT(MAX_OUT), .NPAF(NPAF), .ADDR_W(ADDR_W)
  ) u_nmsl (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in_pair_id(s_pair_id),
    .in_hash(s_hash), .in_r1(s_r1), .in_r2(s_r2),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_len,
    .mem_rsp_valid, .mem_rsp_ready, .mem_rsp_data, .mem_rsp_last,
    .paf_idle, .paf_ld_valid, .paf_ld_loc, .paf_ld_done,
    .paf_ld_pair_id, .paf_ld_r1, .paf_ld_r2,
    .fb_valid(nfb_valid), .fb_ready(nfb_ready), .fb(nfb));

  // ---- Paired-Adjacency Filtering ----
  logic      c_valid [NPAF];
  logic      c_ready [NPAF];
  paf_cand_t c_cand  [NPAF];
  logic      pfb_valid [NPAF];
  logic      pfb_ready [NPAF];
  fallback_t pfb       [NPAF];

  for (genvar p = 0; p < NPAF; p++) begin : g_paf
    paf_unit #(.DEPTH(SEEDS_PER_READ * DEPTH)) u_paf (
      .clk, .rst_n, .delta(cfg_delta), .idle(paf_idle[p]),
      .ld_valid(paf_ld_valid[p]), .ld_loc(paf_ld_loc), .ld_done(paf_ld_done[p]),
      .ld_pair_id(paf_ld_pair_id), .ld_r1(paf_ld_r1), .ld_r2(paf_ld_r2),
      .cand_valid(c_valid[p]), .cand_ready(c_ready[p]), .cand(c_cand[p]),
      .fb_valid(pfb_valid[p]), .fb_ready(pfb_ready[p]), .fb(pfb[p]));
  end

  // Candidate merge: round robin over the PAF instances.
  localparam int PW = $clog2(NPAF + 1);
  logic          m_valid, m_ready, m_any;
  paf_cand_t     m_cand;
  logic [PW-1:0] m_rr, m_win;
  always_comb begin
    m_any = 1'b0;
    m_win = '0;
    for (int i = 0; i < NPAF; i++) begin
      int p;
      p = (int'(m_rr) + i) % NPAF;
      if (!m_any && c_valid[p]) begin
        m_any = 1'b1;
        m_win = PW'(p);
      end
    end
    m_valid = m_any;
    m_cand  = c_cand[m_win];
    for (int p = 0; p < NPAF; p++) c_ready[p] = m_ready && m_any && (m_win == PW'(p));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m_rr <= '0;
    else if (m_valid && m_ready) m_rr <= (m_win == PW'(NPAF - 1)) ? '0 : m_win + 1'b1;
  end

  // Fallback merge: seed locator first, then the PAF instances in order.
  logic fb_taken;
  always_comb begin
    fb_valid  = nfb_valid;
    fb        = nfb;
    nfb_ready = fb_ready;
    fb_taken  = nfb_valid;
    for (int p = 0; p < NPAF; p++) begin
      pfb_ready[p] = 1'b0;
      if (!fb_taken && pfb_valid[p]) begin
        fb_valid     = 1'b1;
        fb           = pfb[p];
        pfb_ready[p] = fb_ready;
        fb_taken     = 1'b1;
      end
    end
  end

  // ---- Light Alignment ----
  light_align_array #(.NLA(NLA), .CBUF_DEPTH(CBUF_DEPTH)) u_la (
    .clk, .rst_n,
    .cand_valid(m_valid), .cand_ready(m_ready), .cand(m_cand),
    .ref_req_valid, .ref_req_ready, .ref_req_addr,
    .ref_rsp_valid, .ref_rsp_ready, .ref_rsp_data,
    .res_valid, .res_ready, .res);
endmodule

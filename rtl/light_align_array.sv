// light_align_array -- the bank of Light Alignment instances with its input
// buffer, reference fetch and result collection.
//
// Candidates from the PAF instances (a location for each read plus both
// reads) enter a circular buffer of CBUF_DEPTH entries. Each candidate is
// split into two alignment jobs, read 1 at its location and read 2 at its
// location. A job's read start is its seed location minus 50 bases times
// the seed's number in the read; the job requests the REF_WIN-base reference
// window starting IMAX bases before that start from the reference memory
// (ref_req_*, in-order responses on ref_rsp_*), and waits in a pending queue
// of PEND_DEPTH entries for the window. A job with its window goes to the
// lowest-numbered idle light_align_unit; results leave on res_* through a
// round-robin arbiter over the NLA units.
//
// Timing: one job issued per cycle at best; each unit is busy 156 cycles
// per job, so NLA units sustain NLA/156 alignments per cycle.
//
// From the paper: 174 Light Alignment instances and a circular buffer in
// SRAM right before them. This design's choices: the buffer depth, the
// reference fetch interface, the pending queue, and the job and result
// arbitration.
module light_align_array
  import genpairx_pkg::*;
#(
  parameter int NLA        = 174,
  parameter int CBUF_DEPTH = 1024,
  parameter int PEND_DEPTH = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cand_valid,
  output logic       cand_ready,
  input  paf_cand_t  cand,
  output logic       ref_req_valid,
  input  logic       ref_req_ready,
  output loc_t       ref_req_addr,
  input  logic       ref_rsp_valid,
  output logic       ref_rsp_ready,
  input  ref_win_t   ref_rsp_data,
  output logic       res_valid,
  input  logic       res_ready,
  output la_result_t res
);
  localparam int NW = $clog2(NLA + 1);

  typedef struct packed {
    la_tag_t   tag;
    read_seq_t read;
  } job_t;

  // ---- circular buffer of candidates ----
  paf_cand_t cb_head;
  logic      cb_valid, cb_pop;
  logic [$clog2(CBUF_DEPTH+1)-1:0] cb_count;
  sync_fifo #(.WIDTH($bits(paf_cand_t)), .DEPTH(CBUF_DEPTH)) u_cbuf (
    .clk, .rst_n,
    .wr_valid(cand_valid), .wr_ready(cand_ready), .wr_data(cand),
    .rd_valid(cb_valid), .rd_ready(cb_pop), .rd_data(cb_head), .count(cb_count));

  // ---- split into jobs and fetch reference ----
  logic      phase;  // 0: read 1, 1: read 2
  seed_loc_t jl;
  loc_t      jstart, seed_off;
  job_t      job_in, job_head;
  logic      pd_ready, pd_valid, pd_pop, issue;
  logic [$clog2(PEND_DEPTH+1)-1:0] pd_count;

  always_comb begin
    jl       = phase ? cb_head.l2 : cb_head.l1;
    seed_off = LOC_W'(SEED_LEN) * LOC_W'(jl.sidx);
    jstart   = (jl.loc > seed_off) ? jl.loc - seed_off : '0;
    job_in   = '{tag: '{pair_id: cb_head.pair_id, read_sel: phase, start: jstart},
                 read: phase ? cb_head.r2 : cb_head.r1};
    ref_req_valid = cb_valid && pd_ready;
    ref_req_addr  = (jstart > LOC_W'(IMAX)) ? jstart - LOC_W'(IMAX) : '0;
    issue         = ref_req_valid && ref_req_ready;
    cb_pop        = issue && phase;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= 1'b0;
    else if (issue) phase <= ~phase;
  end

  sync_fifo #(.WIDTH($bits(job_t)), .DEPTH(PEND_DEPTH)) u_pend (
    .clk, .rst_n,
    .wr_valid(issue), .wr_ready(pd_ready), .wr_data(job_in),
    .rd_valid(pd_valid), .rd_ready(pd_pop), .rd_data(job_head), .count(pd_count));

  // ---- dispatch to an idle unit ----
  logic       u_in_ready [NLA];
  logic       u_in_valid [NLA];
  logic       u_out_valid [NLA];
  logic       u_out_ready [NLA];
  la_result_t u_res [NLA];
  logic          any_idle;
  logic [NW-1:0] idle_idx;

  always_comb begin
    any_idle = 1'b0;
    idle_idx = '0;
    for (int u = NLA - 1; u >= 0; u--)
      if (u_in_ready[u]) begin
        any_idle = 1'b1;
        idle_idx = NW'(u);
      end
    ref_rsp_ready = any_idle;
    pd_pop        = ref_rsp_valid && any_idle;
    for (int u = 0; u < NLA; u++)
      u_in_valid[u] = ref_rsp_valid && any_idle && (idle_idx == NW'(u));
  end

  for (genvar u = 0; u < NLA; u++) begin : g_la
    light_align_unit u_la (
      .clk, .rst_n,
      .in_valid(u_in_valid[u]), .in_ready(u_in_ready[u]),
      .in_read(job_head.read), .in_ref(ref_rsp_data), .in_tag(job_head.tag),
      .out_valid(u_out_valid[u]), .out_ready(u_out_ready[u]), .out_res(u_res[u]));
  end

  // ---- round-robin result arbiter ----
  logic [NW-1:0] rr, win;
  logic          any_res;
  always_comb begin
    any_res = 1'b0;
    win     = '0;
    for (int i = 0; i < NLA; i++) begin
      int u;
      u = (int'(rr) + i) % NLA;
      if (!any_res && u_out_valid[u]) begin
        any_res = 1'b1;
        win     = NW'(u);
      end
    end
    res_valid = any_res;
    res       = u_res[win];
    for (int u = 0; u < NLA; u++) u_out_ready[u] = res_ready && any_res && (win == NW'(u));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (res_valid && res_ready) rr <= (win == NW'(NLA - 1)) ? '0 : win + 1'b1;
  end

  a_rsp_has_job: assert property (@(posedge clk) disable iff (!rst_n)
    ref_rsp_valid |-> pd_valid) else $error("reference window without a job");
endmodule

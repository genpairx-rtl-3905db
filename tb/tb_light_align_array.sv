// tb_light_align_array -- checks the candidate buffer, reference fetch,
// dispatch and result collection around the Light Alignment units, with 4
// units, an 8-entry candidate buffer and a 4-entry pending queue.
//
// A random 5000-base reference sits in a behavioural reference memory. Each
// candidate pair carries two reads cut from it, each either exact or with
// one Table 1 edit (one mismatch, 1-5 deletions, 1-2 insertions), and one
// seed location per read at a random seed position (0, 50 or 100 bases into
// the read). Every candidate must give exactly two results, one per read,
// with the read's true start, the right edit and its score. Candidates are
// offered back to back, so the candidate buffer fills and stalls the
// producer; in a second phase results are taken only at random, which
// stalls the units. In the first phase the array must sustain 4 alignments
// per 156 cycles.
module tb_light_align_array;
  import genpairx_pkg::*;
  import tb_ref_pkg::*;

  localparam int NLA = 4, G = 5000, NC = 120;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cand_valid = 0, cand_ready, ref_req_valid, ref_req_ready, ref_rsp_valid, ref_rsp_ready;
  paf_cand_t cand;
  loc_t ref_req_addr;
  ref_win_t ref_rsp_data;
  logic res_valid, res_ready = 1;
  la_result_t res;

  light_align_array #(.NLA(NLA), .CBUF_DEPTH(8), .PEND_DEPTH(4)) dut (.*);
  ref_mem_model u_ref (
    .clk, .req_valid(ref_req_valid && rst_n), .req_ready(ref_req_ready), .req_addr(ref_req_addr),
    .rsp_valid(ref_rsp_valid), .rsp_ready(ref_rsp_ready), .rsp_data(ref_rsp_data));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  base_t genome [G];
  typedef struct { int f; edit_t e; int k; } rexp_t;
  rexp_t expr [NC][2];
  la_result_t got [int][$];
  int n_got = 0, n_cand_stall = 0, n_res_stall = 0;
  longint cyc = 0;
  bit random_ready = 0;

  function automatic read_seq_t cut(int f, edit_t e, int k);
    read_seq_t r;
    for (int i = 0; i < READ_LEN; i++) begin
      base_t b;
      case (e)
        EDIT_DELETION:  b = genome[(i < 120) ? f+i : f+i+k];
        EDIT_INSERTION: b = (i < 120) ? genome[f+i] : (i < 120 + k) ? ~genome[f+i-1] : genome[f+i-k];
        default:        b = genome[f+i];
      endcase
      r[2*i +: 2] = b;
    end
    if (e == EDIT_MISMATCH) r[2*70 +: 2] = ~r[2*70 +: 2];
    return r;
  endfunction

  // results are sampled at the rising edge
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && res_valid && res_ready) begin
      got[int'(res.pair_id)].push_back(res);
      n_got++;
    end
    if (rst_n && cand_valid && !cand_ready) n_cand_stall++;
    if (rst_n && res_valid && !res_ready) n_res_stall++;
  end
  always @(negedge clk) if (random_ready) res_ready = $urandom % 3 == 0;

  task automatic send(int n);
    paf_cand_t c;
    read_seq_t r [2];
    seed_loc_t l [2];
    for (int j = 0; j < 2; j++) begin
      int s;
      expr[n][j].f = 100 + $urandom % (G - 400);
      expr[n][j].e = edit_t'($urandom % 4);
      expr[n][j].k = (expr[n][j].e == EDIT_NONE) ? 0 : (expr[n][j].e == EDIT_MISMATCH) ? 1 :
                     (expr[n][j].e == EDIT_DELETION) ? 1 + $urandom % DMAX : 1 + $urandom % IMAX;
      r[j] = cut(expr[n][j].f, expr[n][j].e, expr[n][j].k);
      s = $urandom % 2;   // seeds 0 and 1 lie before the edit at base 120
      l[j] = '{loc: loc_t'(expr[n][j].f + SEED_LEN * s), sidx: 2'(s)};
    end
    @(negedge clk);
    cand_valid = 1;
    cand = '{pair_id: pair_id_t'(n), l1: l[0], l2: l[1], r1: r[0], r2: r[1]};
    while (!cand_ready) @(negedge clk);
    @(posedge clk);
  endtask

  initial begin
    longint t0, t1;
    for (int i = 0; i < G; i++) begin
      genome[i] = base_t'($urandom);
      u_ref.genome.push_back(genome[i]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cyc;
    for (int n = 0; n < NC / 2; n++) send(n);
    @(negedge clk);
    cand_valid = 0;
    while (n_got < NC) @(posedge clk);
    t1 = cyc;
    // NC alignments on NLA units of 156 cycles each, plus the fill latency
    chk(t1 - t0 <= NC / NLA * 156 + 200 && t1 - t0 >= NC / NLA * 156,
        $sformatf("phase 1 took %0d cycles for %0d alignments", t1 - t0, NC));
    random_ready = 1;
    for (int n = NC / 2; n < NC; n++) send(n);
    @(negedge clk);
    cand_valid = 0;
    while (n_got < 2 * NC) @(posedge clk);
    random_ready = 0;
    res_ready = 1;
    repeat (400) @(posedge clk);
    for (int n = 0; n < NC; n++) begin
      chk(got.exists(n) && got[n].size() == 2, $sformatf("candidate %0d: %0d results", n, got.exists(n) ? got[n].size() : 0));
      if (got.exists(n))
        foreach (got[n][i]) begin
          la_result_t r;
          rexp_t x;
          r = got[n][i];
          x = expr[n][r.read_sel];
          chk(r.aligned && int'(r.location) == x.f && r.edit == x.e && int'(r.edit_len) == x.k &&
              r.score == edit_score(x.e, x.k),
              $sformatf("candidate %0d read %0d: got %0d/%s/%0d at %0d, expected %s/%0d at %0d",
                        n, r.read_sel, r.aligned, r.edit.name(), r.edit_len, r.location, x.e.name(), x.k, x.f));
        end
    end
    chk(n_cand_stall > 0 && n_res_stall > 0, "both stalls happened");
    $display("phase 1: %0d cycles; results %0d; candidate stalls %0d, result stalls %0d",
             t1 - t0, n_got, n_cand_stall, n_res_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_genpairx_top -- end-to-end test of the whole accelerator at its
// default sizes (32 memory channels, window of 1024 pairs, 3 PAF and 174
// Light Alignment instances).
//
// The testbench builds a random 30 kb reference with a 600-base poly-A run
// (its 50-mer has more than 500 locations, so the index filter drops it) and
// a duplicated 600-base segment (seeds with two locations). It builds
// SeedMap offline exactly as the Seed Table / Location Table layout
// prescribes, with its own xxHash32, spreads it over 32 HBM channel models,
// and sends read pairs of these kinds:
//   exact pairs, 1 or 2 mismatches, 1-5 consecutive deletions, 1-2
//   insertions, a read with two edit types (must come back unaligned),
//   a read from outside the reference (fallback: no seed hit), reads too far
//   apart (fallback: no adjacent pair), a read starting in the poly-A run,
//   and pairs in the duplicated segment.
// The fallback port is held back for the first HOLD_FB cycles, so the
// first fallback pair blocks the dispatcher, the read-pair window fills and
// stalls the input. The result port is held back until HOLD_RES, so the
// light alignment units and their buffer fill, the PAF instances stay busy
// and the dispatcher has to wait for one. Each pair's true positions and
// edits are known, and the testbench checks that every pair gets the right
// outcome. It also counts how often each mechanism occurred and fails if
// one never did.
module tb_genpairx_top;
  import genpairx_pkg::*;
  import tb_ref_pkg::*;

  localparam int NCH    = 32;
  localparam int W      = 1024;
  localparam int ADDR_W = 28;
  localparam int G      = 30000;
  localparam int NPAIRS = 1060;
  localparam int HOLD_FB  = 12000;  // fallback port blocked until here
  localparam int HOLD_RES = 30000;  // result port blocked until here

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL %s", what);
    end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- DUT and models ----------------
  loc_t cfg_delta = 500;
  logic in_valid = 0, in_ready;
  pair_id_t in_pair_id;
  read_seq_t in_r1, in_r2;
  logic              mem_req_valid [NCH];
  logic              mem_req_ready [NCH];
  logic [ADDR_W-1:0] mem_req_addr  [NCH];
  logic [15:0]       mem_req_len   [NCH];
  logic              mem_rsp_valid [NCH];
  logic              mem_rsp_ready [NCH];
  logic [31:0]       mem_rsp_data  [NCH];
  logic              mem_rsp_last  [NCH];
  logic ref_req_valid, ref_req_ready, ref_rsp_valid, ref_rsp_ready;
  loc_t ref_req_addr;
  ref_win_t ref_rsp_data;
  logic res_valid, res_ready = 0, fb_valid, fb_ready = 0;
  la_result_t res;
  fallback_t fb;

  genpairx_top dut (.*);

  ref_mem_model u_ref (
    .clk, .req_valid(ref_req_valid && rst_n), .req_ready(ref_req_ready), .req_addr(ref_req_addr),
    .rsp_valid(ref_rsp_valid), .rsp_ready(ref_rsp_ready), .rsp_data(ref_rsp_data));

  // SeedMap as built offline: (channel, local index, cumulative end) and
  // (channel, offset, location) records.
  typedef struct { int ch; int unsigned idx; int unsigned val; } rec_t;
  rec_t st_recs[$], lt_recs[$];
  bit seedmap_built = 0;
  int n_filter = 0, n_conflict = 0;

  for (genvar c = 0; c < NCH; c++) begin : g_mem
    hbm_channel_model #(.ADDR_W(ADDR_W)) u_m (
      .clk, .req_valid(mem_req_valid[c] && rst_n), .req_ready(mem_req_ready[c]),
      .req_addr(mem_req_addr[c]), .req_len(mem_req_len[c]),
      .rsp_valid(mem_rsp_valid[c]), .rsp_ready(mem_rsp_ready[c]),
      .rsp_data(mem_rsp_data[c]), .rsp_last(mem_rsp_last[c]));
    initial begin
      wait (seedmap_built);
      foreach (st_recs[i]) if (st_recs[i].ch == c) u_m.st_cum[st_recs[i].idx] = st_recs[i].val;
      foreach (lt_recs[i]) if (lt_recs[i].ch == c) u_m.lt[lt_recs[i].idx] = lt_recs[i].val;
    end
    // mechanism probes: index filter in the channel, switch conflicts
    always @(posedge clk) begin
      if (dut.u_nmsl.g_ch[c].u_ch.lr_push && dut.u_nmsl.g_ch[c].u_ch.range_len > 32'(INDEX_FILTER))
        n_filter++;
      if (dut.u_nmsl.g_ch[c].u_ch.cb_valid && !dut.u_nmsl.g_ch[c].u_ch.cb_ready)
        n_conflict++;
    end
  end

  // ---------------- reference and SeedMap ----------------
  base_t genome [G];
  localparam int POLYA = 1000, DUP_SRC = 5000, DUP_DST = 20000;

  function automatic seed_seq_t gseed(int p);
    seed_seq_t s;
    for (int i = 0; i < SEED_LEN; i++) s[2*i +: 2] = genome[p+i];
    return s;
  endfunction

  typedef struct { int ch; int unsigned idx; int p; } hit_t;
  task automatic build_reference();
    hit_t hits[$];
    hit_t h;
    hash_t hv;
    int off [NCH];
    for (int i = 0; i < G; i++) genome[i] = base_t'($urandom);
    for (int i = POLYA; i < POLYA + 600; i++) genome[i] = 2'b00;
    for (int i = 0; i < 600; i++) genome[DUP_DST + i] = genome[DUP_SRC + i];
    foreach (genome[i]) u_ref.genome.push_back(genome[i]);
    for (int p = 0; p + SEED_LEN <= G; p++) begin
      hv = seed_hash(gseed(p));
      h.ch = int'(hv % NCH);
      h.idx = hv / NCH;
      h.p = p;
      hits.push_back(h);
    end
    // sort by (channel, index); positions stay ascending inside a seed
    hits.sort() with ({item.ch[7:0], item.idx, item.p});
    foreach (off[c]) off[c] = 0;
    for (int i = 0; i < hits.size(); i++) begin
      lt_recs.push_back('{ch: hits[i].ch, idx: off[hits[i].ch], val: hits[i].p});
      off[hits[i].ch]++;
      if (i == hits.size() - 1 || hits[i+1].ch != hits[i].ch || hits[i+1].idx != hits[i].idx)
        st_recs.push_back('{ch: hits[i].ch, idx: hits[i].idx, val: off[hits[i].ch]});
    end
    seedmap_built = 1;
  endtask

  // ---------------- read pairs ----------------
  typedef enum {K_EXACT, K_MM1, K_MM2, K_DEL, K_INS, K_TWO, K_NOHIT, K_FAR, K_POLYA, K_DUP} kind_t;
  typedef struct {
    kind_t kind;
    int    f1, f2;
    edit_t e1, e2;
    int    k1, k2;
  } pinfo_t;
  pinfo_t info [NPAIRS];

  function automatic read_seq_t cut(int f, edit_t e, int k, int p);
    read_seq_t r;
    for (int i = 0; i < READ_LEN; i++) begin
      base_t b;
      case (e)
        EDIT_DELETION:  b = genome[(i < p) ? f+i : f+i+k];
        EDIT_INSERTION: b = (i < p) ? genome[f+i] : (i < p + k) ? base_t'($urandom) : genome[f+i-k];
        default:        b = genome[f+i];
      endcase
      r[2*i +: 2] = b;
    end
    if (e == EDIT_MISMATCH)
      for (int j = 0; j < k; j++) r[2*(60+15*j) +: 2] = r[2*(60+15*j) +: 2] ^ 2'(1 + $urandom % 3);
    return r;
  endfunction

  task automatic make_pair(int n, output read_seq_t r1, output read_seq_t r2);
    pinfo_t q;
    q.kind = kind_t'(n % 10);
    q.f1 = 2000 + $urandom % 16000;
    if (q.f1 >= DUP_SRC - 700 && q.f1 < DUP_SRC + 700) q.f1 += 1400;
    q.f2 = q.f1 + 150 + $urandom % 200;
    q.e1 = EDIT_NONE; q.e2 = EDIT_NONE; q.k1 = 0; q.k2 = 0;
    case (q.kind)
      K_MM1: begin q.e1 = EDIT_MISMATCH; q.k1 = 1; end
      K_MM2: begin q.e2 = EDIT_MISMATCH; q.k2 = 2; end
      K_DEL: begin q.e1 = EDIT_DELETION; q.k1 = 1 + (n / 10) % 5; end
      K_INS: begin q.e2 = EDIT_INSERTION; q.k2 = 1 + (n / 10) % 2; end
      K_FAR: q.f2 = q.f1 + 3000;
      K_POLYA: begin q.f1 = POLYA + 600 - SEED_LEN; q.f2 = q.f1 + 250; end
      K_DUP: begin q.f1 = DUP_SRC + 50 + $urandom % 100; q.f2 = q.f1 + 200; end
      default: ;
    endcase
    r1 = cut(q.f1, q.e1, q.k1, 130);
    r2 = cut(q.f2, q.e2, q.k2, 130);
    if (q.kind == K_TWO) begin
      // a mismatch at 110 and a deletion from 135 on: two edit types
      for (int i = 135; i < READ_LEN; i++) r1[2*i +: 2] = genome[q.f1 + i + 1];
      r1[2*110 +: 2] = r1[2*110 +: 2] ^ 2'b01;
    end
    if (q.kind == K_NOHIT) r1 = rand_read();
    info[n] = q;
  endtask

  // ---------------- output collection ----------------
  la_result_t results [int][$];
  fallback_t  fbs     [int][$];
  longint last_out = 0;
  int n_res = 0, n_fb = 0, n_unaligned = 0;
  int n_edit [4] = '{0, 0, 0, 0};
  int n_fb_reason [2] = '{0, 0};
  int n_win_full = 0, n_la_busy = 0, n_paf_busy = 0, n_in_stall = 0;

  always @(posedge clk) begin
    if (cyc % 10000 == 0)
      $display("cycle %0d: results %0d, fallbacks %0d, in flight %0d", cyc, n_res, n_fb, dut.u_nmsl.inflight);
    if (rst_n) begin
      if (res_valid && res_ready) begin
        results[int'(res.pair_id)].push_back(res);
        n_res++;
        if (res.aligned) n_edit[res.edit]++; else n_unaligned++;
        last_out = cyc;
      end
      if (fb_valid && fb_ready) begin
        fbs[int'(fb.pair_id)].push_back(fb);
        n_fb++;
        n_fb_reason[fb.reason]++;
        last_out = cyc;
      end
      if (dut.u_nmsl.inflight == (SLOT_W_TB + 1)'(W)) n_win_full++;
      if (in_valid && !in_ready) n_in_stall++;
      if (ref_rsp_valid && !ref_rsp_ready) n_la_busy++;
      if (dut.u_nmsl.state == 0 && dut.u_nmsl.rd_done == '1 && !dut.u_nmsl.any_free &&
          dut.u_nmsl.inflight != 0) n_paf_busy++;
    end
  end
  localparam int SLOT_W_TB = $clog2(W);

  // ---------------- stimulus ----------------
  initial begin
    read_seq_t r1, r2;
    for (int c = 0; c < NCH; c++) begin
      mem_req_ready[c] = 0;
      mem_rsp_valid[c] = 0;
    end
    build_reference();
    repeat (5) @(posedge clk);
    // the table copies above run at the same time step; give them a cycle
    @(negedge clk);
    rst_n = 1;
    fork
      begin
        for (int n = 0; n < NPAIRS; n++) begin
          make_pair(n, r1, r2);
          @(negedge clk);
          in_valid = 1; in_pair_id = n; in_r1 = r1; in_r2 = r2;
          // in_ready does not depend on in_valid: when it is high here, the
          // next rising edge takes the pair
          while (!in_ready) @(negedge clk);
          @(posedge clk);
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        // With the fallback port blocked, the first fallback pair stops the
        // dispatcher and the window fills. Once it is released the pairs
        // pour into the PAF instances and the light alignment buffer, which
        // cannot drain while results are blocked, so the PAF instances stay
        // busy and the dispatcher must wait for one.
        repeat (HOLD_FB) @(negedge clk);
        fb_ready = 1;
        repeat (HOLD_RES - HOLD_FB) @(negedge clk);
        res_ready = 1;
      end
    join
    while (cyc - last_out < 3000) @(posedge clk);
    check_all();
    $display("results %0d (unaligned %0d; none %0d mismatch %0d deletion %0d insertion %0d), fallbacks %0d (no seed hit %0d, no adjacent %0d)",
             n_res, n_unaligned, n_edit[0], n_edit[1], n_edit[2], n_edit[3], n_fb, n_fb_reason[0], n_fb_reason[1]);
    $display("window-full cycles %0d, input stall cycles %0d, index-filtered seeds %0d, buffer switch conflicts %0d, PAF-all-busy cycles %0d, LA-all-busy cycles %0d, cycles %0d",
             n_win_full, n_in_stall, n_filter, n_conflict, n_paf_busy, n_la_busy, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit has_result(int n, bit rs, int loc, edit_t e, int k, bit aligned);
    if (!results.exists(n)) return 0;
    for (int i = 0; i < results[n].size(); i++) begin
      la_result_t r;
      r = results[n][i];
      if (r.read_sel == rs && int'(r.location) == loc && r.aligned == aligned &&
          (!aligned || (r.edit == e && int'(r.edit_len) == k && r.score == edit_score(e, k))))
        return 1;
    end
    return 0;
  endfunction

  task automatic check_all();
    for (int n = 0; n < NPAIRS; n++) begin
      pinfo_t q;
      q = info[n];
      case (q.kind)
        K_NOHIT: chk(fbs.exists(n) && fbs[n][0].reason == FB_NO_SEED_HIT && !results.exists(n),
                     $sformatf("pair %0d: expected no-seed-hit fallback", n));
        K_FAR:   chk(fbs.exists(n) && fbs[n][0].reason == FB_NO_ADJACENT && !results.exists(n),
                     $sformatf("pair %0d: expected no-adjacent fallback", n));
        K_TWO: begin
          chk(!fbs.exists(n), $sformatf("pair %0d: unexpected fallback", n));
          chk(has_result(n, 0, q.f1, EDIT_NONE, 0, 0) && !has_result(n, 0, q.f1, EDIT_DELETION, 1, 1),
              $sformatf("pair %0d: read 1 with two edit types should be unaligned", n));
          chk(has_result(n, 1, q.f2, q.e2, q.k2, 1), $sformatf("pair %0d: read 2 not aligned", n));
        end
        default: begin
          chk(!fbs.exists(n), $sformatf("pair %0d kind %s: unexpected fallback", n, q.kind.name()));
          chk(has_result(n, 0, q.f1, q.e1, q.k1, 1),
              $sformatf("pair %0d kind %s: no read 1 result at %0d with %s/%0d", n, q.kind.name(), q.f1, q.e1.name(), q.k1));
          chk(has_result(n, 1, q.f2, q.e2, q.k2, 1),
              $sformatf("pair %0d kind %s: no read 2 result at %0d with %s/%0d", n, q.kind.name(), q.f2, q.e2.name(), q.k2));
          if (q.kind == K_DUP)
            chk(has_result(n, 0, q.f1 + DUP_DST - DUP_SRC, EDIT_NONE, 0, 1), $sformatf("pair %0d: copy not found", n));
        end
      endcase
    end
    chk(n_win_full > 0, "window never full");
    chk(n_in_stall > 0, "input never stalled");
    chk(n_filter > 0, "index filter never applied");
    chk(n_conflict > 0, "no centralized-buffer switch conflict");
    chk(n_fb_reason[0] > 0 && n_fb_reason[1] > 0, "both fallback kinds");
    chk(n_edit[0] > 0 && n_edit[1] > 0 && n_edit[2] > 0 && n_edit[3] > 0 && n_unaligned > 0, "all alignment outcomes");
    chk(n_paf_busy > 0, "PAF instances never all busy");
  endtask
endmodule

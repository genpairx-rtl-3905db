// tb_nmsl -- checks the Near Memory Seed Locator (window, seed switch,
// channels, centralized buffer and dispatcher) at a reduced size: 4 memory
// channels, a window of 8 pairs, 8 locations per seed FIFO (also the index
// filter), 2 PAF instances.
//
// The seed hashes are drawn from a pool whose SeedMap entries are known: a
// hash h lives in channel h mod 4 at table index h / 4 and owns 0 to 8
// sorted random locations, or 12 (more than the filter allows, so it must
// count as no location). Each channel has its own memory latency, so
// responses of different pairs come back out of order. The PAF side is
// modelled: an instance is busy for a random time after each load. For
// every pair the testbench checks that, in arrival order, either both reads'
// location lists were loaded into one PAF instance (each the sorted merge of
// its three seeds' lists, with the seed number of every location), or, if
// a read had no location, the pair went to the fallback port. It also
// counts window-full cycles, switch conflicts and cycles where a finished
// pair waits for a PAF instance, and fails if any of them never occurred.
module tb_nmsl;
  import genpairx_pkg::*;

  localparam int NCH = 4, W = 8, DEPTH = 8, NPAF = 2, ADDR_W = 14, NP = 400;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic              in_valid = 0, in_ready;
  pair_id_t          in_pair_id = 0;
  hash_t             in_hash [SEEDS_PER_PAIR];
  read_seq_t         in_r1 = '0, in_r2 = '0;
  logic              mem_req_valid [NCH];
  logic              mem_req_ready [NCH];
  logic [ADDR_W-1:0] mem_req_addr  [NCH];
  logic [15:0]       mem_req_len   [NCH];
  logic              mem_rsp_valid [NCH];
  logic              mem_rsp_ready [NCH];
  logic [31:0]       mem_rsp_data  [NCH];
  logic              mem_rsp_last  [NCH];
  logic              paf_idle     [NPAF];
  logic              paf_ld_valid [NPAF][2];
  seed_loc_t         paf_ld_loc   [2];
  logic              paf_ld_done  [NPAF];
  pair_id_t          paf_ld_pair_id;
  read_seq_t         paf_ld_r1, paf_ld_r2;
  logic              fb_valid, fb_ready = 1;
  fallback_t         fb;

  nmsl #(.NCH(NCH), .W(W), .DEPTH(DEPTH), .FIFO_DEPTH(8), .MAX_OUT(4), .NPAF(NPAF),
         .ADDR_W(ADDR_W)) dut (.*);

  localparam int NIDX = 40;
  loc_t locs [NCH][NIDX][$];

  for (genvar c = 0; c < NCH; c++) begin : g_mem
    hbm_channel_model #(.ADDR_W(ADDR_W), .LATENCY(4 + 9 * c)) u_m (
      .clk, .req_valid(mem_req_valid[c] && rst_n), .req_ready(mem_req_ready[c]),
      .req_addr(mem_req_addr[c]), .req_len(mem_req_len[c]),
      .rsp_valid(mem_rsp_valid[c]), .rsp_ready(mem_rsp_ready[c]),
      .rsp_data(mem_rsp_data[c]), .rsp_last(mem_rsp_last[c]));
    initial begin
      int unsigned cum;
      cum = 0;
      #1;
      for (int k = 0; k < NIDX; k++) begin
        foreach (locs[c][k][i]) u_m.lt[cum + i] = locs[c][k][i];
        cum += locs[c][k].size();
        u_m.st_cum[k] = cum;
      end
    end
  end

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

  // expected outcome of every pair
  seed_loc_t exp_l [NP][2][$];
  read_seq_t exp_r [NP][2];
  bit        exp_fb [NP];
  int        next_out = 0;
  int        n_fb = 0, n_load = 0, n_full = 0, n_conflict = 0, n_wait_paf = 0;

  // PAF model: busy for a random time after each load
  seed_loc_t cur [NPAF][2][$];
  int        busy [NPAF];
  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NPAF; p++) begin
        for (int r = 0; r < 2; r++)
          if (paf_ld_valid[p][r]) cur[p][r].push_back(paf_ld_loc[r]);
        if (paf_ld_done[p]) begin
          int n;
          n = int'(paf_ld_pair_id);
          chk(n == next_out, $sformatf("PAF %0d got pair %0d, expected pair %0d next", p, n, next_out));
          if (n < NP) begin
            chk(!exp_fb[n], $sformatf("pair %0d should have gone to fallback", n));
            chk(cur[p][0] == exp_l[n][0] && cur[p][1] == exp_l[n][1],
                $sformatf("pair %0d: wrong location lists (%0d/%0d entries, expected %0d/%0d)",
                          n, cur[p][0].size(), cur[p][1].size(), exp_l[n][0].size(), exp_l[n][1].size()));
            chk(paf_ld_r1 == exp_r[n][0] && paf_ld_r2 == exp_r[n][1], $sformatf("pair %0d: wrong reads", n));
          end
          cur[p][0].delete();
          cur[p][1].delete();
          next_out++;
          n_load++;
          busy[p] = 5 + $urandom % 60;
        end else if (busy[p] > 0) busy[p]--;
      end
      if (fb_valid && fb_ready) begin
        chk(int'(fb.pair_id) == next_out && exp_fb[next_out] && fb.reason == FB_NO_SEED_HIT,
            $sformatf("unexpected fallback for pair %0d", fb.pair_id));
        next_out++;
        n_fb++;
      end
      if (dut.inflight == 4'(W)) n_full++;
      for (int c = 0; c < NCH; c++) if (dut.cb_valid[c] && !dut.cb_ready[c]) n_conflict++;
      if (dut.state == 0 && dut.rd_done == '1 && !dut.empty_read && !dut.any_free && dut.inflight != 0) n_wait_paf++;
    end
  end
  always_comb for (int p = 0; p < NPAF; p++) paf_idle[p] = (busy[p] == 0);

  function automatic void merge(int n, int r, hash_t h [SEEDS_PER_PAIR]);
    exp_l[n][r].delete();
    for (int j = 0; j < SEEDS_PER_READ; j++) begin
      hash_t hv;
      hv = h[3 * r + j];
      if (locs[hv % NCH][hv / NCH].size() <= DEPTH)
        foreach (locs[hv % NCH][hv / NCH][i])
          exp_l[n][r].push_back('{loc: locs[hv % NCH][hv / NCH][i], sidx: 2'(j)});
    end
    // equal locations (a hash drawn twice) leave in seed order
    exp_l[n][r].sort() with ({item.loc, item.sidx});
  endfunction

  initial begin
    foreach (busy[p]) busy[p] = 0;
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < NIDX; k++) begin
        int n;
        n = (k % 4 == 0) ? 0 : (k % 7 == 0) ? 12 : 1 + $urandom % DEPTH;
        for (int i = 0; i < n; i++) locs[c][k].push_back(loc_t'($urandom));
        locs[c][k].sort();
      end
    foreach (in_hash[s]) in_hash[s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NP; n++) begin
      hash_t h [SEEDS_PER_PAIR];
      foreach (h[s]) h[s] = hash_t'(($urandom % NIDX) * NCH + $urandom % NCH);
      // a quarter of the pairs get seeds that all miss on one read
      if (n % 4 == 3) for (int s = 0; s < 3; s++) h[s] = hash_t'((4 * ($urandom % 10)) * NCH + $urandom % NCH);
      exp_r[n][0] = {$urandom, $urandom};
      exp_r[n][1] = {$urandom, $urandom};
      merge(n, 0, h);
      merge(n, 1, h);
      exp_fb[n] = exp_l[n][0].size() == 0 || exp_l[n][1].size() == 0;
      @(negedge clk);
      in_valid = 1; in_pair_id = n; in_hash = h; in_r1 = exp_r[n][0]; in_r2 = exp_r[n][1];
      while (!in_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
    while (next_out < NP) @(posedge clk);
    repeat (20) @(posedge clk);
    chk(n_full > 0, "window never full");
    chk(n_conflict > 0, "no switch conflict");
    chk(n_wait_paf > 0, "never waited for a PAF instance");
    chk(n_fb > 0 && n_load > 0, "both outcomes");
    $display("loads %0d, fallbacks %0d, window-full cycles %0d, switch conflicts %0d, PAF waits %0d",
             n_load, n_fb, n_full, n_conflict, n_wait_paf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

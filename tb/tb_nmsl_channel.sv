// tb_nmsl_channel -- checks one seed-locator memory channel against a
// behavioural memory holding a random SeedMap slice, at reduced sizes
// (256 Seed Table entries, an index filter of 20 locations, 16-entry FIFOs).
//
// Each local index owns 0 to 25 locations; the Seed Table holds the
// cumulative ends. 600 queries, each with its own (slot, seed) tag, are
// sent at random times while the centralized-buffer side accepts at random.
// For every tag the testbench checks that the channel delivered exactly the
// seed's location list, in order, with the last flag on the final location,
// or a single empty closing event for a seed with no locations or with more
// than the filter threshold. It also checks that index 0 (whose range starts
// at 0) works and that stalls on both sides happened.
module tb_nmsl_channel;
  import genpairx_pkg::*;

  localparam int SLOT_W = 7, IDX_W = 8, ADDR_W = 14, MAX_LOCS = 20, NQ = 600;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic              q_valid = 0, q_ready;
  logic [SLOT_W-1:0] q_slot = 0;
  logic [2:0]        q_seed = 0;
  logic [IDX_W-1:0]  q_idx = 0;
  logic              mem_req_valid, mem_req_ready;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [15:0]       mem_req_len;
  logic              mem_rsp_valid, mem_rsp_ready, mem_rsp_last;
  logic [31:0]       mem_rsp_data;
  logic              cb_valid, cb_ready = 0, cb_has_loc, cb_last;
  logic [SLOT_W-1:0] cb_slot;
  logic [2:0]        cb_seed;
  loc_t              cb_loc;

  nmsl_channel #(.FIFO_DEPTH(16), .MAX_OUT(4), .SLOT_W(SLOT_W), .IDX_W(IDX_W),
                 .ADDR_W(ADDR_W), .MAX_LOCS(MAX_LOCS)) dut (.*);

  hbm_channel_model #(.ADDR_W(ADDR_W), .LATENCY(6)) u_mem (
    .clk, .req_valid(mem_req_valid && rst_n), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .req_len(mem_req_len),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready),
    .rsp_data(mem_rsp_data), .rsp_last(mem_rsp_last));

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

  loc_t locs [256][$];
  loc_t got  [int][$];
  int   closed [int];
  int   n_events = 0, n_cb_stall = 0, n_q_stall = 0, n_filtered = 0, n_empty = 0;

  // the centralized-buffer handshake is sampled at the rising edge and
  // checked at the falling edge, where cb_ready is changed
  logic              ev = 0, ev_has, ev_last;
  logic [SLOT_W-1:0] ev_slot;
  logic [2:0]        ev_seed;
  loc_t              ev_loc;
  always @(posedge clk) begin
    ev      <= rst_n && cb_valid && cb_ready;
    ev_has  <= cb_has_loc;
    ev_last <= cb_last;
    ev_slot <= cb_slot;
    ev_seed <= cb_seed;
    ev_loc  <= cb_loc;
    if (rst_n && cb_valid && !cb_ready) n_cb_stall++;
    if (rst_n && q_valid && !q_ready) n_q_stall++;
  end

  always @(negedge clk) begin
    if (ev) begin
      int key;
      key = int'(ev_slot) * 8 + int'(ev_seed);
      chk(!closed.exists(key), $sformatf("tag %0d got an event after its last", key));
      if (ev_has) got[key].push_back(ev_loc);
      if (ev_last) closed[key] = 1;
      n_events++;
    end
    if (rst_n) cb_ready = ($urandom % 4) != 0;
  end

  int qidx [int];
  initial begin
    int unsigned cum;
    cum = 0;
    for (int k = 0; k < 256; k++) begin
      int n;
      n = (k % 3 == 0) ? 0 : $urandom % (MAX_LOCS + 6);
      if (k == 0) n = 5;
      for (int i = 0; i < n; i++) begin
        locs[k].push_back($urandom);
        u_mem.lt[cum + i] = locs[k][i];
      end
      cum += n;
      u_mem.st_cum[k] = cum;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int q = 0; q < NQ; q++) begin
      @(negedge clk);
      while ($urandom % 3 == 0) @(negedge clk);
      q_valid = 1;
      q_slot = SLOT_W'(q / 6);
      q_seed = 3'(q % 6);
      q_idx  = (q < 4) ? '0 : IDX_W'($urandom);
      qidx[int'(q_slot) * 8 + int'(q_seed)] = int'(q_idx);
      // q_ready depends only on the FIFO level, so it is stable here
      while (!q_ready) @(negedge clk);
      @(negedge clk);
      q_valid = 0;
    end
    while (closed.size() < NQ && n_events < 100000) @(posedge clk);
    repeat (50) @(posedge clk);
    foreach (qidx[key]) begin
      int k;
      k = qidx[key];
      chk(closed.exists(key), $sformatf("tag %0d never closed", key));
      if (locs[k].size() == 0 || locs[k].size() > MAX_LOCS) begin
        if (locs[k].size() > MAX_LOCS) n_filtered++; else n_empty++;
        chk(!got.exists(key), $sformatf("tag %0d (index %0d, %0d locations) should be empty", key, k, locs[k].size()));
      end else begin
        chk(got.exists(key) && got[key] == locs[k],
            $sformatf("tag %0d index %0d: wrong location list got %p exp %p", key, k, got[key], locs[k]));
      end
    end
    chk(n_cb_stall > 0 && n_q_stall > 0 && n_filtered > 0 && n_empty > 0, "all cases exercised");
    $display("events %0d, cb stalls %0d, query stalls %0d, filtered %0d, empty %0d",
             n_events, n_cb_stall, n_q_stall, n_filtered, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

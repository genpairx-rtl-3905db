// tb_central_buffer -- checks the centralized location buffer and its switch
// at a reduced size (8 read-pair slots, 4 channels, 8 locations per seed).
//
// Every (slot, seed) gets a random number of random locations (0 to DEPTH),
// delivered by one randomly chosen channel as a stream of beats whose last
// beat carries the done mark; a seed without locations is one beat with no
// location. The four channels drive their streams at the same time, so two
// channels often target the same slot; the switch must then accept only the
// lowest of them, and the others must hold their beat. When all streams
// are in, every slot is read back through the read port and compared with
// the reference, then freed and checked empty. This is repeated for several
// rounds. Written beats are visible on the read port the next cycle.
module tb_central_buffer;
  import genpairx_pkg::*;

  localparam int W = 8, NCH = 4, DEPTH = 8;
  localparam int SLOT_W = $clog2(W), CW = $clog2(DEPTH + 1);

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic              wr_valid   [NCH];
  logic              wr_ready   [NCH];
  logic [SLOT_W-1:0] wr_slot    [NCH];
  logic [2:0]        wr_seed    [NCH];
  loc_t              wr_loc     [NCH];
  logic              wr_has_loc [NCH];
  logic              wr_last    [NCH];
  logic [SLOT_W-1:0] rd_slot = 0;
  logic [CW-1:0]     rd_ptr  [SEEDS_PER_PAIR];
  loc_t              rd_loc  [SEEDS_PER_PAIR];
  logic [CW-1:0]     rd_cnt  [SEEDS_PER_PAIR];
  logic [SEEDS_PER_PAIR-1:0] rd_done;
  logic              free_valid = 0;
  logic [SLOT_W-1:0] free_slot = 0;

  central_buffer #(.W(W), .NCH(NCH), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    logic [SLOT_W-1:0] slot;
    logic [2:0]        seed;
    loc_t              loc;
    logic              has, last;
  } beat_t;
  beat_t chq [NCH][$];
  loc_t  expl [W][SEEDS_PER_PAIR][$];
  int    n_conflict = 0;

  // each channel drives the head of its queue; beats leave on wr_ready
  always @(negedge clk) begin
    for (int c = 0; c < NCH; c++) begin
      if (wr_valid[c] && wr_ready[c]) void'(chq[c].pop_front());
      if (wr_valid[c] && !wr_ready[c]) n_conflict++;
    end
    for (int c = 0; c < NCH; c++) begin
      wr_valid[c] = rst_n && chq[c].size() != 0;
      if (chq[c].size() != 0) begin
        wr_slot[c] = chq[c][0].slot; wr_seed[c] = chq[c][0].seed; wr_loc[c] = chq[c][0].loc;
        wr_has_loc[c] = chq[c][0].has; wr_last[c] = chq[c][0].last;
      end
    end
  end

  initial begin
    for (int c = 0; c < NCH; c++) begin
      wr_valid[c] = 0; wr_slot[c] = 0; wr_seed[c] = 0; wr_loc[c] = 0; wr_has_loc[c] = 0; wr_last[c] = 0;
    end
    foreach (rd_ptr[s]) rd_ptr[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      // build the streams
      for (int k = 0; k < W; k++)
        for (int s = 0; s < SEEDS_PER_PAIR; s++) begin
          int c, n;
          c = $urandom % NCH;
          n = $urandom % (DEPTH + 1);
          if (round == 0) n = DEPTH;
          expl[k][s].delete();
          for (int i = 0; i < n; i++) begin
            loc_t l;
            l = $urandom;
            expl[k][s].push_back(l);
            chq[c].push_back('{slot: SLOT_W'(k), seed: 3'(s), loc: l, has: 1, last: i == n - 1});
          end
          if (n == 0) chq[c].push_back('{slot: SLOT_W'(k), seed: 3'(s), loc: 0, has: 0, last: 1});
        end
      // mix the order inside each channel by slot, keeping each seed in order
      for (int c = 0; c < NCH; c++) begin
        beat_t tmp[$];
        int    k0;
        k0 = $urandom % W;
        tmp.delete();
        foreach (chq[c][i]) if (chq[c][i].slot >= k0) tmp.push_back(chq[c][i]);
        foreach (chq[c][i]) if (chq[c][i].slot < k0) tmp.push_back(chq[c][i]);
        chq[c] = tmp;
      end
      while (chq[0].size() + chq[1].size() + chq[2].size() + chq[3].size() != 0) @(posedge clk);
      @(negedge clk);
      // read back every slot
      for (int k = 0; k < W; k++) begin
        rd_slot = SLOT_W'(k);
        for (int i = 0; i < DEPTH; i++) begin
          foreach (rd_ptr[s]) rd_ptr[s] = CW'(i);
          #1;
          for (int s = 0; s < SEEDS_PER_PAIR; s++) begin
            if (i == 0) begin
              chk(rd_done[s], $sformatf("round %0d slot %0d seed %0d not done", round, k, s));
              chk(int'(rd_cnt[s]) == expl[k][s].size(),
                  $sformatf("round %0d slot %0d seed %0d count %0d, expected %0d", round, k, s, rd_cnt[s], expl[k][s].size()));
            end
            if (i < expl[k][s].size())
              chk(rd_loc[s] == expl[k][s][i], $sformatf("slot %0d seed %0d entry %0d", k, s, i));
          end
        end
      end
      // free every slot; it must read empty afterwards
      for (int k = 0; k < W; k++) begin
        free_valid = 1; free_slot = SLOT_W'(k);
        @(negedge clk);
      end
      free_valid = 0;
      for (int k = 0; k < W; k++) begin
        rd_slot = SLOT_W'(k);
        #1;
        chk(rd_done == '0 && rd_cnt[0] == 0 && rd_cnt[5] == 0, $sformatf("slot %0d not cleared", k));
      end
      @(negedge clk);
    end
    chk(n_conflict > 0, "no switch conflict happened");
    $display("switch conflicts: %0d", n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

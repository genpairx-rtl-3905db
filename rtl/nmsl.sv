// nmsl -- Near Memory Seed Locator: the SeedMap Query stage.
//
// Turns the six seed hashes of each read pair into six sorted lists of
// genome locations and hands each complete pair to a free Paired-Adjacency
// Filtering (PAF) instance.
//
// Read-pair sliding window. At most W pairs are in flight. An accepted pair
// takes the window slot at the tail and its reads are parked in the window
// memory; its six seeds are then sent to the seed switch one per cycle. The
// window's head advances by one pair (the "window advance" signal,
// free_valid) when the dispatcher has moved the head pair out of the
// centralized buffer, so pairs leave in arrival order while their memory
// responses may come back in any order.
//
// Seed switch and channels. Seed hash h goes to memory channel h mod NCH,
// table index h / NCH (the hash spreads seeds evenly over the channels).
// Each nmsl_channel queues the lookup in its FIFO, reads the Seed Table
// range and the Location Table burst, and sends the locations through the
// location switch into the centralized buffer (central_buffer), to the FIFO
// of the seed's slot and seed number.
//
// Dispatcher. When all six seeds of the head pair are done, the dispatcher
// merges the three sorted lists of read 1 into the PAF instance's FIFO1 and
// those of read 2 into its FIFO2, one location per read per cycle, then
// pulses that instance's ld_done with the pair's id and reads, and frees the
// slot. If either read got no location at all, the pair is sent to the
// fallback port (FB_NO_SEED_HIT) instead.
//
// From the paper: the window over read pairs with its advance signal, the
// switch and FIFO per memory channel, tables spread over all channels, the
// centralized buffer of W x 6 FIFOs, the merge of the three sorted lists of
// a read, and the dispatcher to the PAF modules. This design's choices: one
// seed issued per cycle, in-order retirement at the window head, the slot
// being freed only after its locations are copied out, keeping the reads in
// the window, and the hash-to-channel mapping.
module nmsl
  import genpairx_pkg::*;
#(
  parameter int NCH        = 32,
  parameter int W          = 1024,
  parameter int DEPTH      = INDEX_FILTER,
  parameter int FIFO_DEPTH = 1024,
  parameter int MAX_OUT    = 16,
  parameter int NPAF       = 3,
  parameter int ADDR_W     = 28,
  localparam int CHW    = $clog2(NCH),
  localparam int SLOT_W = $clog2(W),
  localparam int CW     = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // from Partitioned Seeding
  input  logic              in_valid,
  output logic              in_ready,
  input  pair_id_t          in_pair_id,
  input  hash_t             in_hash [SEEDS_PER_PAIR],
  input  read_seq_t         in_r1,
  input  read_seq_t         in_r2,
  // memory channels
  output logic              mem_req_valid [NCH],
  input  logic              mem_req_ready [NCH],
  output logic [ADDR_W-1:0] mem_req_addr  [NCH],
  output logic [15:0]       mem_req_len   [NCH],
  input  logic              mem_rsp_valid [NCH],
  output logic              mem_rsp_ready [NCH],
  input  logic [31:0]       mem_rsp_data  [NCH],
  input  logic              mem_rsp_last  [NCH],
  // to the PAF instances
  input  logic              paf_idle     [NPAF],
  output logic              paf_ld_valid [NPAF][2],
  output seed_loc_t         paf_ld_loc   [2],
  output logic              paf_ld_done  [NPAF],
  output pair_id_t          paf_ld_pair_id,
  output read_seq_t         paf_ld_r1,
  output read_seq_t         paf_ld_r2,
  // pairs without any seed hit
  output logic              fb_valid,
  input  logic              fb_ready,
  output fallback_t         fb
);
  localparam int IDX_W = HASH_W - CHW;

  typedef struct packed {
    pair_id_t  id;
    read_seq_t r1;
    read_seq_t r2;
  } wpair_t;

  // ---------------- read-pair sliding window ----------------
  wpair_t            win_mem [W];
  logic [SLOT_W-1:0] head, tail;
  logic [SLOT_W:0]   inflight;
  logic              free_valid;
  logic              accept;

  // seed issue register
  logic              cur_valid;
  hash_t             cur_hash [SEEDS_PER_PAIR];
  logic [SLOT_W-1:0] cur_slot;
  logic [2:0]        cur_k;
  hash_t             cur_h;
  logic [CHW-1:0]    cur_ch;
  logic              q_valid [NCH];
  logic              q_ready [NCH];
  logic              seed_go, last_go;

  assign cur_h   = cur_hash[cur_k];
  assign cur_ch  = cur_h[CHW-1:0];
  assign seed_go = cur_valid && q_ready[cur_ch];
  assign last_go = seed_go && (cur_k == 3'(SEEDS_PER_PAIR - 1));
  assign in_ready = (!cur_valid || last_go) && (inflight != (SLOT_W+1)'(W));
  assign accept   = in_valid && in_ready;

  always_comb begin
    for (int c = 0; c < NCH; c++) q_valid[c] = cur_valid && (cur_ch == CHW'(c));
  end

  always_ff @(posedge clk) begin
    if (accept) win_mem[tail] <= '{id: in_pair_id, r1: in_r1, r2: in_r2};
    if (accept) begin
      cur_hash <= in_hash;
      cur_slot <= tail;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tail      <= '0;
      inflight  <= '0;
      cur_valid <= 1'b0;
      cur_k     <= '0;
    end else begin
      if (accept) tail <= tail + 1'b1;
      case ({accept, free_valid})
        2'b10:   inflight <= inflight + 1'b1;
        2'b01:   inflight <= inflight - 1'b1;
        default: ;
      endcase
      if (accept) begin
        cur_valid <= 1'b1;
        cur_k     <= '0;
      end else if (last_go) begin
        cur_valid <= 1'b0;
      end else if (seed_go) begin
        cur_k <= cur_k + 1'b1;
      end
    end
  end

  // ---------------- memory channels ----------------
  logic              cb_valid   [NCH];
  logic              cb_ready   [NCH];
  logic [SLOT_W-1:0] cb_slot    [NCH];
  logic [2:0]        cb_seed    [NCH];
  loc_t              cb_loc     [NCH];
  logic              cb_has_loc [NCH];
  logic              cb_last    [NCH];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    nmsl_channel #(
      .FIFO_DEPTH(FIFO_DEPTH), .MAX_OUT(MAX_OUT), .SLOT_W(SLOT_W),
      .IDX_W(IDX_W), .ADDR_W(ADDR_W), .MAX_LOCS(DEPTH)
    ) u_ch (
      .clk, .rst_n,
      .q_valid(q_valid[c]), .q_ready(q_ready[c]),
      .q_slot(cur_slot), .q_seed(cur_k), .q_idx(cur_h[HASH_W-1:CHW]),
      .mem_req_valid(mem_req_valid[c]), .mem_req_ready(mem_req_ready[c]),
      .mem_req_addr(mem_req_addr[c]), .mem_req_len(mem_req_len[c]),
      .mem_rsp_valid(mem_rsp_valid[c]), .mem_rsp_ready(mem_rsp_ready[c]),
      .mem_rsp_data(mem_rsp_data[c]), .mem_rsp_last(mem_rsp_last[c]),
      .cb_valid(cb_valid[c]), .cb_ready(cb_ready[c]), .cb_slot(cb_slot[c]),
      .cb_seed(cb_seed[c]), .cb_loc(cb_loc[c]), .cb_has_loc(cb_has_loc[c]),
      .cb_last(cb_last[c]));
  end

  // ---------------- centralized buffer ----------------
  logic [CW-1:0]             rd_ptr [SEEDS_PER_PAIR];
  loc_t                      rd_loc [SEEDS_PER_PAIR];
  logic [CW-1:0]             rd_cnt [SEEDS_PER_PAIR];
  logic [SEEDS_PER_PAIR-1:0] rd_done;

  central_buffer #(.W(W), .NCH(NCH), .DEPTH(DEPTH)) u_cbuf (
    .clk, .rst_n,
    .wr_valid(cb_valid), .wr_ready(cb_ready), .wr_slot(cb_slot), .wr_seed(cb_seed),
    .wr_loc(cb_loc), .wr_has_loc(cb_has_loc), .wr_last(cb_last),
    .rd_slot(head), .rd_ptr(rd_ptr), .rd_loc(rd_loc), .rd_cnt(rd_cnt), .rd_done(rd_done),
    .free_valid(free_valid), .free_slot(head));

  // ---------------- dispatcher ----------------
  typedef enum logic [1:0] {D_IDLE, D_MERGE, D_DONE, D_FB} dstate_t;
  dstate_t state;
  logic [$clog2(NPAF+1)-1:0] sel;
  logic [$clog2(NPAF+1)-1:0] free_paf;
  logic                      any_free;
  logic                      empty_read;
  wpair_t                    head_pair;

  assign head_pair  = win_mem[head];
  assign empty_read = (rd_cnt[0] == '0 && rd_cnt[1] == '0 && rd_cnt[2] == '0) ||
                      (rd_cnt[3] == '0 && rd_cnt[4] == '0 && rd_cnt[5] == '0);

  always_comb begin
    any_free = 1'b0;
    free_paf = '0;
    for (int p = NPAF - 1; p >= 0; p--)
      if (paf_idle[p]) begin
        any_free = 1'b1;
        free_paf = ($clog2(NPAF+1))'(p);
      end
  end

  // Merge step: the smallest head among a read's three seed FIFOs.
  logic      m_valid [2];
  logic [2:0] m_seed [2];
  always_comb begin
    for (int r = 0; r < 2; r++) begin
      m_valid[r] = 1'b0;
      m_seed[r]  = 3'(3 * r);
      for (int j = 0; j < SEEDS_PER_READ; j++) begin
        int s;
        s = 3 * r + j;
        if (rd_ptr[s] < rd_cnt[s] && (!m_valid[r] || rd_loc[s] < rd_loc[m_seed[r]])) begin
          m_valid[r] = 1'b1;
          m_seed[r]  = 3'(s);
        end
      end
      paf_ld_loc[r] = '{loc: rd_loc[m_seed[r]], sidx: 2'(m_seed[r] - 3'(3 * r))};
    end
    for (int p = 0; p < NPAF; p++) begin
      for (int r = 0; r < 2; r++)
        paf_ld_valid[p][r] = (state == D_MERGE) && (sel == ($clog2(NPAF+1))'(p)) && m_valid[r];
      paf_ld_done[p] = (state == D_DONE) && (sel == ($clog2(NPAF+1))'(p));
    end
  end

  assign paf_ld_pair_id = head_pair.id;
  assign paf_ld_r1      = head_pair.r1;
  assign paf_ld_r2      = head_pair.r2;
  assign fb_valid       = (state == D_FB);
  assign fb             = '{pair_id: head_pair.id, reason: FB_NO_SEED_HIT};
  assign free_valid     = (state == D_DONE) || (state == D_FB && fb_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE;
      head  <= '0;
      sel   <= '0;
      for (int s = 0; s < SEEDS_PER_PAIR; s++) rd_ptr[s] <= '0;
    end else begin
      case (state)
        D_IDLE: begin
          for (int s = 0; s < SEEDS_PER_PAIR; s++) rd_ptr[s] <= '0;
          if (inflight != '0) begin
            if (rd_done == '1) begin
              if (empty_read) state <= D_FB;
              else if (any_free) begin
                sel   <= free_paf;
                state <= D_MERGE;
              end
            end
          end
        end
        D_MERGE: begin
          for (int r = 0; r < 2; r++)
            if (m_valid[r]) rd_ptr[m_seed[r]] <= rd_ptr[m_seed[r]] + 1'b1;
          if (!m_valid[0] && !m_valid[1]) state <= D_DONE;
        end
        D_DONE: begin
          head  <= head + 1'b1;
          state <= D_IDLE;
        end
        D_FB: if (fb_ready) begin
          head  <= head + 1'b1;
          state <= D_IDLE;
        end
        default: state <= D_IDLE;
      endcase
    end
  end
endmodule

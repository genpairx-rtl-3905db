// genpairx_pkg -- constants and types shared by the GenPairX read-mapping
// accelerator.
//
// Read pairs are two 150-base reads; each base is a 2-bit code (A=0, C=1,
// G=2, T=3), base i of a sequence sits in bits [2i+1:2i]. Each read is cut
// into three non-overlapping 50-base seeds, so a pair yields six seeds
// (s0..s2 from read 1, s3..s5 from read 2). Genome locations are 32-bit
// linear coordinates of the reference. The read and seed lengths, the six
// seeds per pair, the 32-bit hash, the index filtering threshold of 500 and
// the alignment scores follow the paper; the base encoding, the 32-bit
// location width and the struct layouts are this design's own choices.
package genpairx_pkg;

  localparam int READ_LEN       = 150;  // bases per read
  localparam int SEED_LEN       = 50;   // bases per seed
  localparam int SEEDS_PER_READ = 3;
  localparam int SEEDS_PER_PAIR = 6;
  localparam int HASH_W         = 32;   // xxHash32 output
  localparam int LOC_W          = 32;   // genome location
  localparam int PAIR_ID_W      = 32;
  localparam int INDEX_FILTER   = 500;  // max locations kept per seed

  // Light alignment: the reference window covers shifts from IMAX bases
  // left (insertions in the read) to DMAX bases right (deletions).
  localparam int IMAX    = 2;                    // 1..2 consecutive insertions
  localparam int DMAX    = 5;                    // 1..5 consecutive deletions
  localparam int NMASK   = IMAX + DMAX + 1;      // 8 Hamming masks
  localparam int REF_WIN = READ_LEN + IMAX + DMAX;

  // Minimap2 short-read scoring, which reproduces every score of the
  // paper's edit table: match +2, mismatch -8, gap of k costs 12 + 2k.
  localparam int SC_MATCH    = 2;
  localparam int SC_MISMATCH = 8;
  localparam int SC_GAP_OPEN = 12;
  localparam int SC_GAP_EXT  = 2;
  localparam int SCORE_W     = 10;
  localparam int POS_W       = $clog2(READ_LEN + 1);

  typedef logic [1:0]              base_t;
  typedef logic [2*READ_LEN-1:0]   read_seq_t;
  typedef logic [2*SEED_LEN-1:0]   seed_seq_t;
  typedef logic [2*REF_WIN-1:0]    ref_win_t;
  typedef logic [HASH_W-1:0]       hash_t;
  typedef logic [LOC_W-1:0]        loc_t;
  typedef logic [PAIR_ID_W-1:0]    pair_id_t;

  // A seed hit: its genome location and which seed of its read (0..2) hit.
  typedef struct packed {
    loc_t       loc;
    logic [1:0] sidx;
  } seed_loc_t;

  // Why a read pair leaves the light path for the DP fallback.
  typedef enum logic [1:0] {
    FB_NO_SEED_HIT = 2'd0,  // a read has no SeedMap location at all
    FB_NO_ADJACENT = 2'd1   // no location pair lies within Delta
  } fb_reason_t;

  typedef struct packed {
    pair_id_t   pair_id;
    fb_reason_t reason;
  } fallback_t;

  // A candidate from Paired-Adjacency Filtering, carrying both reads.
  typedef struct packed {
    pair_id_t  pair_id;
    seed_loc_t l1;
    seed_loc_t l2;
    read_seq_t r1;
    read_seq_t r2;
  } paf_cand_t;

  typedef enum logic [1:0] {
    EDIT_NONE      = 2'd0,
    EDIT_MISMATCH  = 2'd1,
    EDIT_DELETION  = 2'd2,
    EDIT_INSERTION = 2'd3
  } edit_t;

  // Identity of one single-read alignment job.
  typedef struct packed {
    pair_id_t pair_id;
    logic     read_sel;  // 0: read 1, 1: read 2
    loc_t     start;     // reference position of the read's first base
  } la_tag_t;

  // Light alignment result. With aligned=1 the CIGAR follows from the edit:
  //   none/mismatch : READ_LEN M
  //   deletion      : edit_pos M, edit_len D, (READ_LEN-edit_pos) M
  //   insertion     : edit_pos M, edit_len I, (READ_LEN-edit_pos-edit_len) M
  typedef struct packed {
    pair_id_t           pair_id;
    logic               read_sel;
    loc_t               location;  // aligned start of the read
    logic               aligned;   // 0: needs DP alignment at `location`
    logic [SCORE_W-1:0] score;
    edit_t              edit;
    logic [2:0]         edit_len;  // consecutive indel length or mismatches
    logic [POS_W-1:0]   edit_pos;  // first edited read base
  } la_result_t;

  // Score of a read of READ_LEN bases with one kind of edit.
  function automatic logic [SCORE_W-1:0] edit_score(edit_t e, int unsigned k);
    int s;
    s = SC_MATCH * READ_LEN;
    case (e)
      EDIT_MISMATCH:  s = s - int'(k) * (SC_MATCH + SC_MISMATCH);
      EDIT_DELETION:  s = s - (SC_GAP_OPEN + SC_GAP_EXT * int'(k));
      EDIT_INSERTION: s = s - int'(k) * SC_MATCH - (SC_GAP_OPEN + SC_GAP_EXT * int'(k));
      default:        ;
    endcase
    return SCORE_W'(s);
  endfunction

endpackage

// light_align_unit -- one Light Alignment instance (shifted Hamming masks).
//
// Aligns one 150-base read against a reference window without dynamic
// programming. The window holds REF_WIN = 157 bases starting IMAX = 2 bases
// before the read's expected start, so it covers the read at every shift d
// from -2 to +5. Mask m (shift d = m - IMAX) has bit i set when read base i
// equals reference base start+i+d; negative shifts model bases inserted in
// the read, positive shifts bases deleted from it, shift 0 mismatches.
//
// Steps, one state each:
//   LOAD  accept read, window and tag (in_valid && in_ready)
//   MASK  compute all 8 masks in one cycle
//   SCAN  READ_LEN cycles; cycle t looks at bit t and bit READ_LEN-1-t of
//         every mask, extending each mask's run of leading ones (start
//         segment) and trailing ones (end segment) and counting its zeros
//   SEL   pick the mask with the longest start segment and the mask with
//         the longest end segment (ties go to the smaller |shift|)
//   SUM   shift difference and sum of the two segment lengths
//   CLASS the edit type follows from the shift difference:
//           start segment covers the read      -> no edit
//           difference 0, 1 or 2 zeros         -> 1 or 2 mismatches
//           difference +k (k<=5), sum >= L     -> k consecutive deletions
//           difference -k (k<=2), sum >= L - k -> k consecutive insertions
//         anything else is not aligned (the read needs DP alignment)
//   OUT   hold the result until out_ready
// So an alignment occupies the unit for READ_LEN + 6 = 156 cycles: out_valid
// rises 154 cycles after the accepting edge, and the next read is accepted
// at the earliest 156 cycles after the previous one.
//
// From the paper: the mask method and its start/end segments, 8 masks
// computed in one cycle, segments found by walking the masks from both ends
// in parallel over read-length cycles, the edit set and scores of its edit
// table (scores computed here from Minimap2's scoring, which reproduces
// them), and the 156-cycle alignment time. This design's own choices: the
// shift range -2..+5 for the 8 masks (the insertion and deletion lengths of
// the edit table), the tie rule, the result format (edit type, length and
// position in place of a CIGAR string) and the state split.
module light_align_unit
  import genpairx_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  read_seq_t  in_read,
  input  ref_win_t   in_ref,
  input  la_tag_t    in_tag,
  output logic       out_valid,
  input  logic       out_ready,
  output la_result_t out_res
);
  localparam int L  = READ_LEN;
  localparam int CW = $clog2(L + 1);
  localparam int MW = $clog2(NMASK);

  typedef enum logic [2:0] {S_IDLE, S_MASK, S_SCAN, S_SEL, S_SUM, S_CLASS, S_OUT} state_t;
  state_t state;

  read_seq_t        read_q;
  ref_win_t         ref_q;
  la_tag_t          tag_q;
  logic [L-1:0]     mask   [NMASK];
  logic [CW-1:0]    prun   [NMASK];
  logic [CW-1:0]    srun   [NMASK];
  logic [CW-1:0]    zeros  [NMASK];
  logic             palive [NMASK];
  logic             salive [NMASK];
  logic [CW-1:0]    t;
  logic [MW-1:0]    a_sel, b_sel;
  logic [CW:0]      seg_sum;
  logic signed [4:0] sdiff;

  // Tie-break order: smallest |shift| first (d = 0, -1, +1, -2, +2, +3, +4, +5).
  function automatic logic [MW-1:0] pref(int j);
    int d;
    case (j)
      0: d = 0;  1: d = -1; 2: d = 1;  3: d = -2;
      4: d = 2;  5: d = 3;  6: d = 4;  default: d = 5;
    endcase
    return MW'(d + IMAX);
  endfunction

  logic [MW-1:0] a_best, b_best;
  always_comb begin
    a_best = pref(0);
    b_best = pref(0);
    for (int j = 1; j < NMASK; j++) begin
      if (prun[pref(j)] > prun[a_best]) a_best = pref(j);
      if (srun[pref(j)] > srun[b_best]) b_best = pref(j);
    end
  end

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
    end else begin
      case (state)
        S_IDLE:  if (in_valid) state <= S_MASK;
        S_MASK:  state <= S_SCAN;
        S_SCAN:  if (t == CW'(L - 1)) state <= S_SEL;
        S_SEL:   state <= S_SUM;
        S_SUM:   state <= S_CLASS;
        S_CLASS: state <= S_OUT;
        S_OUT:   if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    case (state)
      S_IDLE: if (in_valid) begin
        read_q <= in_read;
        ref_q  <= in_ref;
        tag_q  <= in_tag;
      end
      S_MASK: begin
        for (int m = 0; m < NMASK; m++) begin
          for (int i = 0; i < L; i++)
            mask[m][i] <= (read_q[2*i +: 2] == ref_q[2*(i+m) +: 2]);
          prun[m]   <= '0;
          srun[m]   <= '0;
          zeros[m]  <= '0;
          palive[m] <= 1'b1;
          salive[m] <= 1'b1;
        end
        t <= '0;
      end
      S_SCAN: begin
        for (int m = 0; m < NMASK; m++) begin
          if (palive[m] && mask[m][t]) prun[m] <= prun[m] + 1'b1;
          else                         palive[m] <= 1'b0;
          if (salive[m] && mask[m][CW'(L - 1) - t]) srun[m] <= srun[m] + 1'b1;
          else                                      salive[m] <= 1'b0;
          if (!mask[m][t]) zeros[m] <= zeros[m] + 1'b1;
        end
        t <= t + 1'b1;
      end
      S_SEL: begin
        a_sel <= a_best;
        b_sel <= b_best;
      end
      S_SUM: begin
        seg_sum <= {1'b0, prun[a_sel]} + {1'b0, srun[b_sel]};
        sdiff   <= 5'(signed'({2'b0, b_sel})) - 5'(signed'({2'b0, a_sel}));
      end
      S_CLASS: begin
        out_res.pair_id  <= tag_q.pair_id;
        out_res.read_sel <= tag_q.read_sel;
        out_res.location <= tag_q.start + LOC_W'(a_sel) - LOC_W'(IMAX);
        out_res.edit_pos <= POS_W'(prun[a_sel]);
        out_res.aligned  <= 1'b0;
        out_res.edit     <= EDIT_NONE;
        out_res.edit_len <= '0;
        out_res.score    <= '0;
        if (prun[a_sel] == CW'(L)) begin
          out_res.aligned  <= 1'b1;
          out_res.edit_pos <= '0;
          out_res.score    <= edit_score(EDIT_NONE, 0);
        end else if (sdiff == 0) begin
          if (zeros[a_sel] == CW'(1) || zeros[a_sel] == CW'(2)) begin
            out_res.aligned  <= 1'b1;
            out_res.edit     <= EDIT_MISMATCH;
            out_res.edit_len <= 3'(zeros[a_sel]);
            out_res.score    <= edit_score(EDIT_MISMATCH, 32'(zeros[a_sel]));
          end
        end else if (sdiff > 0 && sdiff <= 5'(DMAX)) begin
          if (seg_sum >= (CW+1)'(L)) begin
            out_res.aligned  <= 1'b1;
            out_res.edit     <= EDIT_DELETION;
            out_res.edit_len <= 3'(sdiff);
            out_res.score    <= edit_score(EDIT_DELETION, 32'(sdiff));
          end
        end else if (sdiff < 0 && -sdiff <= 5'(IMAX)) begin
          if (seg_sum >= (CW+1)'(L) - (CW+1)'(-sdiff)) begin
            out_res.aligned  <= 1'b1;
            out_res.edit     <= EDIT_INSERTION;
            out_res.edit_len <= 3'(-sdiff);
            out_res.score    <= edit_score(EDIT_INSERTION, 32'(-sdiff));
          end
        end
      end
      default: ;
    endcase
  end
endmodule

// bop_prefetcher: best-offset L2 prefetcher (Michaud's algorithm).
//
// The prefetcher learns one prefetch offset D, in cache lines, from a list of
// candidate offsets. On every triggering L2 access to line X (an L2 miss or a
// hit on a prefetched line) it tests one candidate d: if line X - d is in the
// Recent Requests (RR) table, d earns a point. Testing every candidate once is
// a round. A learning phase ends when a score reaches SCORE_MAX or after
// ROUND_MAX rounds; the offset with the highest score then becomes D, all
// scores are reset, and prefetching stays on only if that best score is
// above BAD_SCORE. While prefetching is on, every triggering access X issues
// a prefetch of line X + D, unless X + D lies in another page. The RR table
// records which lines would have been timely: when a prefetched line Y is
// filled into the L2, Y - D is inserted; while prefetching is off, the
// fetched line itself is inserted.
//
// From the paper and its figure: the offset list, the score table, the round
// count, the RR table, the "L2 miss OR pref. hit" trigger, the subtraction
// X - d, the BADSCORE test on the maximum, the best-offset register, the
// X + D prefetch address and the two RR insertion sources. The paper does not
// give the sizes; this design uses the values of Michaud's published design:
// the 52 offsets 1..256 whose only prime factors are 2, 3 and 5, a 256-entry
// direct-mapped RR table with 12-bit tags, SCORE_MAX 31, ROUND_MAX 100 and
// BAD_SCORE 1. The running maximum is kept while scores are updated instead
// of being searched at the end of the phase; the page check uses 4 KB pages.
//
// After reset prefetching is off (this design's choice), so the first phase
// learns from demand fills.
//
// Interface: line addresses (byte address / 64). One trigger and one fill
// may arrive per cycle. A prefetch request is held in a one-entry buffer
// until pf_ready; a new one replaces it. phase_end pulses when a phase ends.
module bop_prefetcher #(
  parameter int unsigned LINE_W     = 26,   // line address bits (32-bit physical address)
  parameter int unsigned RR_IDX_W   = 8,    // 256-entry RR table
  parameter int unsigned RR_TAG_W   = 12,
  parameter int unsigned SCORE_MAX  = 31,
  parameter int unsigned ROUND_MAX  = 100,
  parameter int unsigned BAD_SCORE  = 1,
  parameter int unsigned PAGE_LINES = 64    // 4 KB page of 64-byte lines
) (
  input  logic              clk,
  input  logic              rst,
  // L2 access that triggers learning and prefetching
  input  logic              acc_valid,
  input  logic [LINE_W-1:0] acc_line,
  // line filled into the L2; fill_pf marks a fill caused by a prefetch
  input  logic              fill_valid,
  input  logic [LINE_W-1:0] fill_line,
  input  logic              fill_pf,
  // prefetch request
  output logic              pf_valid,
  input  logic              pf_ready,
  output logic [LINE_W-1:0] pf_line,
  // state, for software and tests
  output logic [8:0]        best_offset,
  output logic              pf_on,
  output logic              phase_end
);

  localparam int unsigned N_OFF   = 52;
  localparam int unsigned SCORE_W = $clog2(SCORE_MAX + 1);
  localparam int unsigned IDX_W   = $clog2(N_OFF);
  localparam int unsigned ROUND_W = $clog2(ROUND_MAX + 1);
  localparam int unsigned PAGE_W  = $clog2(PAGE_LINES);

  typedef logic [8:0] off_t;

  typedef off_t off_list_t [N_OFF];

  // 1..256 with no prime factor other than 2, 3 and 5 (52 numbers). Such a
  // number up to 256 divides 2^8 * 3^5 * 5^3 = 7776000, and no other does.
  function automatic off_list_t gen_offsets();
    off_list_t   l;
    int unsigned n = 0;
    for (int i = 0; i < N_OFF; i++) l[i] = '0;
    for (int unsigned v = 1; v <= 256; v++)
      if (7776000 % v == 0 && n < N_OFF) begin
        l[n] = off_t'(v);
        n++;
      end
    return l;
  endfunction

  localparam off_list_t OFFSETS = gen_offsets();

  function automatic logic [RR_IDX_W-1:0] rr_index(input logic [LINE_W-1:0] l);
    return l[RR_IDX_W-1:0] ^ l[2*RR_IDX_W-1:RR_IDX_W];
  endfunction

  function automatic logic [RR_TAG_W-1:0] rr_tag(input logic [LINE_W-1:0] l);
    return l[RR_IDX_W +: RR_TAG_W];
  endfunction

  // ---------------- state ----------------
  logic [RR_TAG_W-1:0] rr_tags  [2**RR_IDX_W];
  logic                rr_valid [2**RR_IDX_W];
  logic [SCORE_W-1:0]  scores   [N_OFF];
  logic [IDX_W-1:0]    test_idx;
  logic [ROUND_W-1:0]  round_cnt;
  logic [SCORE_W-1:0]  best_score;
  logic [IDX_W-1:0]    best_idx;

  // ---------------- learning ----------------
  logic [LINE_W-1:0]  test_line;
  logic               rr_hit;
  logic [SCORE_W-1:0] new_score;
  logic               end_by_score, end_by_round, end_phase;
  logic               last_in_round;
  logic [SCORE_W-1:0] fin_score;
  logic [IDX_W-1:0]   fin_idx;

  always_comb begin
    test_line     = acc_line - LINE_W'(OFFSETS[test_idx]);
    rr_hit        = rr_valid[rr_index(test_line)] && rr_tags[rr_index(test_line)] == rr_tag(test_line);
    new_score     = scores[test_idx] + SCORE_W'(rr_hit);
    last_in_round = test_idx == IDX_W'(N_OFF - 1);
    end_by_score  = acc_valid && rr_hit && new_score == SCORE_W'(SCORE_MAX);
    end_by_round  = acc_valid && last_in_round && round_cnt == ROUND_W'(ROUND_MAX - 1);
    end_phase     = end_by_score || end_by_round;
    // best score and offset including this access's point
    if (acc_valid && rr_hit && new_score > best_score) begin
      fin_score = new_score;
      fin_idx   = test_idx;
    end else begin
      fin_score = best_score;
      fin_idx   = best_idx;
    end
  end

  // ---------------- prefetch issue ----------------
  logic [LINE_W-1:0] cand;
  assign cand = acc_line + LINE_W'(best_offset);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N_OFF; i++) scores[i] <= '0;
      for (int i = 0; i < 2**RR_IDX_W; i++) begin
        rr_valid[i] <= 1'b0;
        rr_tags[i]  <= '0;
      end
      test_idx    <= '0;
      round_cnt   <= '0;
      best_score  <= '0;
      best_idx    <= '0;
      best_offset <= 9'd1;     // off until the first phase has chosen an offset
      pf_on       <= 1'b0;
      phase_end   <= 1'b0;
      pf_valid    <= 1'b0;
      pf_line     <= '0;
    end else begin
      phase_end <= end_phase;

      if (acc_valid) begin
        if (end_phase) begin
          for (int i = 0; i < N_OFF; i++) scores[i] <= '0;
          test_idx    <= '0;
          round_cnt   <= '0;
          best_score  <= '0;
          best_idx    <= '0;
          best_offset <= OFFSETS[fin_idx];
          pf_on       <= fin_score > SCORE_W'(BAD_SCORE);
        end else begin
          scores[test_idx] <= new_score;
          best_score       <= fin_score;
          best_idx         <= fin_idx;
          test_idx         <= last_in_round ? '0 : test_idx + 1'b1;
          if (last_in_round) round_cnt <= round_cnt + 1'b1;
        end
      end

      // prefetch X + D within the page of X, with the offset in force now
      if (pf_valid && pf_ready) pf_valid <= 1'b0;
      if (acc_valid && pf_on && cand[LINE_W-1:PAGE_W] == acc_line[LINE_W-1:PAGE_W]) begin
        pf_valid <= 1'b1;
        pf_line  <= cand;
      end

      // RR insertion: Y - D for a prefetched fill, the fetched line while off
      if (fill_valid && (fill_pf || !pf_on)) begin
        logic [LINE_W-1:0] ins;
        ins = fill_pf ? fill_line - LINE_W'(best_offset) : fill_line;
        rr_valid[rr_index(ins)] <= 1'b1;
        rr_tags[rr_index(ins)]  <= rr_tag(ins);
      end
    end
  end

endmodule

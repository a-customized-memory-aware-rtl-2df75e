// alignment_pe: the block-based systolic processing element of one vault.
//
// The DP matrix is cut into horizontal blocks of P rows. Row r of the current
// block is owned by functional unit r, which holds that row's query character
// (stationary for the whole block) in its B register. Reference characters are
// streamed in one per step and move one row down per step (A registers), so in
// step s unit r updates column s-r+1: the P units work on one anti-diagonal
// (wavefront) of the block at the same time. Each unit has two score registers:
// RA1 holds the cell it computed in the previous step, RA2 the one before.
// Unit r takes north from RA1[r-1], north-west from RA2[r-1] and west from its
// own RA1[r]. Unit 0 takes north from the boundary row of the previous block
// (read from memory) and north-west from the north value of the previous step.
// RA1 of every row is preset to that row's west boundary (i*gap) when a block
// starts, and RA2 takes RA1 on every step, so no special case is needed for
// column 1. A block takes m+P steps; the cell of the lowest row leaves the
// array through the store queue with a lag of P steps (the cells of the other
// rows are used only inside the array). In the last block nothing is written
// back; the cell DP(n,m), the global alignment score, is captured instead.
//
// Interface, all synchronous to clk:
//   blk_start + blk_* : the AGU starts a block (row base, lengths, first/last).
//   ld_*              : head of the load queue (show-ahead) and its pop.
//                       Order of the data per block: the query words of the
//                       block, then per column c: a reference word when
//                       c%16==0, and the boundary cell DP(base, c+1) when the
//                       block is not the first.
//   st_*              : push of boundary cells into the store queue.
//   score_valid/score : DP(n,m) of the sequence, one-cycle pulse.
//   blk_done          : one-cycle pulse when the block has finished.
// A step happens in a cycle in which every operand it needs is at the head
// of the load queue and the store queue has room: otherwise the array stalls.
// Loading a new reference word takes a cycle of its own.
//
// From the paper: the blocking, the wavefront order, the RA1/RA2 register
// arrays and their connections, the reuse of the north value as the next
// north-west value, write-back of only the lowest row, and the zero padding of
// P columns. This design's choices: the first block computes its north
// boundary (j*gap) instead of reading it, the stall rule, the order in which
// operands arrive, and the handling of a last block that is not full.
module alignment_pe
  import nw_pkg::*;
#(
  parameter int unsigned P        = 16,   // functional units (block height)
  parameter int          MATCH    = nw_pkg::MATCH_SCORE,
  parameter int          MISMATCH = nw_pkg::MISMATCH_SCORE,
  parameter int          GAP      = nw_pkg::GAP_PENALTY
) (
  input  logic   clk,
  input  logic   rst_n,
  // block control from the AGU
  input  logic   blk_start,
  input  len_t   blk_base,      // index of the first row of the block (0-based)
  input  len_t   blk_ref_len,   // m, columns
  input  len_t   blk_query_len, // n, rows of the whole matrix
  input  logic   blk_first,
  input  logic   blk_last,
  output logic   blk_busy,
  output logic   blk_done,
  // load queue head
  input  word_t  ld_data,
  input  logic   ld_empty,
  output logic   ld_pop,
  // store queue
  output word_t  st_data,
  input  logic   st_full,
  output logic   st_push,
  // result
  output logic   score_valid,
  output score_t score,
  // observation
  output logic   step,          // a wavefront step happens this cycle
  output logic   stall          // running, but waiting for operands or room
);
  localparam int unsigned CPW = CHARS_PER_WORD;
  localparam int unsigned RW  = (P > 1) ? $clog2(P) : 1;

  typedef enum logic [1:0] {S_IDLE, S_QLOAD, S_RUN} state_t;
  state_t state;

  // block configuration
  len_t   base, m_len, qw_left, qw_idx, s, s_end;
  logic   first, last;
  logic [RW-1:0] r_last;
  score_t base_gap;      // DP(base, 0) = base * gap
  score_t north_gen;     // DP(0, s+1) for the first block

  // array registers
  char_t  breg [P];      // stationary query characters
  char_t  areg [P];      // streamed reference characters, one step per row
  score_t ra1  [P];
  score_t ra2  [P];
  score_t nw0;           // north value of the previous step (row 0 north-west)
  word_t  rword;         // current reference word
  logic   rword_ok;

  score_t fu_res  [P];
  score_t fu_n    [P];
  score_t fu_nw   [P];
  char_t  fu_a    [P];
  score_t north_in;
  char_t  char_in;

  logic need_word, need_dp, need_st, can_step;
  logic [$clog2(CPW)-1:0] cpos;

  assign cpos      = s[$clog2(CPW)-1:0];
  assign char_in   = rword[CHAR_W*cpos +: CHAR_W];
  assign need_word = (state == S_RUN) && (s < m_len) && (cpos == '0) && !rword_ok;
  assign need_dp   = (s < m_len) && !first;
  assign need_st   = !last && (s >= len_t'(P));
  assign can_step  = (state == S_RUN) && !need_word && (!need_dp || !ld_empty)
                     && (!need_st || !st_full);
  assign step      = can_step;
  assign stall     = (state == S_RUN) && !can_step && !need_word;
  assign north_in  = first ? north_gen : score_t'(ld_data);

  // operands of the functional units
  always_comb begin
    for (int r = 0; r < P; r++) begin
      if (r == 0) begin
        fu_n[r]  = north_in;
        fu_nw[r] = nw0;
        fu_a[r]  = char_in;
      end else begin
        fu_n[r]  = ra1[r-1];
        fu_nw[r] = ra2[r-1];
        fu_a[r]  = areg[r-1];
      end
    end
  end

  for (genvar r = 0; r < P; r++) begin : g_fu
    functional_unit #(.MATCH(MATCH), .MISMATCH(MISMATCH)) u_fu (
      .a(fu_a[r]), .b(breg[r]), .north(fu_n[r]), .north_west(fu_nw[r]),
      .west(ra1[r]), .gap(score_t'(GAP)), .result(fu_res[r])
    );
  end

  always_comb begin
    ld_pop = 1'b0;
    if (state == S_QLOAD && !ld_empty) ld_pop = 1'b1;
    if (need_word && !ld_empty)        ld_pop = 1'b1;
    if (can_step && need_dp)           ld_pop = 1'b1;
  end

  assign st_push  = can_step && need_st;
  assign st_data  = word_t'(ra1[P-1]);
  assign blk_busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      base        <= '0;
      m_len       <= '0;
      qw_left     <= '0;
      qw_idx      <= '0;
      s           <= '0;
      s_end       <= '0;
      first       <= 1'b0;
      last        <= 1'b0;
      r_last      <= '0;
      base_gap    <= '0;
      north_gen   <= '0;
      nw0         <= '0;
      rword       <= '0;
      rword_ok    <= 1'b0;
      blk_done    <= 1'b0;
      score_valid <= 1'b0;
      score       <= '0;
      for (int r = 0; r < P; r++) begin
        breg[r] <= '0;
        areg[r] <= '0;
        ra1[r]  <= '0;
        ra2[r]  <= '0;
      end
    end else begin
      blk_done    <= 1'b0;
      score_valid <= 1'b0;
      case (state)
        S_IDLE: if (blk_start) begin
          state     <= S_QLOAD;
          base      <= blk_base;
          m_len     <= blk_ref_len;
          first     <= blk_first;
          last      <= blk_last;
          qw_left   <= ((blk_base + len_t'(P) - 1) / CPW) - (blk_base / CPW) + 1;
          qw_idx    <= '0;
          r_last    <= RW'(blk_query_len - blk_base - 1);
          s         <= '0;
          s_end     <= blk_last ? (blk_ref_len - 1 + (blk_query_len - blk_base - 1))
                                : (blk_ref_len + len_t'(P) - 1);
          rword_ok  <= 1'b0;
          north_gen <= score_t'(GAP);
          // DP(base,0) for this block; blocks of one sequence start in order
          if (blk_first) begin
            base_gap <= '0;
            nw0      <= '0;
            for (int r = 0; r < P; r++) ra1[r] <= score_t'((r + 1) * GAP);
          end else begin
            base_gap <= base_gap + score_t'(P * GAP);
            nw0      <= base_gap + score_t'(P * GAP);
            for (int r = 0; r < P; r++)
              ra1[r] <= base_gap + score_t'(P * GAP) + score_t'((r + 1) * GAP);
          end
        end
        S_QLOAD: if (!ld_empty) begin
          for (int r = 0; r < P; r++) begin
            if (((base + len_t'(r)) / CPW) == (base / CPW) + qw_idx)
              breg[r] <= ld_data[CHAR_W*((base + len_t'(r)) % CPW) +: CHAR_W];
          end
          qw_left <= qw_left - 1;
          qw_idx  <= qw_idx + 1;
          if (qw_left == 1) state <= S_RUN;
        end
        S_RUN: begin
          if (need_word && !ld_empty) begin
            rword    <= ld_data;
            rword_ok <= 1'b1;
          end
          if (can_step) begin
            for (int r = 0; r < P; r++) begin
              ra2[r] <= ra1[r];
              if (s >= len_t'(r)) ra1[r] <= fu_res[r];
            end
            areg[0] <= char_in;
            for (int r = 1; r < P; r++) areg[r] <= areg[r-1];
            nw0       <= north_in;
            north_gen <= north_gen + score_t'(GAP);
            if (cpos == CPW[$clog2(CPW)-1:0] - 1'b1) rword_ok <= 1'b0;
            s <= s + 1;
            if (last && s == m_len - 1 + len_t'(r_last)) begin
              score       <= fu_res[r_last];
              score_valid <= 1'b1;
            end
            if (s == s_end) begin
              state    <= S_IDLE;
              blk_done <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new block is only started while the array is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    blk_start |-> state == S_IDLE);
endmodule

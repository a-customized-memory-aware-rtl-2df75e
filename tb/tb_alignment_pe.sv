// tb_alignment_pe: the testbench plays the AGU and the memory. For each pair
// of sequences it starts the PE block by block, offers the load-queue words
// in the order the PE expects (query words, then per column a reference word
// every 16 columns and the boundary cell of the previous block), and checks
// every boundary cell pushed into the store queue and the final score against
// the reference matrix. The first pass offers every operand at once and
// checks the number of cycles per block (query words + reference words +
// m+P steps, fewer steps in the last block); the later passes withdraw
// operands and store room at random to exercise the stall.
module tb_alignment_pe;
  import nw_pkg::*;
  import nw_tb_pkg::*;
  localparam int P = 4;
  localparam int GAPV = -2;

  logic clk = 0, rst_n = 0;
  logic blk_start, blk_first, blk_last, blk_busy, blk_done;
  len_t blk_base, blk_ref_len, blk_query_len;
  word_t ld_data, st_data;
  logic ld_empty, ld_pop, st_full, st_push, score_valid, step, stall;
  score_t score;

  alignment_pe #(.P(P)) dut (.*);

  always #5 clk = ~clk;

  word_t ldq[$];
  word_t stq[$];
  bit    gate_ld, gate_st, random_mode;
  int    checks = 0, failures = 0, stalls = 0, cyc = 0;

  assign ld_empty = (ldq.size() == 0) || gate_ld;
  assign ld_data  = (ldq.size() == 0) ? '0 : ldq[0];
  assign st_full  = gate_st;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ld_pop) void'(ldq.pop_front());
    if (st_push) stq.push_back(st_data);
    if (stall) stalls++;
  end
  always @(negedge clk) begin
    gate_ld = random_mode && ($urandom_range(0, 2) == 0);
    gate_st = random_mode && ($urandom_range(0, 3) == 0);
  end

  task automatic run_pair(int n, int m);
    chr_da_t q = random_seq(n);
    chr_da_t r = mutate(q, 3);
    int_da_t d;
    int nblk = (n + P - 1) / P;
    int got_score = 0;
    if (m != n) r = random_seq(m);
    d = nw_matrix(q, r, 1, -1, GAPV);
    for (int b = 0; b < nblk; b++) begin
      int base = b * P;
      bit last = (b == nblk - 1);
      int t0, qwords, steps, expect_cycles;
      // operands in the order of the PE
      for (int w = base / 16; w <= (base + P - 1) / 16; w++) ldq.push_back(pack_word(q, w));
      for (int k = 0; k < m; k++) begin
        if (k % 16 == 0) ldq.push_back(pack_word(r, k / 16));
        if (b > 0) ldq.push_back(word_t'(d[base * (m + 1) + k + 1]));
      end
      qwords = (base + P - 1) / 16 - base / 16 + 1;
      steps  = last ? (m + (n - 1 - base)) : (m + P);
      // one cycle to accept the start, then one per query word, per
      // reference word and per step
      expect_cycles = 1 + qwords + (m + 15) / 16 + steps;
      @(negedge clk);
      blk_start = 1; blk_base = base; blk_ref_len = m; blk_query_len = n;
      blk_first = (b == 0); blk_last = last;
      @(posedge clk);
      t0 = cyc;
      @(negedge clk);
      blk_start = 0;
      while (!blk_done) begin
        @(posedge clk);
        #1;
        if (score_valid) begin
          got_score++;
          checks++;
          if (score != d[n * (m + 1) + m]) begin
            failures++;
            $display("FAIL n=%0d m=%0d score %0d exp %0d", n, m, score, d[n * (m + 1) + m]);
          end
        end
      end
      if (!random_mode) begin
        checks++;
        if (cyc - t0 != expect_cycles) begin
          failures++;
          $display("FAIL block %0d took %0d cycles, expected %0d", b, cyc - t0, expect_cycles);
        end
      end
      // boundary row base+P
      checks++;
      if (stq.size() != (last ? 0 : m)) begin
        failures++;
        $display("FAIL block %0d pushed %0d cells", b, stq.size());
      end
      for (int k = 0; k < stq.size() && k < m; k++) begin
        checks++;
        if (stq[k] != word_t'(d[(base + P) * (m + 1) + k + 1])) begin
          failures++;
          if (failures < 10) $display("FAIL block %0d col %0d: %0d exp %0d", b, k + 1, int'(stq[k]), d[(base + P) * (m + 1) + k + 1]);
        end
      end
      stq.delete();
      checks++;
      if (ldq.size() != 0) begin
        failures++;
        $display("FAIL block %0d left %0d words unread", b, ldq.size());
      end
      ldq.delete();
    end
    checks++;
    if (got_score != 1) begin
      failures++;
      $display("FAIL n=%0d m=%0d %0d scores", n, m, got_score);
    end
  endtask

  initial begin
    blk_start = 0; blk_base = 0; blk_ref_len = 0; blk_query_len = 0; blk_first = 0; blk_last = 0;
    random_mode = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_pair(22, 37);
    run_pair(8, 5);
    run_pair(1, 1);
    run_pair(3, 40);
    random_mode = 1;
    for (int i = 0; i < 12; i++) run_pair($urandom_range(1, 30), $urandom_range(1, 50));
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("FAIL never stalled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

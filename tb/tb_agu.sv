// tb_agu: sends PIM packets to the AGU and answers its metadata reads; a
// simple model stands in for the PE (busy for a random time after each block
// start). Every request the AGU issues is compared with a list built here
// from the memory layout: metadata count, then per reference its length,
// and per block the query words, then per column the reference word (every
// 16 columns), the boundary-cell read (not in the first block) and the
// boundary-cell write P+S columns behind (not in the last block). Also checks
// each block start (base, lengths, first/last flags) and run_done.
module tb_agu;
  import nw_pkg::*;
  localparam int P = 4;
  localparam int S = 3;             // write-back slack

  logic clk = 0, rst_n = 0;
  pim_packet_t pim_pkt;
  logic pim_empty, pim_pop, aq_push, aq_full, ld_empty, ld_pop;
  agu_req_t aq_req;
  word_t ld_data;
  logic pe_start, pe_first, pe_last, pe_busy, busy, run_done;
  len_t pe_base, pe_ref_len, pe_query_len, seq_index;

  agu #(.P(P), .WB_SLACK(S)) dut (.*);

  always #5 clk = ~clk;

  typedef struct { bit we; int addr; } rq_t;
  typedef struct { int base, m, n; bit first, last; } bs_t;
  rq_t   exp_rq[$];
  bs_t   exp_bs[$];
  word_t ldq[$];
  pim_packet_t pq[$];
  int    meta[int];
  int    checks = 0, failures = 0, busy_left = 0, done_seen = 0;
  bit    gate_full;

  // queue heads are presented from the falling edge on
  always @(negedge clk) begin
    gate_full = ($urandom_range(0, 4) == 0);
    pim_empty = (pq.size() == 0);
    pim_pkt   = (pq.size() == 0) ? '0 : pq[0];
    ld_empty  = (ldq.size() == 0);
    ld_data   = (ldq.size() == 0) ? '0 : ldq[0];
  end
  assign aq_full = gate_full;
  assign pe_busy = (busy_left > 0);

  always @(posedge clk) if (rst_n) begin
    if (pim_pop) void'(pq.pop_front());
    if (ld_pop) void'(ldq.pop_front());
    if (busy_left > 0) busy_left <= busy_left - 1;
    if (pe_start) begin
      busy_left <= $urandom_range(2, 40);
      checks++;
      if (exp_bs.size() == 0) begin
        failures++;
        $display("FAIL unexpected block start");
      end else begin
        bs_t e;
        e = exp_bs.pop_front();
        if (pe_base != e.base || pe_ref_len != e.m || pe_query_len != e.n ||
            pe_first != e.first || pe_last != e.last) begin
          failures++;
          $display("FAIL block start base=%0d m=%0d n=%0d f=%0b l=%0b, exp %0d %0d %0d %0b %0b",
                   pe_base, pe_ref_len, pe_query_len, pe_first, pe_last, e.base, e.m, e.n, e.first, e.last);
        end
      end
    end
    if (aq_push && !aq_full) begin
      checks++;
      if (exp_rq.size() == 0) begin
        failures++;
        $display("FAIL unexpected request we=%0b addr=%0d", aq_req.we, aq_req.addr);
      end else begin
        rq_t e;
        e = exp_rq.pop_front();
        if (aq_req.we != e.we || int'(aq_req.addr) != e.addr) begin
          failures++;
          if (failures < 10) $display("FAIL request we=%0b addr=%0d exp we=%0b addr=%0d", aq_req.we, aq_req.addr, e.we, e.addr);
        end
      end
      // metadata reads are answered a little later
      if (!aq_req.we && meta.exists(int'(aq_req.addr))) begin
        fork
          automatic int a = int'(aq_req.addr);
          begin
            repeat ($urandom_range(1, 5)) @(posedge clk);
            ldq.push_back(word_t'(meta[a]));
          end
        join_none
      end
    end
    if (run_done) done_seen++;
  end

  task automatic send_packet(int ref_addr, int q_addr, int meta_addr, int n, int dp, int lens[]);
    pim_packet_t pk;
    int rp = ref_addr;
    meta.delete();
    meta[meta_addr] = lens.size();
    exp_rq.push_back('{0, meta_addr});
    foreach (lens[i]) begin
      int m = lens[i];
      int nblk = (n + P - 1) / P;
      meta[meta_addr + 1 + i] = m;
      exp_rq.push_back('{0, meta_addr + 1 + i});
      for (int b = 0; b < nblk; b++) begin
        int base = b * P;
        bit last = (b == nblk - 1);
        int wr_row = dp + ((b % 2 != 0) ? m : 0);
        int rd_row = dp + ((b % 2 != 0) ? 0 : m);
        exp_bs.push_back('{base, m, n, b == 0, last});
        for (int w = base / 16; w <= (base + P - 1) / 16; w++) exp_rq.push_back('{0, q_addr + w});
        for (int k = 0; k < (last ? m : m + P + S); k++) begin
          if (k < m && k % 16 == 0) exp_rq.push_back('{0, rp + k / 16});
          if (k < m && b > 0) exp_rq.push_back('{0, rd_row + k});
          if (!last && k >= P + S) exp_rq.push_back('{1, wr_row + k - P - S});
        end
      end
      rp += (m + 15) / 16;
    end
    pk.ref_addr = addr_t'(ref_addr); pk.query_addr = addr_t'(q_addr); pk.meta_addr = addr_t'(meta_addr);
    pk.query_len = len_t'(n); pk.dp_addr = addr_t'(dp);
    pq.push_back(pk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_packet(1000, 200, 50, 11, 3000, '{37, 5, 16});
    wait (done_seen == 1);
    send_packet(100, 20, 10, 4, 500, '{20});
    wait (done_seen == 2);
    send_packet(100, 20, 10, 19, 500, '{});
    wait (done_seen == 3);
    repeat (10) @(posedge clk);
    checks++;
    if (exp_rq.size() != 0 || exp_bs.size() != 0 || busy) begin
      failures++;
      $display("FAIL %0d requests and %0d block starts missing", exp_rq.size(), exp_bs.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

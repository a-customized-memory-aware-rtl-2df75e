// tb_workloads: the two workloads the design is evaluated with, run on one
// vault at the default PE size (16 functional units) with a memory that
// accepts one request per cycle.
//  1. read assembly: a 1000-character read (a mutated 1000-character piece of
//     the reference, placed back into it) aligned with a 60,000-character
//     reference genome;
//  2. database search, shortened: a 160-character query against a database of
//     three 60,000-character references (the full 60k x 60k matrix would take
//     hours to simulate).
// Checks the scores and best index against the two-row reference model, the
// boundary traffic ((n/16)-1)*m reads and as many writes per reference, and
// that the PE keeps the vault's memory port busy: the run may take at most
// 5% more cycles than it issues memory requests (the PE waits for memory,
// never the other way round).
module tb_workloads;
  import nw_pkg::*;
  import nw_tb_pkg::*;
  localparam int WORDS = 1 << 18;
  localparam int META = 0, QADDR = 64, RADDR = 1024, DPADDR = 65536;

  logic clk = 0, rst_n = 0;
  pim_packet_t pim_pkt; logic pim_valid, pim_ready;
  mem_req_t mem_req; logic mem_valid, mem_ready;
  word_t host_rdata; logic host_rvalid;
  mem_req_t mc_req; logic mc_valid, mc_ready, mc_rvalid; word_t mc_rdata;
  logic run_done, result_valid, busy;
  score_t local_max; len_t local_max_idx;

  vault_pim_unit dut (.*);
  vault_mem_model #(.WORDS(WORDS), .LATENCY(4), .RANDOM_READY(1'b0)) u_mem (
    .clk, .rst_n, .req(mc_req), .valid(mc_valid), .ready(mc_ready), .rdata(mc_rdata), .rvalid(mc_rvalid));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0, reqs = 0, dp_rd = 0, dp_wr = 0;
  always @(posedge clk) begin
    if (busy) cyc++;
    if (mc_valid && mc_ready) begin
      reqs++;
      if (int'(mc_req.addr) >= DPADDR) begin
        if (mc_req.we) dp_wr++; else dp_rd++;
      end
    end
  end

  task automatic run(string name, chr_da_t q, chr_da_t refs[$]);
    int best = 0, best_i = 0, rp = RADDR;
    int nblk = (q.size() + 15) / 16;
    longint tot_m = 0, nb1 = 0;
    nb1 = longint'(nblk) - 1;
    for (int w = 0; w < (q.size() + 15) / 16; w++) u_mem.mem[QADDR + w] = pack_word(q, w);
    u_mem.mem[META] = word_t'(refs.size());
    foreach (refs[i]) begin
      int s;
      u_mem.mem[META + 1 + i] = word_t'(refs[i].size());
      for (int w = 0; w < (refs[i].size() + 15) / 16; w++) u_mem.mem[rp + w] = pack_word(refs[i], w);
      rp += (refs[i].size() + 15) / 16;
      tot_m += longint'(refs[i].size());
      s = nw_score_lin(q, refs[i], 1, -1, -2);
      if (i == 0 || s > best) begin best = s; best_i = i; end
    end
    cyc = 0; reqs = 0; dp_rd = 0; dp_wr = 0;
    @(negedge clk);
    pim_pkt = '{ref_addr: addr_t'(RADDR), query_addr: addr_t'(QADDR), meta_addr: addr_t'(META),
                query_len: len_t'(q.size()), dp_addr: addr_t'(DPADDR)};
    pim_valid = 1;
    @(negedge clk);
    pim_valid = 0;
    @(posedge run_done);
    @(posedge clk);
    @(negedge clk);
    $display("%s: score %0d (ref %0d), %0d cells in %0d cycles, %0d memory requests",
             name, local_max, local_max_idx, longint'(q.size()) * tot_m, cyc, reqs);
    checks++;
    if (local_max != best || local_max_idx != best_i) begin
      failures++;
      $display("FAIL %s: max %0d idx %0d, expected %0d idx %0d", name, local_max, local_max_idx, best, best_i);
    end
    checks++;
    if (dp_rd != nb1 * tot_m || dp_wr != dp_rd) begin
      failures++;
      $display("FAIL %s: boundary traffic rd=%0d wr=%0d, expected %0d each", name, dp_rd, dp_wr, nb1 * tot_m);
    end
    checks++;
    if (cyc * 100 > reqs * 105) begin
      failures++;
      $display("FAIL %s: %0d cycles for %0d requests", name, cyc, reqs);
    end
  endtask

  initial begin
    chr_da_t genome, rd, piece, q;
    chr_da_t refs[$];
    pim_valid = 0; pim_pkt = '0; mem_valid = 0; mem_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. read assembly
    genome = random_seq(60000);
    piece = new[1000];
    foreach (piece[i]) piece[i] = genome[20000 + i];
    rd = mutate(piece, 10);
    refs.push_back(genome);
    run("assembly 1000 x 60000", rd, refs);
    // 2. database search (query shortened)
    refs.delete();
    q = random_seq(160);
    for (int i = 0; i < 3; i++) refs.push_back(random_seq(60000));
    run("database search 160 x 3 x 60000", q, refs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_vault_pim_unit: one vault with a behavioural vault memory (random
// back-pressure, 4-cycle read latency). The testbench writes a query, a small
// database of references (some derived from the query, some random) and the
// metadata into memory, sends a PIM packet, and keeps issuing regular host
// reads and writes to another region meanwhile. Checks: the vault's maximum
// score and the index of the best reference against the reference model; the
// number of boundary-cell reads and writes, ((n/P)-1)*m each per reference;
// the data of every host read; and a second run on the same vault.
module tb_vault_pim_unit;
  import nw_pkg::*;
  import nw_tb_pkg::*;
  localparam int P = 4;
  localparam int META = 0, QADDR = 16, RADDR = 64, DPADDR = 2048, HOST = 3500;

  logic clk = 0, rst_n = 0;
  pim_packet_t pim_pkt; logic pim_valid, pim_ready;
  mem_req_t mem_req; logic mem_valid, mem_ready;
  word_t host_rdata; logic host_rvalid;
  mem_req_t mc_req; logic mc_valid, mc_ready, mc_rvalid; word_t mc_rdata;
  logic run_done, result_valid, busy;
  score_t local_max; len_t local_max_idx;

  vault_pim_unit #(.P(P)) dut (.*);
  vault_mem_model #(.WORDS(4096), .LATENCY(4)) u_mem (
    .clk, .rst_n, .req(mc_req), .valid(mc_valid), .ready(mc_ready), .rdata(mc_rdata), .rvalid(mc_rvalid));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int dp_rd = 0, dp_wr = 0, host_reqs = 0;
  word_t shadow [int];
  word_t exp_host[$];
  bit host_on;

  // boundary-row traffic
  always @(posedge clk) if (mc_valid && mc_ready && int'(mc_req.addr) >= DPADDR && int'(mc_req.addr) < HOST) begin
    if (mc_req.we) dp_wr++; else dp_rd++;
  end

  // host traffic generator and checker
  always @(posedge clk) begin
    if (mem_valid && mem_ready) begin
      host_reqs++;
      if (mem_req.we) shadow[int'(mem_req.addr)] = mem_req.wdata;
      else exp_host.push_back(shadow.exists(int'(mem_req.addr)) ? shadow[int'(mem_req.addr)] : u_mem.mem[int'(mem_req.addr) % 4096]);
    end
    if (host_rvalid) begin
      checks++;
      if (exp_host.size() == 0 || host_rdata != exp_host[0]) begin
        failures++; $display("FAIL host read %h expected %h", host_rdata, exp_host.size() != 0 ? exp_host[0] : 0);
      end
      if (exp_host.size() != 0) void'(exp_host.pop_front());
    end
  end
  always @(negedge clk) begin
    if (!mem_valid || mem_ready) begin
      mem_valid = host_on && ($urandom_range(0, 7) == 0);
      mem_req.we = ($urandom_range(0, 1) == 0);
      mem_req.addr = addr_t'(HOST + $urandom_range(0, 15));
      mem_req.wdata = word_t'($urandom);
    end
  end

  task automatic run(int n, int nref);
    chr_da_t q = random_seq(n);
    int best = 0, best_i = 0, rp = RADDR, tot_m = 0;
    for (int w = 0; w < (n + 15) / 16; w++) u_mem.mem[QADDR + w] = pack_word(q, w);
    u_mem.mem[META] = word_t'(nref);
    for (int i = 0; i < nref; i++) begin
      chr_da_t r;
      int s;
      if (i % 2 == 0) r = mutate(q, 2 + i);
      else r = random_seq($urandom_range(1, 60));
      u_mem.mem[META + 1 + i] = word_t'(r.size());
      for (int w = 0; w < (r.size() + 15) / 16; w++) u_mem.mem[rp + w] = pack_word(r, w);
      rp += (r.size() + 15) / 16;
      tot_m += r.size();
      s = nw_score(q, r, 1, -1, -2);
      if (i == 0 || s > best) begin best = s; best_i = i; end
    end
    dp_rd = 0; dp_wr = 0;
    @(negedge clk);
    pim_pkt = '{ref_addr: addr_t'(RADDR), query_addr: addr_t'(QADDR), meta_addr: addr_t'(META),
                query_len: len_t'(n), dp_addr: addr_t'(DPADDR)};
    pim_valid = 1;
    @(negedge clk);
    pim_valid = 0;
    @(posedge run_done);
    @(posedge clk);
    @(negedge clk);
    checks++;
    if (!result_valid || local_max != best || local_max_idx != best_i) begin
      failures++;
      $display("FAIL max %0d idx %0d, expected %0d idx %0d", local_max, local_max_idx, best, best_i);
    end
    checks++;
    if (dp_rd != ((n + P - 1) / P - 1) * tot_m || dp_wr != dp_rd) begin
      failures++;
      $display("FAIL boundary traffic rd=%0d wr=%0d expected %0d each", dp_rd, dp_wr, ((n + P - 1) / P - 1) * tot_m);
    end
  endtask

  initial begin
    pim_valid = 0; pim_pkt = '0; mem_valid = 0; mem_req = '0; host_on = 0;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = word_t'(i);
    repeat (3) @(posedge clk);
    rst_n = 1;
    host_on = 1;
    run(13, 6);
    run(8, 3);
    run(21, 4);
    host_on = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (exp_host.size() != 0 || host_reqs < 20) begin
      failures++; $display("FAIL host requests %0d, %0d unanswered", host_reqs, exp_host.size());
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

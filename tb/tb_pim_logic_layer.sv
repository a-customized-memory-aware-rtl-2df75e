// tb_pim_logic_layer: end-to-end run of the logic layer with one behavioural
// vault memory per vault. The testbench plays the host: it writes the same
// query into every vault through regular write requests, pre-loads each
// vault's share of the reference database and its metadata, sends one PIM
// packet per vault, keeps regular read/write traffic going meanwhile, waits
// for every vault, reads the local maxima and forms the global maximum.
// Checks: every local maximum and best index, the global maximum, the host
// read data, and the boundary-row traffic. It counts how often each
// mechanism of the design occurs (PE stall for operands, stall on a full
// store queue, host request deferred by AGU priority, load-queue credit
// limit, boundary-cell reads, reference-word loads, last block shorter than
// P) and fails if one never occurs.
module tb_pim_logic_layer;
  import nw_pkg::*;
  import nw_tb_pkg::*;
  localparam int NV = 4;
  localparam int P  = 4;
  localparam int QN = 14;           // query length (not a multiple of P)
  localparam int NREF = 4;          // references per vault
  localparam int MAXM = 50;         // longest reference
  localparam bit SMALL_QUEUES = 1'b1;
  localparam int META = 0, QADDR = 16, RADDR = 64, DPADDR = 2048, HOST = 3500;

  logic clk = 0, rst_n = 0;
  pim_packet_t pim_pkt [NV]; logic pim_valid [NV]; logic pim_ready [NV];
  mem_req_t mem_req [NV]; logic mem_valid [NV]; logic mem_ready [NV];
  word_t host_rdata [NV]; logic host_rvalid [NV];
  mem_req_t mc_req [NV]; logic mc_valid [NV]; logic mc_ready [NV];
  word_t mc_rdata [NV]; logic mc_rvalid [NV];
  logic run_done [NV]; logic result_valid [NV]; score_t local_max [NV];
  len_t local_max_idx [NV]; logic busy [NV];

  // small store and load queues so that their back-pressure shows
  pim_logic_layer #(.NUM_VAULTS(NV), .P(P), .STQ_D(2), .LDQ_D(3)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int c_stall = 0, c_st_full = 0, c_defer = 0, c_credit = 0, c_dp = 0, c_word = 0, c_partial = 0;
  int dp_traffic [NV];
  word_t exp_host [NV][$];
  int host_reads = 0;
  bit host_on = 0;

  word_t image [NV][int];
  event  load_ev;

  for (genvar v = 0; v < NV; v++) begin : g_v
    vault_mem_model #(.WORDS(4096), .LATENCY(4)) u_mem (
      .clk, .rst_n, .req(mc_req[v]), .valid(mc_valid[v]), .ready(mc_ready[v]),
      .rdata(mc_rdata[v]), .rvalid(mc_rvalid[v]));
    word_t shadow [int];
    // back-door load of the database share prepared in image[v]
    always @(load_ev) for (int a = 0; a < 4096; a++) if (image[v].exists(a)) u_mem.mem[a] = image[v][a];
    always @(posedge clk) if (rst_n) begin
      if (dut.g_vault[v].u_vault.u_pe.stall) c_stall++;
      if (dut.g_vault[v].u_vault.u_pe.stall && dut.g_vault[v].u_vault.u_pe.st_full) c_st_full++;
      if (dut.g_vault[v].u_vault.u_arb.host_deferred) c_defer++;
      if (!dut.g_vault[v].u_vault.u_arb.agu_credit) c_credit++;
      if (dut.g_vault[v].u_vault.u_pe.step && dut.g_vault[v].u_vault.u_pe.need_dp) c_dp++;
      if (dut.g_vault[v].u_vault.u_pe.need_word && dut.g_vault[v].u_vault.u_pe.ld_pop) c_word++;
      if (dut.g_vault[v].u_vault.u_pe.score_valid && int'(dut.g_vault[v].u_vault.u_pe.r_last) != P - 1) c_partial++;
      if (mc_valid[v] && mc_ready[v] && int'(mc_req[v].addr) >= DPADDR && int'(mc_req[v].addr) < HOST) dp_traffic[v]++;
      if (mem_valid[v] && mem_ready[v]) begin
        if (mem_req[v].we) shadow[int'(mem_req[v].addr)] = mem_req[v].wdata;
        else exp_host[v].push_back(shadow.exists(int'(mem_req[v].addr)) ? shadow[int'(mem_req[v].addr)] : u_mem.mem[int'(mem_req[v].addr) % 4096]);
      end
      if (host_rvalid[v]) begin
        host_reads++;
        checks++;
        if (exp_host[v].size() == 0 || host_rdata[v] != exp_host[v][0]) begin
          failures++; $display("FAIL vault %0d host read %h", v, host_rdata[v]);
        end
        if (exp_host[v].size() != 0) void'(exp_host[v].pop_front());
      end
    end
  end

  // host request queue per vault, played out one request at a time
  mem_req_t hq [NV][$];
  always @(negedge clk) begin
    for (int v = 0; v < NV; v++) begin
      if (!mem_valid[v] || mem_ready[v]) begin
        if (hq[v].size() != 0) begin
          mem_valid[v] = 1'b1;
          mem_req[v] = hq[v].pop_front();
        end else if (host_on && $urandom_range(0, 5) == 0) begin
          mem_valid[v] = 1'b1;
          mem_req[v] = '{we: 1'($urandom_range(0, 1)), addr: addr_t'(HOST + $urandom_range(0, 15)), wdata: word_t'($urandom)};
        end else mem_valid[v] = 1'b0;
      end
    end
  end

  int best [NV], best_i [NV], tot_m [NV];
  chr_da_t q;

  initial begin
    for (int v = 0; v < NV; v++) begin
      pim_valid[v] = 0; pim_pkt[v] = '0; mem_valid[v] = 0; mem_req[v] = '0; dp_traffic[v] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    q = random_seq(QN);
    // host writes the query into every vault with regular writes, and the
    // database share of each vault is in place beforehand
    for (int v = 0; v < NV; v++) begin
      int rp;
      rp = RADDR;
      for (int w = 0; w < (QN + 15) / 16; w++)
        hq[v].push_back('{we: 1'b1, addr: addr_t'(QADDR + w), wdata: pack_word(q, w)});
      image[v][META] = word_t'(NREF);
      tot_m[v] = 0;
      for (int i = 0; i < NREF; i++) begin
        chr_da_t r;
        int s;
        r = ((v + i) % 2 == 0) ? mutate(q, 2 + v + i) : random_seq($urandom_range(1, MAXM));
        image[v][META + 1 + i] = word_t'(r.size());
        for (int w = 0; w < (r.size() + 15) / 16; w++) image[v][rp + w] = pack_word(r, w);
        rp += (r.size() + 15) / 16;
        tot_m[v] += r.size();
        s = nw_score(q, r, 1, -1, -2);
        if (i == 0 || s > best[v]) begin best[v] = s; best_i[v] = i; end
      end
    end
    ->load_ev;
    wait (hq[0].size() == 0 && hq[NV-1].size() == 0);
    repeat (20) @(posedge clk);
    host_on = 1;
    @(negedge clk);
    for (int v = 0; v < NV; v++) begin
      pim_pkt[v] = '{ref_addr: addr_t'(RADDR), query_addr: addr_t'(QADDR), meta_addr: addr_t'(META),
                     query_len: len_t'(QN), dp_addr: addr_t'(DPADDR)};
      pim_valid[v] = 1;
    end
    @(negedge clk);
    for (int v = 0; v < NV; v++) pim_valid[v] = 0;
    for (int v = 0; v < NV; v++) wait (result_valid[v]);
    host_on = 0;
    repeat (40) @(posedge clk);
    begin
      int gmax, gexp;
      gmax = 0;
      gexp = 0;
      for (int v = 0; v < NV; v++) begin
        checks++;
        if (local_max[v] != best[v] || local_max_idx[v] != best_i[v]) begin
          failures++;
          $display("FAIL vault %0d max %0d idx %0d, expected %0d idx %0d", v, local_max[v], local_max_idx[v], best[v], best_i[v]);
        end
        checks++;
        if (dp_traffic[v] != 2 * ((QN + P - 1) / P - 1) * tot_m[v]) begin
          failures++;
          $display("FAIL vault %0d boundary traffic %0d", v, dp_traffic[v]);
        end
        if (v == 0 || local_max[v] > gmax) gmax = local_max[v];
        if (v == 0 || best[v] > gexp) gexp = best[v];
      end
      checks++;
      if (gmax != gexp) begin
        failures++; $display("FAIL global max %0d expected %0d", gmax, gexp);
      end
      $display("global max %0d", gmax);
    end
    $display("mechanisms: stall=%0d store_full=%0d host_deferred=%0d credit_limit=%0d boundary_reads=%0d word_loads=%0d short_last_block=%0d host_reads=%0d",
             c_stall, c_st_full, c_defer, c_credit, c_dp, c_word, c_partial, host_reads);
    checks++;
    if (c_stall == 0 || (SMALL_QUEUES && (c_st_full == 0 || c_credit == 0)) || c_defer == 0 || c_dp == 0 ||
        c_word == 0 || c_partial == 0 || host_reads == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_vault_arbiter: random AGU requests (reads and writes, write data in a
// store-queue model), random host requests and a slow load-queue consumer,
// against a behavioural vault memory. Checks: AGU and host requests each
// reach memory in their own order; a host request only goes when the AGU's
// head cannot (priority); AGU writes carry the store-queue data; read data
// returns to the right requester with the value a shadow memory predicts;
// the load queue never exceeds its depth.
module tb_vault_arbiter;
  import nw_pkg::*;
  localparam int LQD = 6;

  logic clk = 0, rst_n = 0;
  agu_req_t aq_head; logic aq_empty, aq_pop;
  word_t sq_head; logic sq_empty, sq_pop;
  mem_req_t mq_head; logic mq_empty, mq_pop;
  logic [$clog2(LQD+1)-1:0] lq_count;
  logic lq_push; word_t lq_data;
  mem_req_t mc_req; logic mc_valid, mc_ready, mc_rvalid;
  word_t mc_rdata, host_rdata; logic host_rvalid, host_deferred;

  vault_arbiter #(.LQ_DEPTH(LQD), .MAX_READS(8)) dut (.*);
  vault_mem_model #(.WORDS(64), .LATENCY(3)) u_mem (
    .clk, .rst_n, .req(mc_req), .valid(mc_valid), .ready(mc_ready), .rdata(mc_rdata), .rvalid(mc_rvalid));

  always #5 clk = ~clk;

  agu_req_t aq[$]; word_t sq[$]; mem_req_t mq[$]; word_t lq[$];
  word_t exp_agu[$], exp_host[$];
  word_t shadow [64];
  int checks = 0, failures = 0, n_agu = 0, n_host = 0, n_defer = 0, n_credit = 0;
  bit drain;

  always @(negedge clk) begin
    aq_empty = (aq.size() == 0); aq_head = aq_empty ? '0 : aq[0];
    sq_empty = (sq.size() == 0); sq_head = sq_empty ? '0 : sq[0];
    mq_empty = (mq.size() == 0); mq_head = mq_empty ? '0 : mq[0];
    lq_count = ($clog2(LQD+1))'(lq.size());
    drain    = ($urandom_range(0, 3) == 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (mc_valid && mc_ready) begin
      if (aq_pop) begin
        n_agu++;
        checks++;
        if (mc_req.we != aq[0].we || mc_req.addr != aq[0].addr) begin
          failures++; $display("FAIL AGU request order");
        end
        if (mc_req.we) begin
          checks++;
          if (!sq_pop || mc_req.wdata != sq[0]) begin
            failures++; $display("FAIL AGU write data");
          end
        end else exp_agu.push_back(shadow[mc_req.addr % 64]);
        void'(aq.pop_front());
        if (sq_pop) void'(sq.pop_front());
      end else begin
        n_host++;
        checks++;
        if (!mq_pop || mc_req != mq[0]) begin
          failures++; $display("FAIL host request order");
        end
        // priority: the AGU head could not go
        checks++;
        if (!aq_empty && (aq_head.we ? !sq_empty : (int'(lq_count) + exp_agu.size() < LQD))) begin
          failures++; $display("FAIL host granted while the AGU could go");
        end
        if (!mc_req.we) exp_host.push_back(shadow[mc_req.addr % 64]);
        void'(mq.pop_front());
      end
      if (mc_req.we) shadow[mc_req.addr % 64] = mc_req.wdata;
    end
    if (host_deferred) n_defer++;
    if (!aq_empty && !aq_head.we && int'(lq_count) + exp_agu.size() >= LQD) n_credit++;
    if (lq_push) begin
      checks++;
      if (exp_agu.size() == 0 || lq_data != exp_agu[0]) begin
        failures++; $display("FAIL AGU read data %h", lq_data);
      end
      if (exp_agu.size() != 0) void'(exp_agu.pop_front());
      lq.push_back(lq_data);
      checks++;
      if (lq.size() > LQD) begin
        failures++; $display("FAIL load queue overflow");
      end
    end
    if (host_rvalid) begin
      checks++;
      if (exp_host.size() == 0 || host_rdata != exp_host[0]) begin
        failures++; $display("FAIL host read data %h", host_rdata);
      end
      if (exp_host.size() != 0) void'(exp_host.pop_front());
    end
    if (drain && lq.size() > 0) void'(lq.pop_front());
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      shadow[i] = word_t'(i * 7 + 3);
      u_mem.mem[i] = shadow[i];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(posedge clk);
      if ($urandom_range(0, 2) == 0 && aq.size() < 8) begin
        agu_req_t r;
        r.we = ($urandom_range(0, 2) == 0); r.addr = addr_t'($urandom_range(0, 63));
        aq.push_back(r);
        if (r.we) fork begin
          repeat ($urandom_range(0, 6)) @(posedge clk);
          sq.push_back(word_t'($urandom));
        end join_none
      end
      if ($urandom_range(0, 3) == 0 && mq.size() < 8) begin
        mem_req_t h;
        h.we = ($urandom_range(0, 1) == 0); h.addr = addr_t'($urandom_range(0, 63)); h.wdata = word_t'($urandom);
        mq.push_back(h);
      end
    end
    repeat (200) @(posedge clk);
    checks++;
    if (n_agu < 100 || n_host < 100 || n_defer == 0 || n_credit == 0) begin
      failures++;
      $display("FAIL coverage agu=%0d host=%0d deferred=%0d credit=%0d", n_agu, n_host, n_defer, n_credit);
    end
    checks++;
    if (exp_agu.size() != 0 || exp_host.size() != 0) begin
      failures++; $display("FAIL reads never answered");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// vault_pim_unit: the sequence-alignment logic placed in the logic layer of
// one vault of the 3D memory, between the packet switch and the vault
// controller.
//
// Packets that arrive for the vault are split in two: PIM packets go into the
// PIM queue, where the address generation unit (AGU) takes them; regular
// read/write requests go into the memory queue. The AGU puts its requests
// into the address queue and drives the processing element (PE). The PE puts
// the boundary cells it writes back into the store queue and takes the words
// it reads (query and reference characters, boundary cells) from the load
// queue; the AGU takes the metadata words from the same queue. The arbiter
// sends AGU requests ahead of host requests to the vault controller and
// routes read data back to the load queue or to the host. The unit keeps the
// largest alignment score of the run and the index of the reference that
// gave it; the host reads them (local_max*) once run_done has been seen.
// Interface: host side pim_*/mem_*/host_r*, vault controller side mc_*.
// Timing: one memory request per cycle at most; the PE steps when its
// operands are in the load queue.
//
// From the paper: the queues and their connections, PE and AGU per vault, the
// arbitration, and the per-vault maximum. This design's choices: queue
// depths, ready/valid handshakes, and reporting the index of the best
// reference next to the score.
module vault_pim_unit
  import nw_pkg::*;
#(
  parameter int unsigned P         = 16,
  parameter int unsigned PIMQ_D    = 4,
  parameter int unsigned MEMQ_D    = 8,
  parameter int unsigned ADRQ_D    = 8,
  parameter int unsigned STQ_D     = 8,
  parameter int unsigned LDQ_D     = 16,
  parameter int          MATCH     = nw_pkg::MATCH_SCORE,
  parameter int          MISMATCH  = nw_pkg::MISMATCH_SCORE,
  parameter int          GAP       = nw_pkg::GAP_PENALTY
) (
  input  logic        clk,
  input  logic        rst_n,
  // host side (after the packet switch)
  input  pim_packet_t pim_pkt,
  input  logic        pim_valid,
  output logic        pim_ready,
  input  mem_req_t    mem_req,
  input  logic        mem_valid,
  output logic        mem_ready,
  output word_t       host_rdata,
  output logic        host_rvalid,
  // vault controller
  output mem_req_t    mc_req,
  output logic        mc_valid,
  input  logic        mc_ready,
  input  word_t       mc_rdata,
  input  logic        mc_rvalid,
  // result of the last run
  output logic        run_done,        // one-cycle pulse
  output logic        result_valid,    // local_max* hold a finished run
  output score_t      local_max,
  output len_t        local_max_idx,
  output logic        busy
);
  // queues
  pim_packet_t pq_head;  logic pq_empty, pq_full, pq_pop;
  mem_req_t    mq_head;  logic mq_empty, mq_full, mq_pop;
  agu_req_t    aq_in, aq_head; logic aq_push, aq_full, aq_empty, aq_pop;
  word_t       sq_in, sq_head; logic sq_push, sq_full, sq_empty, sq_pop;
  word_t       lq_in, lq_head; logic lq_push, lq_empty, lq_pop;
  logic [$clog2(LDQ_D+1)-1:0] lq_count;

  // AGU <-> PE
  logic pe_start, pe_first, pe_last, pe_busy, pe_done;
  len_t pe_base, pe_m, pe_n, seq_index;
  logic agu_ld_pop, pe_ld_pop, agu_busy;
  logic score_valid;
  score_t score;
  logic pe_step, pe_stall, host_deferred;

  assign pim_ready = !pq_full;
  assign mem_ready = !mq_full;

  sync_fifo #(.T(pim_packet_t), .DEPTH(PIMQ_D)) u_pim_q (
    .clk, .rst_n, .wr_en(pim_valid && pim_ready), .wr_data(pim_pkt), .full(pq_full),
    .rd_en(pq_pop), .rd_data(pq_head), .empty(pq_empty), .count());
  sync_fifo #(.T(mem_req_t), .DEPTH(MEMQ_D)) u_mem_q (
    .clk, .rst_n, .wr_en(mem_valid && mem_ready), .wr_data(mem_req), .full(mq_full),
    .rd_en(mq_pop), .rd_data(mq_head), .empty(mq_empty), .count());
  sync_fifo #(.T(agu_req_t), .DEPTH(ADRQ_D)) u_adr_q (
    .clk, .rst_n, .wr_en(aq_push), .wr_data(aq_in), .full(aq_full),
    .rd_en(aq_pop), .rd_data(aq_head), .empty(aq_empty), .count());
  sync_fifo #(.T(word_t), .DEPTH(STQ_D)) u_store_q (
    .clk, .rst_n, .wr_en(sq_push), .wr_data(sq_in), .full(sq_full),
    .rd_en(sq_pop), .rd_data(sq_head), .empty(sq_empty), .count());
  sync_fifo #(.T(word_t), .DEPTH(LDQ_D)) u_load_q (
    .clk, .rst_n, .wr_en(lq_push), .wr_data(lq_in), .full(),
    .rd_en(lq_pop), .rd_data(lq_head), .empty(lq_empty), .count(lq_count));

  assign lq_pop = agu_ld_pop || pe_ld_pop;

  // write-back slack: the store queue keeps two entries more than the slack
  localparam int unsigned WB_SLACK = (STQ_D > 2) ? STQ_D - 2 : 0;

  agu #(.P(P), .WB_SLACK(WB_SLACK)) u_agu (
    .clk, .rst_n,
    .pim_pkt(pq_head), .pim_empty(pq_empty), .pim_pop(pq_pop),
    .aq_req(aq_in), .aq_push(aq_push), .aq_full(aq_full),
    .ld_data(lq_head), .ld_empty(lq_empty), .ld_pop(agu_ld_pop),
    .pe_start(pe_start), .pe_base(pe_base), .pe_ref_len(pe_m), .pe_query_len(pe_n),
    .pe_first(pe_first), .pe_last(pe_last), .pe_busy(pe_busy),
    .seq_index(seq_index), .busy(agu_busy), .run_done(run_done)
  );

  alignment_pe #(.P(P), .MATCH(MATCH), .MISMATCH(MISMATCH), .GAP(GAP)) u_pe (
    .clk, .rst_n,
    .blk_start(pe_start), .blk_base(pe_base), .blk_ref_len(pe_m), .blk_query_len(pe_n),
    .blk_first(pe_first), .blk_last(pe_last), .blk_busy(pe_busy), .blk_done(pe_done),
    .ld_data(lq_head), .ld_empty(lq_empty), .ld_pop(pe_ld_pop),
    .st_data(sq_in), .st_full(sq_full), .st_push(sq_push),
    .score_valid(score_valid), .score(score), .step(pe_step), .stall(pe_stall)
  );

  vault_arbiter #(.LQ_DEPTH(LDQ_D)) u_arb (
    .clk, .rst_n,
    .aq_head(aq_head), .aq_empty(aq_empty), .aq_pop(aq_pop),
    .sq_head(sq_head), .sq_empty(sq_empty), .sq_pop(sq_pop),
    .mq_head(mq_head), .mq_empty(mq_empty), .mq_pop(mq_pop),
    .lq_count(lq_count), .lq_push(lq_push), .lq_data(lq_in),
    .mc_req(mc_req), .mc_valid(mc_valid), .mc_ready(mc_ready),
    .mc_rdata(mc_rdata), .mc_rvalid(mc_rvalid),
    .host_rdata(host_rdata), .host_rvalid(host_rvalid),
    .host_deferred(host_deferred)
  );

  // largest score of the run and the reference it belongs to
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      local_max     <= '0;
      local_max_idx <= '0;
      result_valid  <= 1'b0;
    end else begin
      if (pq_pop) result_valid <= 1'b0;
      if (run_done) result_valid <= 1'b1;
      if (score_valid && (seq_index == '0 || score > local_max)) begin
        local_max     <= score;
        local_max_idx <= seq_index;
      end
    end
  end

  assign busy = agu_busy || pe_busy;

  // The load queue never overflows: the arbiter reserves room for each read.
  a_lq_room: assert property (@(posedge clk) disable iff (!rst_n)
    lq_push |-> (lq_count < ($clog2(LDQ_D+1))'(LDQ_D)) || lq_pop);
endmodule

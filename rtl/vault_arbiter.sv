// vault_arbiter: the arbitration module in front of the vault controller. It
// multiplexes the AGU's requests (address queue, with write data taken from
// the store queue) and the host's regular requests (memory queue) onto the
// single request port of the vault controller, and routes each read response
// either into the load queue (AGU read) or back to the host.
//
// The AGU has priority: a host request is sent only in a cycle in which the
// AGU's head request cannot go. An AGU write at the head of the address queue
// waits until its data is at the head of the store queue. An AGU read is only
// sent when the load queue is sure to have room for its data (entries in the
// load queue plus AGU reads in flight below LQ_DEPTH). The vault controller
// answers reads in request order, so a FIFO of one-bit source tags, pushed
// when a read is sent and popped when its data returns, is enough to route
// the responses.
// Interface: heads and pops of the three queues, the load queue push, the
// vault controller port (mc_req/mc_valid/mc_ready, mc_rdata/mc_rvalid) and the
// host read response. Timing: combinational grant, one request per cycle.
//
// From the paper: the arbitration between AGU and regular requests, the AGU's
// priority, the pairing of AGU write addresses with store-queue data, the
// in-order return into the load queue. This design's choices: the credit
// rule for the load queue, the tag FIFO, and that the host always accepts
// its read responses.
module vault_arbiter
  import nw_pkg::*;
#(
  parameter int unsigned LQ_DEPTH  = 16,  // load queue entries
  parameter int unsigned MAX_READS = 16   // reads in flight at the controller
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // address queue (AGU)
  input  agu_req_t                      aq_head,
  input  logic                          aq_empty,
  output logic                          aq_pop,
  // store queue (PE)
  input  word_t                         sq_head,
  input  logic                          sq_empty,
  output logic                          sq_pop,
  // memory queue (host)
  input  mem_req_t                      mq_head,
  input  logic                          mq_empty,
  output logic                          mq_pop,
  // load queue
  input  logic [$clog2(LQ_DEPTH+1)-1:0] lq_count,
  output logic                          lq_push,
  output word_t                         lq_data,
  // vault controller
  output mem_req_t                      mc_req,
  output logic                          mc_valid,
  input  logic                          mc_ready,
  input  word_t                         mc_rdata,
  input  logic                          mc_rvalid,
  // host read responses
  output word_t                         host_rdata,
  output logic                          host_rvalid,
  // observation
  output logic                          host_deferred  // host waits for the AGU
);
  localparam int unsigned CW = $clog2(LQ_DEPTH + 1) + 1;

  logic          tag_full, tag_empty, tag_head, tag_push, tag_in;
  logic [CW-1:0] agu_inflight;
  logic          agu_ok, host_ok, grant_agu, grant_host, fire, rd_fire;
  logic          agu_credit;

  assign agu_credit = (CW'(lq_count) + agu_inflight) < CW'(LQ_DEPTH);
  assign agu_ok  = !aq_empty && (aq_head.we ? !sq_empty : (agu_credit && !tag_full));
  assign host_ok = !mq_empty && (mq_head.we || !tag_full);
  assign grant_agu  = agu_ok;
  assign grant_host = !agu_ok && host_ok;
  assign host_deferred = !mq_empty && grant_agu;

  always_comb begin
    if (grant_agu) mc_req = '{we: aq_head.we, addr: aq_head.addr, wdata: sq_head};
    else           mc_req = mq_head;
  end

  assign mc_valid = grant_agu || grant_host;
  assign fire     = mc_valid && mc_ready;
  assign aq_pop   = fire && grant_agu;
  assign sq_pop   = fire && grant_agu && aq_head.we;
  assign mq_pop   = fire && grant_host;
  assign rd_fire  = fire && !mc_req.we;
  assign tag_push = rd_fire;
  assign tag_in   = grant_agu;

  sync_fifo #(.T(logic), .DEPTH(MAX_READS)) u_tags (
    .clk(clk), .rst_n(rst_n),
    .wr_en(tag_push), .wr_data(tag_in), .full(tag_full),
    .rd_en(mc_rvalid), .rd_data(tag_head), .empty(tag_empty), .count()
  );

  assign lq_push     = mc_rvalid && tag_head;
  assign lq_data     = mc_rdata;
  assign host_rvalid = mc_rvalid && !tag_head;
  assign host_rdata  = mc_rdata;

  always_ff @(posedge clk) begin
    if (!rst_n) agu_inflight <= '0;
    else agu_inflight <= agu_inflight + CW'(rd_fire && grant_agu) - CW'(lq_push);
  end

  // Every read response belongs to a read that was sent.
  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mc_rvalid |-> !tag_empty);
endmodule

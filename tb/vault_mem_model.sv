// vault_mem_model: behavioural model of a vault controller with its DRAM,
// used only by the testbenches (not synthesizable design). It accepts one
// request per cycle when ready, and returns read data in request order after
// LATENCY cycles. With RANDOM_READY set, ready is withdrawn on about one
// cycle in four to exercise back-pressure. The array is written directly by
// the testbench through the `mem` member.
module vault_mem_model
  import nw_pkg::*;
#(
  parameter int unsigned WORDS        = 4096,
  parameter int unsigned LATENCY      = 4,
  parameter bit          RANDOM_READY = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  input  logic     valid,
  output logic     ready,
  output word_t    rdata,
  output logic     rvalid
);
  word_t mem [WORDS];
  logic  pv [LATENCY];
  word_t pd [LATENCY];
  int unsigned n_reads, n_writes;

  always_ff @(posedge clk) begin
    if (!rst_n) ready <= 1'b0;
    else        ready <= RANDOM_READY ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) begin
        pv[i] <= 1'b0;
        pd[i] <= '0;
      end
      n_reads  <= 0;
      n_writes <= 0;
    end else begin
      pv[0] <= valid && ready && !req.we;
      pd[0] <= mem[int'(req.addr) % WORDS];
      for (int i = 1; i < LATENCY; i++) begin
        pv[i] <= pv[i-1];
        pd[i] <= pd[i-1];
      end
      if (valid && ready && req.we) mem[int'(req.addr) % WORDS] <= req.wdata;
      if (valid && ready) begin
        if (req.we) n_writes <= n_writes + 1;
        else        n_reads  <= n_reads + 1;
      end
    end
  end

  assign rvalid = pv[LATENCY-1];
  assign rdata  = pd[LATENCY-1];
endmodule

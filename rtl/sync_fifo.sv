// sync_fifo: first-in first-out queue used for every queue of a vault's logic
// layer (PIM queue, memory queue, address queue, store queue, load queue).
//
// A circular buffer of DEPTH entries of type T with a read and a write pointer
// and an occupancy counter. The head entry is always visible on rd_data
// (show-ahead): rd_en pops it. A push when full and a pop when empty are
// ignored (and flagged by assertions). Push and pop may happen in the same
// cycle, also when full (the head leaves while the new entry enters).
// Interface: wr_en/wr_data/full, rd_en/rd_data/empty, count.
// Timing: an entry written in cycle t is visible on rd_data in cycle t+1.
// The paper names the queues but gives neither their depth nor their
// implementation; both are this design's choice.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  T                           wr_data,
  output logic                       full,
  input  logic                       rd_en,
  output T                           rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                           mem [DEPTH];
  logic [PW-1:0]              rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;
  logic                       do_wr, do_rd;

  assign empty   = (cnt == 0);
  assign full    = (cnt == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign count   = cnt;
  assign rd_data = mem[rd_ptr];
  assign do_rd   = rd_en && !empty;
  assign do_wr   = wr_en && (!full || do_rd);

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: cnt <= cnt;
      endcase
    end
  end

  // A producer must not push into a full queue unless the head leaves.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (!full || rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> !empty);
endmodule

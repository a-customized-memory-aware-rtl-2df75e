// agu: the programmable DRAM address generation unit of one vault. It turns
// one PIM packet into the whole stream of memory requests for aligning the
// query with every reference sequence of the vault, and it starts the blocks
// of the processing element (PE).
//
// For each packet it reads the metadata (word 0: number of references, word
// 1+i: length of reference i in characters), then, for each reference i of
// length m, for each block of P query rows (base = 0, P, 2P, ...):
//   - waits until the PE is idle and starts it on the block,
//   - requests the query words that hold rows base .. base+P-1,
//   - for k = 0 .. m+LAG-1 (k < m for the last block) requests, in this order,
//       * the reference word k/16 when k%16 == 0 and k < m,
//       * the boundary cell DP(base, k+1) from the previous block's row
//         when the block is not the first and k < m,
//       * a write of DP(base+P, k-LAG+1) into this block's row when the block
//         is not the last and k >= LAG (the data comes from the store queue),
//     where LAG = P + WB_SLACK. The PE produces the cell of column c after
//     consuming the operands of column c+P; the WB_SLACK further columns
//     let the write reach the head of the in-order address queue only after
//     its data is in the store queue, so the write does not hold up the
//     reads queued behind it. The store queue must have more than WB_SLACK
//     entries, or the PE and the AGU can wait for each other.
// The two boundary rows alternate (row 0 at dp_addr, row 1 at dp_addr + m).
// References are stored one after another, each starting on a word boundary.
// After a reference it waits for the PE to finish and moves to the next one;
// after the last it pulses run_done.
// Interface: PIM queue head (pim_*), address queue push (aq_*), load queue
// head for the metadata words it reads itself (ld_*), PE block control
// (pe_*), and the index of the reference whose score the PE delivers next.
// Timing: at most one request per cycle; a metadata read waits for its word.
//
// From the paper: the fields of the PIM packet, the metadata, the loop order
// of its address-generation pseudocode (blocks, stationary query characters,
// streamed reference characters and boundary cells, write-back behind the
// stream), one sequence-word read per 16 characters, two boundary rows and
// the p columns of padding. This design's choices: the memory layouts named
// above, the WB_SLACK columns added to the pseudocode's write-back lag of P
// columns, no boundary reads for the first block and no write-back for the
// last block (whose row nobody reads), and waiting for the PE between blocks.
module agu
  import nw_pkg::*;
#(
  parameter int unsigned P        = 16,
  parameter int unsigned WB_SLACK = 6    // extra columns of write-back lag
) (
  input  logic        clk,
  input  logic        rst_n,
  // PIM queue
  input  pim_packet_t pim_pkt,
  input  logic        pim_empty,
  output logic        pim_pop,
  // address queue
  output agu_req_t    aq_req,
  output logic        aq_push,
  input  logic        aq_full,
  // load queue (metadata words only)
  input  word_t       ld_data,
  input  logic        ld_empty,
  output logic        ld_pop,
  // PE control
  output logic        pe_start,
  output len_t        pe_base,
  output len_t        pe_ref_len,
  output len_t        pe_query_len,
  output logic        pe_first,
  output logic        pe_last,
  input  logic        pe_busy,
  // status
  output len_t        seq_index,   // reference currently being aligned
  output logic        busy,
  output logic        run_done     // one-cycle pulse after the last reference
);
  localparam int unsigned CPW = CHARS_PER_WORD;
  localparam int unsigned LAG = P + WB_SLACK;  // write-back lag in columns

  typedef enum logic [3:0] {
    A_IDLE, A_META_RD, A_META_WAIT, A_SEQ, A_LEN_WAIT, A_BLK,
    A_QRD, A_COL, A_NEXT_BLK, A_SEQ_END
  } state_t;
  state_t state;

  pim_packet_t pkt;
  len_t  db_size, seq_i, m, base, k, k_end, qw, qw_end;
  addr_t ref_ptr;
  logic  row_sel;            // row this block writes; it reads the other one
  logic  first, last;
  logic [1:0] phase;         // 0: reference word, 1: boundary read, 2: write, 3: none

  logic want_rd, want_wr;
  addr_t row_wr, row_rd;

  assign want_rd  = (k < m) && !first;
  assign want_wr  = !last && (k >= len_t'(LAG));
  assign row_wr   = pkt.dp_addr + (row_sel ? addr_t'(m) : '0);
  assign row_rd   = pkt.dp_addr + (row_sel ? '0 : addr_t'(m));

  assign seq_index    = seq_i;
  assign busy         = (state != A_IDLE);
  assign pe_base      = base;
  assign pe_ref_len   = m;
  assign pe_query_len = pkt.query_len;
  assign pe_first     = first;
  assign pe_last      = last;

  always_comb begin
    pim_pop  = 1'b0;
    aq_push  = 1'b0;
    aq_req   = '0;
    ld_pop   = 1'b0;
    pe_start = 1'b0;
    case (state)
      A_IDLE:      pim_pop = !pim_empty;
      A_META_RD: begin
        aq_push = !aq_full;
        aq_req  = '{we: 1'b0, addr: pkt.meta_addr};
      end
      A_META_WAIT, A_LEN_WAIT: ld_pop = !ld_empty;
      A_SEQ: if (seq_i != db_size) begin
        aq_push = !aq_full;
        aq_req  = '{we: 1'b0, addr: pkt.meta_addr + 1'b1 + addr_t'(seq_i)};
      end
      A_BLK:       pe_start = !pe_busy;
      A_QRD: begin
        aq_push = !aq_full;
        aq_req  = '{we: 1'b0, addr: pkt.query_addr + addr_t'(qw)};
      end
      A_COL: begin
        aq_push = !aq_full && (phase != 2'd3);
        case (phase)
          2'd0:    aq_req = '{we: 1'b0, addr: ref_ptr + addr_t'(k / CPW)};
          2'd1:    aq_req = '{we: 1'b0, addr: row_rd + addr_t'(k)};
          2'd2:    aq_req = '{we: 1'b1, addr: row_wr + addr_t'(k - len_t'(LAG))};
          default: aq_req = '0;  // column without a request
        endcase
      end
      default: ;
    endcase
  end

  // next phase of column k after the request of phase ph was issued
  function automatic logic [1:0] first_phase(input logic r, input logic d, input logic w);
    return r ? 2'd0 : d ? 2'd1 : w ? 2'd2 : 2'd3;
  endfunction

  logic [1:0] nxt;
  always_comb begin
    nxt = 2'd3;
    case (phase)
      2'd0:    nxt = want_rd ? 2'd1 : want_wr ? 2'd2 : 2'd3;
      2'd1:    nxt = want_wr ? 2'd2 : 2'd3;
      default: nxt = 2'd3;
    endcase
  end

  // phase of the column k+1
  len_t  k1;
  logic  ref1, rd1, wr1;
  assign k1   = k + 1;
  assign ref1 = (k1 < m) && (k1 % CPW == 0);
  assign rd1  = (k1 < m) && !first;
  assign wr1  = !last && (k1 >= len_t'(LAG));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= A_IDLE;
      pkt      <= '0;
      db_size  <= '0;
      seq_i    <= '0;
      m        <= '0;
      base     <= '0;
      k        <= '0;
      k_end    <= '0;
      qw       <= '0;
      qw_end   <= '0;
      ref_ptr  <= '0;
      row_sel  <= 1'b0;
      first    <= 1'b0;
      last     <= 1'b0;
      phase    <= '0;
      run_done <= 1'b0;
    end else begin
      run_done <= 1'b0;
      case (state)
        A_IDLE: if (!pim_empty) begin
          pkt   <= pim_pkt;
          state <= A_META_RD;
        end
        A_META_RD: if (!aq_full) state <= A_META_WAIT;
        A_META_WAIT: if (!ld_empty) begin
          db_size <= len_t'(ld_data);
          seq_i   <= '0;
          ref_ptr <= pkt.ref_addr;
          state   <= A_SEQ;
        end
        A_SEQ: begin
          if (seq_i == db_size) begin
            run_done <= 1'b1;
            state    <= A_IDLE;
          end else if (!aq_full) begin
            state <= A_LEN_WAIT;
          end
        end
        A_LEN_WAIT: if (!ld_empty) begin
          m       <= len_t'(ld_data);
          base    <= '0;
          row_sel <= 1'b0;
          first   <= 1'b1;
          last    <= (len_t'(P) >= pkt.query_len);
          state   <= A_BLK;
        end
        A_BLK: if (!pe_busy) begin
          qw     <= base / CPW;
          qw_end <= (base + len_t'(P) - 1) / CPW;
          state  <= A_QRD;
        end
        A_QRD: if (!aq_full) begin
          qw <= qw + 1;
          if (qw == qw_end) begin
            k     <= '0;
            k_end <= last ? m - 1 : m + len_t'(LAG) - 1;
            phase <= first_phase((m > 0), (m > 0) && !first, 1'b0);
            state <= A_COL;
          end
        end
        A_COL: if (!aq_full || phase == 2'd3) begin
          if (nxt != 2'd3) begin
            phase <= nxt;
          end else if (k == k_end) begin
            state <= A_NEXT_BLK;
          end else begin
            k     <= k1;
            phase <= first_phase(ref1, rd1, wr1);
          end
        end
        A_NEXT_BLK: begin
          if (last) begin
            state <= A_SEQ_END;
          end else begin
            base    <= base + len_t'(P);
            row_sel <= ~row_sel;
            first   <= 1'b0;
            last    <= (base + len_t'(2 * P) >= pkt.query_len);
            state   <= A_BLK;
          end
        end
        A_SEQ_END: if (!pe_busy) begin
          ref_ptr <= ref_ptr + addr_t'((m + CPW - 1) / CPW);
          seq_i   <= seq_i + 1;
          state   <= A_SEQ;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  // Boundary cells are written only P columns behind the stream.
  a_write_lag: assert property (@(posedge clk) disable iff (!rst_n)
    (aq_push && aq_req.we) |-> (k >= len_t'(LAG) && !last));
endmodule

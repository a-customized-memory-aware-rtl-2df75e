// nw_pkg: types and constants shared by the sequence-alignment
// processing-in-memory (PIM) logic.
//
// A DNA character is a 2-bit code, sixteen of them are packed into one 32-bit
// memory word (character k of a sequence sits in word k/16, bits
// [2*(k%16)+1 : 2*(k%16)]). A dynamic-programming (DP) cell is a 32-bit signed
// score. Memory is addressed in 32-bit words inside one vault: 4 DRAM layers of
// 1 GB shared by 32 vaults gives 128 MB, i.e. 2^25 words, per vault.
//
// The word, cell and character widths follow the paper; the packing order of
// characters inside a word, the address width and the field layout of the
// PIM packet and of memory requests are choices of this design.
package nw_pkg;

  localparam int unsigned WORD_W         = 32;  // memory word, bits
  localparam int unsigned CHAR_W         = 2;   // one nucleotide
  localparam int unsigned CHARS_PER_WORD = WORD_W / CHAR_W;  // 16
  localparam int unsigned SCORE_W        = 32;  // DP cell
  localparam int unsigned ADDR_W         = 25;  // word address inside a vault
  localparam int unsigned LEN_W          = 32;  // sequence length / counts

  typedef logic [CHAR_W-1:0]         char_t;
  typedef logic signed [SCORE_W-1:0] score_t;
  typedef logic [WORD_W-1:0]         word_t;
  typedef logic [ADDR_W-1:0]         addr_t;
  typedef logic [LEN_W-1:0]          len_t;

  // Scoring of the worked example (match +1, mismatch -1, gap -2).
  localparam int MATCH_SCORE    = 1;
  localparam int MISMATCH_SCORE = -1;
  localparam int GAP_PENALTY    = -2;

  // PIM packet: programs the address generation unit of one vault.
  typedef struct packed {
    addr_t ref_addr;    // first word of the first reference sequence
    addr_t query_addr;  // first word of the query sequence
    addr_t meta_addr;   // metadata: [0] = number of references, [1+i] = length of reference i
    len_t  query_len;   // query length in characters
    addr_t dp_addr;     // two DP boundary rows: row 0 at dp_addr, row 1 at dp_addr + ref length
  } pim_packet_t;

  // A memory request, same format for host and AGU requests.
  typedef struct packed {
    logic  we;    // 1 = write, 0 = read
    addr_t addr;
    word_t wdata; // unused for reads
  } mem_req_t;

  // Request produced by the AGU; a write takes its data from the store queue.
  typedef struct packed {
    logic  we;
    addr_t addr;
  } agu_req_t;

endpackage

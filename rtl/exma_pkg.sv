// exma_pkg -- types and constants shared by the EXMA accelerator.
//
// The accelerator answers FM-Index requests [k-mer, pos] over an EXMA table:
// for every k-mer the table keeps the sorted list of rows ("increments") at
// which that k-mer's Occ value grows, plus one "base" per k-mer.  A request
// returns Count(k-mer) + Occ(k-mer, pos), the next low/high pointer of a
// k-step backward search.
//
// From the paper: k = 15 symbols per step, 3 bits per symbol in the
// scheduling queue, 64-byte memory lines, 8-bit quantized MTL index with
// 10-neuron sigmoid non-leaf nodes and linear-regression leaves, CHAIN delta
// compression of increments.  This design's own choices (the paper gives no
// bit-level formats): the symbol code, the 40-bit position width, the
// 128-bit base entry, the CHAIN line layout and the index-node layout below,
// and the line-address map of the three DRAM regions.
package exma_pkg;

  // ---------------------------------------------------------------- k-mers
  localparam int unsigned K      = 15;        // step number of EXMA-15
  localparam int unsigned SYM_W  = 3;         // $, A, C, G, T need 3 bits
  localparam int unsigned KMER_W = K * SYM_W; // 45-bit k-mer in the CAM
  localparam int unsigned KIDX_W = 2 * K;     // dense A/C/G/T index, 30 bits

  // Symbol codes; numeric order is lexicographic order ($ smallest).
  typedef enum logic [SYM_W-1:0] {
    SYM_END = 3'd0, SYM_A = 3'd1, SYM_C = 3'd2, SYM_G = 3'd3, SYM_T = 3'd4
  } sym_e;

  // ------------------------------------------------------------- positions
  localparam int unsigned POS_W  = 40;        // holds |G| = 31 G (pinus)
  localparam int unsigned CNT_W  = 24;        // increments per k-mer (f)
  localparam int unsigned NODE_W = 24;        // MTL node number
  localparam int unsigned TAG_W  = 16;        // host request tag

  // ----------------------------------------------------------- memory lines
  localparam int unsigned LINE_W   = 512;     // 64-byte line
  localparam int unsigned LADDR_W  = 33;      // line address, 512 GB space
  // DRAM regions (line addresses), this design's own map.
  localparam logic [LADDR_W-1:0] BASE_LINE0  = 33'h0_0000_0000;
  localparam logic [LADDR_W-1:0] INDEX_LINE0 = 33'h0_1000_0000;
  localparam logic [LADDR_W-1:0] INCR_LINE0  = 33'h0_2000_0000;

  // --------------------------------------------------------- base entries
  // 128-bit base entry, 4 per line, entry i at line BASE_LINE0 + i/4.
  //   count : Count(k-mer) = number of increments of all smaller k-mers
  //   f     : number of increments of this k-mer
  //   line  : first CHAIN line of its increments, relative to INCR_LINE0
  //   root  : root node of its MTL index model
  typedef struct packed {
    logic [NODE_W-1:0]  root;   // [127:104]
    logic [POS_W-1:0]   line;   // [103:64]
    logic [CNT_W-1:0]   f;      // [63:40]
    logic [POS_W-1:0]   count;  // [39:0]
  } base_t;
  localparam int unsigned BASES_PER_LINE = LINE_W / $bits(base_t);

  // ------------------------------------------------------ CHAIN line format
  // [39:0] incr0, [63:40] idx of incr0 in the k-mer's list, [68:64] number
  // of deltas, then 16-bit deltas from bit 69 upwards.
  localparam int unsigned DELTA_W    = 16;
  localparam int unsigned CH_NDELTA  = 27;
  localparam int unsigned CH_NINCR   = CH_NDELTA + 1;   // 28 per line
  localparam int unsigned CH_IDX_LSB = 40;
  localparam int unsigned CH_CNT_LSB = 64;
  localparam int unsigned CH_CNT_W   = 5;
  localparam int unsigned CH_D_LSB   = 69;

  // --------------------------------------------------- MTL index node line
  // byte 0 bit 0 leaf; byte 1 pos shift; byte 2 k-mer shift; byte 3 number
  // of children; bytes 4..6 first child node; non-leaf: bytes 8..17 w0,
  // 18..27 w1, 28..37 b, 38..47 v (output weights), 48 c (output bias);
  // leaf: byte 8 weight, byte 9 bias.  All weights signed 8-bit.
  localparam int unsigned N_NEURON = 10;

  // ----------------------------------------------------- request / result
  typedef struct packed {
    logic [TAG_W-1:0]  tag;
    logic [KMER_W-1:0] kmer;
    logic [POS_W-1:0]  pos;
  } req_t;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [POS_W-1:0] value;   // Count(k-mer) + Occ(k-mer, pos)
  } rsp_t;

  // Event counters brought out of the accelerator top.
  typedef struct packed {
    logic [31:0] requests_done;
    logic [31:0] base_hits;
    logic [31:0] base_misses;
    logic [31:0] index_hits;
    logic [31:0] index_misses;
    logic [31:0] node_evals;
    logic [31:0] first_line_ok;    // prediction's line held the answer
    logic [31:0] linear_steps;     // extra line reads of the linear search
    logic [31:0] empty_kmers;      // f = 0, answered from the base alone
    logic [31:0] keep_open_hints;  // increment reads sent with keep-open
    logic [31:0] row_hits;
    logic [31:0] activates;
    logic [31:0] precharges;
    logic [31:0] queue_full_cycles;
    logic [31:0] lines_written;
  } stats_t;

  // Dense index of a k-mer: 2 bits per symbol, A=0 .. T=3 ($ maps to A).
  function automatic logic [KIDX_W-1:0] kmer_index(input logic [KMER_W-1:0] km);
    logic [KIDX_W-1:0] r;
    logic [SYM_W-1:0]  s;
    r = '0;
    for (int i = 0; i < K; i++) begin
      s = km[i*SYM_W +: SYM_W];
      r[i*2 +: 2] = (s == SYM_END) ? 2'd0 : 2'(s - 3'd1);
    end
    return r;
  endfunction

endpackage

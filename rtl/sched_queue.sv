// sched_queue -- the CAM scheduling queue of the 2-stage EXMA scheduler.
//
// Every FM-Index request [k-mer, pos] from the host occupies one row until
// its result has been returned.  A row moves through the states
// NEW -> S1 (base being fetched) -> READY (base known) -> S2 (being searched)
// -> FREE.  Following the paper, the first stage issues NEW requests in the
// lexicographic order of their k-mers (so that neighbouring bases hit in
// the base cache) and the second stage issues READY requests in the order
// of their pos values (so that neighbouring MTL index nodes hit in the
// index cache).  The paper implements the sorting in a CAM; here each stage
// picks the smallest key among its rows with a comparator tree every
// cycle, which issues requests in the same sorted order.  Ties go to the
// lower row.  The CAM search port (q_kmer) reports whether any other
// occupied row holds the same k-mer; the dynamic page policy uses it to
// keep a DRAM row open.
//
// Depth 512 follows the paper's text ("512 128-bit entries", chosen in its
// design-space study); its Table 1 lists 256.  A row holds tag (16), k-mer
// (45 = 15 symbols x 3 bits, as in the paper), pos (40) and a 3-bit state.
//
// Interface: push with in_valid/in_ready; s1_* / s2_* present the chosen
// row combinationally, *_take claims it in the same cycle; s1_done moves a
// row from S1 to READY; free releases a row.  All updates at the clock edge.
// Lint note: rst_n drives the asynchronous reset of the flops and also the
// 'disable iff' of the handshake assertions (in this module or below it),
// which some linters report as a signal used both synchronously and
// asynchronously; the assertions are not logic, so the warning stands.
module sched_queue
  import exma_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host side
  input  logic                     in_valid,
  output logic                     in_ready,
  input  req_t                     in_req,
  // stage 1: smallest k-mer among NEW rows
  output logic                     s1_valid,
  output logic [$clog2(DEPTH)-1:0] s1_slot,
  output req_t                     s1_req,
  input  logic                     s1_take,
  input  logic                     s1_done,
  input  logic [$clog2(DEPTH)-1:0] s1_done_slot,
  // stage 2: smallest pos among READY rows
  output logic                     s2_valid,
  output logic [$clog2(DEPTH)-1:0] s2_slot,
  output req_t                     s2_req,
  input  logic                     s2_take,
  // release
  input  logic                     free_valid,
  input  logic [$clog2(DEPTH)-1:0] free_slot,
  // CAM search for the page policy
  input  logic [KMER_W-1:0]        q_kmer,
  input  logic [$clog2(DEPTH)-1:0] q_excl,
  output logic                     q_match,
  output logic [$clog2(DEPTH):0]   occupancy
);

  localparam int unsigned SW = $clog2(DEPTH);

  typedef enum logic [2:0] {
    Q_FREE = 3'd0, Q_NEW = 3'd1, Q_S1 = 3'd2, Q_READY = 3'd3, Q_S2 = 3'd4
  } qstate_e;

  qstate_e state [DEPTH];
  req_t    row   [DEPTH];

  // ---------------------------------------------------- free-row encoder
  logic [SW-1:0] free_idx;
  logic          any_free;
  always_comb begin
    any_free = 1'b0;
    free_idx = '0;
    for (int i = DEPTH - 1; i >= 0; i--)
      if (state[i] == Q_FREE) begin
        any_free = 1'b1;
        free_idx = SW'(i);
      end
  end
  assign in_ready = any_free;

  // ------------------------------------------------ min-key selection trees
  logic [DEPTH-1:0]             v1, v2;
  logic [DEPTH-1:0][KMER_W-1:0] k1;
  logic [DEPTH-1:0][POS_W-1:0]  k2;
  logic [DEPTH-1:0][SW-1:0]     i1, i2;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      v1[i] = (state[i] == Q_NEW);
      v2[i] = (state[i] == Q_READY);
      k1[i] = row[i].kmer;
      k2[i] = row[i].pos;
      i1[i] = SW'(i);
      i2[i] = SW'(i);
    end
    for (int s = 1; s < DEPTH; s = s * 2)
      for (int i = 0; i + s < DEPTH; i = i + 2 * s) begin
        if (v1[i + s] && (!v1[i] || k1[i + s] < k1[i])) begin
          k1[i] = k1[i + s];
          i1[i] = i1[i + s];
        end
        v1[i] = v1[i] | v1[i + s];
        if (v2[i + s] && (!v2[i] || k2[i + s] < k2[i])) begin
          k2[i] = k2[i + s];
          i2[i] = i2[i + s];
        end
        v2[i] = v2[i] | v2[i + s];
      end
  end

  assign s1_valid = v1[0];
  assign s1_slot  = i1[0];
  assign s1_req   = row[i1[0]];
  assign s2_valid = v2[0];
  assign s2_slot  = i2[0];
  assign s2_req   = row[i2[0]];

  // ------------------------------------------------------------ CAM search
  always_comb begin
    q_match = 1'b0;
    for (int i = 0; i < DEPTH; i++)
      if (state[i] != Q_FREE && SW'(i) != q_excl && row[i].kmer == q_kmer)
        q_match = 1'b1;
  end

  // ---------------------------------------------------------------- update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) state[i] <= Q_FREE;
      occupancy <= '0;
    end else begin
      if (s1_take && s1_valid)     state[s1_slot]      <= Q_S1;
      if (s1_done)                 state[s1_done_slot] <= Q_READY;
      if (s2_take && s2_valid)     state[s2_slot]      <= Q_S2;
      if (free_valid)              state[free_slot]    <= Q_FREE;
      if (in_valid && any_free)    state[free_idx]     <= Q_NEW;
      occupancy <= occupancy + (SW+1)'(in_valid && any_free) - (SW+1)'(free_valid);
    end
  end

  always_ff @(posedge clk)
    if (in_valid && any_free) row[free_idx] <= in_req;

  // ------------------------------------------------------------ assertions
  a_take1: assert property (@(posedge clk) disable iff (!rst_n) s1_take |-> s1_valid);
  a_take2: assert property (@(posedge clk) disable iff (!rst_n) s2_take |-> s2_valid);
  a_done:  assert property (@(posedge clk) disable iff (!rst_n)
                            s1_done |-> state[s1_done_slot] == Q_S1);
  a_free:  assert property (@(posedge clk) disable iff (!rst_n)
                            free_valid |-> state[free_slot] == Q_S2);

endmodule

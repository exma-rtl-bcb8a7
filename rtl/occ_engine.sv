// occ_engine -- computes Count(k-mer) + Occ(k-mer, pos) for queued requests.
//
// This is the search datapath of the EXMA accelerator, the steps 2 to 6 of
// the paper's walk-through, split over the two scheduling stages:
//
//  Stage 1 (base resolution).  Take the NEW request with the smallest
//  k-mer from the scheduling queue, look its base entry up in the base
//  cache (fetching the line through the DMA controller on a miss), keep the
//  entry next to the request's queue row and mark the row READY.
//
//  Stage 2 (search).  Take the READY request with the smallest pos.  Walk
//  the k-mer's MTL index from its root node: each node comes from the index
//  cache (filled through the DMA controller on a miss) and is evaluated by
//  the inference engine, until a leaf gives F and the predicted position
//  p = F * f / 256.  Read the CHAIN line that should hold increment p
//  (lines are assumed full, 28 increments) and decompress it; if the first
//  increment above pos is in that line, Occ is its list index.  Otherwise
//  step one line backwards or forwards (the paper's linear search) until
//  it is found; Occ = f when no increment is above pos.  The read carries
//  the page-policy hint: keep the DRAM row open if another queued request
//  has the same k-mer.  Return Count + Occ with the request's tag and free
//  the queue row.  A k-mer with f = 0 skips the index and the increments.
//
// Occ counts the increments <= pos: the paper counts increments "smaller
// than" pos in its example but stops at "the first increment larger than
// pos"; this design follows the latter.  Both stages run concurrently,
// each on one request at a time.
//
// Interface: queue ports as in sched_queue; DMA client ports 0 (base
// fills), 1 (index fills), 2 (increment reads); rsp_* valid/ready result
// to the host; event counters for the test and for profiling.
// Lint note: rst_n drives the asynchronous reset of the flops and also the
// 'disable iff' of the handshake assertions (in this module or below it),
// which some linters report as a signal used both synchronously and
// asynchronously; the assertions are not logic, so the warning stands.
module occ_engine
  import exma_pkg::*;
#(
  parameter int unsigned DEPTH       = 512,
  parameter int unsigned BASE_BYTES  = 1024 * 1024,
  parameter int unsigned BASE_WAYS   = 8,
  parameter int unsigned INDEX_BYTES = 32 * 1024,
  parameter int unsigned INDEX_WAYS  = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // scheduling queue
  input  logic                     s1_valid,
  input  logic [$clog2(DEPTH)-1:0] s1_slot,
  input  req_t                     s1_req,
  output logic                     s1_take,
  output logic                     s1_done,
  output logic [$clog2(DEPTH)-1:0] s1_done_slot,
  input  logic                     s2_valid,
  input  logic [$clog2(DEPTH)-1:0] s2_slot,
  input  req_t                     s2_req,
  output logic                     s2_take,
  output logic                     free_valid,
  output logic [$clog2(DEPTH)-1:0] free_slot,
  output logic [KMER_W-1:0]        q_kmer,
  output logic [$clog2(DEPTH)-1:0] q_excl,
  input  logic                     q_match,
  // DMA clients 0..2 (reads)
  output logic [2:0]               dma_req_valid,
  input  logic [2:0]               dma_req_ready,
  output logic [2:0][LADDR_W-1:0]  dma_req_addr,
  output logic [2:0]               dma_req_keep_open,
  input  logic [2:0]               dma_rsp_valid,
  input  logic [LINE_W-1:0]        dma_rsp_data,
  // result
  output logic                     rsp_valid,
  input  logic                     rsp_ready,
  output rsp_t                     rsp,
  // event counters
  output logic [31:0]              base_hits,
  output logic [31:0]              base_misses,
  output logic [31:0]              index_hits,
  output logic [31:0]              index_misses,
  output logic [31:0]              first_line_ok,
  output logic [31:0]              linear_steps,
  output logic [31:0]              empty_kmers,
  output logic [31:0]              keep_open_hints,
  output logic [31:0]              node_evals
);

  localparam int unsigned SW = $clog2(DEPTH);

  base_t base_ram [DEPTH];   // base entry of every READY row

  // ====================================================== stage 1: bases
  typedef enum logic [2:0] { B_IDLE, B_LOOK, B_WAIT, B_MISS, B_FILLW } bst_e;
  bst_e              bst;
  logic [SW-1:0]     b_slot;
  logic [KIDX_W-1:0] b_kidx;
  logic [LADDR_W-1:0] b_addr;

  logic               bc_lk, bc_rsp, bc_hit, bc_fill;
  logic [LINE_W-1:0]  bc_line;

  assign b_addr  = BASE_LINE0 + LADDR_W'(b_kidx / KIDX_W'(BASES_PER_LINE));
  assign bc_lk   = (bst == B_LOOK);
  assign bc_fill = (bst == B_FILLW) && dma_rsp_valid[0];
  assign s1_take = (bst == B_IDLE) && s1_valid;

  exma_cache #(.SIZE_BYTES(BASE_BYTES), .WAYS(BASE_WAYS)) u_base_cache (
    .clk, .rst_n,
    .lk_valid(bc_lk), .lk_addr(b_addr),
    .rsp_valid(bc_rsp), .rsp_hit(bc_hit), .rsp_line(bc_line),
    .fill_valid(bc_fill), .fill_addr(b_addr), .fill_line(dma_rsp_data),
    .hits(base_hits), .misses(base_misses));

  base_t b_entry;
  assign b_entry = base_t'(bc_line[(b_kidx % KIDX_W'(BASES_PER_LINE)) * $bits(base_t) +: $bits(base_t)]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bst    <= B_IDLE;
      b_slot <= '0;
      b_kidx <= '0;
    end else begin
      case (bst)
        B_IDLE: if (s1_valid) begin
          b_slot <= s1_slot;
          b_kidx <= kmer_index(s1_req.kmer);
          bst    <= B_LOOK;
        end
        B_LOOK: bst <= B_WAIT;
        B_WAIT: if (bc_rsp) bst <= bc_hit ? B_IDLE : B_MISS;
        B_MISS: if (dma_req_ready[0]) bst <= B_FILLW;
        B_FILLW: if (dma_rsp_valid[0]) bst <= B_LOOK;
        default: bst <= B_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (bst == B_WAIT && bc_rsp && bc_hit) base_ram[b_slot] <= b_entry;

  assign s1_done      = (bst == B_WAIT) && bc_rsp && bc_hit;
  assign s1_done_slot = b_slot;

  // ===================================================== stage 2: search
  typedef enum logic [3:0] {
    S_IDLE, S_ILOOK, S_IWAIT, S_IMISS, S_IFILL, S_INFER, S_RD, S_RWAIT,
    S_SCAN, S_RESP
  } sst_e;
  sst_e               sst;
  logic [SW-1:0]      r_slot;
  req_t               r_req;
  base_t              r_base;
  logic [NODE_W-1:0]  r_node;
  logic [POS_W-1:0]   r_line;       // line number relative to base.line
  logic [POS_W-1:0]   r_last_line;  // last line certainly present
  logic [CNT_W-1:0]   r_occ;
  logic               r_first;      // first increment of the line in view
  logic               r_first_try;  // still on the predicted line

  logic               ic_lk, ic_rsp, ic_hit, ic_fill;
  logic [LINE_W-1:0]  ic_line;
  logic [LADDR_W-1:0] i_addr;
  assign i_addr  = INDEX_LINE0 + LADDR_W'(r_node);
  assign ic_lk   = (sst == S_ILOOK);
  assign ic_fill = (sst == S_IFILL) && dma_rsp_valid[1];

  exma_cache #(.SIZE_BYTES(INDEX_BYTES), .WAYS(INDEX_WAYS)) u_index_cache (
    .clk, .rst_n,
    .lk_valid(ic_lk), .lk_addr(i_addr),
    .rsp_valid(ic_rsp), .rsp_hit(ic_hit), .rsp_line(ic_line),
    .fill_valid(ic_fill), .fill_addr(i_addr), .fill_line(dma_rsp_data),
    .hits(index_hits), .misses(index_misses));

  logic              ie_start, ie_done, ie_leaf, ie_busy;
  logic [NODE_W-1:0] ie_next;
  logic [7:0]        ie_f;
  assign ie_start = (sst == S_IWAIT) && ic_rsp && ic_hit;

  infer_engine u_infer (
    .clk, .rst_n, .start(ie_start), .node(ic_line), .pos(r_req.pos),
    .kidx(kmer_index(r_req.kmer)), .busy(ie_busy), .done(ie_done),
    .is_leaf(ie_leaf), .next_node(ie_next), .f_out(ie_f));

  logic              dc_start, dc_stop, dc_valid, dc_last, dc_busy;
  logic [POS_W-1:0]  dc_incr;
  logic [CNT_W-1:0]  dc_idx;
  logic              found_here, go_back, go_fwd, at_end;
  assign dc_start = (sst == S_RWAIT) && dma_rsp_valid[2];

  chain_decompress u_decomp (
    .clk, .rst_n, .start(dc_start), .line(dma_rsp_data), .stop(dc_stop),
    .out_valid(dc_valid), .out_incr(dc_incr), .out_idx(dc_idx),
    .out_last(dc_last), .busy(dc_busy));

  // scan decisions, valid in S_SCAN while dc_valid.  r_dir remembers the
  // direction of the last step so that a search never turns around.
  logic [1:0]        r_dir;        // 0 predicted line, 1 forward, 2 back
  logic [CNT_W-1:0]  occ_c;
  always_comb begin
    found_here = 1'b0;
    go_back    = 1'b0;
    go_fwd     = 1'b0;
    at_end     = 1'b0;
    occ_c      = dc_idx;
    if (sst == S_SCAN && dc_valid) begin
      if (dc_incr > r_req.pos) begin
        if (r_first && dc_idx != '0 && r_dir != 2'd1) go_back = 1'b1;
        else                                          found_here = 1'b1;
      end else if (dc_last) begin
        occ_c = dc_idx + CNT_W'(1);
        if (occ_c >= r_base.f || r_dir == 2'd2) at_end = 1'b1;
        else                                    go_fwd = 1'b1;
      end
    end
  end
  assign dc_stop = found_here | go_back | go_fwd | at_end;

  // predicted line from the leaf output
  logic [CNT_W+7:0] p_full;
  logic [CNT_W-1:0] p_idx;
  logic [POS_W-1:0] p_line;
  always_comb begin
    p_full = (CNT_W+8)'(ie_f) * (CNT_W+8)'(r_base.f);
    p_idx  = CNT_W'(p_full >> 8);
    p_line = POS_W'(p_idx / CNT_W'(CH_NINCR));
    if (p_line > r_last_line) p_line = r_last_line;
  end

  assign s2_take = (sst == S_IDLE) && s2_valid;
  assign q_kmer  = r_req.kmer;
  assign q_excl  = r_slot;

  base_t s2_base;
  assign s2_base = base_ram[s2_slot];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sst         <= S_IDLE;
      r_slot      <= '0;
      r_req       <= '0;
      r_base      <= '0;
      r_node      <= '0;
      r_line      <= '0;
      r_last_line <= '0;
      r_occ       <= '0;
      r_first     <= 1'b0;
      r_first_try <= 1'b0;
      r_dir       <= '0;
      first_line_ok   <= '0;
      linear_steps    <= '0;
      empty_kmers     <= '0;
      keep_open_hints <= '0;
      node_evals      <= '0;
    end else begin
      case (sst)
        S_IDLE: if (s2_valid) begin
          r_slot      <= s2_slot;
          r_req       <= s2_req;
          r_base      <= s2_base;
          r_node      <= s2_base.root;
          r_last_line <= POS_W'(CNT_W'(s2_base.f - CNT_W'(1)) / CNT_W'(CH_NINCR));
          r_occ       <= '0;
          if (s2_base.f == '0) begin
            empty_kmers <= empty_kmers + 32'd1;
            sst         <= S_RESP;
          end else begin
            sst <= S_ILOOK;
          end
        end
        S_ILOOK: sst <= S_IWAIT;
        S_IWAIT: if (ic_rsp) sst <= ic_hit ? S_INFER : S_IMISS;
        S_IMISS: if (dma_req_ready[1]) sst <= S_IFILL;
        S_IFILL: if (dma_rsp_valid[1]) sst <= S_ILOOK;
        S_INFER: if (ie_done) begin
          node_evals <= node_evals + 32'd1;
          if (ie_leaf) begin
            r_line      <= p_line;
            r_first_try <= 1'b1;
            r_dir       <= 2'd0;
            sst         <= S_RD;
          end else begin
            r_node <= ie_next;
            sst    <= S_ILOOK;
          end
        end
        S_RD: if (dma_req_ready[2]) begin
          if (q_match) keep_open_hints <= keep_open_hints + 32'd1;
          sst <= S_RWAIT;
        end
        S_RWAIT: if (dma_rsp_valid[2]) begin
          r_first <= 1'b1;
          sst     <= S_SCAN;
        end
        S_SCAN: if (dc_valid) begin
          r_first <= 1'b0;
          if (found_here || at_end) begin
            r_occ <= occ_c;
            if (r_first_try) first_line_ok <= first_line_ok + 32'd1;
            sst <= S_RESP;
          end else if (go_back || go_fwd) begin
            r_line       <= go_back ? r_line - POS_W'(1) : r_line + POS_W'(1);
            r_first_try  <= 1'b0;
            r_dir        <= go_back ? 2'd2 : 2'd1;
            linear_steps <= linear_steps + 32'd1;
            sst          <= S_RD;
          end
        end
        S_RESP: if (rsp_ready) sst <= S_IDLE;
        default: sst <= S_IDLE;
      endcase
    end
  end

  assign rsp_valid  = (sst == S_RESP);
  assign rsp.tag    = r_req.tag;
  assign rsp.value  = r_base.count + POS_W'(r_occ);
  assign free_valid = (sst == S_RESP) && rsp_ready;
  assign free_slot  = r_slot;

  // ---------------------------------------------------------- DMA clients
  always_comb begin
    dma_req_valid        = '0;
    dma_req_addr         = '0;
    dma_req_keep_open    = '0;
    dma_req_valid[0]     = (bst == B_MISS);
    dma_req_addr[0]      = b_addr;
    dma_req_valid[1]     = (sst == S_IMISS);
    dma_req_addr[1]      = i_addr;
    dma_req_valid[2]     = (sst == S_RD);
    dma_req_addr[2]      = INCR_LINE0 + LADDR_W'(r_base.line + r_line);
    dma_req_keep_open[2] = q_match;
  end

  a_infer_idle: assert property (@(posedge clk) disable iff (!rst_n) ie_start |-> !ie_busy);
  a_decomp_idle: assert property (@(posedge clk) disable iff (!rst_n) dc_start |-> !dc_busy);

endmodule

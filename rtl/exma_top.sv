// exma_top -- the EXMA exact-match accelerator.
//
// The host sends FM-Index requests [tag, k-mer, pos]; for each one the
// accelerator returns Count(k-mer) + Occ(k-mer, pos), the new low or high
// pointer of a 15-step backward search over an EXMA table in DRAM.  The
// blocks and their connections follow the paper's architecture figure:
// the scheduling queue with 2-stage scheduling (sched_queue), the base
// cache and index cache, the inference engine and the CHAIN decompressor
// (inside occ_engine), the CHAIN compressor for writing table lines, the
// DMA controller, and the dynamic page manager, which the paper places in
// the host's memory controller and which is included here so that the
// DRAM port carries ready-made command decisions.
//
// Ports:
//   req_* / rsp_*   host requests and results, valid/ready handshakes;
//                   results return in scheduling order, matched by tag.
//   wr_*            table build: up to 28 sorted increments, their list
//                   index and a line address; the accelerator CHAIN-
//                   compresses them into one line, writes it, and reports
//                   with wr_done how many increments the line took.
//   dram_*          line requests to DRAM with the page manager's
//                   decision (pre, act, close, latency in DRAM cycles) and
//                   a 2-bit id; responses (reads and write acks) return with
//                   the id, in any order.
//   stats           event counters.
// The DRAM, the host CPU and the NoC are outside this module.
// Lint note: rst_n drives the asynchronous reset of the flops and also the
// 'disable iff' of the handshake assertions (in this module or below it),
// which some linters report as a signal used both synchronously and
// asynchronously; the assertions are not logic, so the warning stands.
module exma_top
  import exma_pkg::*;
#(
  parameter int unsigned DEPTH       = 512,
  parameter int unsigned BASE_BYTES  = 1024 * 1024,
  parameter int unsigned BASE_WAYS   = 8,
  parameter int unsigned INDEX_BYTES = 32 * 1024,
  parameter int unsigned INDEX_WAYS  = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host requests / results
  input  logic                         req_valid,
  output logic                         req_ready,
  input  req_t                         req,
  output logic                         rsp_valid,
  input  logic                         rsp_ready,
  output rsp_t                         rsp,
  // table build
  input  logic                         wr_valid,
  output logic                         wr_ready,
  input  logic [LADDR_W-1:0]           wr_addr,
  input  logic [CH_NINCR-1:0][POS_W-1:0] wr_incr,
  input  logic [5:0]                   wr_n,
  input  logic [CNT_W-1:0]             wr_idx,
  output logic                         wr_done,
  output logic [5:0]                   wr_n_used,
  // DRAM
  output logic                         dram_valid,
  input  logic                         dram_ready,
  output logic [LADDR_W-1:0]           dram_addr,
  output logic                         dram_we,
  output logic [LINE_W-1:0]            dram_wdata,
  output logic [1:0]                   dram_id,
  output logic                         dram_pre,
  output logic                         dram_act,
  output logic                         dram_close,
  output logic [7:0]                   dram_cycles,
  input  logic                         dram_rsp_valid,
  input  logic [1:0]                   dram_rsp_id,
  input  logic [LINE_W-1:0]            dram_rsp_data,
  output stats_t                       stats,
  output logic [$clog2(DEPTH):0]       queue_occupancy,
  output logic                         dram_all_closed
);

  localparam int unsigned SW = $clog2(DEPTH);

  // ---------------------------------------------------- scheduling queue
  logic          s1_valid, s1_take, s1_done, s2_valid, s2_take, free_valid, q_match;
  logic [SW-1:0] s1_slot, s1_done_slot, s2_slot, free_slot, q_excl;
  req_t          s1_req, s2_req;
  logic [KMER_W-1:0] q_kmer;

  sched_queue #(.DEPTH(DEPTH)) u_queue (
    .clk, .rst_n,
    .in_valid(req_valid), .in_ready(req_ready), .in_req(req),
    .s1_valid, .s1_slot, .s1_req, .s1_take, .s1_done, .s1_done_slot,
    .s2_valid, .s2_slot, .s2_req, .s2_take,
    .free_valid, .free_slot,
    .q_kmer, .q_excl, .q_match, .occupancy(queue_occupancy));

  // -------------------------------------------------------- DMA clients
  logic [3:0]               c_valid, c_ready, c_we, c_keep, c_rsp;
  logic [3:0][LADDR_W-1:0]  c_addr;
  logic [3:0][LINE_W-1:0]   c_wdata;
  logic [LINE_W-1:0]        c_rdata;
  logic [2:0]               e_valid, e_keep;
  logic [2:0][LADDR_W-1:0]  e_addr;

  occ_engine #(
    .DEPTH(DEPTH), .BASE_BYTES(BASE_BYTES), .BASE_WAYS(BASE_WAYS),
    .INDEX_BYTES(INDEX_BYTES), .INDEX_WAYS(INDEX_WAYS)
  ) u_engine (
    .clk, .rst_n,
    .s1_valid, .s1_slot, .s1_req, .s1_take, .s1_done, .s1_done_slot,
    .s2_valid, .s2_slot, .s2_req, .s2_take, .free_valid, .free_slot,
    .q_kmer, .q_excl, .q_match,
    .dma_req_valid(e_valid), .dma_req_ready(c_ready[2:0]),
    .dma_req_addr(e_addr), .dma_req_keep_open(e_keep),
    .dma_rsp_valid(c_rsp[2:0]), .dma_rsp_data(c_rdata),
    .rsp_valid, .rsp_ready, .rsp,
    .base_hits(stats.base_hits), .base_misses(stats.base_misses),
    .index_hits(stats.index_hits), .index_misses(stats.index_misses),
    .first_line_ok(stats.first_line_ok), .linear_steps(stats.linear_steps),
    .empty_kmers(stats.empty_kmers), .keep_open_hints(stats.keep_open_hints),
    .node_evals(stats.node_evals));

  // ----------------------------------------------- table-line compression
  typedef enum logic [1:0] { W_IDLE, W_CMP, W_REQ, W_ACK } wst_e;
  wst_e               wst;
  logic               cmp_valid;
  logic [LINE_W-1:0]  cmp_line, w_line;
  logic [5:0]         cmp_used;
  logic [LADDR_W-1:0] w_addr;

  chain_compress u_compress (
    .clk, .rst_n, .in_valid(wr_valid && wst == W_IDLE), .incr(wr_incr),
    .n_in(wr_n), .idx(wr_idx), .out_valid(cmp_valid), .line(cmp_line),
    .n_used(cmp_used));

  assign wr_ready = (wst == W_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst       <= W_IDLE;
      w_line    <= '0;
      w_addr    <= '0;
      wr_done   <= 1'b0;
      wr_n_used <= '0;
      stats.lines_written <= '0;
    end else begin
      wr_done <= 1'b0;
      case (wst)
        W_IDLE: if (wr_valid) begin
          w_addr <= wr_addr;
          wst    <= W_CMP;
        end
        W_CMP: if (cmp_valid) begin
          w_line    <= cmp_line;
          wr_n_used <= cmp_used;
          wst       <= W_REQ;
        end
        W_REQ: if (c_ready[3]) wst <= W_ACK;
        W_ACK: if (c_rsp[3]) begin
          wr_done <= 1'b1;
          stats.lines_written <= stats.lines_written + 32'd1;
          wst     <= W_IDLE;
        end
        default: wst <= W_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int c = 0; c < 3; c++) begin
      c_valid[c] = e_valid[c];
      c_addr[c]  = e_addr[c];
      c_keep[c]  = e_keep[c];
      c_we[c]    = 1'b0;
      c_wdata[c] = '0;
    end
    c_valid[3] = (wst == W_REQ);
    c_addr[3]  = w_addr;
    c_keep[3]  = 1'b0;
    c_we[3]    = 1'b1;
    c_wdata[3] = w_line;
  end

  // ------------------------------------------------------ DMA controller
  logic               m_valid, m_ready, m_we, m_keep;
  logic [LADDR_W-1:0] m_addr;
  logic [LINE_W-1:0]  m_wdata;
  logic [1:0]         m_id;

  dma_ctrl #(.N_CLIENTS(4), .ID_W(2)) u_dma (
    .clk, .rst_n,
    .req_valid(c_valid), .req_ready(c_ready), .req_addr(c_addr),
    .req_we(c_we), .req_wdata(c_wdata), .req_keep_open(c_keep),
    .rsp_valid(c_rsp), .rsp_data(c_rdata),
    .mem_req_valid(m_valid), .mem_req_ready(m_ready), .mem_req_addr(m_addr),
    .mem_req_we(m_we), .mem_req_wdata(m_wdata), .mem_req_keep_open(m_keep),
    .mem_req_id(m_id),
    .mem_rsp_valid(dram_rsp_valid), .mem_rsp_id(dram_rsp_id),
    .mem_rsp_data(dram_rsp_data));

  // --------------------------------------------------------- page manager
  page_mgr #(.ID_W(2)) u_page (
    .clk, .rst_n,
    .in_valid(m_valid), .in_ready(m_ready), .in_addr(m_addr), .in_we(m_we),
    .in_wdata(m_wdata), .in_id(m_id), .in_keep_open(m_keep),
    .cmd_valid(dram_valid), .cmd_ready(dram_ready), .cmd_addr(dram_addr),
    .cmd_we(dram_we), .cmd_wdata(dram_wdata), .cmd_id(dram_id),
    .cmd_pre(dram_pre), .cmd_act(dram_act), .cmd_close(dram_close),
    .access_cycles(dram_cycles), .all_closed(dram_all_closed),
    .row_hits(stats.row_hits), .activates(stats.activates),
    .precharges(stats.precharges));

  // ------------------------------------------------------ top counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats.requests_done     <= '0;
      stats.queue_full_cycles <= '0;
    end else begin
      if (rsp_valid && rsp_ready) stats.requests_done <= stats.requests_done + 32'd1;
      if (req_valid && !req_ready) stats.queue_full_cycles <= stats.queue_full_cycles + 32'd1;
    end
  end

endmodule

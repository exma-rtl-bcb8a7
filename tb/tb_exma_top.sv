// tb_exma_top -- end-to-end test of the EXMA accelerator at its default
// sizes (512-row queue, 1 MB base cache, 32 KB index cache).
//
// The test builds a synthetic EXMA table: a reference of N_ROWS rows in
// which every row belongs to one of a few 15-mers (one k-mer per row, as in
// an EXMA table), skewed so that one k-mer has hundreds of increments and
// needs many CHAIN lines.  Phase 1 writes every k-mer's increments through
// the accelerator's compression port into the DRAM model.  Phase 2 sends
// more requests than the queue holds, for present and absent k-mers, in
// pairs that share a k-mer (the low and high pointer of one backward-search
// step, which is what the dynamic page policy expects), and checks each result against Count + #{increments <= pos} computed here.
// The DRAM model answers base and index lines from the tables kept here,
// increment lines from what was written, after the latency the page
// manager reports.  Every mechanism of the design must occur at least once:
// cache hits and misses of both caches, linear-search steps, correct
// first-line predictions, empty k-mers, keep-open hints, DRAM row hits,
// activates, precharges, a full queue, results returned out of arrival order.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_exma_top;
  import exma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N_ROWS = 3000;
  localparam int NK     = 10;      // k-mers present in the reference
  localparam int NREQ   = 900;

  // ----------------------------------------------------------------- DUT
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 0;
  req_t req;
  rsp_t rsp;
  logic wr_valid = 0, wr_ready, wr_done;
  logic [LADDR_W-1:0] wr_addr;
  logic [CH_NINCR-1:0][POS_W-1:0] wr_incr;
  logic [5:0] wr_n, wr_n_used;
  logic [CNT_W-1:0] wr_idx;
  logic dram_valid, dram_ready, dram_we, dram_pre, dram_act, dram_close;
  logic [LADDR_W-1:0] dram_addr;
  logic [LINE_W-1:0] dram_wdata, dram_rsp_data;
  logic [1:0] dram_id, dram_rsp_id;
  logic [7:0] dram_cycles;
  logic dram_rsp_valid;
  stats_t stats;
  logic [$clog2(512):0] queue_occupancy;
  logic dram_all_closed;

  exma_top dut (.*);

  // ------------------------------------------------------- the EXMA table
  logic [KMER_W-1:0] kmer_code [NK];
  logic [KIDX_W-1:0] kmer_kidx [NK];
  int                f        [NK];
  int                incr     [NK][$];
  int                line0    [NK];     // first line of each k-mer
  int                root     [NK];

  function automatic logic [KMER_W-1:0] rand_kmer();
    logic [KMER_W-1:0] k;
    for (int i = 0; i < K; i++) k[i*SYM_W +: SYM_W] = SYM_W'($urandom_range(1, 4));
    return k;
  endfunction

  // Count(kmer) over the dense index order: increments of smaller k-mers
  function automatic int count_of(input logic [KIDX_W-1:0] kx);
    int c = 0;
    for (int i = 0; i < NK; i++) if (kmer_kidx[i] < kx) c += f[i];
    return c;
  endfunction

  function automatic int find_k(input logic [KIDX_W-1:0] kx);
    for (int i = 0; i < NK; i++) if (kmer_kidx[i] == kx) return i;
    return -1;
  endfunction

  function automatic base_t base_of(input logic [KIDX_W-1:0] kx);
    base_t b;
    int i;
    i = find_k(kx);
    b.count = POS_W'(count_of(kx));
    b.f     = (i < 0) ? '0 : CNT_W'(f[i]);
    b.line  = (i < 0) ? '0 : POS_W'(line0[i]);
    b.root  = (i < 0) ? '0 : NODE_W'(root[i]);
    return b;
  endfunction

  // ------------------------------------------------------ MTL index nodes
  // node 0: non-leaf, 4 children 1..4 (leaves); node 5: a lone leaf.
  function automatic logic [LINE_W-1:0] node_line(input int n);
    logic [LINE_W-1:0] l;
    l = '0;
    if (n == 0) begin
      l[7:0] = 8'd0; l[15:8] = 8'd4; l[23:16] = 8'd0; l[31:24] = 8'd4;
      l[32 +: 24] = 24'd1;
      for (int j = 0; j < N_NEURON; j++) begin
        l[(8 + j)*8 +: 8]  = 8'($urandom_range(0, 255));
        l[(18 + j)*8 +: 8] = 8'($urandom_range(0, 255));
        l[(28 + j)*8 +: 8] = 8'($urandom_range(0, 255));
        l[(38 + j)*8 +: 8] = 8'($urandom_range(0, 40));
      end
      l[48*8 +: 8] = 8'd2;
    end else begin
      l[7:0] = 8'd1; l[15:8] = 8'd4;
      l[8*8 +: 8] = (n == 5) ? 8'd2 : 8'd5;    // weight
      l[9*8 +: 8] = 8'(n - 2);                 // bias
    end
    return l;
  endfunction
  logic [LINE_W-1:0] nodes [6];

  // ------------------------------------------------------------ DRAM model
  logic [LINE_W-1:0] dram_mem [logic [LADDR_W-1:0]];
  typedef struct { longint due; logic [1:0] id; logic [LINE_W-1:0] data; } pend_t;
  pend_t pend [$];
  longint cyc = 0;
  int reads_base = 0, reads_index = 0, reads_incr = 0;

  function automatic logic [LINE_W-1:0] dram_read(input logic [LADDR_W-1:0] a);
    logic [LINE_W-1:0] l;
    l = '0;
    if (a < INDEX_LINE0) begin
      for (int e = 0; e < BASES_PER_LINE; e++)
        l[e*128 +: 128] = base_of(KIDX_W'((a - BASE_LINE0) * BASES_PER_LINE + e));
    end else if (a < INCR_LINE0) begin
      if (a - INDEX_LINE0 < 6) l = nodes[a - INDEX_LINE0];
    end else if (dram_mem.exists(a)) begin
      l = dram_mem[a];
    end
    return l;
  endfunction

  assign dram_ready = (cyc % 7 != 3);
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dram_valid && dram_ready) begin
      pend_t p;
      p.due = cyc + longint'(dram_cycles);
      p.id  = dram_id;
      if (dram_we) begin
        dram_mem[dram_addr] = dram_wdata;
        p.data = '0;
      end else begin
        p.data = dram_read(dram_addr);
        if (dram_addr < INDEX_LINE0) reads_base++;
        else if (dram_addr < INCR_LINE0) reads_index++;
        else reads_incr++;
      end
      pend.push_back(p);
    end
  end
  // return the earliest due response, one per cycle
  always @(negedge clk) begin
    int best;
    dram_rsp_valid = 0;
    best = -1;
    foreach (pend[i]) if (pend[i].due <= cyc && (best < 0 || pend[i].due < pend[best].due)) best = i;
    if (best >= 0) begin
      dram_rsp_valid = 1;
      dram_rsp_id    = pend[best].id;
      dram_rsp_data  = pend[best].data;
      pend.delete(best);
    end
  end

  // --------------------------------------------------------------- watchdog
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    `TB_END
  end

  // -------------------------------------------------------------- the test
  int exp_val [NREQ];
  int got_tag_order [$];
  int responses = 0;

  initial begin
    int next_line, out_of_order;
    logic [KMER_W-1:0] absent [4];
    // reference: k-mer 0 takes ~40% of the rows, the rest share the others
    for (int i = 0; i < NK; i++) begin
      kmer_code[i] = rand_kmer();
      kmer_kidx[i] = kmer_index(kmer_code[i]);
      f[i] = 0;
      root[i] = (i % 3 == 2) ? 5 : 0;
    end
    for (int r = 1; r <= N_ROWS; r++) begin
      int k;
      k = ($urandom_range(0, 9) < 4) ? 0 : $urandom_range(1, NK - 2);  // k-mer NK-1 stays empty
      incr[k].push_back(r);
      f[k]++;
    end
    for (int i = 0; i < 4; i++) absent[i] = rand_kmer();
    for (int n = 0; n < 6; n++) nodes[n] = node_line(n);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- phase 1: write the increment lines through the compressor
    next_line = 0;
    for (int i = 0; i < NK; i++) begin
      int done_n;
      line0[i] = next_line;
      done_n = 0;
      while (done_n < f[i]) begin
        int n;
        n = (f[i] - done_n > CH_NINCR) ? CH_NINCR : f[i] - done_n;
        for (int j = 0; j < CH_NINCR; j++)
          wr_incr[j] = (j < n) ? POS_W'(incr[i][done_n + j]) : '0;
        wr_n    = 6'(n);
        wr_idx  = CNT_W'(done_n);
        wr_addr = INCR_LINE0 + LADDR_W'(next_line);
        while (!wr_ready) @(negedge clk);
        wr_valid = 1;
        @(negedge clk) wr_valid = 0;
        while (!wr_done) @(negedge clk);
        `CHECK(wr_n_used == 6'(n), "a full line of small deltas takes all increments");
        done_n += int'(wr_n_used);
        next_line++;
        @(negedge clk);
      end
    end
    `CHECK(stats.lines_written == 32'(next_line), "lines written");

    // ---- phase 2: searches
    fork
      begin : host_tx
        int prev_k = 0;
        for (int t = 0; t < NREQ; t++) begin
          int k, pos, c;
          logic [KMER_W-1:0] km;
          // odd requests reuse the previous k-mer, like the low/high pair
          // of one backward-search step
          if (t % 2 == 0) k = $urandom_range(0, NK + 3);
          else            k = prev_k;
          prev_k = k;
          km = (k < NK) ? kmer_code[k] : absent[k - NK];
          pos = $urandom_range(0, N_ROWS + 1);
          // expected Count + #{increments <= pos}
          c = count_of(kmer_index(km));
          if (find_k(kmer_index(km)) >= 0)
            foreach (incr[find_k(kmer_index(km))][j])
              if (incr[find_k(kmer_index(km))][j] <= pos) c++;
          exp_val[t] = c;
          req.tag  = TAG_W'(t);
          req.kmer = km;
          req.pos  = POS_W'(pos);
          req_valid = 1;
          @(posedge clk);
          while (!req_ready) @(posedge clk);
          #1 req_valid = 0;
        end
      end
      begin : host_rx
        while (responses < NREQ) begin
          @(negedge clk);
          rsp_ready = ($urandom_range(0, 3) != 0);
          if (rsp_valid && rsp_ready) begin
            `CHECK(int'(rsp.value) == exp_val[rsp.tag],
                   $sformatf("tag %0d value %0d expected %0d", rsp.tag, rsp.value, exp_val[rsp.tag]));
            got_tag_order.push_back(int'(rsp.tag));
            responses++;
          end
        end
      end
    join
    @(negedge clk);
    out_of_order = 0;
    for (int i = 1; i < got_tag_order.size(); i++)
      if (got_tag_order[i] < got_tag_order[i-1]) out_of_order++;

    $display("events: base hit %0d miss %0d | index hit %0d miss %0d | nodes %0d",
             stats.base_hits, stats.base_misses, stats.index_hits, stats.index_misses, stats.node_evals);
    $display("events: first-line ok %0d linear steps %0d empty %0d keep-open %0d",
             stats.first_line_ok, stats.linear_steps, stats.empty_kmers, stats.keep_open_hints);
    $display("events: row hits %0d acts %0d pre %0d queue-full cycles %0d reordered %0d",
             stats.row_hits, stats.activates, stats.precharges, stats.queue_full_cycles, out_of_order);
    $display("dram reads: base %0d index %0d incr %0d; cycles %0d", reads_base, reads_index, reads_incr, cyc);
    `CHECK(stats.requests_done == 32'(NREQ), "all requests answered");
    `CHECK(stats.base_hits > 0,        "base cache hit happened");
    `CHECK(stats.base_misses > 0,      "base cache miss happened");
    `CHECK(stats.index_hits > 0,       "index cache hit happened");
    `CHECK(stats.index_misses > 0,     "index cache miss happened");
    `CHECK(stats.linear_steps > 0,     "linear search happened");
    `CHECK(stats.first_line_ok > 0,    "correct prediction happened");
    `CHECK(stats.empty_kmers > 0,      "empty k-mer happened");
    `CHECK(stats.keep_open_hints > 0,  "keep-open hint happened");
    `CHECK(stats.row_hits > 0,         "DRAM row hit happened");
    `CHECK(stats.precharges > 0,       "precharge happened");
    `CHECK(stats.activates > 0,        "row activate happened");
    `CHECK(stats.queue_full_cycles > 0,"full queue happened");
    `CHECK(out_of_order > 0,           "results reordered by scheduling");
    `CHECK(queue_occupancy == 0,       "queue drained");
    `TB_END
  end
endmodule

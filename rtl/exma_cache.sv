// exma_cache -- set-associative read cache of 64-byte lines.
//
// Used twice in the accelerator: as the base cache (1 MB, 8-way; eDRAM in the
// paper) and as the MTL index cache (32 KB, 16-way; SRAM in the paper).  The
// paper gives only capacity, associativity and what each cache holds; the
// organisation here is this design's own: tags and valid bits in flops, the
// data in one array written as a memory, round-robin replacement per set,
// no write path from the engine (the EXMA table is read-only during
// searches), and line address = {tag, set}.
//
// Interface: a lookup (lk_valid, lk_addr) is answered one cycle later by
// rsp_valid with rsp_hit and, on a hit, rsp_line.  A fill (fill_valid,
// fill_addr, fill_line) installs a line fetched by the DMA controller into
// the next victim way of its set; a fill and a lookup may come in the same
// cycle.  hits/misses count lookups since reset.
module exma_cache
  import exma_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 1024 * 1024,
  parameter int unsigned WAYS       = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               lk_valid,
  input  logic [LADDR_W-1:0] lk_addr,
  output logic               rsp_valid,
  output logic               rsp_hit,
  output logic [LINE_W-1:0]  rsp_line,
  input  logic               fill_valid,
  input  logic [LADDR_W-1:0] fill_addr,
  input  logic [LINE_W-1:0]  fill_line,
  output logic [31:0]        hits,
  output logic [31:0]        misses
);

  localparam int unsigned LINES  = SIZE_BYTES / (LINE_W / 8);
  localparam int unsigned SETS   = LINES / WAYS;
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W_ = LADDR_W - SET_W;

  logic [TAG_W_-1:0] tags  [SETS][WAYS];
  logic [WAYS-1:0]   valid [SETS];
  logic [WAY_W-1:0]  rr    [SETS];
  logic [LINE_W-1:0] data  [SETS*WAYS];

  logic [SET_W-1:0]  lk_set, fl_set;
  logic [TAG_W_-1:0] lk_tag, fl_tag;
  logic              lk_hit;
  logic [WAY_W-1:0]  lk_way;

  assign lk_set = lk_addr[SET_W-1:0];
  assign lk_tag = lk_addr[LADDR_W-1:SET_W];
  assign fl_set = fill_addr[SET_W-1:0];
  assign fl_tag = fill_addr[LADDR_W-1:SET_W];

  always_comb begin
    lk_hit = 1'b0;
    lk_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid[lk_set][w] && tags[lk_set][w] == lk_tag) begin
        lk_hit = 1'b1;
        lk_way = WAY_W'(w);
      end
  end

  // data array: one write port (fill), one registered read port (lookup)
  always_ff @(posedge clk) begin
    if (fill_valid) data[{fl_set, rr[fl_set]}] <= fill_line;
    if (lk_valid)   rsp_line <= data[{lk_set, lk_way}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        rr[s]    <= '0;
      end
      rsp_valid <= 1'b0;
      rsp_hit   <= 1'b0;
      hits      <= '0;
      misses    <= '0;
    end else begin
      rsp_valid <= lk_valid;
      rsp_hit   <= lk_valid && lk_hit;
      if (lk_valid) begin
        if (lk_hit) hits   <= hits + 32'd1;
        else        misses <= misses + 32'd1;
      end
      if (fill_valid) begin
        valid[fl_set][rr[fl_set]] <= 1'b1;
        rr[fl_set]                <= rr[fl_set] + WAY_W'(1);
      end
    end
  end

  always_ff @(posedge clk)
    if (fill_valid) tags[fl_set][rr[fl_set]] <= fl_tag;

endmodule

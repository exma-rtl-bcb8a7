// chain_compress -- CHAIN compression of one 64-byte line of increments.
//
// CHAIN keeps the first increment of a line and replaces every following
// one by its difference from the previous increment, delta_i = incr_i -
// incr_(i-1) (paper, CHAIN compression).  All differences are formed at
// once by CH_NDELTA parallel subtractors, as the paper's "multiple adders
// concurrently" describes.  The line layout (40-bit incr0, 24-bit index of
// incr0 in the k-mer's list, 5-bit delta count, 27 deltas of 16 bits) is
// this design's own; the paper gives no field widths.  The longest prefix
// of the offered increments whose deltas fit in 16 bits goes into the line;
// n_used tells the caller where the next line has to start.
//
// Interface: offer up to CH_NINCR sorted increments (incr[0..n_in-1]) and
// the list index of incr[0] with in_valid; one cycle later out_valid
// presents the packed line and n_used.  No back-pressure: one line per
// cycle.
module chain_compress
  import exma_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [CH_NINCR-1:0][POS_W-1:0] incr,
  input  logic [5:0]                   n_in,      // 1 .. CH_NINCR
  input  logic [CNT_W-1:0]             idx,
  output logic                         out_valid,
  output logic [LINE_W-1:0]            line,
  output logic [5:0]                   n_used
);

  logic [CH_NDELTA-1:0][POS_W-1:0] diff;
  logic [CH_NDELTA-1:0]            fits;
  logic [LINE_W-1:0]               line_c;
  logic [5:0]                      used_c;

  always_comb begin
    for (int i = 0; i < CH_NDELTA; i++) begin
      diff[i] = incr[i+1] - incr[i];
      fits[i] = (diff[i] < (POS_W'(1) << DELTA_W)) && (6'(i + 1) < n_in);
    end
    used_c = 6'd1;
    for (int i = CH_NDELTA - 1; i >= 0; i--)
      if (!fits[i]) used_c = 6'(i + 1);
    if (&fits) used_c = 6'(CH_NINCR);
    if (n_in == 6'd0) used_c = 6'd0;

    line_c = '0;
    line_c[0 +: POS_W]               = incr[0];
    line_c[CH_IDX_LSB +: CNT_W]      = idx;
    line_c[CH_CNT_LSB +: CH_CNT_W]   = (used_c == 6'd0) ? '0 : CH_CNT_W'(used_c - 6'd1);
    for (int i = 0; i < CH_NDELTA; i++)
      if (6'(i + 1) < used_c)
        line_c[CH_D_LSB + i*DELTA_W +: DELTA_W] = diff[i][DELTA_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      line      <= '0;
      n_used    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        line   <= line_c;
        n_used <= used_c;
      end
    end
  end

endmodule

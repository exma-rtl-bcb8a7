// chain_decompress -- CHAIN decompression of one 64-byte line, one adder.
//
// The paper rebuilds increment i as incr_0 + sum(delta_1..delta_i) with a
// single accumulating adder.  This unit loads a line with `start`, then
// emits one increment per cycle: incr_0 in the first cycle, then the running
// sum with the next delta added.  `out_last` marks the final increment of
// the line and `out_idx` gives the list index of the emitted increment
// (line header idx plus its place in the line).  `stop` ends the stream
// early, e.g. once a search has found the first increment above its key.
//
// Timing: start in cycle t; increments in cycles t+1 .. t+1+cnt unless
// stopped.  Line layout as in exma_pkg (this design's own format).
module chain_decompress
  import exma_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [LINE_W-1:0] line,
  input  logic              stop,
  output logic              out_valid,
  output logic [POS_W-1:0]  out_incr,
  output logic [CNT_W-1:0]  out_idx,
  output logic              out_last,
  output logic              busy
);

  logic [LINE_W-1:0]   sh;      // remaining deltas, lowest first
  logic [POS_W-1:0]    acc;     // the one accumulating adder
  logic [CNT_W-1:0]    idx;
  logic [CH_CNT_W-1:0] left;
  logic                first;
  logic                active;

  assign busy      = active;
  assign out_valid = active;
  assign out_idx   = idx;
  assign out_last  = active && (first ? (left == '0) : (left == CH_CNT_W'(1)));
  assign out_incr  = first ? acc : acc + POS_W'(sh[DELTA_W-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      first  <= 1'b0;
      acc    <= '0;
      idx    <= '0;
      left   <= '0;
      sh     <= '0;
    end else if (start) begin
      active <= 1'b1;
      first  <= 1'b1;
      acc    <= line[0 +: POS_W];
      idx    <= line[CH_IDX_LSB +: CNT_W];
      left   <= line[CH_CNT_LSB +: CH_CNT_W];
      sh     <= LINE_W'(line >> CH_D_LSB);
    end else if (active) begin
      if (stop || out_last) begin
        active <= 1'b0;
      end else begin
        idx <= idx + CNT_W'(1);
        if (first) begin
          first <= 1'b0;
        end else begin
          acc  <= out_incr;
          sh   <= sh >> DELTA_W;
          left <= left - CH_CNT_W'(1);
        end
      end
    end
  end

endmodule

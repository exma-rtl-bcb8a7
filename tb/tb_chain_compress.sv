// tb_chain_compress -- checks CHAIN compression: the first increment, list
// index, delta count and every 16-bit delta of the line, and that the
// line stops before the first delta that does not fit (n_used).
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_chain_compress;
  import exma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  logic [CH_NINCR-1:0][POS_W-1:0] incr;
  logic [5:0] n_in, n_used;
  logic [CNT_W-1:0] idx;
  logic out_valid;
  logic [LINE_W-1:0] line;

  chain_compress dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog");
    `TB_END
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int n, brk, exp_used;
      logic [POS_W-1:0] v;
      n   = $urandom_range(1, CH_NINCR);
      brk = (t % 2) ? $urandom_range(1, CH_NINCR + 5) : 99;  // delta that overflows
      v   = POS_W'($urandom);
      exp_used = n;
      for (int i = 0; i < CH_NINCR; i++) begin
        incr[i] = v;
        if (i + 1 == brk) v = v + 40'h1_0000 + POS_W'($urandom_range(0, 9));
        else              v = v + POS_W'($urandom_range(1, 65535));
      end
      if (brk < n) exp_used = brk;
      n_in = 6'(n);
      idx  = CNT_W'($urandom);
      @(negedge clk) in_valid = 1;
      @(negedge clk) in_valid = 0;
      `CHECK(out_valid, "one cycle latency");
      `CHECK(n_used == 6'(exp_used), $sformatf("n_used %0d exp %0d", n_used, exp_used));
      `CHECK(line[0 +: POS_W] == incr[0], "incr0");
      `CHECK(line[CH_IDX_LSB +: CNT_W] == idx, "idx");
      `CHECK(line[CH_CNT_LSB +: CH_CNT_W] == CH_CNT_W'(exp_used - 1), "count");
      for (int i = 1; i < CH_NINCR; i++) begin
        logic [DELTA_W-1:0] d;
        d = line[CH_D_LSB + (i-1)*DELTA_W +: DELTA_W];
        if (i < exp_used) `CHECK(POS_W'(d) == incr[i] - incr[i-1], "delta")
        else              `CHECK(d == '0, "unused delta is zero")
      end
      @(negedge clk);
      `CHECK(!out_valid, "single pulse");
    end
    `TB_END
  end
endmodule

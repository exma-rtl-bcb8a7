// tb_chain_decompress -- checks CHAIN decompression against lines built
// here from random sorted increments: every emitted value, its list index,
// the last flag, one value per cycle, and early stop.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_chain_decompress;
  import exma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, stop = 0;
  logic [LINE_W-1:0] line;
  logic out_valid, out_last, busy;
  logic [POS_W-1:0] out_incr;
  logic [CNT_W-1:0] out_idx;

  chain_decompress dut (.*);

  logic [POS_W-1:0] ref_v [CH_NINCR];

  task automatic build(input int n, input int idx0);
    logic [POS_W-1:0] v;
    v = POS_W'({$urandom, $urandom}) & 40'h0F_FFFF_FFFF;
    line = '0;
    line[0 +: POS_W] = v;
    ref_v[0] = v;
    line[CH_IDX_LSB +: CNT_W] = CNT_W'(idx0);
    line[CH_CNT_LSB +: CH_CNT_W] = CH_CNT_W'(n - 1);
    for (int i = 1; i < n; i++) begin
      logic [DELTA_W-1:0] d;
      d = DELTA_W'($urandom_range(1, 65535));
      v = v + POS_W'(d);
      ref_v[i] = v;
      line[CH_D_LSB + (i-1)*DELTA_W +: DELTA_W] = d;
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    `TB_END
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int n, idx0, stop_at, got;
      n = (t < 3) ? (t == 0 ? 1 : CH_NINCR) : $urandom_range(1, CH_NINCR);
      idx0 = $urandom_range(0, 100000);
      stop_at = (t % 3 == 2) ? $urandom_range(0, n - 1) : n;
      build(n, idx0);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      got = 0;
      for (int i = 0; i < n; i++) begin
        `CHECK(out_valid, "value every cycle");
        `CHECK(out_incr == ref_v[i], $sformatf("incr %0d of %0d", i, n));
        `CHECK(out_idx == CNT_W'(idx0 + i), "index");
        `CHECK(out_last == (i == n - 1), "last flag");
        got++;
        if (i == stop_at) begin
          stop = 1;
          @(negedge clk) stop = 0;
          break;
        end
        @(negedge clk);
      end
      if (stop_at == n) @(negedge clk);
      `CHECK(!busy && !out_valid, "idle after line");
    end
    `TB_END
  end
endmodule

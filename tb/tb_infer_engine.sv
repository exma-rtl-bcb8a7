// tb_infer_engine -- checks MTL node evaluation against a reference model
// written here from the node format: random non-leaf and leaf nodes,
// random pos and k-mer inputs; checks the leaf F, the chosen child and the
// latency (11 cycles non-leaf, 6 cycles leaf, start to done).
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_infer_engine;
  import exma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [LINE_W-1:0] node;
  logic [POS_W-1:0] pos;
  logic [KIDX_W-1:0] kidx;
  logic busy, done, is_leaf;
  logic [NODE_W-1:0] next_node;
  logic [7:0] f_out;

  infer_engine dut (.*);

  function automatic int sb(input logic [LINE_W-1:0] l, input int b);
    return int'($signed(l[b*8 +: 8]));
  endfunction
  function automatic int ub(input logic [LINE_W-1:0] l, input int b);
    return int'(l[b*8 +: 8]);
  endfunction
  function automatic int sat(input int v);
    return v < 0 ? 0 : (v > 255 ? 255 : v);
  endfunction
  // PLAN sigmoid on z/16, result x256 saturated to 255
  function automatic int sig(input int z);
    int a, r;
    a = z < 0 ? -z : z;
    if (a >= 80) r = 256;
    else if (a >= 38) r = a / 2 + 216;
    else if (a >= 16) r = a * 2 + 160;
    else r = a * 4 + 128;
    if (z < 0) r = 256 - r;
    return r > 255 ? 255 : r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    `TB_END
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int x0, x1, leaf, ef, echild, lat, acc, sum;
      leaf = t % 2;
      node = '0;
      for (int b = 8; b < 49; b++) node[b*8 +: 8] = 8'($urandom);
      node[0]     = leaf[0];
      node[15:8]  = 8'($urandom_range(0, 30));
      node[23:16] = 8'($urandom_range(0, 22));
      node[31:24] = 8'($urandom_range(1, 20));
      node[32 +: 24] = 24'($urandom_range(0, 100000));
      pos  = POS_W'({$urandom, $urandom});
      kidx = KIDX_W'($urandom);
      x0 = ((pos >> node[15:8]) > 255) ? 255 : int'(pos >> node[15:8]);
      x1 = int'(8'(kidx >> node[23:16]));
      if (leaf) begin
        acc = sb(node, 8) * x0 + 16 * sb(node, 9);
        ef  = sat(acc >>> 2);
      end else begin
        sum = 0;
        for (int j = 0; j < N_NEURON; j++) begin
          acc = sb(node, 8 + j) * x0 + sb(node, 18 + j) * x1 + 16 * sb(node, 28 + j);
          sum += sb(node, 38 + j) * sig(acc >>> 4);
        end
        ef = sat((sum >>> 4) + 16 * sb(node, 48));
        echild = int'(node[32 +: 24]) + (ef * ub(node, 3)) / 256;
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done && lat < 50) begin @(negedge clk); lat++; end
      `CHECK(done, "done");
      `CHECK(is_leaf == leaf[0], "leaf flag");
      `CHECK(int'(f_out) == ef, $sformatf("F %0d exp %0d leaf %0d", f_out, ef, leaf));
      if (!leaf) `CHECK(int'(next_node) == echild, "child")
      `CHECK(lat == (leaf ? 6 : 11), $sformatf("latency %0d", lat));
    end
    `TB_END
  end
endmodule

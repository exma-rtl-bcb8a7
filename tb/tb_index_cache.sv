// tb_index_cache -- the cache at the index-cache size, 32 KB and 16 ways.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_index_cache;
  localparam int SIZE = 32 * 1024;
  localparam int WAYS = 16;
`include "tb_cache_body.svh"
endmodule

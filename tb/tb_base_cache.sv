// tb_base_cache -- the cache at the base-cache size, 1 MB and 8 ways.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_base_cache;
  localparam int SIZE = 1024 * 1024;
  localparam int WAYS = 8;
`include "tb_cache_body.svh"
endmodule

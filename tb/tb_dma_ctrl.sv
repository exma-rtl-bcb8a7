// tb_dma_ctrl -- checks the DMA controller with four clients issuing random
// reads and writes to a memory model that answers out of order after
// random delays: every response reaches the client that asked, with its
// data; each client has at most one request outstanding; the arbiter
// serves waiting clients round-robin (no client waits more than 3 grants).
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_dma_ctrl;
  import exma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] req_valid = 0, req_ready, req_we = 0, req_keep_open = 0, rsp_valid;
  logic [3:0][LADDR_W-1:0] req_addr;
  logic [3:0][LINE_W-1:0] req_wdata;
  logic [LINE_W-1:0] rsp_data;
  logic mem_req_valid, mem_req_ready = 1, mem_req_we, mem_req_keep_open;
  logic [LADDR_W-1:0] mem_req_addr;
  logic [LINE_W-1:0] mem_req_wdata;
  logic [1:0] mem_req_id;
  logic mem_rsp_valid = 0;
  logic [1:0] mem_rsp_id;
  logic [LINE_W-1:0] mem_rsp_data;

  dma_ctrl dut (.*);

  typedef struct { int due; logic [1:0] id; logic [LINE_W-1:0] data; } p_t;
  p_t pend [$];
  int cyc = 0;
  bit outstanding [4];
  logic [LADDR_W-1:0] want [4];
  int waited [4];
  int served [4];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    `TB_END
  end

  // memory: answer with data derived from the address, random delay
  always @(negedge clk) begin
    cyc++;
    mem_rsp_valid = 0;
    if (rst_n) begin
      int b; b = -1;
      foreach (pend[i]) if (pend[i].due <= cyc) begin b = i; break; end
      if (b >= 0) begin
        mem_rsp_valid = 1; mem_rsp_id = pend[b].id; mem_rsp_data = pend[b].data;
        pend.delete(b);
      end
    end
  end
  always @(posedge clk) if (rst_n && mem_req_valid && mem_req_ready) begin
    p_t p;
    p.due = cyc + $urandom_range(1, 30); p.id = mem_req_id;
    p.data = {16{mem_req_addr[31:0]}};
    pend.push_back(p);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      #1;
      mem_req_ready = ($urandom_range(0, 3) != 0);
      for (int c = 0; c < 4; c++) begin
        if (rsp_valid[c]) begin
          `CHECK(outstanding[c], "response only for a waiting client");
          `CHECK(rsp_data == {16{want[c][31:0]}}, "response data routed to its client");
          outstanding[c] = 0; req_valid[c] = 0;
          served[c]++;
        end
        if (!outstanding[c] && !req_valid[c] && $urandom_range(0, 2) == 0) begin
          req_valid[c] = 1; req_addr[c] = LADDR_W'({$urandom, $urandom});
          req_we[c] = $urandom_range(0, 1); req_wdata[c] = '0;
          want[c] = req_addr[c]; waited[c] = 0;
        end
      end
      #1;
      if (mem_req_valid) begin
        `CHECK(req_valid[mem_req_id] && !outstanding[mem_req_id], "grant goes to a requesting client");
        `CHECK(mem_req_addr == req_addr[mem_req_id], "address of the granted client");
      end
      @(posedge clk);
      for (int c = 0; c < 4; c++) begin
        if (req_ready[c]) begin
          outstanding[c] = 1;
          for (int o = 0; o < 4; o++) if (o != c && req_valid[o] && !outstanding[o]) waited[o]++;
        end
      end
      for (int c = 0; c < 4; c++) `CHECK(waited[c] <= 3, "round-robin fairness");
      #1;
    end
    for (int c = 0; c < 4; c++) `CHECK(served[c] > 50, "every client served");
    `TB_END
  end
endmodule

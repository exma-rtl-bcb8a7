// tb_page_mgr -- checks the dynamic page policy against a per-bank model
// kept here: row hit / activate / precharge-then-activate decisions, the
// access latency from tRCD-tCAS-tRP 16-16-16, keep-open versus close after
// the access, the all-closed register and the counters.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_page_mgr;
  import exma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, in_we = 0, in_keep_open = 0;
  logic [LADDR_W-1:0] in_addr = 0;
  logic [LINE_W-1:0] in_wdata = 0;
  logic [1:0] in_id = 0;
  logic cmd_valid, cmd_ready = 1, cmd_we, cmd_pre, cmd_act, cmd_close, all_closed;
  logic [LADDR_W-1:0] cmd_addr;
  logic [LINE_W-1:0] cmd_wdata;
  logic [1:0] cmd_id;
  logic [7:0] access_cycles;
  logic [31:0] row_hits, activates, precharges;

  page_mgr dut (.*);

  int open_row [int];   // bank -> open row (absent = closed)
  int nh = 0, na = 0, np = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    `TB_END
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(all_closed, "all rows closed after reset");
    for (int t = 0; t < 3000; t++) begin
      longint rown; int bank, row, exp_lat;
      bit hit, conf;
      // few banks and rows so that hits and conflicts both happen
      rown = longint'($urandom_range(0, 3)) * 192 + $urandom_range(0, 2);
      in_addr = LADDR_W'(rown * 32 + $urandom_range(0, 31));
      in_keep_open = $urandom_range(0, 1);
      in_valid = 1;
      cmd_ready = ($urandom_range(0, 4) != 0);
      bank = int'(rown % 192); row = int'(rown / 192);
      hit  = open_row.exists(bank) && open_row[bank] == row;
      conf = open_row.exists(bank) && open_row[bank] != row;
      #1;
      `CHECK(cmd_valid && in_ready == cmd_ready && cmd_addr == in_addr, "handshake passes through");
      `CHECK(cmd_act == !hit && cmd_pre == conf && cmd_close == !in_keep_open, "decision");
      exp_lat = 16 + (hit ? 0 : 16) + (conf ? 16 : 0);
      `CHECK(int'(access_cycles) == exp_lat, "latency");
      @(negedge clk);
      if (cmd_ready) begin
        if (hit) nh++; else na++;
        np += int'(conf) + int'(!in_keep_open);
        if (in_keep_open) open_row[bank] = row; else open_row.delete(bank);
      end
      in_valid = 0;
      `CHECK(all_closed == (open_row.num() == 0), "all-closed register");
    end
    `CHECK(int'(row_hits) == nh && int'(activates) == na && int'(precharges) == np, "counters");
    `CHECK(nh > 50 && np > 50, "hits and precharges exercised");
    `TB_END
  end
endmodule

// tb_exma_pe -- checks the PE: register-file writes and reads, signed x
// unsigned MAC, clear and the bias operation, against a model kept here.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_exma_pe;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rf_we = 0;
  logic [4:0] rf_waddr = 0, op_raddr = 0;
  logic [7:0] rf_wdata = 0, op_x = 0;
  logic [1:0] op = 0;
  logic signed [19:0] acc;

  exma_pe dut (.*);

  logic signed [7:0] rfm [32];
  int model;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog");
    `TB_END
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 32; a++) begin
      @(negedge clk);
      rf_we = 1; rf_waddr = 5'(a); rf_wdata = 8'($urandom); rfm[a] = rf_wdata;
    end
    @(negedge clk) rf_we = 0; op = 2'd1;
    model = 0;
    @(negedge clk);
    `CHECK(acc == 0, "clear");
    for (int t = 0; t < 500; t++) begin
      int r;
      r = $urandom_range(0, 9);
      op_raddr = 5'($urandom); op_x = 8'($urandom);
      if (r == 0)      begin op = 2'd1; model = 0; end
      else if (r == 1) begin op = 2'd3; model += 16 * rfm[op_raddr]; end
      else if (r == 2) begin op = 2'd0; end
      else             begin op = 2'd2; model += rfm[op_raddr] * int'(op_x); end
      @(negedge clk);
      `CHECK(int'(acc) == model, $sformatf("acc %0d model %0d", acc, model));
      if (model > 400000 || model < -400000) begin op = 2'd1; model = 0; @(negedge clk); end
    end
    `TB_END
  end
endmodule

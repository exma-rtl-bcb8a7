// tb_sched_queue -- checks the 2-stage scheduling queue (16 rows): stage 1
// always offers the NEW request with the smallest k-mer, stage 2 the READY
// request with the smallest pos; the CAM search finds another row with the
// same k-mer; the queue reports full and tracks its occupancy.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_sched_queue;
  import exma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int D = 16;

  logic in_valid = 0, in_ready;
  req_t in_req;
  logic s1_valid, s2_valid, q_match;
  logic [3:0] s1_slot, s2_slot, s1_done_slot = 0, free_slot = 0, q_excl = 0;
  req_t s1_req, s2_req;
  logic s1_take = 0, s1_done = 0, s2_take = 0, free_valid = 0;
  logic [KMER_W-1:0] q_kmer = 0;
  logic [4:0] occupancy;

  sched_queue #(.DEPTH(D)) dut (.*);

  // model: list of (kmer,pos,tag,state) keyed by tag
  typedef struct { logic [KMER_W-1:0] kmer; logic [POS_W-1:0] pos; int st; } m_t;
  m_t m [int];
  int ntag = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    `TB_END
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int op;
      @(negedge clk);
      in_valid = 0; s1_take = 0; s1_done = 0; s2_take = 0; free_valid = 0;
      // check stage selections against the model
      begin
        logic [KMER_W-1:0] mk; logic [POS_W-1:0] mp; int c1, c2;
        c1 = 0; c2 = 0; mk = '1; mp = '1;
        foreach (m[i]) begin
          if (m[i].st == 1) begin c1++; if (m[i].kmer < mk) mk = m[i].kmer; end
          if (m[i].st == 3) begin c2++; if (m[i].pos < mp) mp = m[i].pos; end
        end
        `CHECK(s1_valid == (c1 > 0), "s1 valid");
        if (c1 > 0) `CHECK(s1_req.kmer == mk, "stage 1 picks smallest k-mer")
        `CHECK(s2_valid == (c2 > 0), "s2 valid");
        if (c2 > 0) `CHECK(s2_req.pos == mp, "stage 2 picks smallest pos")
        `CHECK(in_ready == (m.num() < D), "full flag");
        `CHECK(int'(occupancy) == m.num(), "occupancy");
      end
      op = $urandom_range(0, 5);
      if ((op <= 1 || t < 20) && in_ready) begin
        in_req.tag  = TAG_W'(ntag);
        in_req.kmer = KMER_W'($urandom_range(0, 7));   // few k-mers: many ties and matches
        in_req.pos  = POS_W'($urandom_range(0, 1000));
        in_valid = 1;
        m[ntag] = '{in_req.kmer, in_req.pos, 1};
        ntag++;
      end else if (op == 2 && s1_valid) begin
        int busy1; busy1 = 0;
        foreach (m[i]) if (m[i].st == 2) busy1 = 1;
        if (!busy1) begin
          s1_take = 1;
          m[int'(s1_req.tag)].st = 2;
          s1_done_slot = s1_slot;
        end
      end else if (op == 3) begin
        // finish the row in S1 (only one kept in S1 at a time here)
        foreach (m[i]) if (m[i].st == 2) begin
          s1_done = 1; m[i].st = 3;
        end
      end else if (op == 4 && s2_valid && !(m.exists(int'(s2_req.tag)) == 0)) begin
        int busy2; busy2 = 0;
        foreach (m[i]) if (m[i].st == 4) busy2 = 1;
        if (busy2) continue;
        s2_take = 1;
        m[int'(s2_req.tag)].st = 4;
        free_slot = s2_slot;
        // CAM search for this k-mer excluding the row itself
        q_kmer = s2_req.kmer; q_excl = s2_slot;
        #1;
        begin
          int c; c = 0;
          foreach (m[i]) if (i != int'(s2_req.tag) && m[i].kmer == s2_req.kmer) c++;
          `CHECK(q_match == (c > 0), "CAM same-k-mer search");
        end
      end else if (op == 5) begin
        foreach (m[i]) if (m[i].st == 4) begin
          free_valid = 1; m.delete(i); break;
        end
      end
    end
    `TB_END
  end
endmodule

// Body shared by tb_base_cache and tb_index_cache: the including module
// defines localparams SIZE and WAYS.  A model of the cache kept here (per
// set, an ordered list of resident tags with round-robin victim choice)
// predicts hit or miss and the returned line of every lookup; the test
// fills random lines, concentrating on a few sets so that evictions occur,
// and checks the hit and miss counters and the one-cycle lookup latency.
  import exma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int SETS = SIZE / 64 / WAYS;

  logic lk_valid = 0, fill_valid = 0, rsp_valid, rsp_hit;
  logic [LADDR_W-1:0] lk_addr, fill_addr;
  logic [LINE_W-1:0] rsp_line, fill_line;
  logic [31:0] hits, misses;

  exma_cache #(.SIZE_BYTES(SIZE), .WAYS(WAYS)) dut (.*);

  logic [LADDR_W-1:0] way_addr [int][int];   // set -> way -> address
  int                 rr [int];
  logic [LINE_W-1:0]  content [logic [LADDR_W-1:0]];
  int nh = 0, nm = 0;

  function automatic logic [LINE_W-1:0] rline();
    logic [LINE_W-1:0] l;
    for (int i = 0; i < LINE_W / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  function automatic logic [LADDR_W-1:0] raddr();
    int set;
    set = ($urandom_range(0, 3) == 0) ? $urandom_range(0, SETS - 1) : $urandom_range(0, 2);
    return LADDR_W'(($urandom_range(0, 3 * WAYS) * SETS) + set);
  endfunction

  function automatic bit resident(input logic [LADDR_W-1:0] a);
    int s;
    s = int'(a % SETS);
    if (!way_addr.exists(s)) return 0;
    foreach (way_addr[s][w]) if (way_addr[s][w] == a) return 1;
    return 0;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    `TB_END
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      logic [LADDR_W-1:0] a;
      bit exp_hit;
      a = raddr();
      @(negedge clk);
      if ($urandom_range(0, 1) == 0) begin
        // lookup
        exp_hit = resident(a);
        lk_valid = 1; lk_addr = a;
        @(negedge clk) lk_valid = 0;
        `CHECK(rsp_valid, "lookup answered after one cycle");
        `CHECK(rsp_hit == exp_hit, $sformatf("hit flag addr %h", a));
        if (exp_hit) begin
          `CHECK(rsp_line == content[a], "hit data");
          nh++;
        end else nm++;
      end else if (!resident(a)) begin
        // fill, round-robin victim
        int s;
        s = int'(a % SETS);
        if (!rr.exists(s)) rr[s] = 0;
        way_addr[s][rr[s]] = a;
        rr[s] = (rr[s] + 1) % WAYS;
        content[a] = rline();
        fill_valid = 1; fill_addr = a; fill_line = content[a];
        @(negedge clk) fill_valid = 0;
      end
    end
    `CHECK(int'(hits) == nh && int'(misses) == nm, "counters");
    `CHECK(nh > 100 && nm > 100, "both hits and misses exercised");
    `TB_END
  end

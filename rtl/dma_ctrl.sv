// dma_ctrl -- the accelerator's DMA controller.
//
// All DRAM traffic of the accelerator (base-cache fills, index-cache
// fills, increment reads, and writes of CHAIN-compressed lines) goes
// through this unit, which the paper names but takes from other work.  This
// version is the simplest one that does the job: a round-robin arbiter
// over N_CLIENTS request ports, each with one request outstanding at a
// time, that tags every request with its client number and routes each
// returning line back to the client by that tag.  Requests carry the
// page-policy hint (keep_open) to the memory controller.
//
// Interface: per client c: req_valid[c]/req_ready[c] with address, write
// enable, write data and hint; rsp_valid[c] pulses with rsp_data when its
// read returns (writes are acknowledged the same way).  Memory side:
// mem_req_* valid/ready with mem_req_id; mem_rsp_valid/mem_rsp_id/data.
// Lint note: rst_n drives the asynchronous reset of the flops and also the
// 'disable iff' of the handshake assertions (in this module or below it),
// which some linters report as a signal used both synchronously and
// asynchronously; the assertions are not logic, so the warning stands.
module dma_ctrl
  import exma_pkg::*;
#(
  parameter int unsigned N_CLIENTS = 4,
  parameter int unsigned ID_W      = 2
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [N_CLIENTS-1:0]              req_valid,
  output logic [N_CLIENTS-1:0]              req_ready,
  input  logic [N_CLIENTS-1:0][LADDR_W-1:0] req_addr,
  input  logic [N_CLIENTS-1:0]              req_we,
  input  logic [N_CLIENTS-1:0][LINE_W-1:0]  req_wdata,
  input  logic [N_CLIENTS-1:0]              req_keep_open,
  output logic [N_CLIENTS-1:0]              rsp_valid,
  output logic [LINE_W-1:0]                 rsp_data,
  output logic                              mem_req_valid,
  input  logic                              mem_req_ready,
  output logic [LADDR_W-1:0]                mem_req_addr,
  output logic                              mem_req_we,
  output logic [LINE_W-1:0]                 mem_req_wdata,
  output logic                              mem_req_keep_open,
  output logic [ID_W-1:0]                   mem_req_id,
  input  logic                              mem_rsp_valid,
  input  logic [ID_W-1:0]                   mem_rsp_id,
  input  logic [LINE_W-1:0]                 mem_rsp_data
);

  logic [N_CLIENTS-1:0] pending;   // one outstanding request per client
  logic [ID_W-1:0]      last;      // last granted client
  logic [ID_W-1:0]      grant;
  logic                 any;
  logic [N_CLIENTS-1:0] elig;

  assign elig = req_valid & ~pending;

  always_comb begin
    any   = 1'b0;
    grant = '0;
    for (int k = N_CLIENTS; k >= 1; k--) begin
      int unsigned c;
      c = (int'(last) + k) % N_CLIENTS;
      if (elig[c]) begin
        any   = 1'b1;
        grant = ID_W'(c);
      end
    end
  end

  assign mem_req_valid     = any;
  assign mem_req_addr      = req_addr[grant];
  assign mem_req_we        = req_we[grant];
  assign mem_req_wdata     = req_wdata[grant];
  assign mem_req_keep_open = req_keep_open[grant];
  assign mem_req_id        = grant;

  always_comb begin
    req_ready = '0;
    if (any && mem_req_ready) req_ready[grant] = 1'b1;
    rsp_valid = '0;
    if (mem_rsp_valid) rsp_valid[mem_rsp_id] = 1'b1;
  end
  assign rsp_data = mem_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
      last    <= ID_W'(N_CLIENTS - 1);
    end else begin
      for (int c = 0; c < N_CLIENTS; c++) begin
        if (any && mem_req_ready && grant == ID_W'(c)) pending[c] <= 1'b1;
        else if (mem_rsp_valid && mem_rsp_id == ID_W'(c)) pending[c] <= 1'b0;
      end
      if (any && mem_req_ready) last <= grant;
    end
  end

  a_rsp_pending: assert property (@(posedge clk) disable iff (!rst_n)
                                  mem_rsp_valid |-> pending[mem_rsp_id]);

endmodule

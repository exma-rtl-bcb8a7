// page_mgr -- dynamic page policy of the memory controller.
//
// Conventional FM-Index accelerators close (precharge) a DRAM row after
// every access.  EXMA's increments of one k-mer lie in consecutive lines,
// and the two requests of a search iteration (low and high) search the same
// k-mer, so the paper keeps a row open after an access when the scheduling
// queue holds another request for the same k-mer, and precharges it
// otherwise.  As in the paper this unit keeps one register per bank with
// its open row and a register telling whether all rows are closed.
//
// For each access it decides the DRAM commands: a row hit needs only the
// column access (tCAS); a closed bank needs ACT first (tRCD); a bank open
// on another row needs PRE and ACT (tRP + tRCD).  After the access the row
// stays open if keep_open is set, else it is precharged.  access_cycles is
// the resulting DRAM latency with the paper's tRCD-tCAS-tRP of 16-16-16.
// The address map (2 KB rows of 32 lines, rows interleaved over all banks,
// 192 banks = 4 channels x 3 DIMMs x 4 ranks x 2 bank groups x 2 banks from
// Table 1) is this design's own.
//
// Interface: an upstream request (in_*) passes to the DRAM side (cmd_*)
// with the same valid/ready handshake, annotated with the decision; the
// bank registers update when cmd_valid && cmd_ready.  Counters report row
// hits, activations and precharges.
module page_mgr
  import exma_pkg::*;
#(
  parameter int unsigned N_BANKS   = 192,
  parameter int unsigned ROW_LINES = 32,
  parameter int unsigned T_RCD     = 16,
  parameter int unsigned T_CAS     = 16,
  parameter int unsigned T_RP      = 16,
  parameter int unsigned ID_W      = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [LADDR_W-1:0] in_addr,
  input  logic               in_we,
  input  logic [LINE_W-1:0]  in_wdata,
  input  logic [ID_W-1:0]    in_id,
  input  logic               in_keep_open,
  output logic               cmd_valid,
  input  logic               cmd_ready,
  output logic [LADDR_W-1:0] cmd_addr,
  output logic               cmd_we,
  output logic [LINE_W-1:0]  cmd_wdata,
  output logic [ID_W-1:0]    cmd_id,
  output logic               cmd_pre,        // precharge an open row first
  output logic               cmd_act,        // activate the row
  output logic               cmd_close,      // precharge after the access
  output logic [7:0]         access_cycles,
  output logic               all_closed,
  output logic [31:0]        row_hits,
  output logic [31:0]        activates,
  output logic [31:0]        precharges
);

  localparam int unsigned BANK_W = $clog2(N_BANKS);
  localparam int unsigned ROWN_W = LADDR_W - $clog2(ROW_LINES);

  logic [N_BANKS-1:0]  open_v;
  logic [ROWN_W-1:0]   open_row [N_BANKS];

  logic [ROWN_W-1:0]   rown;     // global row number (line / ROW_LINES)
  logic [BANK_W-1:0]   bank;
  logic [ROWN_W-1:0]   row;
  logic                hit, conflict;

  always_comb begin
    rown     = ROWN_W'(in_addr / LADDR_W'(ROW_LINES));
    bank     = BANK_W'(rown % ROWN_W'(N_BANKS));
    row      = rown / ROWN_W'(N_BANKS);
    hit      = open_v[bank] && open_row[bank] == row;
    conflict = open_v[bank] && open_row[bank] != row;
  end

  assign in_ready      = cmd_ready;
  assign cmd_valid     = in_valid;
  assign cmd_addr      = in_addr;
  assign cmd_we        = in_we;
  assign cmd_wdata     = in_wdata;
  assign cmd_id        = in_id;
  assign cmd_pre       = conflict;
  assign cmd_act       = !hit;
  assign cmd_close     = !in_keep_open;
  assign access_cycles = 8'(T_CAS) + (hit ? 8'd0 : 8'(T_RCD)) + (conflict ? 8'(T_RP) : 8'd0);
  assign all_closed    = (open_v == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_v     <= '0;
      row_hits   <= '0;
      activates  <= '0;
      precharges <= '0;
    end else if (cmd_valid && cmd_ready) begin
      open_v[bank] <= in_keep_open;
      if (hit) row_hits  <= row_hits + 32'd1;
      else     activates <= activates + 32'd1;
      precharges <= precharges + 32'(conflict) + 32'(!in_keep_open);
    end
  end

  always_ff @(posedge clk)
    if (cmd_valid && cmd_ready) open_row[bank] <= row;

endmodule

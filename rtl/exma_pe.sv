// exma_pe -- processing element of the inference engine.
//
// Following the paper, a PE has an 8-bit multiply-accumulate ALU and a
// 32-byte register file.  The register file holds the signed 8-bit
// parameters of the neuron mapped to this PE; a MAC multiplies one of them
// by an unsigned 8-bit activation and adds the product to a 20-bit signed
// accumulator.  The operation set (clear, MAC, add a register as bias
// scaled by 16) and the accumulator width are this design's own.
//
// Interface: rf_we writes rf_wdata to register rf_waddr; op selects what the
// ALU does this cycle with register op_raddr and activation op_x.  acc is
// the accumulator after the edge.  One operation per cycle.
module exma_pe #(
  parameter int unsigned RF_BYTES = 32,
  parameter int unsigned ACC_W    = 20
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        rf_we,
  input  logic [$clog2(RF_BYTES)-1:0] rf_waddr,
  input  logic [7:0]                  rf_wdata,
  input  logic [1:0]                  op,       // 0 nop, 1 clear, 2 mac, 3 bias
  input  logic [$clog2(RF_BYTES)-1:0] op_raddr,
  input  logic [7:0]                  op_x,     // unsigned activation
  output logic signed [ACC_W-1:0]     acc
);

  localparam logic [1:0] OP_NOP = 2'd0, OP_CLR = 2'd1, OP_MAC = 2'd2, OP_BIAS = 2'd3;

  logic [7:0] rf [RF_BYTES];
  logic signed [7:0]  w;
  logic signed [16:0] prod;

  assign w    = rf[op_raddr];
  assign prod = w * $signed({1'b0, op_x});

  always_ff @(posedge clk)
    if (rf_we) rf[rf_waddr] <= rf_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else case (op)
      OP_CLR:  acc <= '0;
      OP_MAC:  acc <= acc + ACC_W'(prod);
      OP_BIAS: acc <= acc + (ACC_W'(w) <<< 4);
      default: acc <= acc;
    endcase
  end

endmodule

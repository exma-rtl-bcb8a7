// infer_engine -- evaluates one node of the MTL-based index.
//
// The paper's MTL index is a tree of models: each non-leaf node is a fully
// connected layer of 10 sigmoid neurons fed with the two inputs pos and
// k-mer, each leaf is a linear regression (one weight, one bias), and all
// parameters are quantized to 8 bits.  The leaf output F is the estimated
// fraction of the k-mer's increments that are <= pos; the caller turns it
// into a predicted position p = F * f.
//
// Here one exma_pe per hidden neuron holds that neuron's weights in its
// register file and computes w0*x0 + w1*x1 + 16*b; sigmoid_unit activates
// the sums; the same PEs then form v_j*h_j, and an adder tree adds the
// output bias and yields F.  A non-leaf node picks child
// first_child + floor(F * nchild / 256).  Inputs: x0 = pos >> pshift
// saturated to 8 bits, x1 = bits [kshift +: 8] of the k-mer's dense index.
// The node layout (exma_pkg), the input scaling and all fixed-point
// scalings are this design's own.  The paper takes its engine, a 4-array
// 8x8-PE Tangram accelerator, from other work; this engine does not model
// Tangram's dataflow or its shared 16 KB buffers, and uses only the 10 PEs
// one node needs.
//
// Fixed point: hidden pre-activation z = acc/256 (sigmoid_unit input acc>>>4),
// non-leaf F*256 = (sum v_j*h_j)/16 + 16*c, leaf F*256 = (w*x0 + 16*b)/4,
// each saturated to 0..255.
//
// Timing: start (with node, pos, kidx) -> done after 11 cycles for a
// non-leaf node and 6 for a leaf.  Inputs are sampled at start.
module infer_engine
  import exma_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [LINE_W-1:0] node,
  input  logic [POS_W-1:0]  pos,
  input  logic [KIDX_W-1:0] kidx,
  output logic              busy,
  output logic              done,
  output logic              is_leaf,
  output logic [NODE_W-1:0] next_node,
  output logic [7:0]        f_out
);

  localparam int unsigned ACC_W = 20;

  typedef enum logic [3:0] {
    E_IDLE, E_LD0, E_LD1, E_LD2, E_LD3, E_M0, E_M1, E_BIAS, E_ACT, E_OUT,
    E_SUM, E_LEAF
  } est_e;

  est_e              st;
  logic [LINE_W-1:0] nd;
  logic [7:0]        x0, x1;
  logic [N_NEURON-1:0][7:0] h;

  function automatic logic [7:0] nbyte(input logic [LINE_W-1:0] l, input int unsigned b);
    return l[b*8 +: 8];
  endfunction

  logic        leaf_q;
  logic [7:0]  nchild;
  logic [NODE_W-1:0] child0;
  assign leaf_q = nd[0];
  assign nchild = nbyte(nd, 3);
  assign child0 = nd[32 +: NODE_W];

  // ------------------------------------------------------------- PE control
  logic                  rf_we;
  logic [4:0]            rf_waddr;
  logic [N_NEURON-1:0][7:0] rf_wdata;
  logic [1:0]            op;
  logic [4:0]            op_raddr;
  logic [N_NEURON-1:0][7:0] op_x;
  logic signed [ACC_W-1:0] acc [N_NEURON];
  logic [N_NEURON-1:0][7:0] act;

  always_comb begin
    rf_we    = 1'b0;
    rf_waddr = '0;
    op       = 2'd0;
    op_raddr = '0;
    for (int j = 0; j < N_NEURON; j++) begin
      rf_wdata[j] = '0;
      op_x[j]     = '0;
    end
    case (st)
      E_LD0: begin rf_we = 1'b1; rf_waddr = 5'd0; op = 2'd1;
        for (int j = 0; j < N_NEURON; j++) rf_wdata[j] = nbyte(nd, leaf_q ? 8 : 8 + j); end
      E_LD1: begin rf_we = 1'b1; rf_waddr = 5'd1;
        for (int j = 0; j < N_NEURON; j++) rf_wdata[j] = nbyte(nd, leaf_q ? 9 : 18 + j); end
      E_LD2: begin rf_we = 1'b1; rf_waddr = 5'd2;
        for (int j = 0; j < N_NEURON; j++) rf_wdata[j] = nbyte(nd, 28 + j); end
      E_LD3: begin rf_we = 1'b1; rf_waddr = 5'd3;
        for (int j = 0; j < N_NEURON; j++) rf_wdata[j] = nbyte(nd, 38 + j); end
      E_M0:  begin op = 2'd2; op_raddr = 5'd0;
        for (int j = 0; j < N_NEURON; j++) op_x[j] = x0; end
      E_M1:  begin op = 2'd2; op_raddr = 5'd1;
        for (int j = 0; j < N_NEURON; j++) op_x[j] = x1; end
      E_BIAS: begin op = 2'd3; op_raddr = leaf_q ? 5'd1 : 5'd2; end
      E_ACT: begin op = 2'd1; end
      E_OUT: begin op = 2'd2; op_raddr = 5'd3;
        for (int j = 0; j < N_NEURON; j++) op_x[j] = h[j]; end
      default: ;
    endcase
  end

  for (genvar j = 0; j < N_NEURON; j++) begin : g_pe
    exma_pe #(.RF_BYTES(32), .ACC_W(ACC_W)) u_pe (
      .clk, .rst_n, .rf_we, .rf_waddr, .rf_wdata(rf_wdata[j]),
      .op, .op_raddr, .op_x(op_x[j]), .acc(acc[j]));
    sigmoid_unit #(.IN_W(16)) u_act (.z(16'(acc[j] >>> 4)), .y(act[j]));
  end

  // --------------------------------------------------------- output stage
  logic signed [ACC_W+4:0] sum;
  logic signed [ACC_W+4:0] fo_s;
  logic [7:0]              fo, leaf_f;
  logic signed [ACC_W-1:0] leaf_s;
  always_comb begin
    sum = '0;
    for (int j = 0; j < N_NEURON; j++) sum = sum + (ACC_W+5)'(acc[j]);
    fo_s = (sum >>> 4) + ((ACC_W+5)'($signed(nbyte(nd, 48))) <<< 4);
    fo   = (fo_s < 0) ? 8'd0 : (fo_s > 255) ? 8'd255 : fo_s[7:0];
    leaf_s = acc[0] >>> 2;
    leaf_f = (leaf_s < 0) ? 8'd0 : (leaf_s > 255) ? 8'd255 : leaf_s[7:0];
  end

  logic [POS_W-1:0]  psh;
  logic [KIDX_W-1:0] ksh;
  assign psh = pos >> node[15:8];
  assign ksh = kidx >> node[23:16];

  assign busy = (st != E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= E_IDLE;
      nd        <= '0;
      x0        <= '0;
      x1        <= '0;
      h         <= '0;
      done      <= 1'b0;
      is_leaf   <= 1'b0;
      next_node <= '0;
      f_out     <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        E_IDLE: if (start) begin
          nd <= node;
          x0 <= (psh > POS_W'(255)) ? 8'd255 : psh[7:0];
          x1 <= ksh[7:0];
          st <= E_LD0;
        end
        E_LD0:  st <= E_LD1;
        E_LD1:  st <= leaf_q ? E_M0 : E_LD2;
        E_LD2:  st <= E_LD3;
        E_LD3:  st <= E_M0;
        E_M0:   st <= leaf_q ? E_BIAS : E_M1;
        E_M1:   st <= E_BIAS;
        E_BIAS: st <= leaf_q ? E_LEAF : E_ACT;
        E_ACT: begin
          h  <= act;
          st <= E_OUT;
        end
        E_OUT:  st <= E_SUM;
        E_SUM: begin
          done      <= 1'b1;
          is_leaf   <= 1'b0;
          f_out     <= fo;
          next_node <= child0 + NODE_W'((16'(fo) * 16'(nchild)) >> 8);
          st        <= E_IDLE;
        end
        E_LEAF: begin
          done      <= 1'b1;
          is_leaf   <= 1'b1;
          f_out     <= leaf_f;
          next_node <= '0;
          st        <= E_IDLE;
        end
        default: st <= E_IDLE;
      endcase
    end
  end

endmodule

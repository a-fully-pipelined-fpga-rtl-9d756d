// dot_product: the Dot_Product core. It multiplies the 128 element pairs of
// two descriptors in parallel and sums the products in a seven-level binary
// adder tree (log2 128 = 7), as in the paper's Fig. 3.
// Timing follows the paper: every multiplier is a 3-stage pipeline (the
// DSP-slice multipliers of the original), each adder level is one register
// stage, so the result appears exactly 10 cycles after the operands, and a
// new pair can enter every cycle.
// Number format (this design's choice): elements are unsigned Q1.15, each
// product is Q2.30, the tree keeps full precision (39 bits) and the 32-bit
// output is the Q2.30 sum saturated at 2^32-1. For unit-length descriptors
// the sum is at most 1.0 = 2^30, so saturation never acts on real data.
// The operand and result ports are plain vectors: element i of a is
// a[16*i+15:16*i].
module dot_product
  import sift_pkg::*;
#(
  parameter int unsigned N     = N_ELEM,  // elements per descriptor (power of 2)
  parameter int unsigned EW    = ELEM_W,
  parameter int unsigned OUT_W = DOT_W,
  parameter int unsigned MUL_STAGES = 3
) (
  input  logic              clk,
  input  logic [N*EW-1:0]   a,
  input  logic [N*EW-1:0]   b,
  output logic [OUT_W-1:0]  dp
);
  localparam int unsigned LEVELS = $clog2(N);
  localparam int unsigned PW     = 2*EW;          // product width
  localparam int unsigned SW     = PW + LEVELS;   // full-precision sum width

  // Multiplication stage: operands registered, product computed, registered
  // again (MUL_STAGES registers in all).
  logic [PW-1:0] prod [MUL_STAGES][N];
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      prod[0][i] <= PW'(a[i*EW +: EW]) * PW'(b[i*EW +: EW]);
      for (int s = 1; s < MUL_STAGES; s++) prod[s][i] <= prod[s-1][i];
    end
  end

  // Adder tree, numbered as a heap: node k (1 <= k < N) adds its children
  // 2k and 2k+1, where indices N..2N-1 stand for the N products. Every node
  // is a register, so the root (node 1) is LEVELS = 7 stages after the
  // products.
  logic [SW-1:0] node [1:N-1];
  function automatic logic [SW-1:0] child(input int unsigned k);
    return (k >= N) ? SW'(prod[MUL_STAGES-1][k-N]) : node[k];
  endfunction
  always_ff @(posedge clk) begin
    for (int unsigned k = 1; k < N; k++) node[k] <= child(2*k) + child(2*k+1);
  end

  logic [SW-1:0] sum;
  assign sum = node[1];
  if (SW > OUT_W) begin : g_sat
    assign dp = (|sum[SW-1:OUT_W]) ? '1 : sum[OUT_W-1:0];
  end else begin : g_ext
    assign dp = OUT_W'(sum);
  end
endmodule

// processing_element: computes one output neuron of a linear layer.
//
// A PE is a processing unit (parallel multipliers, adder tree, accumulation
// and bias add) followed by the activation. For hidden layers (relu_en high)
// negative results are set to zero (ReLU); the encoder layer passes its
// result unchanged (the paper applies a sigmoid to the encoder output, which
// is not part of the PE). The full-precision result is then rounded back to
// Q4.12 by an arithmetic right shift of FRAC_W bits and saturated.
//
// Batch normalisation has no block of its own: being an affine map with
// fixed statistics at inference, it is assumed folded into the stored
// weights and biases, so a PE computes linear layer, BN and ReLU together.
//
// relu_en is sampled with the last chunk and travels with it, so products of
// different layers may follow each other back to back. Activation and
// requantisation are combinational: the PE has the PU's latency,
// R_M + R_A*(L+1) + P - 1 cycles for P chunks.
module processing_element
  import uivim_pkg::*;
#(
  parameter int unsigned N_MUL = 128,
  parameter int unsigned R_M   = 3,
  parameter int unsigned R_A   = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_first,
  input  logic in_last,
  input  logic relu_en,
  input  fix_t x    [N_MUL],
  input  fix_t w    [N_MUL],
  input  fix_t bias,
  output logic out_valid,
  output fix_t y
);
  localparam int unsigned L     = (N_MUL <= 1) ? 1 : $clog2(N_MUL);
  localparam int unsigned ACC_W = 2*DATA_W + L + 8;
  localparam int unsigned D     = R_M + R_A*(L+1);

  logic signed [ACC_W-1:0] acc;

  processing_unit #(.N_MUL(N_MUL), .R_M(R_M), .R_A(R_A)) u_pu (
    .clk, .rst_n, .in_valid, .in_first, .in_last, .x, .w, .bias,
    .out_valid, .out_acc(acc)
  );

  // relu_en delayed by the PU's one-chunk latency, so it lines up with the
  // result of the chunk it was sampled with.
  logic rpipe [D];
  always_ff @(posedge clk) begin
    rpipe[0] <= relu_en;
    for (int r = 1; r < D; r++) rpipe[r] <= rpipe[r-1];
  end

  always_comb begin
    if (rpipe[D-1] && acc < 0) y = '0;
    else                       y = requant(64'(acc));
  end

endmodule

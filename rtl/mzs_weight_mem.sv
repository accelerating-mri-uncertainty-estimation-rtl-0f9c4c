// mzs_weight_mem: the mask-zero-skipping weight and bias store of one PE.
//
// Masksembles uses fixed masks, so the weights each sampling sees are known
// before inference. Instead of a Bernoulli sampler and a dropout unit at run
// time, this memory keeps one copy of the PE's weights per (sub-network,
// sampling) pair with the dropped weights already removed: when a chunk of
// dense weights is written together with the sampling's mask bits, every
// weight whose mask bit is 0 is stored as zero, and the inference datapath
// never sees the mask. The mask applies to the inputs of a layer, i.e. to
// the hidden neurons a sampling drops, which removes them exactly.
//
// Weight words hold N_MUL weights (one PU chunk). Addresses are
//   weights: ((set*N_LAYER + layer)*MAX_GROUPS + group)*MAX_CHUNKS + chunk
//   biases : ( set*N_LAYER + layer)*MAX_GROUPS + group
// with set = sub-network*N_SAMP + sampling and group the output-neuron group
// the PE serves. Both reads are registered: data appear the cycle after
// rd_en. Writes come from the host and are one word per cycle.
//
// One copy per sampling and the absence of run-time dropout logic are the
// paper's; the word layout, the masking on write and the address map are
// this design's choices.
module mzs_weight_mem
  import uivim_pkg::*;
#(
  parameter int unsigned N_MUL      = 128,
  parameter int unsigned N_SAMP     = 4,
  parameter int unsigned MAX_GROUPS = 4,
  parameter int unsigned MAX_CHUNKS = 1,
  localparam int unsigned B_DEPTH = N_SUBNET*N_SAMP*N_LAYER*MAX_GROUPS,
  localparam int unsigned W_DEPTH = B_DEPTH*MAX_CHUNKS,
  localparam int unsigned WA_W    = aw(W_DEPTH),
  localparam int unsigned BA_W    = aw(B_DEPTH)
) (
  input  logic            clk,
  // host write port
  input  logic            w_we,
  input  logic [WA_W-1:0] w_waddr,
  input  fix_t            w_wdata [N_MUL],
  input  logic [N_MUL-1:0] w_wmask,
  input  logic            b_we,
  input  logic [BA_W-1:0] b_waddr,
  input  fix_t            b_wdata,
  // datapath read port
  input  logic            rd_en,
  input  logic [WA_W-1:0] w_raddr,
  input  logic [BA_W-1:0] b_raddr,
  output fix_t            w_rdata [N_MUL],
  output fix_t            b_rdata
);
  fix_t wmem [W_DEPTH][N_MUL];
  fix_t bmem [B_DEPTH];

  always_ff @(posedge clk) begin
    if (w_we) begin
      for (int i = 0; i < N_MUL; i++)
        wmem[w_waddr][i] <= w_wmask[i] ? w_wdata[i] : '0;
    end
    if (b_we) bmem[b_waddr] <= b_wdata;
    if (rd_en) begin
      w_rdata <= wmem[w_raddr];
      b_rdata <= bmem[b_raddr];
    end
  end

endmodule

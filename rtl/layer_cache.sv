// layer_cache: intermediate layer cache between the hidden layers.
//
// Two banks of MAX_NB Q4.12 values. Bank 0 holds the outputs of hidden layer
// 1, which hidden layer 2 reads while writing its own outputs to bank 1,
// which the encoder then reads. A layer wider than the number of PEs is
// computed in groups of N_PE neurons: each group's N_PE results are written
// in one cycle at neuron index group*N_PE + pe, so the cache also collects
// the partial results of a layer computed serially. Reads return one PU chunk
// of N_MUL values (neurons chunk*N_MUL ..) the cycle after rd_en; positions
// beyond MAX_NB read as zero.
//
// The cache's role is the paper's; the two banks and the word layout are
// this design's choices.
module layer_cache
  import uivim_pkg::*;
#(
  parameter int unsigned N_MUL      = 128,
  parameter int unsigned N_PE       = 32,
  parameter int unsigned MAX_NB     = 128,
  localparam int unsigned MAX_GROUPS = (MAX_NB + N_PE - 1) / N_PE,
  localparam int unsigned MAX_CHUNKS = (MAX_NB + N_MUL - 1) / N_MUL,
  localparam int unsigned GA_W = aw(MAX_GROUPS),
  localparam int unsigned CA_W = aw(MAX_CHUNKS)
) (
  input  logic            clk,
  input  logic            we,
  input  logic            wbank,
  input  logic [GA_W-1:0] wgroup,
  input  fix_t            wdata [N_PE],
  input  logic            rd_en,
  input  logic            rbank,
  input  logic [CA_W-1:0] rchunk,
  output fix_t            rdata [N_MUL]
);
  fix_t mem [2][MAX_NB];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int p = 0; p < N_PE; p++)
        if (int'(wgroup)*N_PE + p < MAX_NB) mem[wbank][int'(wgroup)*N_PE + p] <= wdata[p];
    end
    if (rd_en) begin
      for (int i = 0; i < N_MUL; i++)
        rdata[i] <= (int'(rchunk)*N_MUL + i < MAX_NB) ? mem[rbank][int'(rchunk)*N_MUL + i] : '0;
    end
  end

endmodule

// io_manager: on-chip store of the input voxels and of the network outputs.
//
// Input side: each voxel is a vector of up to MAX_CHUNKS*N_MUL normalised
// signals S/S0 (Q4.12), kept as MAX_CHUNKS words of N_MUL elements at word
// address voxel*MAX_CHUNKS + chunk. The host writes words; the datapath reads
// one word per cycle with a registered read (data the cycle after in_re).
//
// Output side: one Q4.12 encoder output per (voxel, sub-network, sampling),
// at address (voxel*N_SUBNET + subnet)*N_SAMP + sampling, written by the
// datapath and read by the host with a registered read.
//
// Holding all MAX_VOX = 20k voxels on chip is the paper's configuration; the
// word layout and the two separate memories are this design's choices.
module io_manager
  import uivim_pkg::*;
#(
  parameter int unsigned N_MUL      = 128,
  parameter int unsigned MAX_CHUNKS = 1,
  parameter int unsigned MAX_VOX    = 20000,
  parameter int unsigned N_SAMP     = 4,
  localparam int unsigned IN_DEPTH  = MAX_VOX*MAX_CHUNKS,
  localparam int unsigned OUT_DEPTH = MAX_VOX*N_SUBNET*N_SAMP,
  localparam int unsigned IA_W      = aw(IN_DEPTH),
  localparam int unsigned OA_W      = aw(OUT_DEPTH)
) (
  input  logic            clk,
  // input voxels: host write, datapath read
  input  logic            in_we,
  input  logic [IA_W-1:0] in_waddr,
  input  fix_t            in_wdata [N_MUL],
  input  logic            in_re,
  input  logic [IA_W-1:0] in_raddr,
  output fix_t            in_rdata [N_MUL],
  // outputs: datapath write, host read
  input  logic            out_we,
  input  logic [OA_W-1:0] out_waddr,
  input  fix_t            out_wdata,
  input  logic            out_re,
  input  logic [OA_W-1:0] out_raddr,
  output fix_t            out_rdata
);
  fix_t imem [IN_DEPTH][N_MUL];
  fix_t omem [OUT_DEPTH];

  always_ff @(posedge clk) begin
    if (in_we)  imem[in_waddr] <= in_wdata;
    if (in_re)  in_rdata <= imem[in_raddr];
    if (out_we) omem[out_waddr] <= out_wdata;
    if (out_re) out_rdata <= omem[out_raddr];
  end

endmodule

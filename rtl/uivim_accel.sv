// uivim_accel: FPGA-style accelerator for uIVIM-NET, a mask-based Bayesian
// version of IVIM-NET.
//
// For each voxel (a vector of n_b normalised diffusion signals) the network
// runs 4 independent sub-networks (one per IVIM parameter D, f, D*, S0), each
// N_SAMP times with a different fixed Masksembles mask. A sub-network is two
// hidden layers of n_b neurons (linear, batch norm folded into the weights,
// ReLU, mask) and a one-neuron encoder layer. The spread of the N_SAMP
// encoder outputs of a voxel is its uncertainty.
//
// Structure: N_PE identical processing elements, each computing one output
// neuron with N_MUL parallel multipliers, a pipelined adder tree and a bias
// adder, then ReLU; each PE has its own mask-zero-skipping weight memory
// holding a pre-masked copy of its weights for every (sub-network, sampling).
// The I/O manager holds the input voxels and the outputs, the intermediate
// layer cache holds hidden-layer results, the router feeds the PEs from one
// of the two and returns their results, and the controller sequences it all
// in batch-level order (see controller.sv).
//
// Host interface: before start, write the weights per PE (w_*, with the
// sampling's mask bits; b_* for biases; address map in mzs_weight_mem.sv)
// and the voxels (in_*, address map in io_manager.sv). Pulse start with
// n_vox and n_b; when done pulses, read the encoder outputs (out_*, one
// registered read per cycle) at address (voxel*4 + subnet)*N_SAMP + sampling.
// The encoder outputs are the pre-sigmoid values in Q4.12; sigmoid, the
// conversion to IVIM parameters and mean / standard deviation over the
// samplings are left to the host.
module uivim_accel
  import uivim_pkg::*;
#(
  parameter int unsigned N_PE    = 32,
  parameter int unsigned N_MUL   = 128,
  parameter int unsigned MAX_NB  = 128,
  parameter int unsigned N_SAMP  = 4,
  parameter int unsigned BATCH   = 64,
  parameter int unsigned MAX_VOX = 20000,
  parameter int unsigned R_M     = 3,
  parameter int unsigned R_A     = 1,
  localparam int unsigned MAX_GROUPS = (MAX_NB + N_PE - 1) / N_PE,
  localparam int unsigned MAX_CHUNKS = (MAX_NB + N_MUL - 1) / N_MUL,
  localparam int unsigned N_SETS  = N_SUBNET*N_SAMP,
  localparam int unsigned GA_W = aw(MAX_GROUPS),
  localparam int unsigned CA_W = aw(MAX_CHUNKS),
  localparam int unsigned NB_W = $clog2(MAX_NB + 1),
  localparam int unsigned V_W  = $clog2(MAX_VOX + 1),
  localparam int unsigned IA_W = aw(MAX_VOX*MAX_CHUNKS),
  localparam int unsigned OA_W = aw(MAX_VOX*N_SETS),
  localparam int unsigned WA_W = aw(N_SETS*N_LAYER*MAX_GROUPS*MAX_CHUNKS),
  localparam int unsigned BA_W = aw(N_SETS*N_LAYER*MAX_GROUPS),
  localparam int unsigned PE_W = aw(N_PE)
) (
  input  logic             clk,
  input  logic             rst_n,
  // run control
  input  logic             start,
  input  logic [V_W-1:0]   n_vox,
  input  logic [NB_W-1:0]  n_b,
  output logic             busy,
  output logic             done,
  output logic [31:0]      weight_loads,
  output logic [31:0]      cycles,
  // weight and bias loading
  input  logic             w_we,
  input  logic [PE_W-1:0]  w_pe,
  input  logic [WA_W-1:0]  w_waddr,
  input  fix_t             w_wdata [N_MUL],
  input  logic [N_MUL-1:0] w_wmask,
  input  logic             b_we,
  input  logic [PE_W-1:0]  b_pe,
  input  logic [BA_W-1:0]  b_waddr,
  input  fix_t             b_wdata,
  // voxel loading
  input  logic             in_we,
  input  logic [IA_W-1:0]  in_waddr,
  input  fix_t             in_wdata [N_MUL],
  // result read-back
  input  logic             out_re,
  input  logic [OA_W-1:0]  out_raddr,
  output fix_t             out_rdata
);
  // controller signals
  logic            rd_en, cache_rbank, pe_in_valid, pe_first, pe_last, pe_relu;
  logic            rt_src_cache, is_encoder, cache_wbank;
  logic [IA_W-1:0] io_raddr;
  logic [CA_W-1:0] cache_rchunk, rt_chunk;
  logic [WA_W-1:0] w_raddr;
  logic [BA_W-1:0] b_raddr;
  logic [GA_W-1:0] cache_wgroup;
  logic [OA_W-1:0] out_waddr;

  // datapath signals
  fix_t io_rdata    [N_MUL];
  fix_t cache_rdata [N_MUL];
  fix_t pe_x        [N_MUL];
  fix_t pe_y        [N_PE];
  logic pe_ovalid   [N_PE];
  logic cache_we, out_we;
  fix_t cache_wdata [N_PE];
  fix_t out_wdata;

  controller #(
    .N_PE(N_PE), .N_MUL(N_MUL), .MAX_NB(MAX_NB), .N_SAMP(N_SAMP),
    .BATCH(BATCH), .MAX_VOX(MAX_VOX)
  ) u_ctrl (
    .clk, .rst_n, .start, .n_vox, .n_b, .busy, .done,
    .rd_en, .io_raddr, .cache_rbank, .cache_rchunk, .w_raddr, .b_raddr,
    .pe_in_valid, .pe_first, .pe_last, .pe_relu, .rt_src_cache, .rt_chunk,
    .pe_valid(pe_ovalid[0]), .is_encoder, .cache_wbank, .cache_wgroup,
    .out_waddr, .weight_loads, .cycles
  );

  io_manager #(
    .N_MUL(N_MUL), .MAX_CHUNKS(MAX_CHUNKS), .MAX_VOX(MAX_VOX), .N_SAMP(N_SAMP)
  ) u_io (
    .clk,
    .in_we, .in_waddr, .in_wdata,
    .in_re(rd_en), .in_raddr(io_raddr), .in_rdata(io_rdata),
    .out_we, .out_waddr, .out_wdata,
    .out_re, .out_raddr, .out_rdata
  );

  layer_cache #(.N_MUL(N_MUL), .N_PE(N_PE), .MAX_NB(MAX_NB)) u_cache (
    .clk,
    .we(cache_we), .wbank(cache_wbank), .wgroup(cache_wgroup), .wdata(cache_wdata),
    .rd_en, .rbank(cache_rbank), .rchunk(cache_rchunk), .rdata(cache_rdata)
  );

  router #(.N_MUL(N_MUL), .N_PE(N_PE), .MAX_NB(MAX_NB)) u_router (
    .src_cache(rt_src_cache), .chunk(rt_chunk), .n_b,
    .io_data(io_rdata), .cache_data(cache_rdata), .pe_x,
    .pe_valid(pe_ovalid[0]), .is_encoder, .pe_y,
    .cache_we, .cache_wdata, .out_we, .out_wdata
  );

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    fix_t w [N_MUL];
    fix_t bias;

    mzs_weight_mem #(
      .N_MUL(N_MUL), .N_SAMP(N_SAMP), .MAX_GROUPS(MAX_GROUPS), .MAX_CHUNKS(MAX_CHUNKS)
    ) u_wmem (
      .clk,
      .w_we(w_we && w_pe == PE_W'(p)), .w_waddr, .w_wdata, .w_wmask,
      .b_we(b_we && b_pe == PE_W'(p)), .b_waddr, .b_wdata,
      .rd_en, .w_raddr, .b_raddr, .w_rdata(w), .b_rdata(bias)
    );

    processing_element #(.N_MUL(N_MUL), .R_M(R_M), .R_A(R_A)) u_pe (
      .clk, .rst_n,
      .in_valid(pe_in_valid), .in_first(pe_first), .in_last(pe_last), .relu_en(pe_relu),
      .x(pe_x), .w, .bias,
      .out_valid(pe_ovalid[p]), .y(pe_y[p])
    );
  end

endmodule

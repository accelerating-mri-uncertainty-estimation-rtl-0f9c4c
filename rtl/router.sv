// router: connects the two stores to the PEs and the PEs back to them.
//
// Forward path: the PE input chunk comes from the I/O manager (first hidden
// layer, src_cache low) or from the intermediate layer cache (later layers).
// Elements whose index chunk*N_MUL + i is at or beyond the voxel length n_b
// are forced to zero, so a voxel shorter than the PU needs no padding in
// memory and stale cache entries never reach the multipliers. The same chunk
// is broadcast to all PEs.
//
// Return path: when the PEs deliver a group of results (pe_valid), hidden
// layer results go to the cache (cache_we, all N_PE values) and the encoder
// result, produced by PE 0, goes to the I/O manager (out_we).
//
// Purely combinational; cache_wdata and out_wdata are the PE results passed
// on unchanged, only their write enables are decided here. The paper only
// names the router; the masking by n_b
// and the split of the return path are this design's choices.
module router
  import uivim_pkg::*;
#(
  parameter int unsigned N_MUL  = 128,
  parameter int unsigned N_PE   = 32,
  parameter int unsigned MAX_NB = 128,
  localparam int unsigned MAX_CHUNKS = (MAX_NB + N_MUL - 1) / N_MUL,
  localparam int unsigned CA_W = aw(MAX_CHUNKS),
  localparam int unsigned NB_W = $clog2(MAX_NB + 1)
) (
  // forward
  input  logic            src_cache,
  input  logic [CA_W-1:0] chunk,
  input  logic [NB_W-1:0] n_b,
  input  fix_t            io_data    [N_MUL],
  input  fix_t            cache_data [N_MUL],
  output fix_t            pe_x       [N_MUL],
  // return
  input  logic            pe_valid,
  input  logic            is_encoder,
  input  fix_t            pe_y       [N_PE],
  output logic            cache_we,
  output fix_t            cache_wdata[N_PE],
  output logic            out_we,
  output fix_t            out_wdata
);
  always_comb begin
    for (int i = 0; i < N_MUL; i++) begin
      if (int'(chunk)*N_MUL + i >= int'(n_b)) pe_x[i] = '0;
      else if (src_cache)                     pe_x[i] = cache_data[i];
      else                                    pe_x[i] = io_data[i];
    end
    cache_we    = pe_valid && !is_encoder;
    cache_wdata = pe_y;
    out_we      = pe_valid && is_encoder;
    out_wdata   = pe_y[0];
  end

endmodule

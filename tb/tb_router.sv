// tb_router: self-checking test of the router.
// Random source selection, chunk index and voxel length: every PE input must
// come from the selected store or be zero past the voxel length. Random
// results: they must go to the cache for hidden layers and PE 0's result to
// the output store for the encoder, and nowhere when not valid.
module tb_router;
  import uivim_pkg::*;
  localparam int N_MUL = 4, N_PE = 3, MAX_NB = 10;
  logic src_cache, pe_valid, is_encoder, cache_we, out_we;
  logic [1:0] chunk;
  logic [3:0] n_b;
  fix_t io_data [N_MUL], cache_data [N_MUL], pe_x [N_MUL];
  fix_t pe_y [N_PE], cache_wdata [N_PE], out_wdata;
  int checks = 0, failures = 0, nmasked = 0;

  router #(.N_MUL(N_MUL), .N_PE(N_PE), .MAX_NB(MAX_NB)) dut (.*);

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      src_cache = 1'($urandom); chunk = 2'($urandom_range(0, 2)); n_b = 4'($urandom_range(1, 10));
      pe_valid = 1'($urandom); is_encoder = 1'($urandom);
      for (int i = 0; i < N_MUL; i++) begin io_data[i] = fix_t'($urandom); cache_data[i] = fix_t'($urandom); end
      for (int p = 0; p < N_PE; p++) pe_y[p] = fix_t'($urandom);
      #1;
      for (int i = 0; i < N_MUL; i++) begin
        fix_t e;
        if (int'(chunk)*N_MUL + i >= int'(n_b)) begin e = '0; nmasked++; end
        else e = src_cache ? cache_data[i] : io_data[i];
        checks++;
        if (pe_x[i] != e) begin failures++; $display("pe_x[%0d] wrong", i); end
      end
      checks += 2;
      if (cache_we != (pe_valid && !is_encoder)) begin failures++; $display("cache_we wrong"); end
      if (out_we != (pe_valid && is_encoder)) begin failures++; $display("out_we wrong"); end
      if (cache_we) for (int p = 0; p < N_PE; p++) begin
        checks++;
        if (cache_wdata[p] != pe_y[p]) begin failures++; $display("cache_wdata wrong"); end
      end
      if (out_we) begin
        checks++;
        if (out_wdata != pe_y[0]) begin failures++; $display("out_wdata wrong"); end
      end
      #1;
    end
    checks++;
    if (nmasked == 0) begin failures++; $display("masking never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

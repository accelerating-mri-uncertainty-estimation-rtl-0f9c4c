// tb_layer_cache: self-checking test of the intermediate layer cache.
// N_PE = 3, N_MUL = 4, MAX_NB = 10: a layer is written as 4 groups of 3
// (the last group partly beyond MAX_NB) into each bank, then read back as 3
// chunks of 4, the last with positions beyond MAX_NB expected as zero.
// Both banks are checked to be independent.
module tb_layer_cache;
  import uivim_pkg::*;
  localparam int N_MUL = 4, N_PE = 3, MAX_NB = 10;
  logic clk = 0, we = 0, wbank = 0, rd_en = 0, rbank = 0;
  logic [1:0] wgroup = '0, rchunk = '0;
  fix_t wdata [N_PE], rdata [N_MUL];
  fix_t refm [2][MAX_NB];
  int checks = 0, failures = 0;

  layer_cache #(.N_MUL(N_MUL), .N_PE(N_PE), .MAX_NB(MAX_NB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < N_PE; p++) wdata[p] = '0;
    for (int rep = 0; rep < 3; rep++) begin
      for (int b = 0; b < 2; b++)
        for (int g = 0; g < 4; g++) begin
          @(negedge clk);
          we = 1; wbank = b[0]; wgroup = 2'(g);
          for (int p = 0; p < N_PE; p++) begin
            wdata[p] = fix_t'($urandom);
            if (g*N_PE + p < MAX_NB) refm[b][g*N_PE + p] = wdata[p];
          end
        end
      @(negedge clk); we = 0;
      for (int b = 0; b < 2; b++)
        for (int c = 0; c < 3; c++) begin
          @(negedge clk);
          rd_en = 1; rbank = b[0]; rchunk = 2'(c);
          @(negedge clk);
          rd_en = 0;
          for (int i = 0; i < N_MUL; i++) begin
            fix_t e;
            e = (c*N_MUL + i < MAX_NB) ? refm[b][c*N_MUL + i] : '0;
            checks++;
            if (rdata[i] != e) begin failures++; $display("bank %0d pos %0d: %0d exp %0d", b, c*N_MUL+i, rdata[i], e); end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

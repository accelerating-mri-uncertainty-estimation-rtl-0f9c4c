// tb_io_manager: self-checking test of the I/O manager.
// Fills the input store of a small configuration with random words and the
// output store with random values, then reads both back in random order and
// compares with a reference copy, one cycle after each read.
module tb_io_manager;
  import uivim_pkg::*;
  localparam int N_MUL = 4, MAX_CHUNKS = 2, MAX_VOX = 8, N_SAMP = 2;
  localparam int IN_DEPTH = MAX_VOX*MAX_CHUNKS, OUT_DEPTH = MAX_VOX*N_SUBNET*N_SAMP;
  localparam int IA_W = $clog2(IN_DEPTH), OA_W = $clog2(OUT_DEPTH);
  logic clk = 0, in_we = 0, in_re = 0, out_we = 0, out_re = 0;
  logic [IA_W-1:0] in_waddr = '0, in_raddr = '0;
  logic [OA_W-1:0] out_waddr = '0, out_raddr = '0;
  fix_t in_wdata [N_MUL], in_rdata [N_MUL], out_wdata, out_rdata;
  fix_t ref_in [IN_DEPTH][N_MUL];
  fix_t ref_out [OUT_DEPTH];
  int checks = 0, failures = 0;

  io_manager #(.N_MUL(N_MUL), .MAX_CHUNKS(MAX_CHUNKS), .MAX_VOX(MAX_VOX),
               .N_SAMP(N_SAMP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    out_wdata = '0;
    for (int i = 0; i < N_MUL; i++) in_wdata[i] = '0;
    for (int a = 0; a < OUT_DEPTH; a++) begin
      @(negedge clk);
      if (a < IN_DEPTH) begin
        in_we = 1; in_waddr = IA_W'(a);
        for (int i = 0; i < N_MUL; i++) begin in_wdata[i] = fix_t'($urandom); ref_in[a][i] = in_wdata[i]; end
      end else in_we = 0;
      out_we = 1; out_waddr = OA_W'(a); out_wdata = fix_t'($urandom); ref_out[a] = out_wdata;
    end
    @(negedge clk); in_we = 0; out_we = 0;
    for (int k = 0; k < 100; k++) begin
      int ia, oa;
      ia = $urandom_range(0, IN_DEPTH - 1);
      oa = $urandom_range(0, OUT_DEPTH - 1);
      @(negedge clk);
      in_re = 1; in_raddr = IA_W'(ia); out_re = 1; out_raddr = OA_W'(oa);
      @(negedge clk);
      in_re = 0; out_re = 0;
      for (int i = 0; i < N_MUL; i++) begin
        checks++;
        if (in_rdata[i] != ref_in[ia][i]) begin failures++; $display("in[%0d][%0d] wrong", ia, i); end
      end
      checks++;
      if (out_rdata != ref_out[oa]) begin failures++; $display("out[%0d] wrong", oa); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mzs_weight_mem: self-checking test of the mask-zero-skipping memory.
// Writes every weight word of a small configuration with random weights and
// random mask bits, and every bias, then reads all back: a weight must read
// as written where its mask bit is 1 and as zero where it is 0, one cycle
// after the read.
module tb_mzs_weight_mem;
  import uivim_pkg::*;
  localparam int N_MUL = 4, N_SAMP = 2, MAX_GROUPS = 2, MAX_CHUNKS = 2;
  localparam int B_DEPTH = N_SUBNET*N_SAMP*N_LAYER*MAX_GROUPS;
  localparam int W_DEPTH = B_DEPTH*MAX_CHUNKS;
  localparam int WA_W = $clog2(W_DEPTH), BA_W = $clog2(B_DEPTH);
  logic clk = 0, w_we = 0, b_we = 0, rd_en = 0;
  logic [WA_W-1:0] w_waddr = '0, w_raddr = '0;
  logic [BA_W-1:0] b_waddr = '0, b_raddr = '0;
  fix_t w_wdata [N_MUL], w_rdata [N_MUL], b_wdata, b_rdata;
  logic [N_MUL-1:0] w_wmask = '0;
  fix_t ref_w [W_DEPTH][N_MUL];
  fix_t ref_b [B_DEPTH];
  int checks = 0, failures = 0, nzero = 0;

  mzs_weight_mem #(.N_MUL(N_MUL), .N_SAMP(N_SAMP), .MAX_GROUPS(MAX_GROUPS),
                   .MAX_CHUNKS(MAX_CHUNKS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    b_wdata = '0;
    for (int i = 0; i < N_MUL; i++) w_wdata[i] = '0;
    for (int a = 0; a < W_DEPTH; a++) begin
      @(negedge clk);
      w_we = 1; w_waddr = WA_W'(a); w_wmask = N_MUL'($urandom);
      for (int i = 0; i < N_MUL; i++) begin
        w_wdata[i] = fix_t'($urandom | 1);   // never zero, so a zero proves masking
        ref_w[a][i] = w_wmask[i] ? w_wdata[i] : '0;
      end
      if (a < B_DEPTH) begin
        b_we = 1; b_waddr = BA_W'(a); b_wdata = fix_t'($urandom); ref_b[a] = b_wdata;
      end else b_we = 0;
    end
    @(negedge clk); w_we = 0; b_we = 0;
    for (int a = 0; a < W_DEPTH; a++) begin
      @(negedge clk);
      rd_en = 1; w_raddr = WA_W'(a); b_raddr = BA_W'(a % B_DEPTH);
      @(negedge clk);
      rd_en = 0;
      for (int i = 0; i < N_MUL; i++) begin
        checks++;
        if (ref_w[a][i] == '0) nzero++;
        if (w_rdata[i] != ref_w[a][i]) begin
          failures++; $display("w[%0d][%0d] = %0d exp %0d", a, i, w_rdata[i], ref_w[a][i]);
        end
      end
      checks++;
      if (b_rdata != ref_b[a % B_DEPTH]) begin failures++; $display("bias %0d wrong", a); end
    end
    checks++;
    if (nzero == 0) begin failures++; $display("no masked weight tested"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

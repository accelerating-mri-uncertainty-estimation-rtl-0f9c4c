// tb_processing_unit: self-checking test of the PU.
// N_MUL = 8, R_M = 2, R_A = 2 (L = 3). Dot products of 1, 2 and 3 chunks are
// fed back to back with random Q4.12 data; each result must equal the exact
// sum of products plus the bias (scaled by 2^12) and appear
// R_M + R_A*(L+1) + P - 1 cycles after its first chunk (Eq. 2 of the design).
module tb_processing_unit;
  import uivim_pkg::*;
  localparam int N_MUL = 8, R_M = 2, R_A = 2, L = 3;
  localparam int ACC_W = 2*DATA_W + L + 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, out_valid;
  fix_t x [N_MUL], w [N_MUL], bias;
  logic signed [ACC_W-1:0] out_acc;
  int checks = 0, failures = 0, cyc = 0, nres = 0;
  longint exp_v [$];
  int     exp_c [$];

  processing_unit #(.N_MUL(N_MUL), .R_M(R_M), .R_A(R_A)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2; nres++;
    if (exp_v.size() == 0) begin failures += 2; $display("unexpected result"); end
    else begin
      longint e;
      int c;
      e = exp_v.pop_front();
      c = exp_c.pop_front();
      if (longint'(out_acc) != e) begin failures++; $display("acc %0d exp %0d", out_acc, e); end
      if (cyc != c) begin failures++; $display("latency: cycle %0d exp %0d", cyc, c); end
    end
  end

  task automatic feed(input int p, input bit gap);
    longint s = 0;
    int c0;
    for (int k = 0; k < p; k++) begin
      @(negedge clk);
      if (k == 0) c0 = cyc;
      in_valid = 1; in_first = (k == 0); in_last = (k == p - 1);
      for (int i = 0; i < N_MUL; i++) begin
        x[i] = fix_t'($urandom); w[i] = fix_t'($urandom);
        s += longint'(x[i]) * longint'(w[i]);
      end
      bias = fix_t'($urandom);
      if (k == p - 1) s += longint'(bias) * 4096;
    end
    exp_v.push_back(s);
    exp_c.push_back(c0 + R_M + R_A*(L+1) + p - 1);
    if (gap) begin @(negedge clk); in_valid = 0; in_first = 0; in_last = 0; end
  endtask

  initial begin
    bias = '0;
    for (int i = 0; i < N_MUL; i++) begin x[i] = '0; w[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) feed(1 + t % 3, $urandom_range(0, 1) == 1);
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (nres != 60 || exp_v.size() != 0) begin failures++; $display("got %0d results", nres); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_processing_element: self-checking test of the PE.
// N_MUL = 4, R_M = 3, R_A = 1 (L = 2). One-chunk and two-chunk neurons with
// random data, alternately with ReLU on (hidden layer) and off (encoder);
// includes large values so that saturation is exercised. The output must be
// the reference requantised value, ReLU applied, R_M + R_A*(L+1) + P - 1
// cycles after the first chunk.
module tb_processing_element;
  import uivim_pkg::*;
  localparam int N_MUL = 4, R_M = 3, R_A = 1, L = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, relu_en = 0, out_valid;
  fix_t x [N_MUL], w [N_MUL], bias, y;
  int checks = 0, failures = 0, cyc = 0, nres = 0, n_relu0 = 0, n_sat = 0;
  int exp_v [$];
  int exp_c [$];

  processing_element #(.N_MUL(N_MUL), .R_M(R_M), .R_A(R_A)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int e, c;
    checks += 2; nres++;
    e = exp_v.pop_front();
    c = exp_c.pop_front();
    if (int'(y) != e) begin failures++; $display("y %0d exp %0d", y, e); end
    if (cyc != c) begin failures++; $display("latency: cycle %0d exp %0d", cyc, c); end
  end

  task automatic feed(input int p, input bit relu, input bit big);
    longint s, q;
    int c0;
    s = 0;
    for (int k = 0; k < p; k++) begin
      @(negedge clk);
      if (k == 0) c0 = cyc;
      in_valid = 1; in_first = (k == 0); in_last = (k == p - 1); relu_en = relu;
      for (int i = 0; i < N_MUL; i++) begin
        x[i] = big ? fix_t'($urandom) : fix_t'($signed($urandom_range(0, 8191)) - 4096);
        w[i] = big ? fix_t'($urandom) : fix_t'($signed($urandom_range(0, 8191)) - 4096);
        s += longint'(x[i]) * longint'(w[i]);
      end
      bias = fix_t'($signed($urandom_range(0, 8191)) - 4096);
      if (k == p - 1) s += longint'(bias) * 4096;
    end
    if (relu && s < 0) q = 0;
    else begin
      q = s >>> 12;
      if (q > 32767) begin q = 32767; n_sat++; end
      if (q < -32768) begin q = -32768; n_sat++; end
    end
    if (relu && s < 0) n_relu0++;
    exp_v.push_back(int'(q));
    exp_c.push_back(c0 + R_M + R_A*(L+1) + p - 1);
  endtask

  initial begin
    bias = '0;
    for (int i = 0; i < N_MUL; i++) begin x[i] = '0; w[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 80; t++) feed(1 + t % 2, t % 4 < 2, t % 5 == 0);
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    repeat (20) @(negedge clk);
    checks += 3;
    if (nres != 80) begin failures++; $display("got %0d results", nres); end
    if (n_relu0 == 0) begin failures++; $display("ReLU never clipped"); end
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_adder_tree: self-checking test of the pipelined adder tree.
// Uses 10 inputs (not a power of two) and R_A = 2, feeds a random vector on
// most clocks and checks each sum against a reference computed here, and
// that it appears exactly L*R_A = 8 cycles after its input.
module tb_adder_tree;
  localparam int N = 10, IN_W = 20, R_A = 2, L = 4, LAT = L*R_A;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [IN_W-1:0]   in_data [N];
  logic signed [IN_W+L-1:0] sum;
  int checks = 0, failures = 0, cyc = 0, sent = 0;
  longint exp_sum [$];
  int     exp_cyc [$];

  adder_tree #(.N(N), .IN_W(IN_W), .R_A(R_A)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      checks += 2;
      if (exp_sum.size() == 0) begin failures += 2; $display("unexpected output"); end
      else begin
        longint e;
        int     c;
        e = exp_sum.pop_front();
        c = exp_cyc.pop_front();
        if (longint'(sum) != e) begin failures++; $display("sum %0d exp %0d", sum, e); end
        if (cyc != c) begin failures++; $display("latency: cycle %0d exp %0d", cyc, c); end
      end
    end
  end

  initial begin
    for (int i = 0; i < N; i++) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      if (in_valid) begin
        longint s;
        s = 0;
        for (int i = 0; i < N; i++) begin
          in_data[i] = (k < 4) ? ((k[0]) ? {1'b0, {(IN_W-1){1'b1}}} : {1'b1, {(IN_W-1){1'b0}}})
                               : IN_W'($urandom);
          s += longint'(in_data[i]);
        end
        exp_sum.push_back(s);
        exp_cyc.push_back(cyc + LAT);
        sent++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (exp_sum.size() != 0 || sent == 0) begin failures++; $display("%0d sums missing", exp_sum.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

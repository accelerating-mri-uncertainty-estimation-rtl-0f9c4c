// adder_tree: pipelined binary adder tree.
//
// Sums N signed inputs of IN_W bits in L = ceil(log2(N)) levels of two-input
// adders. Every adder is followed by R_A pipeline registers, so a new input
// vector can be accepted on every clock and the sum of the vector presented
// in cycle t (in_valid high) appears on sum with out_valid high in cycle
// t + L*R_A. Inputs beyond N (up to the next power of two) are taken as zero.
// The output is IN_W + L bits wide, so no sum can overflow.
//
// The tree of adders and the per-adder pipeline registers (R_A of them) are
// the paper's; the zero padding to a power of two is this design's choice.
module adder_tree #(
  parameter int unsigned N    = 128,
  parameter int unsigned IN_W = 32,
  parameter int unsigned R_A  = 1,
  localparam int unsigned L     = (N <= 1) ? 1 : $clog2(N),
  localparam int unsigned OUT_W = IN_W + L
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data [N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] sum
);
  localparam int unsigned NP = 1 << L;

  // lvl[k] holds the NP >> k partial sums entering level k.
  logic signed [OUT_W-1:0] lvl [L+1][NP];

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      if (i < N) lvl[0][i] = OUT_W'(in_data[i]);
      else       lvl[0][i] = '0;
    end
  end

  for (genvar k = 0; k < L; k++) begin : g_level
    localparam int unsigned NO = NP >> (k + 1);
    logic signed [OUT_W-1:0] pipe [R_A][NO];
    always_ff @(posedge clk) begin
      for (int i = 0; i < NO; i++) begin
        pipe[0][i] <= lvl[k][2*i] + lvl[k][2*i+1];
        for (int r = 1; r < R_A; r++) pipe[r][i] <= pipe[r-1][i];
      end
    end
    always_comb begin
      for (int i = 0; i < NP; i++) lvl[k+1][i] = (i < NO) ? pipe[R_A-1][i] : '0;
    end
  end

  // Valid travels beside the data through the same number of registers.
  logic [L*R_A-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else begin
      vpipe[0] <= in_valid;
      for (int i = 1; i < L*R_A; i++) vpipe[i] <= vpipe[i-1];
    end
  end

  assign sum       = lvl[L][0];
  assign out_valid = vpipe[L*R_A-1];

endmodule

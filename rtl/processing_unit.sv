// processing_unit: the dot-product engine of one PE.
//
// A chunk of N_MUL inputs and N_MUL weights (Q4.12) enters per clock. The
// parallel multipliers form all N_MUL products, each multiplier followed by
// R_M pipeline registers; the adder tree (R_A registers per adder, L levels)
// reduces them to one partial sum. When a dot product is longer than N_MUL
// it is fed as several chunks on consecutive clocks, marked by in_first and
// in_last: the partial sums of all chunks but the last are accumulated in a
// register, and the last one is added together with the accumulator and the
// bias in the bias adder, which again has R_A registers. The result keeps
// full precision (binary point at 2*FRAC_W), so the PE decides on ReLU and
// rounding.
//
// Timing: for a dot product of P chunks whose first chunk is presented in
// cycle t, out_valid is high in cycle t + R_M + R_A*(L+1) + P - 1, the PU
// latency of the paper's Eq. 2. Chunks of the next dot product may follow
// the last chunk of the previous one on the very next clock.
//
// The bias is sampled together with the last chunk. Multipliers, adder tree,
// accumulation over chunks and bias add are the paper's; the widths of the
// intermediate sums and the default register counts R_M = 3, R_A = 1 are this
// design's choices (the paper gives no values).
module processing_unit
  import uivim_pkg::*;
#(
  parameter int unsigned N_MUL = 128,
  parameter int unsigned R_M   = 3,
  parameter int unsigned R_A   = 1,
  localparam int unsigned L     = (N_MUL <= 1) ? 1 : $clog2(N_MUL),
  localparam int unsigned PROD_W = 2*DATA_W,
  localparam int unsigned TREE_W = PROD_W + L,
  localparam int unsigned ACC_W  = TREE_W + 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  fix_t                    x    [N_MUL],
  input  fix_t                    w    [N_MUL],
  input  fix_t                    bias,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_acc
);
  // ---------------- parallel multipliers, R_M registers each ---------------
  logic signed [PROD_W-1:0] mpipe [R_M][N_MUL];
  logic                     mv    [R_M];
  logic                     mf    [R_M];
  logic                     ml    [R_M];
  fix_t                     mb    [R_M];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_MUL; i++) begin
      mpipe[0][i] <= x[i] * w[i];
      for (int r = 1; r < R_M; r++) mpipe[r][i] <= mpipe[r-1][i];
    end
    mf[0] <= in_first;
    ml[0] <= in_last;
    mb[0] <= bias;
    for (int r = 1; r < R_M; r++) begin
      mf[r] <= mf[r-1];
      ml[r] <= ml[r-1];
      mb[r] <= mb[r-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < R_M; r++) mv[r] <= 1'b0;
    end else begin
      mv[0] <= in_valid;
      for (int r = 1; r < R_M; r++) mv[r] <= mv[r-1];
    end
  end

  // ---------------- adder tree ----------------------------------------------
  logic                     tv;
  logic signed [TREE_W-1:0] tsum;

  adder_tree #(.N(N_MUL), .IN_W(PROD_W), .R_A(R_A)) u_tree (
    .clk, .rst_n,
    .in_valid (mv[R_M-1]),
    .in_data  (mpipe[R_M-1]),
    .out_valid(tv),
    .sum      (tsum)
  );

  // first/last/bias follow the tree's L*R_A registers
  localparam int unsigned TD = L*R_A;
  logic tf [TD];
  logic tl [TD];
  fix_t tb [TD];
  always_ff @(posedge clk) begin
    tf[0] <= mf[R_M-1];
    tl[0] <= ml[R_M-1];
    tb[0] <= mb[R_M-1];
    for (int r = 1; r < TD; r++) begin
      tf[r] <= tf[r-1];
      tl[r] <= tl[r-1];
      tb[r] <= tb[r-1];
    end
  end

  // ---------------- accumulation over chunks --------------------------------
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] acc_in;   // accumulator value seen by this chunk
  logic signed [ACC_W-1:0] bsum;     // input of the bias adder

  always_comb begin
    acc_in = tf[TD-1] ? '0 : acc;
    bsum   = acc_in + ACC_W'(tsum)
           + (ACC_W'(tb[TD-1]) <<< FRAC_W);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       acc <= '0;
    else if (tv && !tl[TD-1])         acc <= acc_in + ACC_W'(tsum);
  end

  // ---------------- bias adder, R_A registers --------------------------------
  logic signed [ACC_W-1:0] bpipe [R_A];
  logic                    bv    [R_A];
  always_ff @(posedge clk) begin
    bpipe[0] <= bsum;
    for (int r = 1; r < R_A; r++) bpipe[r] <= bpipe[r-1];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < R_A; r++) bv[r] <= 1'b0;
    end else begin
      bv[0] <= tv && tl[TD-1];
      for (int r = 1; r < R_A; r++) bv[r] <= bv[r-1];
    end
  end

  assign out_valid = bv[R_A-1];
  assign out_acc   = bpipe[R_A-1];

  // A chunk must never be presented without a valid, and a product can
  // only be first and last when it has a single chunk.
  a_flags: assert property (@(posedge clk) disable iff (!rst_n)
                            !in_valid |-> !(in_first || in_last))
    else $error("processing_unit: first/last flag without in_valid");

endmodule

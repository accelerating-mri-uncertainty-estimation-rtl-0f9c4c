// tb_uivim_accel_full: end-to-end test of the accelerator at its default
// size: 32 PEs of 128 multipliers, 4 samplings, batches of 64 voxels, 20k
// voxel store. One full batch of 64 voxels of 104 b-values (the size of the
// published IVIM data set the configuration was chosen for) is evaluated
// for all 4 sub-networks and 4 samplings and checked against the bit-exact
// reference model; the run time is printed per batch. Checks are those of
// tb_uivim_accel.
module tb_uivim_accel_full;
  import uivim_pkg::*;
  localparam int N_PE = 32, N_MUL = 128, MAX_NB = 128, N_SAMP = 4, BATCH = 64, MAX_VOX = 20000;
  localparam int R_M = 3, R_A = 1;
  localparam int NB = 104, NVOX = 64;

  uivim_accel dut (.*);

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam int MAX_GROUPS = (MAX_NB + N_PE - 1) / N_PE;
  localparam int MAX_CHUNKS = (MAX_NB + N_MUL - 1) / N_MUL;
  localparam int N_SETS = 4*N_SAMP;
  localparam int L = (N_MUL <= 1) ? 1 : $clog2(N_MUL);
  localparam int GA = (MAX_GROUPS <= 2) ? 1 : $clog2(MAX_GROUPS);
  localparam int NB_W = $clog2(MAX_NB + 1), V_W = $clog2(MAX_VOX + 1);
  localparam int IA_W = (MAX_VOX*MAX_CHUNKS <= 2) ? 1 : $clog2(MAX_VOX*MAX_CHUNKS);
  localparam int OA_W = (MAX_VOX*N_SETS <= 2) ? 1 : $clog2(MAX_VOX*N_SETS);
  localparam int WA_W = $clog2(N_SETS*3*MAX_GROUPS*MAX_CHUNKS);
  localparam int BA_W = $clog2(N_SETS*3*MAX_GROUPS);
  localparam int PE_W = (N_PE <= 2) ? 1 : $clog2(N_PE);

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [V_W-1:0]  n_vox;
  logic [NB_W-1:0] n_b;
  logic [31:0] weight_loads, cycles;
  logic w_we = 0, b_we = 0, in_we = 0, out_re = 0;
  logic [PE_W-1:0] w_pe = '0, b_pe = '0;
  logic [WA_W-1:0] w_waddr = '0;
  logic [BA_W-1:0] b_waddr = '0;
  logic [IA_W-1:0] in_waddr = '0;
  logic [OA_W-1:0] out_raddr = '0;
  logic [N_MUL-1:0] w_wmask = '0;
  fix_t w_wdata [N_MUL], in_wdata [N_MUL], b_wdata, out_rdata;

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // reference network: dense weights per sub-network, masks per sampling
  int  W  [4][3][MAX_NB][MAX_NB];
  int  B  [4][3][MAX_NB];
  bit  M  [4][N_SAMP][3][MAX_NB];     // mask on the inputs of layer l
  int  X  [NVOX][MAX_NB];
  int  Y  [NVOX][4][N_SAMP];
  int checks = 0, failures = 0;
  int n_relu_clip = 0, n_masked = 0, n_multi_chunk = 0, n_group_serial = 0;
  int n_pad = 0, n_partial_batch = 0;

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic int rq(input longint acc);
    longint q;
    q = acc >>> 12;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction

  task automatic reference();
    int a [MAX_NB];
    int h [MAX_NB];
    for (int v = 0; v < NVOX; v++)
      for (int s = 0; s < 4; s++)
        for (int k = 0; k < N_SAMP; k++) begin
          for (int i = 0; i < NB; i++) a[i] = X[v][i];
          for (int l = 0; l < 3; l++) begin
            int n_out;
            n_out = (l == 2) ? 1 : NB;
            for (int j = 0; j < n_out; j++) begin
              longint acc;
              acc = longint'(B[s][l][j]) * 4096;
              for (int i = 0; i < NB; i++)
                if (l == 0 || M[s][k][l][i]) acc += longint'(a[i]) * longint'(W[s][l][j][i]);
              if (l != 2 && acc < 0) begin h[j] = 0; n_relu_clip++; end
              else h[j] = rq(acc);
            end
            for (int j = 0; j < n_out; j++) a[j] = h[j];
          end
          Y[v][s][k] = a[0];
        end
  endtask

  // generate the network and the data
  task automatic make_data();
    for (int s = 0; s < 4; s++)
      for (int l = 0; l < 3; l++)
        for (int j = 0; j < MAX_NB; j++) begin
          B[s][l][j] = $urandom_range(0, 1023) - 512;
          for (int i = 0; i < MAX_NB; i++) W[s][l][j][i] = $urandom_range(0, 2047) - 1024;
        end
    // each sampling keeps about half of the hidden neurons (never none)
    for (int s = 0; s < 4; s++)
      for (int k = 0; k < N_SAMP; k++)
        for (int l = 0; l < 3; l++)
          for (int i = 0; i < MAX_NB; i++) M[s][k][l][i] = (l == 0) || (i == k) || ($urandom_range(0, 1) == 1);
    for (int v = 0; v < NVOX; v++)
      for (int i = 0; i < MAX_NB; i++) X[v][i] = (i < NB) ? $urandom_range(0, 4095) : 0;
  endtask

  task automatic load();
    for (int p = 0; p < N_PE; p++)
      for (int s = 0; s < 4; s++)
        for (int k = 0; k < N_SAMP; k++)
          for (int l = 0; l < 3; l++)
            for (int g = 0; g < MAX_GROUPS; g++) begin
              int j, set, n_out;
              j = g*N_PE + p;
              set = s*N_SAMP + k;
              n_out = (l == 2) ? 1 : NB;
              for (int c = 0; c < MAX_CHUNKS; c++) begin
                @(negedge clk);
                w_we = 1; w_pe = PE_W'(p);
                w_waddr = WA_W'(((set*3 + l)*MAX_GROUPS + g)*MAX_CHUNKS + c);
                for (int i = 0; i < N_MUL; i++) begin
                  int ii;
                  ii = c*N_MUL + i;
                  w_wdata[i] = (j < n_out && ii < NB) ? fix_t'(W[s][l][j][ii]) : '0;
                  w_wmask[i] = (ii < MAX_NB) ? M[s][k][l][ii] : 1'b1;
                  if (j < n_out && ii < NB && !w_wmask[i]) n_masked++;
                end
                b_we = (c == 0); b_pe = PE_W'(p);
                b_waddr = BA_W'((set*3 + l)*MAX_GROUPS + g);
                b_wdata = (j < n_out) ? fix_t'(B[s][l][j]) : '0;
              end
            end
    @(negedge clk); w_we = 0; b_we = 0;
    for (int v = 0; v < NVOX; v++)
      for (int c = 0; c < MAX_CHUNKS; c++) begin
        @(negedge clk);
        in_we = 1; in_waddr = IA_W'(v*MAX_CHUNKS + c);
        for (int i = 0; i < N_MUL; i++)
          // positions past n_b hold garbage: the router must hide it
          in_wdata[i] = (c*N_MUL + i < NB) ? fix_t'(X[v][c*N_MUL + i]) : fix_t'($urandom);
      end
    @(negedge clk); in_we = 0;
  endtask

  // mechanism counters, observed inside the design
  always @(negedge clk) if (rst_n && busy) begin
    if (dut.pe_in_valid && dut.pe_first && !dut.pe_last) n_multi_chunk++;
    if (dut.cache_we && dut.cache_wgroup != '0) n_group_serial++;
    if (dut.pe_in_valid && (int'(dut.rt_chunk) + 1)*N_MUL > NB) n_pad++;
    if (dut.u_ctrl.batch_len != V_W'(BATCH)) n_partial_batch++;
  end

  int exp_cycles, n_batches;
  initial begin
    int t0, lat_pe;
    for (int i = 0; i < N_MUL; i++) begin w_wdata[i] = '0; in_wdata[i] = '0; end
    b_wdata = '0;
    n_vox = V_W'(NVOX); n_b = NB_W'(NB);
    make_data();
    reference();
    repeat (3) @(negedge clk);
    rst_n = 1;
    load();
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    // schedule: per voxel, sub-network and sampling, three layers
    lat_pe = R_M + R_A*(L + 1);
    n_batches = (NVOX + BATCH - 1) / BATCH;
    exp_cycles = 1 + NVOX*4*N_SAMP*(
                   2*(((NB + N_PE - 1)/N_PE)*((NB + N_MUL - 1)/N_MUL) + lat_pe + 2)
                   + ((NB + N_MUL - 1)/N_MUL + lat_pe + 2));
    chk("run cycles", cyc - t0, exp_cycles);
    chk("weight set loads", int'(weight_loads), n_batches*N_SETS);
    $display("run: %0d voxels, %0d cycles, %0d cycles per batch of %0d",
             NVOX, cyc - t0, (cyc - t0) / n_batches, BATCH);
    for (int v = 0; v < NVOX; v++)
      for (int s = 0; s < 4; s++)
        for (int k = 0; k < N_SAMP; k++) begin
          @(negedge clk); out_re = 1; out_raddr = OA_W'((v*4 + s)*N_SAMP + k);
          @(negedge clk); out_re = 0;
          chk($sformatf("out v%0d s%0d k%0d", v, s, k), int'(out_rdata), Y[v][s][k]);
        end
    $display("mechanisms: multi-chunk %0d, serial groups %0d, padding %0d, masked weights %0d, relu clips %0d, partial-batch cycles %0d",
             n_multi_chunk, n_group_serial, n_pad, n_masked, n_relu_clip, n_partial_batch);
    chk("chunk accumulation seen", int'(n_multi_chunk > 0 || NB <= N_MUL), 1);
    chk("serial neuron groups seen", int'(n_group_serial > 0), 1);
    chk("zero padding seen", int'(n_pad > 0), 1);
    chk("masked weights seen", int'(n_masked > 0), 1);
    chk("ReLU clipping seen", int'(n_relu_clip > 0), 1);
    chk("partial batch seen", int'(n_partial_batch > 0 || NVOX % BATCH == 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

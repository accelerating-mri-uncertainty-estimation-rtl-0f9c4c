// tb_controller: self-checking test of the batch-level controller.
// Small sizes: N_PE = 2, N_MUL = 2, MAX_NB = 5, N_SAMP = 2, BATCH = 3 and a run
// of 5 voxels of 5 b-values (so 3 chunks per neuron, 3 neuron groups per
// hidden layer, and a second, partial batch). The PEs are modelled by a
// fixed delay from the last chunk to the result. The test rebuilds the
// expected order of work with nested loops (batch, sub-network, sampling,
// voxel, layer, group, chunk) and checks every read address, every PE
// control bit, every write-back target, the number of weight-set loads
// (4 * N_SAMP per batch), and the run time in cycles.
module tb_controller;
  import uivim_pkg::*;
  localparam int N_PE = 2, N_MUL = 2, MAX_NB = 5, N_SAMP = 2, BATCH = 3, MAX_VOX = 8;
  localparam int MAX_GROUPS = 3, MAX_CHUNKS = 3, LAT = 4;
  localparam int NVOX = 5, NB = 5;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] n_vox;
  logic [2:0] n_b;
  logic busy, done, rd_en, cache_rbank, pe_in_valid, pe_first, pe_last, pe_relu;
  logic rt_src_cache, pe_valid, is_encoder, cache_wbank;
  logic [4:0] io_raddr;
  logic [1:0] cache_rchunk, rt_chunk, cache_wgroup;
  logic [5:0] out_waddr;
  logic [7:0] w_raddr;
  logic [6:0] b_raddr;
  logic [31:0] weight_loads, cycles;

  controller #(.N_PE(N_PE), .N_MUL(N_MUL), .MAX_NB(MAX_NB), .N_SAMP(N_SAMP),
               .BATCH(BATCH), .MAX_VOX(MAX_VOX)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // PE model: result LAT cycles after the last chunk
  logic [LAT-1:0] dl;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) dl <= '0;
    else        dl <= {dl[LAT-2:0], pe_in_valid && pe_last};
  assign pe_valid = dl[LAT-1];

  typedef struct { int io, w, b, bank, chk, first, last, relu, src; } rd_t;
  typedef struct { int enc, bank, grp, oaddr; } wb_t;
  rd_t rq [$];
  rd_t pq [$];
  wb_t wq [$];
  int checks = 0, failures = 0, ndone = 0, exp_cycles = 0;

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d (cycle %0d)", what, got, exp, cyc);
    end
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected order of work
  initial begin
    for (int base = 0; base < NVOX; base += BATCH) begin
      int blen;
      blen = (NVOX - base > BATCH) ? BATCH : NVOX - base;
      for (int s = 0; s < 4; s++)
        for (int k = 0; k < N_SAMP; k++)
          for (int v = 0; v < blen; v++)
            for (int l = 0; l < 3; l++) begin
              int ng, set;
              ng = (l == 2) ? 1 : (NB + N_PE - 1) / N_PE;
              set = (s*N_SAMP + k)*3 + l;
              exp_cycles += ng*MAX_CHUNKS + LAT + 2;
              for (int g = 0; g < ng; g++) begin
                wb_t e;
                for (int c = 0; c < MAX_CHUNKS; c++) begin
                  rd_t r;
                  r.io = (base + v)*MAX_CHUNKS + c;
                  r.w = (set*MAX_GROUPS + g)*MAX_CHUNKS + c;
                  r.b = set*MAX_GROUPS + g;
                  r.bank = (l == 2); r.chk = c;
                  r.first = (c == 0); r.last = (c == MAX_CHUNKS - 1);
                  r.relu = (l != 2); r.src = (l != 0);
                  rq.push_back(r); pq.push_back(r);
                end
                e.enc = (l == 2); e.bank = l % 2; e.grp = g;
                e.oaddr = ((base + v)*4 + s)*N_SAMP + k;
                wq.push_back(e);
              end
            end
    end
  end

  always @(negedge clk) if (rst_n) begin
    if (rd_en) begin
      rd_t r;
      if (rq.size() == 0) chk("extra read", 1, 0);
      else begin
        r = rq.pop_front();
        chk("io_raddr", int'(io_raddr), r.io);
        chk("w_raddr", int'(w_raddr), r.w);
        chk("b_raddr", int'(b_raddr), r.b);
        if (r.src) chk("cache_rbank", int'(cache_rbank), r.bank);
        chk("cache_rchunk", int'(cache_rchunk), r.chk);
      end
    end
    if (pe_in_valid) begin
      rd_t r;
      if (pq.size() == 0) chk("extra PE input", 1, 0);
      else begin
        r = pq.pop_front();
        chk("pe_first", int'(pe_first), r.first);
        chk("pe_last", int'(pe_last), r.last);
        chk("pe_relu", int'(pe_relu), r.relu);
        chk("rt_src_cache", int'(rt_src_cache), r.src);
        chk("rt_chunk", int'(rt_chunk), r.chk);
      end
    end
    if (pe_valid) begin
      wb_t e;
      if (wq.size() == 0) chk("extra result", 1, 0);
      else begin
        e = wq.pop_front();
        chk("is_encoder", int'(is_encoder), e.enc);
        if (e.enc) chk("out_waddr", int'(out_waddr), e.oaddr);
        else begin
          chk("cache_wbank", int'(cache_wbank), e.bank);
          chk("cache_wgroup", int'(cache_wgroup), e.grp);
        end
      end
    end
    if (done) ndone++;
  end

  initial begin
    int t0;
    n_vox = 4'(NVOX); n_b = 3'(NB);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk("run cycles", cyc - t0, exp_cycles + 1);
    chk("weight_loads", int'(weight_loads), 2*4*N_SAMP);
    repeat (3) @(negedge clk);
    chk("reads left", rq.size(), 0);
    chk("results left", wq.size(), 0);
    chk("done pulses", ndone, 1);
    chk("busy after done", int'(busy), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// controller: batch-level scheduler of the uIVIM-NET accelerator.
//
// The controller walks the work in the batch-level order: for every batch of
// up to BATCH voxels, for each of the 4 sub-networks, for each of the N_SAMP
// samplings, all voxels of the batch are evaluated with that one set of
// pre-masked weights before the next set is selected. A weight set is thus
// loaded once per batch (weight_loads counts the loads: N_SUBNET*N_SAMP per
// batch) instead of once per voxel and sampling.
//
// For one voxel the three layers run one after the other. A layer of n_out
// neurons is split into G = ceil(n_out/N_PE) groups (one neuron per PE); the
// encoder layer has one neuron, computed by PE 0. Each neuron's dot product
// of n_b inputs is fed as C = ceil(n_b/N_MUL) chunks on consecutive cycles.
// In ISSUE the controller sends the G*C reads (input store or cache, weight
// memory) one per cycle; the PE control (valid, first, last, relu) follows
// one cycle later, when the registered memories deliver the data. In DRAIN it
// counts the G result groups coming back (pe_valid); each is written to the
// cache bank of its layer or, for the encoder, to the output store. When all
// G have returned, the next layer, voxel, sampling, sub-network or batch
// starts. Waiting for a layer to drain keeps the cache free of read/write
// hazards; this is the design's own choice, as are the encodings below.
//
// Interface: pulse start with n_vox (voxels in the I/O manager) and n_b
// (b-values per voxel, 1..MAX_NB) stable; done pulses for one cycle at the
// end. busy is high in between; cycles counts the busy cycles.
module controller
  import uivim_pkg::*;
#(
  parameter int unsigned N_PE    = 32,
  parameter int unsigned N_MUL   = 128,
  parameter int unsigned MAX_NB  = 128,
  parameter int unsigned N_SAMP  = 4,
  parameter int unsigned BATCH   = 64,
  parameter int unsigned MAX_VOX = 20000,
  localparam int unsigned MAX_GROUPS = (MAX_NB + N_PE - 1) / N_PE,
  localparam int unsigned MAX_CHUNKS = (MAX_NB + N_MUL - 1) / N_MUL,
  localparam int unsigned N_SETS  = N_SUBNET*N_SAMP,
  localparam int unsigned GA_W = aw(MAX_GROUPS),
  localparam int unsigned CA_W = aw(MAX_CHUNKS),
  localparam int unsigned NB_W = $clog2(MAX_NB + 1),
  localparam int unsigned V_W  = $clog2(MAX_VOX + 1),
  localparam int unsigned IA_W = aw(MAX_VOX*MAX_CHUNKS),
  localparam int unsigned OA_W = aw(MAX_VOX*N_SETS),
  localparam int unsigned WA_W = aw(N_SETS*N_LAYER*MAX_GROUPS*MAX_CHUNKS),
  localparam int unsigned BA_W = aw(N_SETS*N_LAYER*MAX_GROUPS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [V_W-1:0]  n_vox,
  input  logic [NB_W-1:0] n_b,
  output logic            busy,
  output logic            done,
  // reads, issue cycle
  output logic            rd_en,
  output logic [IA_W-1:0] io_raddr,
  output logic            cache_rbank,
  output logic [CA_W-1:0] cache_rchunk,
  output logic [WA_W-1:0] w_raddr,
  output logic [BA_W-1:0] b_raddr,
  // PE and router control, one cycle after the read
  output logic            pe_in_valid,
  output logic            pe_first,
  output logic            pe_last,
  output logic            pe_relu,
  output logic            rt_src_cache,
  output logic [CA_W-1:0] rt_chunk,
  // write-back
  input  logic            pe_valid,
  output logic            is_encoder,
  output logic            cache_wbank,
  output logic [GA_W-1:0] cache_wgroup,
  output logic [OA_W-1:0] out_waddr,
  // statistics
  output logic [31:0]     weight_loads,
  output logic [31:0]     cycles
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN, S_DONE} state_e;
  state_e state;

  logic [V_W-1:0]  vox_base, voff, n_vox_q;
  logic [NB_W-1:0] n_b_q;
  logic [1:0]      subnet;
  logic [$clog2(N_SAMP+1)-1:0] samp;
  logic [1:0]      layer;
  logic [GA_W-1:0] grp;
  logic [CA_W-1:0] chk;
  logic [GA_W:0]   wb_cnt;

  // per-run sizes
  logic [GA_W:0] n_groups;   // groups of the current layer
  logic [CA_W:0] n_chunks;   // chunks per dot product
  logic [V_W-1:0] batch_len;
  logic last_chk, last_grp;

  always_comb begin
    n_chunks  = (CA_W+1)'((int'(n_b_q) + N_MUL - 1) / N_MUL);
    n_groups  = (layer == 2'(LAYER_ENC)) ? (GA_W+1)'(1)
                                         : (GA_W+1)'((int'(n_b_q) + N_PE - 1) / N_PE);
    batch_len = (n_vox_q - vox_base > V_W'(BATCH)) ? V_W'(BATCH) : n_vox_q - vox_base;
    last_chk  = ((CA_W+1)'(chk) == n_chunks - 1);
    last_grp  = ((GA_W+1)'(grp) == n_groups - 1);
  end

  // ---------------- state machine -------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      vox_base <= '0; voff <= '0; n_vox_q <= '0; n_b_q <= '0;
      subnet <= '0; samp <= '0; layer <= '0; grp <= '0; chk <= '0;
      wb_cnt <= '0; weight_loads <= '0; cycles <= '0;
    end else begin
      if (pe_valid) wb_cnt <= wb_cnt + 1'b1;
      if (state != S_IDLE) cycles <= cycles + 1;
      unique case (state)
        S_IDLE: if (start) begin
          n_vox_q <= n_vox;
          n_b_q   <= n_b;
          vox_base <= '0; voff <= '0; subnet <= '0; samp <= '0;
          layer <= '0; grp <= '0; chk <= '0; wb_cnt <= '0;
          cycles <= '0;
          if (n_vox == '0) state <= S_DONE;
          else begin
            state <= S_ISSUE;
            weight_loads <= 32'd1;   // first weight set of the first batch
          end
        end
        S_ISSUE: begin
          if (last_chk) begin
            chk <= '0;
            if (last_grp) begin grp <= '0; state <= S_DRAIN; end
            else          grp <= grp + 1'b1;
          end else chk <= chk + 1'b1;
        end
        S_DRAIN: if (wb_cnt == n_groups) begin
          wb_cnt <= '0;
          state  <= S_ISSUE;
          if (layer != 2'(LAYER_ENC)) layer <= layer + 1'b1;
          else begin
            layer <= '0;
            if (voff != batch_len - 1) voff <= voff + 1'b1;
            else begin
              voff <= '0;
              weight_loads <= weight_loads + 1;
              if (int'(samp) != N_SAMP - 1) samp <= samp + 1'b1;
              else begin
                samp <= '0;
                if (subnet != 2'(N_SUBNET - 1)) subnet <= subnet + 1'b1;
                else begin
                  subnet <= '0;
                  if (vox_base + batch_len >= n_vox_q) begin
                    state <= S_DONE;
                    weight_loads <= weight_loads;   // no set follows the last one
                  end else vox_base <= vox_base + batch_len;
                end
              end
            end
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  // ---------------- read addresses (issue cycle) ----------------------------
  logic [V_W-1:0] voxel;
  int unsigned    set_l;
  always_comb begin
    voxel        = vox_base + voff;
    set_l        = (int'(subnet)*N_SAMP + int'(samp))*N_LAYER + int'(layer);
    rd_en        = (state == S_ISSUE);
    io_raddr     = IA_W'(int'(voxel)*MAX_CHUNKS + int'(chk));
    cache_rbank  = (layer == 2'(LAYER_ENC));
    cache_rchunk = chk;
    w_raddr      = WA_W'((set_l*MAX_GROUPS + int'(grp))*MAX_CHUNKS + int'(chk));
    b_raddr      = BA_W'(set_l*MAX_GROUPS + int'(grp));
  end

  // ---------------- PE / router control, one cycle later --------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pe_in_valid <= 1'b0; pe_first <= 1'b0; pe_last <= 1'b0; pe_relu <= 1'b0;
      rt_src_cache <= 1'b0; rt_chunk <= '0;
    end else begin
      pe_in_valid  <= (state == S_ISSUE);
      pe_first     <= (state == S_ISSUE) && (chk == '0);
      pe_last      <= (state == S_ISSUE) && last_chk;
      pe_relu      <= (layer != 2'(LAYER_ENC));
      rt_src_cache <= (layer != 2'd0);
      rt_chunk     <= chk;
    end
  end

  // ---------------- write-back ----------------------------------------------
  always_comb begin
    is_encoder   = (layer == 2'(LAYER_ENC));
    cache_wbank  = layer[0];
    cache_wgroup = GA_W'(wb_cnt);
    out_waddr    = OA_W'((int'(voxel)*N_SUBNET + int'(subnet))*N_SAMP + int'(samp));
  end

  // No result may come back for a group that was never issued.
  a_wb: assert property (@(posedge clk) disable iff (!rst_n)
                         pe_valid |-> (state == S_ISSUE || state == S_DRAIN))
    else $error("controller: result outside a layer");

endmodule

// imagehd_top -- the ImageHD accelerator: CNN feature extractor followed by the
// HDC continual-learning engines.
//
// Blocks: the 3x3 stem convolution (conv3x3_stem, first layer) and the
// inverted residual block (irb: expansion PCU, DCU, projection PCU,
// input buffer, residual adder) is the CNN engine; a feature adapter turns its
// pixel-group output into the one-feature-per-beat stream of the
// hyperdimensional encoding unit (heu); the learning unit (hlu) searches,
// admits and updates clusters in the prototype memory (proto_mem); the merge
// unit (cmu) consolidates the clusters when the merge schedule fires.
//
// Control (the streaming loop of the paper's Algorithm 1):
//   * every encoded sample is classified by the HLU (steps S1-S4); the cluster
//     count n_clusters is kept here: +1 when the HLU creates a cluster, set to
//     the merge target when the CMU finishes;
//   * sample counter t counts processed samples. After a sample, if t >= T0,
//     t mod T_merge = 0 and n_clusters > C_max (step S5), the CMU is started with
//     target C_max; while it runs the prototype memory ports are switched to it
//     and no encoded HV chunk is passed to the HLU (the encoder keeps encoding
//     into its output register and then waits).
// CNN engine select: cfg_stem = 1 routes cnn_in through the stem convolution
// (3 input channels; cfg_out_ch, cfg_w, cfg_h, cfg_stride2 and, as its shift,
// cfg_shift_e apply; ReLU6 always on), cfg_stem = 0 through the IRB. Stem
// weights: ws_w_* (output channel, tap 9*ic + 3*dy + dx), ws_b_* (bias).
// Feature source: with cfg_cnn_to_heu = 1 the CNN output goes to the encoder
// (the final 1x1 convolution output streamed into the HEU, as the paper
// describes) and the cnn_out stream stays idle; otherwise the IRB output
// leaves through cnn_out (intermediate layers, whose feature maps are kept
// outside this block) and the encoder takes features from the feat_* port.
// The adapter sends, for each IRB beat, the values of the valid lanes in lane
// order; for a 1 x 1 final feature map (32 x 32 input after MobileNetV2's
// down-sampling by 32) that is channel 0 .. F-1 of the one pixel.
//
// The two assertions at the end use the reset as their disable condition, so
// lint tools see rst_n used both asynchronously (flops) and synchronously
// (assertion sampling); this is intended.
// Interfaces: plain valid/ready streams (cnn_in, cnn_out, feat), write ports for
// all weight and table memories, configuration inputs (hold them stable while
// the block works) and a result pulse per sample.
//
// From the paper: the block set and their connection (system figure and
// compute-flow figure), the streaming CNN -> HEU -> HLU flow, the merge
// condition of Algorithm 1, the shared cluster memory. This design's own
// choices: the feature adapter, the port multiplexing by mode, holding back the
// HLU during a merge, the counters' widths and the configuration ports.
module imagehd_top
  import imagehd_pkg::*;
#(
  parameter int unsigned D          = HV_D,
  parameter int unsigned F          = N_FEAT,
  parameter int unsigned L          = N_LEVELS,
  parameter int unsigned KMAX       = K_MAX,
  parameter int unsigned TOPM       = 8,
  parameter int unsigned MAX_IN_CH  = 960,
  parameter int unsigned MAX_OUT_CH = 1280,
  parameter int unsigned W_DEPTH    = 102400,
  parameter int unsigned MAX_W      = TILE_W,
  parameter int unsigned MAX_H      = TILE_H,
  parameter int unsigned RES_DEPTH  = 3 * (TILE_W / P_PIX) * 160,
  localparam int unsigned P         = P_PIX,
  localparam int unsigned M         = M_OCH,
  localparam int unsigned N         = N_DPE,
  localparam int unsigned CB        = CHUNK_BITS,
  localparam int unsigned NCHUNK    = D / CB,
  localparam int unsigned NG        = KMAX / PK,
  localparam int unsigned CKW       = (NCHUNK > 1) ? $clog2(NCHUNK) : 1,
  localparam int unsigned GW        = (NG > 1) ? $clog2(NG) : 1,
  localparam int unsigned KW        = $clog2(KMAX),
  localparam int unsigned DW        = $clog2(D + 1),
  localparam int unsigned LW        = $clog2(L),
  localparam int unsigned FW        = $clog2(F),
  localparam int unsigned CHW       = $clog2(MAX_OUT_CH + 1),
  localparam int unsigned WAW       = $clog2(W_DEPTH),
  localparam int unsigned BAW       = $clog2(MAX_OUT_CH / M_OCH),
  localparam int unsigned DKW       = $clog2(MAX_IN_CH / N_DPE + 1),
  localparam int unsigned XW        = $clog2(MAX_W + 2),
  localparam int unsigned YW        = $clog2(MAX_H + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // ---- CNN layer configuration ----
  input  logic [CHW-1:0]       cfg_in_ch,
  input  logic [CHW-1:0]       cfg_exp_ch,
  input  logic [CHW-1:0]       cfg_out_ch,
  input  logic [XW-1:0]        cfg_w,
  input  logic [YW-1:0]        cfg_h,
  input  logic                 cfg_stride2,
  input  logic                 cfg_skip_expand,
  input  logic                 cfg_skip_dw,
  input  logic [4:0]           cfg_shift_e,
  input  logic [4:0]           cfg_shift_d,
  input  logic [4:0]           cfg_shift_p,
  input  logic signed [7:0]    cfg_relu6,
  input  logic                 cfg_cnn_to_heu,
  input  logic                 cfg_stem,
  // ---- CNN weight buffers ----
  input  logic                 we_w_we,
  input  logic [WAW-1:0]       we_w_addr,
  input  logic [M-1:0][7:0]    we_w_data,
  input  logic                 we_b_we,
  input  logic [BAW-1:0]       we_b_addr,
  input  logic [M-1:0][31:0]   we_b_data,
  input  logic                 wd_we,
  input  logic [$clog2(N)-1:0] wd_bank,
  input  logic [DKW-1:0]       wd_addr,
  input  logic [8:0][7:0]      wd_taps,
  input  logic [31:0]          wd_bias,
  input  logic                 wp_w_we,
  input  logic [WAW-1:0]       wp_w_addr,
  input  logic [M-1:0][7:0]    wp_w_data,
  input  logic                 wp_b_we,
  input  logic [BAW-1:0]       wp_b_addr,
  input  logic [M-1:0][31:0]   wp_b_data,
  input  logic                 ws_w_we,
  input  logic [4:0]           ws_w_oc,
  input  logic [4:0]           ws_w_tap,
  input  logic [7:0]           ws_w_data,
  input  logic                 ws_b_we,
  input  logic [4:0]           ws_b_oc,
  input  logic [31:0]          ws_b_data,
  // ---- CNN activation streams ----
  input  logic                 cnn_in_valid,
  output logic                 cnn_in_ready,
  input  logic [P-1:0][7:0]    cnn_in_data,
  input  logic [P-1:0]         cnn_in_mask,
  output logic                 cnn_out_valid,
  input  logic                 cnn_out_ready,
  output logic [P-1:0][7:0]    cnn_out_data,
  output logic [P-1:0]         cnn_out_mask,
  output logic                 cnn_res_active,
  // ---- direct feature stream (used when cfg_cnn_to_heu = 0) ----
  input  logic                 feat_valid,
  output logic                 feat_ready,
  input  logic [7:0]           feat_data,
  // ---- encoder tables ----
  input  logic                 lt_we,
  input  logic [LW-1:0]        lt_level,
  input  logic [CKW-1:0]       lt_chunk,
  input  logic [CB-1:0]        lt_data,
  input  logic                 pt_we,
  input  logic [FW-1:0]        pt_feat,
  input  logic [CKW-1:0]       pt_chunk,
  input  logic [CB-1:0]        pt_data,
  // ---- learning configuration ----
  input  logic [7:0]           cfg_beta,
  input  logic [3:0]           cfg_alpha_shift,
  input  logic [23:0]          cfg_mu_init,
  input  logic [23:0]          cfg_sigma_init,
  input  logic [15:0]          cfg_t0,
  input  logic [15:0]          cfg_tmerge,
  input  logic [KW:0]          cfg_cmax,
  input  logic [3:0]           cfg_iters,
  // ---- results and status ----
  output logic                 res_valid,
  output logic [KW-1:0]        res_cluster,
  output logic [DW-1:0]        res_sim,
  output logic                 res_novel,
  output logic                 res_overflow,
  output logic [KW:0]          n_clusters,
  output logic [31:0]          sample_count,
  output logic                 merging,
  output logic                 merge_done,
  output logic                 busy
);

  // ======================= CNN engine =======================
  // cfg_stem = 1: the stream goes through the 3x3 stem convolution (first
  // layer); otherwise through the inverted residual block.
  logic irb_out_valid, irb_out_ready;
  logic [P-1:0][7:0] irb_out_data;
  logic [P-1:0] irb_out_mask;
  logic irb_in_ready, stem_in_ready, stem_out_valid;
  logic [P-1:0][7:0] stem_out_data;
  logic [P-1:0] stem_out_mask;
  logic eng_out_valid, eng_out_ready;
  logic [P-1:0][7:0] eng_out_data;
  logic [P-1:0] eng_out_mask;

  conv3x3_stem #(.P(P), .CIN(3), .COUT_MAX(32), .MAX_W(MAX_W), .MAX_H(MAX_H)) u_stem (
    .clk, .rst_n,
    .cfg_out_ch(6'(cfg_out_ch)), .cfg_w, .cfg_h, .cfg_stride2, .cfg_shift(cfg_shift_e),
    .cfg_relu(1'b1), .cfg_relu_max(cfg_relu6),
    .w_we(ws_w_we), .w_oc(ws_w_oc), .w_tap(ws_w_tap), .w_data(ws_w_data),
    .b_we(ws_b_we), .b_oc(ws_b_oc), .b_data(ws_b_data),
    .in_valid(cnn_in_valid && cfg_stem), .in_ready(stem_in_ready), .in_data(cnn_in_data),
    .in_mask(cnn_in_mask),
    .out_valid(stem_out_valid), .out_ready(eng_out_ready && cfg_stem), .out_data(stem_out_data),
    .out_mask(stem_out_mask));

  assign cnn_in_ready  = cfg_stem ? stem_in_ready : irb_in_ready;
  assign eng_out_valid = cfg_stem ? stem_out_valid : irb_out_valid;
  assign eng_out_data  = cfg_stem ? stem_out_data  : irb_out_data;
  assign eng_out_mask  = cfg_stem ? stem_out_mask  : irb_out_mask;
  assign irb_out_ready = eng_out_ready && !cfg_stem;

  irb #(.P(P), .M(M), .N(N), .MAX_IN_CH(MAX_IN_CH), .MAX_OUT_CH(MAX_OUT_CH),
        .W_DEPTH(W_DEPTH), .MAX_W(MAX_W), .MAX_H(MAX_H), .RES_DEPTH(RES_DEPTH)) u_irb (
    .clk, .rst_n,
    .cfg_in_ch, .cfg_exp_ch, .cfg_out_ch, .cfg_w, .cfg_h, .cfg_stride2,
    .cfg_skip_expand, .cfg_skip_dw, .cfg_shift_e, .cfg_shift_d, .cfg_shift_p, .cfg_relu6,
    .we_w_we, .we_w_addr, .we_w_data, .we_b_we, .we_b_addr, .we_b_data,
    .wd_we, .wd_bank, .wd_addr, .wd_taps, .wd_bias,
    .wp_w_we, .wp_w_addr, .wp_w_data, .wp_b_we, .wp_b_addr, .wp_b_data,
    .in_valid(cnn_in_valid && !cfg_stem), .in_ready(irb_in_ready), .in_data(cnn_in_data), .in_mask(cnn_in_mask),
    .out_valid(irb_out_valid), .out_ready(irb_out_ready), .out_data(irb_out_data),
    .out_mask(irb_out_mask), .res_active(cnn_res_active));

  // ======================= feature adapter =======================
  // Holds one IRB beat and sends its valid lanes one per cycle.
  logic              fa_full;
  logic [P-1:0][7:0] fa_data;
  logic [P-1:0]      fa_left;          // lanes still to send
  logic              fa_valid;
  logic [7:0]        fa_byte;
  logic              heu_f_valid, heu_f_ready;
  logic [7:0]        heu_f_data;
  logic [$clog2(P)-1:0] fa_lane;

  always_comb begin
    fa_lane = '0;
    for (int p = P - 1; p >= 0; p--) if (fa_left[p]) fa_lane = ($clog2(P))'(p);
  end
  assign fa_valid = fa_full;
  assign fa_byte  = fa_data[fa_lane];

  assign cnn_out_valid = eng_out_valid && !cfg_cnn_to_heu;
  assign cnn_out_data  = eng_out_data;
  assign cnn_out_mask  = eng_out_mask;
  assign eng_out_ready = cfg_cnn_to_heu ? !fa_full : cnn_out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fa_full <= 1'b0; fa_left <= '0; fa_data <= '0;
    end else begin
      if (cfg_cnn_to_heu && eng_out_valid && !fa_full) begin
        fa_data <= eng_out_data;
        fa_left <= eng_out_mask;
        fa_full <= |eng_out_mask;
      end else if (fa_full && heu_f_ready) begin
        fa_left[fa_lane] <= 1'b0;
        if ((fa_left & ~(P'(1) << fa_lane)) == '0) fa_full <= 1'b0;
      end
    end
  end

  assign heu_f_valid = cfg_cnn_to_heu ? fa_valid : feat_valid;
  assign heu_f_data  = cfg_cnn_to_heu ? fa_byte  : feat_data;
  assign feat_ready  = !cfg_cnn_to_heu && heu_f_ready;

  // ======================= encoder =======================
  logic hv_valid, hv_ready, hv_last, heu_busy;
  logic [CB-1:0] hv_chunk;
  logic [CKW-1:0] hv_idx;

  heu #(.D(D), .F(F), .L(L), .PCL(PC)) u_heu (
    .clk, .rst_n,
    .lt_we, .lt_level, .lt_chunk, .lt_data, .pt_we, .pt_feat, .pt_chunk, .pt_data,
    .f_valid(heu_f_valid), .f_ready(heu_f_ready), .f_data(heu_f_data),
    .hv_valid, .hv_ready, .hv_chunk, .hv_idx, .hv_last, .busy(heu_busy));

  // ======================= merge scheduler =======================
  logic [15:0] tmod;          // t mod T_merge
  logic [15:0] tmod_next;
  logic        merge_now;     // the sample just finished triggers a merge
  logic        hlu_create, cmu_done, cmu_busy, hlu_busy, cmu_start;
  logic        hold;          // HLU must not take a new sample

  assign tmod_next = (tmod + 16'd1 >= cfg_tmerge) ? 16'd0 : tmod + 16'd1;
  assign merge_now = res_valid && (sample_count + 32'd1 >= 32'(cfg_t0)) && (tmod_next == 16'd0)
                     && (n_clusters > cfg_cmax);
  assign hold      = merging || merge_now;
  assign cmu_start = merge_now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_clusters <= '0; sample_count <= '0; tmod <= '0; merging <= 1'b0;
    end else begin
      if (hlu_create) n_clusters <= n_clusters + 1'b1;
      if (res_valid) begin
        sample_count <= sample_count + 32'd1;
        tmod         <= tmod_next;
      end
      if (merge_now) merging <= 1'b1;
      if (cmu_done) begin
        merging    <= 1'b0;
        n_clusters <= cfg_cmax;
      end
    end
  end
  assign merge_done = cmu_done;

  // ======================= learning unit =======================
  logic hlu_hv_ready;
  logic           h_rd_en, h_wr_en, h_st_we;
  logic [GW-1:0]  h_rd_grp;  logic [CKW-1:0] h_rd_chunk, h_wr_chunk;
  logic [KW-1:0]  h_wr_cluster, h_st_rd_cluster, h_st_wr_cluster;
  logic [CB-1:0]  h_wr_data; logic [23:0] h_st_wr_mu, h_st_wr_sigma;
  logic           c_rd_en, c_wr_en, c_st_we;
  logic [GW-1:0]  c_rd_grp;  logic [CKW-1:0] c_rd_chunk, c_wr_chunk;
  logic [KW-1:0]  c_wr_cluster, c_st_rd_cluster, c_st_wr_cluster;
  logic [CB-1:0]  c_wr_data; logic [23:0] c_st_wr_mu, c_st_wr_sigma;
  logic [PK-1:0][CB-1:0] pm_rd_data;
  logic [23:0]    st_rd_mu, st_rd_sigma;

  assign hv_ready = hlu_hv_ready && !hold;

  hlu #(.D(D), .KMAX(KMAX), .PKL(PK)) u_hlu (
    .clk, .rst_n, .cfg_beta, .cfg_alpha_shift, .cfg_mu_init, .cfg_sigma_init,
    .hv_valid(hv_valid && !hold), .hv_ready(hlu_hv_ready), .hv_chunk, .hv_idx, .hv_last,
    .n_clusters, .create(hlu_create),
    .pm_rd_en(h_rd_en), .pm_rd_grp(h_rd_grp), .pm_rd_chunk(h_rd_chunk), .pm_rd_data,
    .pm_wr_en(h_wr_en), .pm_wr_cluster(h_wr_cluster), .pm_wr_chunk(h_wr_chunk), .pm_wr_data(h_wr_data),
    .st_rd_cluster(h_st_rd_cluster), .st_rd_mu, .st_rd_sigma,
    .st_we(h_st_we), .st_wr_cluster(h_st_wr_cluster), .st_wr_mu(h_st_wr_mu), .st_wr_sigma(h_st_wr_sigma),
    .res_valid, .res_cluster, .res_sim, .res_novel, .res_overflow, .busy(hlu_busy));

  // ======================= merge unit =======================
  cmu #(.D(D), .KMAX(KMAX), .PKL(PK), .TOPM(TOPM)) u_cmu (
    .clk, .rst_n, .start(cmu_start), .cfg_target(cfg_cmax), .cfg_iters, .n_clusters,
    .done(cmu_done), .busy(cmu_busy),
    .pm_rd_en(c_rd_en), .pm_rd_grp(c_rd_grp), .pm_rd_chunk(c_rd_chunk), .pm_rd_data,
    .pm_wr_en(c_wr_en), .pm_wr_cluster(c_wr_cluster), .pm_wr_chunk(c_wr_chunk), .pm_wr_data(c_wr_data),
    .st_rd_cluster(c_st_rd_cluster), .st_rd_mu, .st_rd_sigma,
    .st_we(c_st_we), .st_wr_cluster(c_st_wr_cluster), .st_wr_mu(c_st_wr_mu), .st_wr_sigma(c_st_wr_sigma));

  // ======================= prototype memory =======================
  proto_mem #(.D(D), .KMAX(KMAX), .PKL(PK)) u_pm (
    .clk,
    .rd_en        (merging ? c_rd_en         : h_rd_en),
    .rd_grp       (merging ? c_rd_grp        : h_rd_grp),
    .rd_chunk     (merging ? c_rd_chunk      : h_rd_chunk),
    .rd_data      (pm_rd_data),
    .wr_en        (merging ? c_wr_en         : h_wr_en),
    .wr_cluster   (merging ? c_wr_cluster    : h_wr_cluster),
    .wr_chunk     (merging ? c_wr_chunk      : h_wr_chunk),
    .wr_data      (merging ? c_wr_data       : h_wr_data),
    .st_rd_cluster(merging ? c_st_rd_cluster : h_st_rd_cluster),
    .st_rd_mu, .st_rd_sigma,
    .st_we        (merging ? c_st_we         : h_st_we),
    .st_wr_cluster(merging ? c_st_wr_cluster : h_st_wr_cluster),
    .st_wr_mu     (merging ? c_st_wr_mu      : h_st_wr_mu),
    .st_wr_sigma  (merging ? c_st_wr_sigma   : h_st_wr_sigma));

  assign busy = heu_busy || hlu_busy || cmu_busy || merging || fa_full;

  // the two engines never drive the cluster memory at the same time
  assert property (@(posedge clk) disable iff (!rst_n) !(merging && (h_wr_en || h_st_we)));
  assert property (@(posedge clk) disable iff (!rst_n) merging || !(c_wr_en || c_st_we));

endmodule

// tb_imagehd_top_full -- the accelerator at its default sizes (D = 8192,
// F = 1280 features, 16 levels, 128 clusters, full CNN buffers) taken through
// one complete learning round:
//   0. the stem convolution runs on a 32 x 32 x 3 image (one CIFAR-sized
//      tile), stride 2, 32 output channels; every output value is compared
//      with a reference convolution;
//   1. the encoder tables are written (16 level HVs, 1280 position HVs);
//   2. the final 1x1 convolution (8 -> 1280 channels, one pixel) runs on the
//      projection PCU and streams into the encoder; the HV stored as cluster 0
//      must equal the reference encoding of the reference features;
//   3. the same features sent again through the feature port must update
//      cluster 0 with similarity D;
//   4. an unrelated feature vector must create cluster 1;
//   5. with C_max = 1 and T0 = T_merge = 3, the third sample fires the merge
//      unit, after which one cluster remains.
module tb_imagehd_top_full;
  import imagehd_pkg::*;
  localparam int D = HV_D, F = N_FEAT, L = N_LEVELS, NCH = D / CHUNK_BITS;
  localparam int P = 2, M = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [10:0] cfg_in_ch = 11'd8, cfg_exp_ch = 11'd8, cfg_out_ch = 11'(F);
  logic [5:0] cfg_w = 6'd1; logic [5:0] cfg_h = 6'd1;
  logic cfg_stride2 = 0, cfg_skip_expand = 1, cfg_skip_dw = 1, cfg_cnn_to_heu = 1, cfg_stem = 0;
  logic ws_w_we = 0, ws_b_we = 0; logic [4:0] ws_w_oc = '0, ws_w_tap = '0, ws_b_oc = '0;
  logic [7:0] ws_w_data = '0; logic [31:0] ws_b_data = '0;
  logic [4:0] cfg_shift_e = 6, cfg_shift_d = 5, cfg_shift_p = 6;
  logic signed [7:0] cfg_relu6 = 8'sd96;
  logic we_w_we = 0, we_b_we = 0, wd_we = 0, wp_w_we = 0, wp_b_we = 0;
  logic [16:0] we_w_addr = '0, wp_w_addr;
  logic [M-1:0][7:0] we_w_data = '0, wp_w_data;
  logic [8:0] we_b_addr = '0, wp_b_addr;
  logic [M-1:0][31:0] we_b_data = '0, wp_b_data;
  logic [1:0] wd_bank = '0; logic [7:0] wd_addr = '0; logic [8:0][7:0] wd_taps = '0; logic [31:0] wd_bias = '0;
  logic cnn_in_valid = 0, cnn_in_ready, cnn_out_valid, cnn_out_ready = 0, cnn_res_active;
  logic [P-1:0][7:0] cnn_in_data, cnn_out_data; logic [P-1:0] cnn_in_mask, cnn_out_mask;
  logic feat_valid = 0, feat_ready; logic [7:0] feat_data;
  logic lt_we = 0, pt_we = 0; logic [3:0] lt_level; logic [10:0] pt_feat;
  logic [4:0] lt_chunk, pt_chunk; logic [CHUNK_BITS-1:0] lt_data, pt_data;
  logic [7:0] cfg_beta = 8'd16; logic [3:0] cfg_alpha_shift = 4'd2;
  logic [23:0] cfg_mu_init = 24'(6000 << 8), cfg_sigma_init = 24'(200 << 8);
  logic [15:0] cfg_t0 = 16'd3, cfg_tmerge = 16'd3; logic [7:0] cfg_cmax = 8'd1; logic [3:0] cfg_iters = 4'd1;
  logic res_valid, res_novel, res_overflow, merging, merge_done, busy;
  logic [6:0] res_cluster; logic [13:0] res_sim; logic [7:0] n_clusters; logic [31:0] sample_count;
  int checks = 0, failures = 0;

  imagehd_top dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [D-1:0] LT [L]; logic [D-1:0] PT [F];
  logic signed [7:0] X [8]; logic signed [7:0] Wp [F][8]; logic signed [31:0] Bp [F];
  logic signed [7:0] z [F];
  logic [D-1:0] href;
  int n_merge = 0;
  always @(posedge clk) if (rst_n && merge_done) n_merge++;

  function automatic logic [D-1:0] encode(input logic signed [7:0] zz [F]);
    logic [D-1:0] h;
    int cnt [D];
    for (int k = 0; k < D; k++) cnt[k] = 0;
    for (int i = 0; i < F; i++) begin
      logic [3:0] lv; lv = 4'({~zz[i][7], zz[i][6:0]} >> 4);
      for (int k = 0; k < D; k++) cnt[k] += int'(PT[i][k] ^ LT[lv][k]);
    end
    for (int k = 0; k < D; k++) h[k] = cnt[k] > F / 2;
    return h;
  endfunction

  task automatic wait_result();
    do @(posedge clk); while (!res_valid);
  endtask

  task automatic send_features(input logic signed [7:0] zz [F]);
    for (int i = 0; i < F; i++) begin
      @(negedge clk); feat_valid = 1; feat_data = zz[i];
      do @(posedge clk); while (!feat_ready);
      @(negedge clk); feat_valid = 0;
    end
  endtask

  // ---- stem convolution on a 32 x 32 x 3 image ----
  logic signed [7:0] IMG [32][32][3]; logic signed [7:0] Ks [32][27]; logic signed [31:0] Bs [32];
  task automatic run_stem();
    int got, bad;
    for (int o = 0; o < 32; o++) begin
      Bs[o] = $signed($urandom_range(0, 4000)) - 2000;
      for (int t = 0; t < 27; t++) begin
        Ks[o][t] = 8'($urandom);
        @(negedge clk); ws_w_we = 1; ws_w_oc = 5'(o); ws_w_tap = 5'(t); ws_w_data = Ks[o][t];
      end
      @(negedge clk); ws_w_we = 0; ws_b_we = 1; ws_b_oc = 5'(o); ws_b_data = Bs[o];
      @(negedge clk); ws_b_we = 0;
    end
    for (int r = 0; r < 32; r++) for (int c = 0; c < 32; c++) for (int i = 0; i < 3; i++) IMG[r][c][i] = 8'($urandom);
    cfg_stem = 1; cfg_cnn_to_heu = 0; cfg_out_ch = 11'd32; cfg_w = 6'd32; cfg_h = 6'd32; cfg_stride2 = 1;
    cnn_out_ready = 1;
    got = 0; bad = 0;
    fork
      for (int r = 0; r < 32; r++) for (int c = 0; c < 32; c += P) for (int i = 0; i < 3; i++) begin
        @(negedge clk); cnn_in_valid = 1; cnn_in_mask = 2'b11;
        for (int p = 0; p < P; p++) cnn_in_data[p] = IMG[r][c+p][i];
        do @(posedge clk); while (!cnn_in_ready);
        @(negedge clk); cnn_in_valid = 0;
      end
      while (got < 16 * 8 * 32) begin
        @(posedge clk);
        if (cnn_out_valid) begin
          int orow, ocol, och;
          orow = got / (8 * 32); ocol = ((got / 32) % 8) * P; och = got % 32;
          for (int p = 0; p < P; p++) begin
            int a; a = Bs[och];
            for (int i = 0; i < 3; i++) for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++) begin
              int y, x; y = 2 * orow + dy - 1; x = 2 * (ocol + p) + dx - 1;
              if (y >= 0 && y < 32 && x >= 0 && x < 32) a += int'(IMG[y][x][i]) * int'(Ks[och][9*i+3*dy+dx]);
            end
            if ($signed(cnn_out_data[p]) !== requant(a, cfg_shift_e, 1'b1, cfg_relu6) || !cnn_out_mask[p]) bad++;
          end
          got++;
        end
      end
    join
    checks++;
    if (bad != 0) begin failures++; $display("stem: %0d of %0d output values wrong", bad, 2 * got); end
    $display("stem: %0d output values checked, finished at cycle %0d", 2 * got, $time / 10);
    @(negedge clk);
    cnn_out_ready = 0; cfg_stem = 0; cfg_cnn_to_heu = 1; cfg_out_ch = 11'(F); cfg_w = 6'd1; cfg_h = 6'd1; cfg_stride2 = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run_stem();
    // 1. encoder tables
    for (int l = 0; l < L; l++) for (int w = 0; w < D / 32; w++) LT[l][w*32 +: 32] = $urandom;
    for (int i = 0; i < F; i++) for (int w = 0; w < D / 32; w++) PT[i][w*32 +: 32] = $urandom;
    for (int l = 0; l < L; l++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); lt_we = 1; lt_level = 4'(l); lt_chunk = 5'(c); lt_data = LT[l][c*CHUNK_BITS +: CHUNK_BITS];
    end
    @(negedge clk); lt_we = 0;
    for (int i = 0; i < F; i++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); pt_we = 1; pt_feat = 11'(i); pt_chunk = 5'(c); pt_data = PT[i][c*CHUNK_BITS +: CHUNK_BITS];
    end
    @(negedge clk); pt_we = 0;

    // 2. final 1x1 convolution into the encoder
    for (int i = 0; i < 8; i++) X[i] = 8'($urandom);
    for (int o = 0; o < F; o++) begin
      Bp[o] = $signed($urandom_range(0, 4000)) - 2000;
      for (int i = 0; i < 8; i++) Wp[o][i] = 8'($urandom);
    end
    for (int og = 0; og < F / M; og++) begin
      for (int ic = 0; ic < 8; ic++) begin
        @(negedge clk); wp_w_we = 1; wp_w_addr = 17'(og * 8 + ic);
        for (int m = 0; m < M; m++) wp_w_data[m] = Wp[og*M+m][ic];
      end
      @(negedge clk); wp_w_we = 0; wp_b_we = 1; wp_b_addr = 9'(og);
      for (int m = 0; m < M; m++) wp_b_data[m] = Bp[og*M+m];
      @(negedge clk); wp_b_we = 0;
    end
    for (int o = 0; o < F; o++) begin
      longint a; a = longint'(Bp[o]);
      for (int i = 0; i < 8; i++) a += longint'(X[i]) * longint'(Wp[o][i]);
      z[o] = requant(32'(a), cfg_shift_p, 1'b0, cfg_relu6);
    end
    href = encode(z);
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); cnn_in_valid = 1; cnn_in_mask = 2'b01; cnn_in_data[0] = X[i]; cnn_in_data[1] = 8'd0;
      do @(posedge clk); while (!cnn_in_ready);
      @(negedge clk); cnn_in_valid = 0;
    end
    wait_result();
    checks++;
    if (!res_novel || res_cluster !== 0) begin failures++; $display("sample 1 not a new cluster 0"); end
    @(negedge clk);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (dut.u_pm.bank[0][c] !== href[c*CHUNK_BITS +: CHUNK_BITS]) begin failures++; $display("HV chunk %0d wrong", c); end
    end
    cfg_cnn_to_heu = 0;

    // 3. same features through the feature port
    send_features(z);
    wait_result();
    checks++;
    if (res_novel || res_cluster !== 0 || 32'(res_sim) != D) begin
      failures++; $display("sample 2: novel %0d cluster %0d sim %0d", res_novel, res_cluster, res_sim);
    end

    // 4. unrelated features
    for (int i = 0; i < F; i++) z[i] = 8'($urandom);
    send_features(z);
    wait_result();
    checks++;
    if (!res_novel || res_cluster !== 1) begin failures++; $display("sample 3 not a new cluster 1"); end

    // 5. merge fired after sample 3
    @(negedge clk);
    checks++;
    if (!merging) begin failures++; $display("merge not started"); end
    wait (!merging);
    @(negedge clk);
    checks++;
    if (n_merge != 1 || n_clusters !== 8'd1) begin failures++; $display("after merge: %0d merges, %0d clusters", n_merge, n_clusters); end
    $display("full-size run: %0d samples, %0d merge, finished at cycle %0d", sample_count, n_merge, $time / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

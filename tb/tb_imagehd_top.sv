// tb_imagehd_top -- end-to-end testbench of the accelerator at reduced sizes
// (D = 512, F = 32, 32 clusters, small CNN buffers).
//   S. First layer on the 3x3 stem convolution: 3 -> 8 channels, stride 2,
//      streamed out of cnn_out and compared with a reference convolution.
//   A. CNN layer with expansion, depthwise stride 1 and residual add, streamed
//      out of cnn_out and compared value by value with a reference model.
//   B. CNN layer without expansion, depthwise stride 2 (no residual), checked
//      the same way.
//   C. "Final 1x1 convolution" routed into the encoder: one pixel, 8 -> 32
//      channels; the first sample must create cluster 0 holding exactly the
//      HV the reference encoder computes from the reference features.
//   D. Feature vectors drawn around 5 prototypes enter through the feature port;
//      the learning unit creates and updates clusters and the merge schedule
//      (T0 = 8, T_merge = 8, C_max = 4) fires the merge unit.
//   E. Merging off (large T_merge), random feature vectors until the cluster
//      memory is full and novel samples overflow.
// Throughout, results are checked for consistency (label below the cluster
// count, count = C_max after every merge, count never above capacity) and the
// following mechanisms are counted; one that never happens counts a failure:
// stem convolution, residual add, expansion bypass, stride 2, depthwise bypass, CNN->encoder
// routing, encoder stalled by the learning unit, cluster created, cluster
// updated, overflow, merge, encoder held during a merge.
module tb_imagehd_top;
  import imagehd_pkg::*;
  localparam int D = 512, F = 32, L = 16, KMAX = 32, TOPM = 4;
  localparam int MAXI = 16, MAXO = 32, WD = 256, MAXW = 8, MAXH = 8;
  localparam int RD = 3 * (MAXW / 2) * MAXI;
  localparam int P = 2, M = 4, N = 4, NCH = D / CHUNK_BITS;
  localparam logic signed [7:0] R6 = 8'sd96;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [$clog2(MAXO+1)-1:0] cfg_in_ch, cfg_exp_ch, cfg_out_ch;
  logic [$clog2(MAXW+2)-1:0] cfg_w; logic [$clog2(MAXH+1)-1:0] cfg_h;
  logic cfg_stride2 = 0, cfg_skip_expand = 0, cfg_skip_dw = 0, cfg_cnn_to_heu = 0, cfg_stem = 0;
  logic ws_w_we = 0, ws_b_we = 0; logic [4:0] ws_w_oc, ws_w_tap, ws_b_oc; logic [7:0] ws_w_data; logic [31:0] ws_b_data;
  logic [4:0] cfg_shift_e = 6, cfg_shift_d = 5, cfg_shift_p = 6;
  logic signed [7:0] cfg_relu6 = R6;
  logic we_w_we = 0, we_b_we = 0, wd_we = 0, wp_w_we = 0, wp_b_we = 0;
  logic [$clog2(WD)-1:0] we_w_addr, wp_w_addr;
  logic [M-1:0][7:0] we_w_data, wp_w_data;
  logic [$clog2(MAXO/M)-1:0] we_b_addr, wp_b_addr;
  logic [M-1:0][31:0] we_b_data, wp_b_data;
  logic [1:0] wd_bank; logic [$clog2(MAXI/N+1)-1:0] wd_addr; logic [8:0][7:0] wd_taps; logic [31:0] wd_bias;
  logic cnn_in_valid = 0, cnn_in_ready, cnn_out_valid, cnn_out_ready = 0, cnn_res_active;
  logic [P-1:0][7:0] cnn_in_data, cnn_out_data; logic [P-1:0] cnn_in_mask, cnn_out_mask;
  logic feat_valid = 0, feat_ready; logic [7:0] feat_data;
  logic lt_we = 0, pt_we = 0; logic [3:0] lt_level; logic [$clog2(F)-1:0] pt_feat;
  logic [0:0] lt_chunk, pt_chunk; logic [CHUNK_BITS-1:0] lt_data, pt_data;
  logic [7:0] cfg_beta = 8'd16; logic [3:0] cfg_alpha_shift = 4'd2;
  logic [23:0] cfg_mu_init = 24'(400 << 8), cfg_sigma_init = 24'(20 << 8);
  logic [15:0] cfg_t0 = 16'd8, cfg_tmerge = 16'd8; logic [5:0] cfg_cmax = 6'd4; logic [3:0] cfg_iters = 4'd2;
  logic res_valid, res_novel, res_overflow, merging, merge_done, busy;
  logic [4:0] res_cluster; logic [9:0] res_sim; logic [5:0] n_clusters; logic [31:0] sample_count;
  int checks = 0, failures = 0;

  imagehd_top #(.D(D), .F(F), .L(L), .KMAX(KMAX), .TOPM(TOPM), .MAX_IN_CH(MAXI), .MAX_OUT_CH(MAXO),
                .W_DEPTH(WD), .MAX_W(MAXW), .MAX_H(MAXH), .RES_DEPTH(RD)) dut (.*);

  // ---------------- mechanism counters ----------------
  int n_res = 0, n_skipe = 0, n_s2 = 0, n_skipd = 0, n_cnnheu = 0, n_stall = 0;
  int n_stem = 0;
  always @(posedge clk) if (rst_n && cfg_stem && cnn_out_valid && cnn_out_ready) n_stem++;
  int n_new = 0, n_upd = 0, n_ovf = 0, n_merge = 0, n_hold = 0, n_results = 0;
  always @(posedge clk) if (rst_n) begin
    if (cnn_out_valid && cnn_out_ready && cnn_res_active) n_res++;
    if (dut.u_irb.out_valid && dut.u_irb.out_ready && cfg_skip_expand && !cfg_skip_dw) n_skipe++;
    if (dut.u_irb.out_valid && dut.u_irb.out_ready && cfg_stride2) n_s2++;
    if (dut.u_irb.out_valid && dut.u_irb.out_ready && cfg_skip_dw) n_skipd++;
    if (dut.heu_f_valid && dut.heu_f_ready && cfg_cnn_to_heu) n_cnnheu++;
    if (dut.hv_valid && !dut.hv_ready && !merging) n_stall++;
    if (dut.hv_valid && merging) n_hold++;
    if (merge_done) begin
      n_merge++;
      @(negedge clk); checks++;
      if (n_clusters !== cfg_cmax) begin failures++; $display("cluster count %0d after merge", n_clusters); end
    end
  end
  always @(posedge clk) if (rst_n && res_valid) begin
    n_results++;
    if (res_overflow) n_ovf++; else if (res_novel) n_new++; else n_upd++;
    checks++;
    if (res_cluster >= n_clusters && !(n_clusters == 0)) begin
      failures++; $display("label %0d outside %0d clusters", res_cluster, n_clusters);
    end
    checks++;
    if (32'(n_clusters) > KMAX) begin failures++; $display("cluster count above capacity"); end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- CNN reference (same arithmetic as the units) ----------------
  int IC, EC, OC, W, H, S;
  logic signed [7:0]  X  [MAXH][MAXW][MAXO];
  logic signed [7:0]  E  [MAXH][MAXW][MAXO];
  logic signed [7:0]  Dd [MAXH][MAXW][MAXO];
  logic signed [7:0]  Y  [MAXH][MAXW][MAXO];
  logic signed [7:0]  We [MAXO][MAXO]; logic signed [31:0] Be [MAXO];
  logic signed [7:0]  Wp [MAXO][MAXO]; logic signed [31:0] Bp [MAXO];
  logic signed [7:0]  K  [MAXO][9];    logic signed [31:0] Bd [MAXO];

  task automatic load_weights(input bit exp_en, input bit dw_en);
    int dc;
    dc = exp_en ? EC : IC;
    for (int o = 0; o < MAXO; o++) begin
      Be[o] = $signed($urandom_range(0, 4000)) - 2000;
      Bp[o] = $signed($urandom_range(0, 4000)) - 2000;
      Bd[o] = $signed($urandom_range(0, 2000)) - 1000;
      for (int i = 0; i < MAXO; i++) begin We[o][i] = 8'($urandom); Wp[o][i] = 8'($urandom); end
      for (int t = 0; t < 9; t++) K[o][t] = 8'($urandom);
    end
    if (exp_en)
      for (int og = 0; og < EC / M; og++) begin
        for (int ic = 0; ic < IC; ic++) begin
          @(negedge clk); we_w_we = 1; we_w_addr = 8'(og * IC + ic);
          for (int m = 0; m < M; m++) we_w_data[m] = We[og*M+m][ic];
        end
        @(negedge clk); we_w_we = 0; we_b_we = 1; we_b_addr = 3'(og);
        for (int m = 0; m < M; m++) we_b_data[m] = Be[og*M+m];
        @(negedge clk); we_b_we = 0;
      end
    if (dw_en) begin
      for (int ch = 0; ch < dc; ch++) begin
        @(negedge clk); wd_we = 1; wd_bank = 2'(ch / (dc / N)); wd_addr = 3'(ch % (dc / N));
        wd_bias = Bd[ch]; for (int t = 0; t < 9; t++) wd_taps[t] = K[ch][t];
      end
      @(negedge clk); wd_we = 0;
    end
    for (int og = 0; og < OC / M; og++) begin
      for (int ic = 0; ic < dc; ic++) begin
        @(negedge clk); wp_w_we = 1; wp_w_addr = 8'(og * dc + ic);
        for (int m = 0; m < M; m++) wp_w_data[m] = Wp[og*M+m][ic];
      end
      @(negedge clk); wp_w_we = 0; wp_b_we = 1; wp_b_addr = 3'(og);
      for (int m = 0; m < M; m++) wp_b_data[m] = Bp[og*M+m];
      @(negedge clk); wp_b_we = 0;
    end
  endtask

  task automatic reference(input bit exp_en, input bit dw_en, input bit res);
    int dc, ho, wo;
    dc = exp_en ? EC : IC;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) for (int e = 0; e < dc; e++) begin
      longint a;
      if (exp_en) begin
        a = longint'(Be[e]);
        for (int i = 0; i < IC; i++) a += longint'(X[r][c][i]) * longint'(We[e][i]);
        E[r][c][e] = requant(32'(a), cfg_shift_e, 1'b1, R6);
      end else E[r][c][e] = X[r][c][e];
    end
    ho = dw_en ? (H + S - 1) / S : H; wo = dw_en ? (W + S - 1) / S : W;
    for (int r = 0; r < ho; r++) for (int c = 0; c < wo; c++) for (int e = 0; e < dc; e++) begin
      longint a;
      if (dw_en) begin
        a = longint'(Bd[e]);
        for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++)
          if (r*S+dy >= 0 && r*S+dy < H && c*S+dx >= 0 && c*S+dx < W)
            a += longint'(E[r*S+dy][c*S+dx][e]) * longint'(K[e][3*(dy+1)+(dx+1)]);
        Dd[r][c][e] = requant(32'(a), cfg_shift_d, 1'b1, R6);
      end else Dd[r][c][e] = E[r][c][e];
    end
    for (int r = 0; r < ho; r++) for (int c = 0; c < wo; c++) for (int o = 0; o < OC; o++) begin
      longint a; logic signed [7:0] q;
      a = longint'(Bp[o]);
      for (int e = 0; e < dc; e++) a += longint'(Dd[r][c][e]) * longint'(Wp[o][e]);
      q = requant(32'(a), cfg_shift_p, 1'b0, R6);
      Y[r][c][o] = res ? sat8(32'(q) + 32'(X[r][c][o])) : q;
    end
  endtask

  task automatic setup_layer(input int ic, ec, oc, w, h, s, input bit exp_en, input bit dw_en);
    IC = ic; EC = ec; OC = oc; W = w; H = h; S = s;
    cfg_in_ch = 6'(ic); cfg_exp_ch = 6'(ec); cfg_out_ch = 6'(oc); cfg_w = 4'(w); cfg_h = 4'(h);
    cfg_stride2 = (s == 2); cfg_skip_expand = !exp_en; cfg_skip_dw = !dw_en;
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) for (int i = 0; i < ic; i++) X[r][c][i] = 8'($urandom);
    load_weights(exp_en, dw_en);
    reference(exp_en, dw_en, (s == 1) && (ic == oc) && dw_en);
  endtask

  task automatic feed_layer();
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c += P) for (int i = 0; i < IC; i++) begin
      @(negedge clk); cnn_in_valid = 1;
      for (int p = 0; p < P; p++) begin
        cnn_in_mask[p] = (c + p) < W; cnn_in_data[p] = ((c + p) < W) ? X[r][c+p][i] : 8'sd0;
      end
      do @(posedge clk); while (!cnn_in_ready);
      @(negedge clk); cnn_in_valid = 0;
    end
  endtask

  task automatic run_layer_out(input int ic, ec, oc, w, h, s, input bit exp_en, input bit dw_en);
    int ho, wo, gpr, nbeats, got;
    setup_layer(ic, ec, oc, w, h, s, exp_en, dw_en);
    ho = dw_en ? (h + s - 1) / s : h; wo = dw_en ? (w + s - 1) / s : w;
    gpr = (wo + P - 1) / P; nbeats = ho * gpr * oc;
    fork
      feed_layer();
      begin
        got = 0;
        while (got < nbeats) begin
          int orow, ocol, och;
          @(negedge clk); cnn_out_ready = ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (cnn_out_valid && cnn_out_ready) begin
            orow = got / (gpr * oc); ocol = ((got / oc) % gpr) * P; och = got % oc;
            for (int p = 0; p < P; p++) begin
              logic em; em = (ocol + p) < wo;
              checks++;
              if (cnn_out_mask[p] !== em) failures++;
              else if (em && $signed(cnn_out_data[p]) !== Y[orow][ocol+p][och]) begin
                failures++; $display("cnn mismatch s%0d r%0d c%0d o%0d", s, orow, ocol+p, och);
              end
            end
            got++;
          end
        end
        @(negedge clk); cnn_out_ready = 0;
      end
    join
  endtask

  // ---------------- stem convolution (first layer) ----------------
  task automatic run_stem(input int oc, w, h);
    logic signed [7:0] Ks [32][27]; logic signed [31:0] Bs [32];
    int ho, wo, gpr, nbeats, got;
    for (int o = 0; o < oc; o++) begin
      Bs[o] = $signed($urandom_range(0, 4000)) - 2000;
      for (int t = 0; t < 27; t++) begin
        Ks[o][t] = 8'($urandom);
        @(negedge clk); ws_w_we = 1; ws_w_oc = 5'(o); ws_w_tap = 5'(t); ws_w_data = Ks[o][t];
      end
      @(negedge clk); ws_w_we = 0; ws_b_we = 1; ws_b_oc = 5'(o); ws_b_data = Bs[o];
      @(negedge clk); ws_b_we = 0;
    end
    IC = 3; OC = oc; W = w; H = h; S = 2;
    cfg_stem = 1; cfg_out_ch = 6'(oc); cfg_w = 4'(w); cfg_h = 4'(h); cfg_stride2 = 1;
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) for (int i = 0; i < 3; i++) X[r][c][i] = 8'($urandom);
    ho = (h + 1) / 2; wo = (w + 1) / 2;
    for (int r = 0; r < ho; r++) for (int c = 0; c < wo; c++) for (int o = 0; o < oc; o++) begin
      int a; a = Bs[o];
      for (int i = 0; i < 3; i++) for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++)
        if (2*r+dy-1 >= 0 && 2*r+dy-1 < h && 2*c+dx-1 >= 0 && 2*c+dx-1 < w)
          a += int'(X[2*r+dy-1][2*c+dx-1][i]) * int'(Ks[o][9*i+3*dy+dx]);
      Y[r][c][o] = requant(a, cfg_shift_e, 1'b1, R6);
    end
    gpr = (wo + P - 1) / P; nbeats = ho * gpr * oc;
    fork
      feed_layer();
      begin
        got = 0;
        while (got < nbeats) begin
          int orow, ocol, och;
          @(negedge clk); cnn_out_ready = ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (cnn_out_valid && cnn_out_ready) begin
            orow = got / (gpr * oc); ocol = ((got / oc) % gpr) * P; och = got % oc;
            for (int p = 0; p < P; p++) begin
              logic em; em = (ocol + p) < wo;
              checks++;
              if (cnn_out_mask[p] !== em) failures++;
              else if (em && $signed(cnn_out_data[p]) !== Y[orow][ocol+p][och]) begin
                failures++; $display("stem mismatch r%0d c%0d o%0d", orow, ocol+p, och);
              end
            end
            got++;
          end
        end
        @(negedge clk); cnn_out_ready = 0;
      end
    join
    cfg_stem = 0;
  endtask

  // ---------------- HDC reference ----------------
  logic [D-1:0] LT [L]; logic [D-1:0] PT [F];
  function automatic logic [D-1:0] encode(input logic signed [7:0] z [F]);
    logic [D-1:0] h;
    for (int k = 0; k < D; k++) begin
      int cnt; cnt = 0;
      for (int i = 0; i < F; i++) begin
        logic [3:0] lv; lv = 4'({~z[i][7], z[i][6:0]} >> 4);
        cnt += int'(PT[i][k] ^ LT[lv][k]);
      end
      h[k] = cnt > F / 2;
    end
    return h;
  endfunction

  task automatic send_features(input logic signed [7:0] z [F]);
    for (int i = 0; i < F; i++) begin
      @(negedge clk); feat_valid = 1; feat_data = z[i];
      do @(posedge clk); while (!feat_ready);
      @(negedge clk); feat_valid = 0;
    end
  endtask

  logic signed [7:0] PROTO [5][F];
  logic signed [7:0] z [F];

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // encoder tables
    for (int l = 0; l < L; l++) for (int w = 0; w < D / 32; w++) LT[l][w*32 +: 32] = $urandom;
    for (int i = 0; i < F; i++) for (int w = 0; w < D / 32; w++) PT[i][w*32 +: 32] = $urandom;
    for (int l = 0; l < L; l++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); lt_we = 1; lt_level = 4'(l); lt_chunk = 1'(c); lt_data = LT[l][c*CHUNK_BITS +: CHUNK_BITS];
    end
    @(negedge clk); lt_we = 0;
    for (int i = 0; i < F; i++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); pt_we = 1; pt_feat = 5'(i); pt_chunk = 1'(c); pt_data = PT[i][c*CHUNK_BITS +: CHUNK_BITS];
    end
    @(negedge clk); pt_we = 0;

    // S: stem convolution
    run_stem(8, 8, 6);
    // A, B: CNN layers
    run_layer_out(4, 8, 4, 8, 4, 1, 1'b1, 1'b1);
    run_layer_out(8, 8, 4, 8, 5, 2, 1'b0, 1'b1);

    // C: final 1x1 convolution into the encoder
    cfg_cnn_to_heu = 1;
    setup_layer(8, 8, F, 1, 1, 1, 1'b0, 1'b0);
    feed_layer();
    do @(posedge clk); while (!res_valid);
    @(negedge clk);
    begin
      logic [D-1:0] href;
      for (int i = 0; i < F; i++) z[i] = Y[0][0][i];
      href = encode(z);
      checks++;
      if (!res_novel || res_cluster !== 0 || n_clusters !== 1) begin failures++; $display("first sample not a new cluster"); end
      for (int c = 0; c < NCH; c++) begin
        checks++;
        if (dut.u_pm.bank[0][c] !== href[c*CHUNK_BITS +: CHUNK_BITS]) begin failures++; $display("encoded HV mismatch chunk %0d", c); end
      end
    end
    cfg_cnn_to_heu = 0;

    // D: clustered stream with merging
    for (int p = 0; p < 5; p++) for (int i = 0; i < F; i++) PROTO[p][i] = 8'($urandom);
    for (int s = 0; s < 40; s++) begin
      int pidx; pidx = $urandom_range(0, 4);
      for (int i = 0; i < F; i++) z[i] = 8'(PROTO[pidx][i] + 8'($urandom_range(0, 6)) - 8'sd3);
      send_features(z);
    end
    // E: no merging, novel samples until the memory is full
    wait (!merging);
    cfg_tmerge = 16'hffff; cfg_t0 = 16'hffff;
    for (int s = 0; s < KMAX + 4; s++) begin
      for (int i = 0; i < F; i++) z[i] = 8'($urandom);
      send_features(z);
    end
    repeat (200) @(posedge clk);
    checks++;
    if (32'(sample_count) != n_results) begin failures++; $display("sample count %0d vs %0d", sample_count, n_results); end

    $display("mechanisms: stem %0d", n_stem);
    checks++; if (n_stem == 0) failures++;
    $display("mechanisms: residual %0d skip_expand %0d stride2 %0d skip_dw %0d cnn_to_heu %0d heu_stall %0d",
             n_res, n_skipe, n_s2, n_skipd, n_cnnheu, n_stall);
    $display("            new %0d update %0d overflow %0d merge %0d hold %0d samples %0d",
             n_new, n_upd, n_ovf, n_merge, n_hold, n_results);
    checks += 11;
    if (n_res == 0) failures++;    if (n_skipe == 0) failures++;  if (n_s2 == 0) failures++;
    if (n_skipd == 0) failures++;  if (n_cnnheu == 0) failures++; if (n_stall == 0) failures++;
    if (n_new == 0) failures++;    if (n_upd == 0) failures++;    if (n_ovf == 0) failures++;
    if (n_merge == 0) failures++;  if (n_hold == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_hlu -- self-checking testbench for the hyperdimensional learning unit,
// run together with a prototype memory. A reference model kept here holds
// every cluster HV and its statistics and predicts, for each sample, the
// nearest cluster, the similarity, the novelty decision and the new
// statistics. After an update it checks that every bit on which cluster and
// sample agreed is unchanged and every other bit is one of the two, then takes
// the cluster the design wrote as the model's new cluster. Samples are noisy
// copies of a few base HVs (updates) and fresh random HVs (new clusters); the
// memory is filled up so that the overflow rule is exercised too. The search
// time per chunk (ceil(n/PK) cycles) is checked through hv_ready.
module tb_hlu;
  import imagehd_pkg::*;
  localparam int D = 512, KMAX = 32, PKL = 16, NCH = D / CHUNK_BITS;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [7:0] cfg_beta = 8'd16; logic [3:0] cfg_alpha_shift = 4'd2;
  logic [23:0] cfg_mu_init = 24'(400 << 8), cfg_sigma_init = 24'(20 << 8);
  logic hv_valid = 0, hv_ready, hv_last; logic [CHUNK_BITS-1:0] hv_chunk; logic [0:0] hv_idx;
  logic [5:0] n_clusters = 0; logic create;
  logic pm_rd_en; logic [0:0] pm_rd_grp; logic [0:0] pm_rd_chunk; logic [PKL-1:0][CHUNK_BITS-1:0] pm_rd_data;
  logic pm_wr_en; logic [4:0] pm_wr_cluster; logic [0:0] pm_wr_chunk; logic [CHUNK_BITS-1:0] pm_wr_data;
  logic [4:0] st_rd_cluster; logic [23:0] st_rd_mu, st_rd_sigma;
  logic st_we; logic [4:0] st_wr_cluster; logic [23:0] st_wr_mu, st_wr_sigma;
  logic res_valid, res_novel, res_overflow, busy; logic [4:0] res_cluster; logic [9:0] res_sim;
  int checks = 0, failures = 0;

  hlu #(.D(D), .KMAX(KMAX), .PKL(PKL)) dut (.*);
  proto_mem #(.D(D), .KMAX(KMAX), .PKL(PKL)) pm (
    .clk, .rd_en(pm_rd_en), .rd_grp(pm_rd_grp), .rd_chunk(pm_rd_chunk), .rd_data(pm_rd_data),
    .wr_en(pm_wr_en), .wr_cluster(pm_wr_cluster), .wr_chunk(pm_wr_chunk), .wr_data(pm_wr_data),
    .st_rd_cluster, .st_rd_mu, .st_rd_sigma, .st_we, .st_wr_cluster, .st_wr_mu, .st_wr_sigma);

  always @(posedge clk) if (rst_n && create) n_clusters <= n_clusters + 1'b1;

  logic [D-1:0] MH [KMAX]; logic [23:0] MMU [KMAX], MSG [KMAX]; int mn = 0;
  logic [D-1:0] BASE [4];
  int n_upd = 0, n_new = 0, n_ovf = 0;

  function automatic int ham(logic [D-1:0] a, logic [D-1:0] b);
    return $countones(a ^ b);
  endfunction
  function automatic logic [D-1:0] rand_hv();
    logic [D-1:0] h; for (int w = 0; w < D/32; w++) h[w*32 +: 32] = $urandom; return h;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(input logic [D-1:0] q);
    int bi, bd, s; longint th, sfx, dev, mu, sg; logic nov, ovf;
    int ngrp, t0;
    // reference decision
    bi = -1; bd = 0;
    for (int c = 0; c < mn; c++) if (bi < 0 || ham(q, MH[c]) < bd) begin bi = c; bd = ham(q, MH[c]); end
    s = (bi < 0) ? 0 : D - bd;
    if (bi >= 0) begin mu = MMU[bi]; sg = MSG[bi]; end else begin mu = 0; sg = 0; end
    th = mu - ((longint'(cfg_beta) * sg) >> 4);
    sfx = longint'(s) << 8;
    nov = (bi < 0) || (sfx < th);
    ovf = nov && (mn >= KMAX);
    ngrp = (mn + PKL - 1) / PKL;
    for (int k = 0; k < NCH; k++) begin
      @(negedge clk); hv_valid = 1; hv_idx = 1'(k); hv_last = (k == NCH-1); hv_chunk = q[k*CHUNK_BITS +: CHUNK_BITS];
      do @(posedge clk); while (!hv_ready);
      t0 = $time;
      @(negedge clk); hv_valid = 0;
      if (k < NCH-1) begin
        // next chunk is accepted after ngrp search cycles
        while (!hv_ready) @(negedge clk);
        checks++;
        if (($time - t0) / 10 != ngrp) begin
          failures++; $display("search time %0d for %0d groups", ($time - t0) / 10, ngrp);
        end
      end
    end
    do @(posedge clk); while (!res_valid);
    checks++;
    if (res_novel !== nov || res_overflow !== ovf) begin failures++; $display("decision mismatch nov %0d/%0d", res_novel, nov); end
    if (!nov || ovf) begin
      checks++;
      if (res_cluster !== 5'(bi) || res_sim !== 10'(s)) begin failures++; $display("argmin mismatch %0d/%0d sim %0d/%0d", res_cluster, bi, res_sim, s); end
      dev = sfx - mu; if (dev < 0) dev = -dev;
      MMU[bi] = 24'(mu + ((sfx - mu) >>> cfg_alpha_shift));
      MSG[bi] = 24'(sg + ((dev - sg) >>> cfg_alpha_shift));
      @(negedge clk);
      for (int k = 0; k < NCH; k++) begin
        logic [CHUNK_BITS-1:0] got, h, qq;
        got = pm.bank[bi % PKL][(bi / PKL) * NCH + k];
        h = MH[bi][k*CHUNK_BITS +: CHUNK_BITS]; qq = q[k*CHUNK_BITS +: CHUNK_BITS];
        checks++;
        if (((got ^ h) & ~(h ^ qq)) != 0) begin failures++; $display("bundle changed an agreed bit"); end
        MH[bi][k*CHUNK_BITS +: CHUNK_BITS] = got;
      end
      checks++;
      if (pm.mu[bi] !== MMU[bi] || pm.sg[bi] !== MSG[bi]) begin failures++; $display("stats mismatch"); end
      if (ovf) n_ovf++; else n_upd++;
    end else begin
      checks++;
      if (res_cluster !== 5'(mn)) failures++;
      MH[mn] = q; MMU[mn] = cfg_mu_init; MSG[mn] = cfg_sigma_init;
      @(negedge clk);
      for (int k = 0; k < NCH; k++) begin
        checks++; if (pm.bank[mn % PKL][(mn / PKL) * NCH + k] !== q[k*CHUNK_BITS +: CHUNK_BITS]) failures++;
      end
      mn++; n_new++;
    end
  endtask

  function automatic logic [D-1:0] noisy(logic [D-1:0] b, int nflip);
    for (int i = 0; i < nflip; i++) b[$urandom_range(0, D-1)] ^= 1'b1;
    return b;
  endfunction

  initial begin
    for (int b = 0; b < 4; b++) BASE[b] = rand_hv();
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) send(noisy(BASE[i % 4], 30));
    for (int i = 0; i < 30; i++) send(rand_hv());
    for (int i = 0; i < 6; i++) send(noisy(BASE[i % 4], 30));
    checks++;
    if (n_upd == 0 || n_new == 0 || n_ovf == 0) begin failures++; $display("coverage upd %0d new %0d ovf %0d", n_upd, n_new, n_ovf); end
    $display("updates %0d new %0d overflow %0d", n_upd, n_new, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_cmu -- self-checking testbench for the cluster merge unit, run with a
// prototype memory. The memory is loaded with NB well-separated base HVs, each
// present as NCP noisy copies (K = NB*NCP classes), and the unit merges them
// into K' = NB clusters.
//  * With no refinement, every written-back cluster must be one of the class
//    HVs, and the Top-M kMeans++ seeding must have picked one class of every
//    base (the M farthest classes always lie in bases not yet seeded).
//  * With two refinement iterations, every cluster must equal the bitwise
//    majority of its base's copies, a tie taking the bit of the seed class,
//    for one of the copies as seed; one cluster per base.
//  * The statistics of each cluster must be those of a class of its base.
module tb_cmu;
  import imagehd_pkg::*;
  localparam int D = 512, KMAX = 32, PKL = 16, TOPM = 4, NCH = D / CHUNK_BITS;
  localparam int NB = 6, NCP = 4, K = NB * NCP;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start = 0; logic [5:0] cfg_target = NB; logic [3:0] cfg_iters; logic [5:0] n_clusters = K;
  logic done, busy;
  logic pm_rd_en; logic [0:0] pm_rd_grp, pm_rd_chunk; logic [PKL-1:0][CHUNK_BITS-1:0] pm_rd_data;
  logic pm_wr_en; logic [4:0] pm_wr_cluster; logic [0:0] pm_wr_chunk; logic [CHUNK_BITS-1:0] pm_wr_data;
  logic [4:0] st_rd_cluster; logic [23:0] st_rd_mu, st_rd_sigma;
  logic st_we; logic [4:0] st_wr_cluster; logic [23:0] st_wr_mu, st_wr_sigma;
  int checks = 0, failures = 0;

  cmu #(.D(D), .KMAX(KMAX), .PKL(PKL), .TOPM(TOPM)) dut (.*);
  proto_mem #(.D(D), .KMAX(KMAX), .PKL(PKL)) pm (
    .clk, .rd_en(pm_rd_en), .rd_grp(pm_rd_grp), .rd_chunk(pm_rd_chunk), .rd_data(pm_rd_data),
    .wr_en(pm_wr_en), .wr_cluster(pm_wr_cluster), .wr_chunk(pm_wr_chunk), .wr_data(pm_wr_data),
    .st_rd_cluster, .st_rd_mu, .st_rd_sigma, .st_we, .st_wr_cluster, .st_wr_mu, .st_wr_sigma);

  logic [D-1:0] BASE [NB];
  logic [D-1:0] CL [K];

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [D-1:0] readc(int c);
    logic [D-1:0] h;
    for (int k = 0; k < NCH; k++) h[k*CHUNK_BITS +: CHUNK_BITS] = pm.bank[c % PKL][(c / PKL) * NCH + k];
    return h;
  endfunction

  task automatic load();
    for (int c = 0; c < K; c++) begin
      for (int k = 0; k < NCH; k++) pm.bank[c % PKL][(c / PKL) * NCH + k] = CL[c][k*CHUNK_BITS +: CHUNK_BITS];
      pm.mu[c] = 24'(1000 + c); pm.sg[c] = 24'(50 + c);
    end
  endtask

  task automatic run(input int iters);
    int t0;
    load();
    cfg_iters = 4'(iters);
    @(negedge clk); start = 1; t0 = $time; @(negedge clk); start = 0;
    do @(posedge clk); while (!done);
    $display("merge with %0d iterations: %0d cycles", iters, ($time - t0) / 10);
    @(negedge clk);
  endtask

  initial begin
    int seen [NB];
    for (int b = 0; b < NB; b++) for (int w = 0; w < D/32; w++) BASE[b][w*32 +: 32] = $urandom;
    // classes interleaved so that copies of one base sit in different groups
    for (int c = 0; c < K; c++) begin
      CL[c] = BASE[c % NB];
      for (int f = 0; f < 12; f++) CL[c][$urandom_range(0, D-1)] ^= 1'b1;
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- seeding only ----
    run(0);
    foreach (seen[b]) seen[b] = 0;
    for (int m = 0; m < NB; m++) begin
      logic [D-1:0] h; int hit;
      h = readc(m); hit = -1;
      for (int c = 0; c < K; c++) if (h == CL[c]) hit = c;
      checks++;
      if (hit < 0) begin failures++; $display("centroid %0d is not a class HV", m); end
      else begin
        seen[hit % NB]++;
        checks++; if (pm.mu[m] != 24'(1000 + hit) || pm.sg[m] != 24'(50 + hit)) failures++;
      end
    end
    for (int b = 0; b < NB; b++) begin checks++; if (seen[b] != 1) begin failures++; $display("base %0d seeded %0d times", b, seen[b]); end end

    // ---- seeding + two Lloyd iterations ----
    run(2);
    foreach (seen[b]) seen[b] = 0;
    for (int m = 0; m < NB; m++) begin
      logic [D-1:0] h; int b, ok;
      h = readc(m);
      b = -1;
      for (int bb = 0; bb < NB; bb++) if ($countones(h ^ BASE[bb]) < D / 4) b = bb;
      checks++;
      if (b < 0) begin failures++; $display("centroid %0d near no base", m); continue; end
      seen[b]++;
      ok = 0;
      for (int s = 0; s < NCP; s++) begin
        logic [D-1:0] ref_h; int seed;
        seed = b + s * NB;
        for (int k = 0; k < D; k++) begin
          int v; v = 0;
          for (int j = 0; j < NCP; j++) v += int'(CL[b + j * NB][k]);
          ref_h[k] = (2 * v > NCP) ? 1'b1 : (2 * v < NCP) ? 1'b0 : CL[seed][k];
        end
        if (ref_h == h && pm.mu[m] == 24'(1000 + seed)) ok = 1;
      end
      checks++;
      if (!ok) begin failures++; $display("centroid %0d is not the majority of base %0d", m, b); end
    end
    for (int b = 0; b < NB; b++) begin checks++; if (seen[b] != 1) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// hlu -- Hyperdimensional Learning Unit: similarity search, novelty-based
// admission and online cluster update (steps S3 and S4 of the learning loop).
//
// The unit is a PK x (PW x PB) array. It consumes the encoded sample HV chunk by
// chunk as the encoder produces it. For every chunk it reads the same chunk of
// PK clusters per cycle from the prototype memory, XORs them with the sample
// chunk and popcounts the result; the partial mismatch counts accumulate in a
// distance buffer with one entry per cluster, which holds full Hamming
// distances once the last chunk is in. A scan over the buffer (PK entries per
// cycle, lowest index wins ties) gives the nearest cluster c* and its
// similarity s* = D - Ham(q, h_c*).
//
// Admission: theta = mu_c* - beta * sigma_c*. If s* < theta (or there is no
// cluster yet) the sample is novel and becomes a new cluster: its HV is copied
// from the HV buffer into the next free slot and the slot's statistics are set
// to the initial values cfg_mu_init / cfg_sigma_init. Otherwise c* is updated:
// h_c* becomes the bundle of h_c* and q, chunk by chunk (bits where the two
// agree are kept, bits where they differ are taken from the LFSR, which is the
// majority of two binary HVs with random tie break) and the running statistics
// follow mu += alpha*(s - mu), sigma += alpha*(|s - mu| - sigma), with
// alpha = 2^-cfg_alpha_shift. A novel sample that finds the memory full
// updates c* instead and is flagged as an overflow.
//
// Interfaces: hv_* chunk stream from the encoder (valid/ready, in chunk order);
// n_clusters (number of valid clusters, kept by the top); the prototype memory
// ports pm_* / st_*; create pulses when a cluster is added; res_* reports the
// label (cluster index), the similarity, the novelty and overflow flags.
// beta is unsigned Q4.4; statistics are Q.8 fixed point.
// Timing: ceil(n_clusters / PK) cycles per chunk during search (hv_ready is low
// meanwhile), ceil(n_clusters / PK) + 2 cycles for the argmin and statistics
// read, NCHUNK (+1) cycles to write or update the cluster.
//
// From the paper: PK = 16 cluster PEs, chunk-wise XOR/popcount into a global
// distance buffer, argmin, theta = mu - beta*sigma, create-or-bundle decision,
// running statistics with rate alpha, pipelining with the encoder. This
// design's own choices: the random tie break of the two-HV bundle, the initial
// statistics of a new cluster, the overflow rule, fixed-point formats, and
// alpha restricted to powers of two.
module hlu
  import imagehd_pkg::*;
#(
  parameter int unsigned D    = HV_D,
  parameter int unsigned KMAX = K_MAX,
  parameter int unsigned PKL  = PK,
  localparam int unsigned CB     = CHUNK_BITS,
  localparam int unsigned NCHUNK = D / CB,
  localparam int unsigned NG     = KMAX / PKL,
  localparam int unsigned CKW    = (NCHUNK > 1) ? $clog2(NCHUNK) : 1,
  localparam int unsigned GW     = (NG > 1) ? $clog2(NG) : 1,
  localparam int unsigned KW     = $clog2(KMAX),
  localparam int unsigned DW     = $clog2(D + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration
  input  logic [7:0]              cfg_beta,        // Q4.4
  input  logic [3:0]              cfg_alpha_shift,
  input  logic [23:0]             cfg_mu_init,
  input  logic [23:0]             cfg_sigma_init,
  // encoded sample
  input  logic                    hv_valid,
  output logic                    hv_ready,
  input  logic [CB-1:0]           hv_chunk,
  input  logic [CKW-1:0]          hv_idx,
  input  logic                    hv_last,
  // cluster count
  input  logic [KW:0]             n_clusters,
  output logic                    create,
  // prototype memory
  output logic                    pm_rd_en,
  output logic [GW-1:0]           pm_rd_grp,
  output logic [CKW-1:0]          pm_rd_chunk,
  input  logic [PKL-1:0][CB-1:0]  pm_rd_data,
  output logic                    pm_wr_en,
  output logic [KW-1:0]           pm_wr_cluster,
  output logic [CKW-1:0]          pm_wr_chunk,
  output logic [CB-1:0]           pm_wr_data,
  output logic [KW-1:0]           st_rd_cluster,
  input  logic [23:0]             st_rd_mu,
  input  logic [23:0]             st_rd_sigma,
  output logic                    st_we,
  output logic [KW-1:0]           st_wr_cluster,
  output logic [23:0]             st_wr_mu,
  output logic [23:0]             st_wr_sigma,
  // result
  output logic                    res_valid,
  output logic [KW-1:0]           res_cluster,
  output logic [DW-1:0]           res_sim,
  output logic                    res_novel,
  output logic                    res_overflow,
  output logic                    busy
);

  typedef enum logic [2:0] {S_RECV, S_ARG, S_STAT, S_DEC, S_WRITE, S_DONE} state_t;
  state_t state;

  logic [CB-1:0]  qbuf [NCHUNK];          // HV buffer: the whole sample HV
  logic [DW-1:0]  dbuf [NG][PKL];         // global distance buffer

  // random bits for the bundling tie break
  logic [CB-1:0]  rnd;
  for (genvar i = 0; i < CB / 32; i++) begin : g_rng
    lfsr32 #(.SEED(32'h9E37_79B9 ^ (32'(i) * 32'h0101_0F1F))) u_lfsr (
      .clk(clk), .rst_n(rst_n), .en(1'b1), .rnd(rnd[i*32 +: 32]));
  end

  logic [GW:0]    ngv;                    // groups holding valid clusters
  assign ngv = (GW+1)'((32'(n_clusters) + PKL - 1) / PKL);

  // ---- search ----
  logic            issuing;
  logic [GW-1:0]   grp;
  logic [CB-1:0]   qchunk;
  logic [CKW-1:0]  cchunk;
  logic            clast;
  logic            v1, v1_first;
  logic [GW-1:0]   g1;

  // ---- argmin / decision ----
  logic [GW:0]     ag;
  logic            best_v;
  logic [KW-1:0]   best;
  logic [DW-1:0]   bestd;
  logic [KW-1:0]   target;
  logic            upd;                   // 1: update c*, 0: create
  logic [CKW-1:0]  wc;
  logic            wc_done;
  logic            u1;
  logic [CKW-1:0]  u1c;
  logic [DW-1:0]   sim;

  // group minimum (combinational, over the PK entries of group ag)
  logic            gmin_v;
  logic [KW-1:0]   gmin_i;
  logic [DW-1:0]   gmin_d;
  always_comb begin
    gmin_v = 1'b0; gmin_i = '0; gmin_d = '0;
    for (int j = 0; j < PKL; j++) begin
      logic [31:0] id;
      id = 32'(ag) * PKL + j;
      if (id < 32'(n_clusters) && (!gmin_v || dbuf[ag[GW-1:0]][j] < gmin_d)) begin
        gmin_v = 1'b1; gmin_i = KW'(id); gmin_d = dbuf[ag[GW-1:0]][j];
      end
    end
  end

  // novelty test
  logic signed [31:0] theta, sfx, dev;
  logic               novel;
  always_comb begin
    theta = signed'(32'(st_rd_mu)) - signed'((32'(cfg_beta) * 32'(st_rd_sigma)) >> 4);
    sfx   = signed'(32'(sim) << 8);
    novel = !best_v || (sfx < theta);
    dev   = sfx - signed'(32'(st_rd_mu));
    if (dev < 0) dev = -dev;
  end

  assign hv_ready = (state == S_RECV) && !issuing && !clast;

  always_comb begin
    pm_rd_en    = 1'b0;
    pm_rd_grp   = grp;
    pm_rd_chunk = cchunk;
    if (state == S_RECV && issuing) pm_rd_en = 1'b1;
    if (state == S_WRITE && upd && !wc_done) begin
      pm_rd_en = 1'b1; pm_rd_grp = GW'(32'(target) / PKL); pm_rd_chunk = wc;
    end
  end

  assign st_rd_cluster = best;

  // per-PE Hamming distance of the returned chunk (one popcount per cluster PE)
  logic [$clog2(CB+1)-1:0] pcnt [PKL];
  for (genvar j = 0; j < PKL; j++) begin : g_pe
    assign pcnt[j] = popcount_chunk(pm_rd_data[j] ^ qchunk);
  end

  // two-HV bundle for the update: agreeing bits kept, ties broken at random
  logic [CB-1:0] upd_h, upd_q, bundled;
  assign upd_h   = pm_rd_data[32'(target) % PKL];
  assign upd_q   = qbuf[u1c];
  assign bundled = (upd_h & upd_q) | ((upd_h ^ upd_q) & rnd);

  always_ff @(posedge clk) begin
    if (hv_valid && hv_ready) qbuf[hv_idx] <= hv_chunk;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RECV; issuing <= 1'b0; grp <= '0; qchunk <= '0; cchunk <= '0; clast <= 1'b0;
      v1 <= 1'b0; v1_first <= 1'b0; g1 <= '0; ag <= '0; best_v <= 1'b0; best <= '0; bestd <= '0;
      target <= '0; upd <= 1'b0; wc <= '0; wc_done <= 1'b0; u1 <= 1'b0; u1c <= '0; sim <= '0;
      create <= 1'b0; pm_wr_en <= 1'b0; pm_wr_cluster <= '0; pm_wr_chunk <= '0; pm_wr_data <= '0;
      st_we <= 1'b0; st_wr_cluster <= '0; st_wr_mu <= '0; st_wr_sigma <= '0;
      res_valid <= 1'b0; res_cluster <= '0; res_sim <= '0; res_novel <= 1'b0; res_overflow <= 1'b0;
      for (int g = 0; g < NG; g++) for (int j = 0; j < PKL; j++) dbuf[g][j] <= '0;
    end else begin
      create <= 1'b0; pm_wr_en <= 1'b0; st_we <= 1'b0; res_valid <= 1'b0;
      v1 <= 1'b0; u1 <= 1'b0;
      unique case (state)
        S_RECV: begin
          if (hv_valid && hv_ready) begin
            qchunk <= hv_chunk; cchunk <= hv_idx; clast <= hv_last;
            if (ngv != 0) begin issuing <= 1'b1; grp <= '0; end
          end
          if (issuing) begin
            v1 <= 1'b1; v1_first <= (cchunk == 0); g1 <= grp;
            if ((GW+1)'(grp) == ngv - 1) issuing <= 1'b0;
            else grp <= grp + 1'b1;
          end
          if (v1)
            for (int j = 0; j < PKL; j++)
              dbuf[g1][j] <= (v1_first ? '0 : dbuf[g1][j]) + DW'(pcnt[j]);
          if (clast && !issuing && !v1 && !(hv_valid && hv_ready)) begin
            clast <= 1'b0; state <= S_ARG; ag <= '0; best_v <= 1'b0;
          end
        end
        S_ARG: begin
          if (ag == ngv) state <= S_STAT;
          else begin
            if (gmin_v && (!best_v || gmin_d < bestd)) begin
              best_v <= 1'b1; best <= gmin_i; bestd <= gmin_d;
            end
            ag <= ag + 1'b1;
          end
        end
        S_STAT: begin
          sim <= best_v ? DW'(D) - bestd : '0;
          state <= S_DEC;
        end
        S_DEC: begin
          wc <= '0; wc_done <= 1'b0;
          res_novel <= novel;
          res_overflow <= novel && (32'(n_clusters) >= KMAX);
          if (novel && 32'(n_clusters) < KMAX) begin
            upd <= 1'b0; target <= KW'(n_clusters); create <= 1'b1;
            st_we <= 1'b1; st_wr_cluster <= KW'(n_clusters);
            st_wr_mu <= cfg_mu_init; st_wr_sigma <= cfg_sigma_init;
          end else begin
            upd <= 1'b1; target <= best;
            st_we <= 1'b1; st_wr_cluster <= best;
            st_wr_mu    <= 24'(signed'(32'(st_rd_mu)) + ((sfx - signed'(32'(st_rd_mu))) >>> cfg_alpha_shift));
            st_wr_sigma <= 24'(signed'(32'(st_rd_sigma)) + ((dev - signed'(32'(st_rd_sigma))) >>> cfg_alpha_shift));
          end
          state <= S_WRITE;
        end
        S_WRITE: begin
          if (!upd) begin
            pm_wr_en <= 1'b1; pm_wr_cluster <= target; pm_wr_chunk <= wc; pm_wr_data <= qbuf[wc];
            if (32'(wc) == NCHUNK - 1) state <= S_DONE;
            else wc <= wc + 1'b1;
          end else begin
            if (!wc_done) begin
              u1 <= 1'b1; u1c <= wc;
              if (32'(wc) == NCHUNK - 1) wc_done <= 1'b1;
              else wc <= wc + 1'b1;
            end
            if (u1) begin
              pm_wr_en <= 1'b1; pm_wr_cluster <= target; pm_wr_chunk <= u1c;
              pm_wr_data <= bundled;
              if (32'(u1c) == NCHUNK - 1) state <= S_DONE;
            end
          end
        end
        S_DONE: begin
          res_valid <= 1'b1; res_cluster <= target; res_sim <= sim;
          state <= S_RECV;
        end
        default: state <= S_RECV;
      endcase
    end
  end

  assign busy = (state != S_RECV) || issuing || v1 || clast;

endmodule

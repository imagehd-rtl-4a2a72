// cmu -- Cluster Merge Unit: consolidates the K clusters of the prototype
// memory into K' representatives (MergeClusters, step S5 of the learning loop).
//
// Stage 1, Top-M kMeans++ seeding. The first centroid is a class HV picked
// uniformly at random with the LFSR. After every new centroid the unit streams
// all K class HVs through its PK x (PW x PB) XOR/popcount array against that
// centroid, chunk by chunk; per-class partial distances collect in a local
// distance buffer and, after the last chunk, the PK min comparators fold them
// into the minimum-distance buffer d (distance of each class to its nearest
// centroid so far). The classes are then streamed through a Top-M insertion
// buffer (topm_buffer) that keeps the M largest d values, and the next
// centroid is drawn uniformly from those M candidates with the LFSR. Classes
// with d = 0 (already centroids, or exact copies of one) are not candidates.
//
// Stage 2, refinement (cfg_iters Lloyd iterations). Assignment: the centroids
// are scanned one after another with the same array; each class keeps the
// running minimum distance and the index of its nearest centroid. Update:
// chunk by chunk, every class HV chunk is added bit by bit into the vote
// accumulator row of its centroid ("next centroid accumulator", one
// read-modify-write per cycle with forwarding between back-to-back updates of
// the same row), the classes per centroid are counted, and each centroid chunk
// is binarised: 1 when more than half of its classes vote 1, 0 when fewer,
// unchanged on a tie or when no class is assigned. Only one chunk's votes are
// ever held, never a full-precision D-dimensional accumulator.
//
// Finally the K' centroids are written back into cluster slots 0 .. K'-1 of the
// prototype memory, each with the statistics of the class it was seeded from,
// and done pulses; the top then sets the cluster count to K'.
//
// Interfaces: start / cfg_target (K' >= 1) / cfg_iters / n_clusters (K, must
// exceed K') / done; prototype memory ports as in the learning unit.
// Timing (NG = ceil(K/PK), NC = D/(PW*PB)): seeding K' * (NG*NC + K + NC + 4)
// cycles; each iteration K' * (NG*NC + 2) + NC * (K + K' + 4) cycles; write
// back K' * NC cycles.
//
// From the paper: the PK x (PW x PB) mesh, chunk-wise XOR/popcount with local
// and global distance buffers, PK min comparators, the minimum-distance buffer,
// the Top-M insertion buffer, the 32-bit LFSR for both samplings, sequential
// centroid scan with running argmin, chunk-wise vote accumulation with a
// per-centroid count and majority threshold, binary centroid storage. This
// design's own choices: the uniform-draw arithmetic ((r * n) >> 16 with r the
// XOR of the two LFSR halves),
// the tie and empty-cluster rules, the exclusion of d = 0 candidates, the
// statistics given to merged clusters, and no overlap between phases.
// The Top-M buffer's distance outputs are left unread on purpose: only the
// candidate indices are needed to draw the next centroid.
module cmu
  import imagehd_pkg::*;
#(
  parameter int unsigned D    = HV_D,
  parameter int unsigned KMAX = K_MAX,
  parameter int unsigned PKL  = PK,
  parameter int unsigned TOPM = 8,
  localparam int unsigned CB     = CHUNK_BITS,
  localparam int unsigned NCHUNK = D / CB,
  localparam int unsigned NG     = KMAX / PKL,
  localparam int unsigned CKW    = (NCHUNK > 1) ? $clog2(NCHUNK) : 1,
  localparam int unsigned GW     = (NG > 1) ? $clog2(NG) : 1,
  localparam int unsigned KW     = $clog2(KMAX),
  localparam int unsigned DW     = $clog2(D + 1),
  localparam int unsigned VW     = $clog2(KMAX + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [KW:0]             cfg_target,
  input  logic [3:0]              cfg_iters,
  input  logic [KW:0]             n_clusters,
  output logic                    done,
  output logic                    busy,
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
  output logic [23:0]             st_wr_sigma
);

  typedef enum logic [3:0] {
    S_IDLE, S_FIRST, S_COPY, S_DIST, S_TOPM, S_PICK, S_CLR, S_ASSIGN,
    S_BUNDLE, S_THRESH, S_WB, S_DONE
  } state_t;
  state_t state;

  // ---------------- storage ----------------
  logic [CB-1:0]            cent  [KMAX * NCHUNK];   // centroid HVs C'
  logic [CB-1:0][VW-1:0]    accm  [KMAX];            // next-centroid vote rows
  logic [DW-1:0]            dmin  [NG][PKL];         // min-distance buffer d
  logic [KW-1:0]            asg   [NG][PKL];         // assignment labels
  logic [VW-1:0]            cnt   [KMAX];            // classes per centroid
  logic [23:0]              smu   [KMAX];            // statistics of each seed
  logic [23:0]              ssg   [KMAX];

  logic [31:0] rnd;
  lfsr32 #(.SEED(32'h5EED_C0DE)) u_lfsr (.clk, .rst_n, .en(1'b1), .rnd);

  // ---------------- Top-M buffer ----------------
  logic                     tm_clr, tm_ins;
  logic [DW-1:0]            tm_d;
  logic [KW-1:0]            tm_i;
  logic [TOPM-1:0][DW-1:0]  tm_dist;
  logic [TOPM-1:0][KW-1:0]  tm_idx;
  logic [$clog2(TOPM+1)-1:0] tm_cnt;
  topm_buffer #(.M(TOPM), .DW(DW), .IW(KW)) u_topm (
    .clk, .rst_n, .clr(tm_clr), .ins_valid(tm_ins), .ins_dist(tm_d), .ins_idx(tm_i),
    .top_dist(tm_dist), .top_idx(tm_idx), .count(tm_cnt));

  // ---------------- control registers ----------------
  logic [KW:0]     K, KP;             // classes, target
  logic [GW:0]     ngv;
  logic [KW:0]     m;                 // centroids chosen so far
  logic [KW-1:0]   cur;               // centroid under comparison
  logic [KW-1:0]   u;                 // sampled class
  logic [CKW-1:0]  c;                 // chunk counter
  logic [GW:0]     g;                 // group counter
  logic [KW:0]     i;                 // class / centroid counter
  logic [3:0]      it;                // refinement iteration
  logic            assign_mode;
  logic            issue_done;
  // pipeline stage 1
  logic            v1, v1_first, v1_last;
  logic [GW-1:0]   g1;
  logic [CKW-1:0]  c1;
  logic [KW:0]     i1;
  logic [KW-1:0]   u1;
  logic [DW-1:0]   ldb [PKL];         // local distance buffer
  logic [CB-1:0]   cent_q;
  logic [CB-1:0][VW-1:0] acc_q;
  logic [KW-1:0]   a1;                // centroid of the class in stage 1
  logic            fw_v;              // forwarding of the last written acc row
  logic [KW-1:0]   fw_a;
  logic [CB-1:0][VW-1:0] fw_row;

  // uniform draw of an index below n
  function automatic logic [KW:0] draw(input logic [15:0] r, input logic [KW:0] n);
    return (KW+1)'((32'(r[15:0]) * 32'(n)) >> 16);
  endfunction

  assign busy = (state != S_IDLE);

  // memory read addresses (one cycle latency everywhere)
  logic [$clog2(KMAX*NCHUNK)-1:0] cent_raddr;
  always_comb begin
    pm_rd_en = 1'b0; pm_rd_grp = '0; pm_rd_chunk = c;
    cent_raddr = $bits(cent_raddr)'(32'(cur) * NCHUNK + 32'(c));
    tm_clr = 1'b0; tm_ins = 1'b0; tm_d = '0; tm_i = '0;
    st_rd_cluster = u;
    unique case (state)
      S_COPY:   if (!issue_done) begin pm_rd_en = 1'b1; pm_rd_grp = GW'(32'(u) / PKL); end
      S_DIST, S_ASSIGN:
                if (!issue_done) begin pm_rd_en = 1'b1; pm_rd_grp = GW'(g); end
      S_TOPM:   if (!issue_done) begin
                  tm_ins = (dmin[GW'(32'(i) / PKL)][32'(i) % PKL] != 0);
                  tm_d = dmin[GW'(32'(i) / PKL)][32'(i) % PKL]; tm_i = KW'(i);
                end
      S_BUNDLE: if (!issue_done) begin pm_rd_en = 1'b1; pm_rd_grp = GW'(32'(i) / PKL); end
      S_THRESH: cent_raddr = $bits(cent_raddr)'(32'(i) * NCHUNK + 32'(c));
      S_WB:     cent_raddr = $bits(cent_raddr)'(32'(i) * NCHUNK + 32'(c));
      default: ;
    endcase
    if (state == S_DIST && issue_done && !v1 && 32'(m) != 32'(KP)) tm_clr = 1'b1;
  end

  always_ff @(posedge clk) begin
    cent_q <= cent[cent_raddr];
  end

  // acc row read address: in BUNDLE the centroid of the issued class,
  // in THRESH the centroid being binarised
  logic [KW-1:0] acc_raddr;
  assign acc_raddr = (state == S_THRESH) ? KW'(i) : asg[GW'(32'(i) / PKL)][32'(i) % PKL];
  always_ff @(posedge clk) acc_q <= accm[acc_raddr];

  // vote row after adding the class chunk in stage 1
  logic [CB-1:0][VW-1:0] acc_new;
  logic [CB-1:0]         cls_chunk;
  always_comb begin
    cls_chunk = pm_rd_data[32'(i1) % PKL];
    for (int b = 0; b < CB; b++)
      acc_new[b] = ((fw_v && fw_a == a1) ? fw_row[b] : acc_q[b]) + VW'(cls_chunk[b]);
  end

  // per-PE running Hamming distance including the returned chunk
  logic [DW-1:0] dnew [PKL];
  for (genvar k = 0; k < PKL; k++) begin : g_pe
    assign dnew[k] = (v1_first ? '0 : ldb[k]) + DW'(popcount_chunk(pm_rd_data[k] ^ cent_q));
  end

  // binarised centroid chunk in THRESH stage 1
  logic [CB-1:0] bin_chunk;
  always_comb
    for (int b = 0; b < CB; b++) begin
      logic [VW:0] two;
      two = {acc_q[b], 1'b0};
      bin_chunk[b] = (two > (VW+1)'(cnt[a1])) ? 1'b1 :
                     (two < (VW+1)'(cnt[a1])) ? 1'b0 : cent_q[b];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; K <= '0; KP <= '0; ngv <= '0; m <= '0; cur <= '0; u <= '0; c <= '0;
      g <= '0; i <= '0; it <= '0; assign_mode <= 1'b0; issue_done <= 1'b0;
      v1 <= 1'b0; v1_first <= 1'b0; v1_last <= 1'b0; g1 <= '0; c1 <= '0; i1 <= '0; u1 <= '0; a1 <= '0;
      fw_v <= 1'b0; fw_a <= '0; fw_row <= '0; done <= 1'b0;
      pm_wr_en <= 1'b0; pm_wr_cluster <= '0; pm_wr_chunk <= '0; pm_wr_data <= '0;
      st_we <= 1'b0; st_wr_cluster <= '0; st_wr_mu <= '0; st_wr_sigma <= '0;
      for (int k = 0; k < PKL; k++) ldb[k] <= '0;
    end else begin
      done <= 1'b0; pm_wr_en <= 1'b0; st_we <= 1'b0; v1 <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          K <= n_clusters; KP <= cfg_target; it <= '0;
          ngv <= (GW+1)'((32'(n_clusters) + PKL - 1) / PKL);
          m <= '0; assign_mode <= 1'b0;
          state <= S_FIRST;
        end
        // first centroid: uniform over all classes
        S_FIRST: begin
          u <= KW'(draw(rnd[31:16] ^ rnd[15:0], K)); c <= '0; issue_done <= 1'b0; state <= S_COPY;
        end
        // copy class u into centroid slot m, capture its statistics
        S_COPY: begin
          if (!issue_done) begin
            v1 <= 1'b1; c1 <= c; u1 <= u;
            if (32'(c) == NCHUNK - 1) issue_done <= 1'b1; else c <= c + 1'b1;
          end
          if (v1) cent[32'(m) * NCHUNK + 32'(c1)] <= pm_rd_data[32'(u1) % PKL];
          if (v1 && c1 == 0) begin smu[m[KW-1:0]] <= st_rd_mu; ssg[m[KW-1:0]] <= st_rd_sigma; end
          if (v1 && 32'(c1) == NCHUNK - 1) begin
            cur <= m[KW-1:0]; m <= m + 1'b1;
            g <= '0; c <= '0; issue_done <= 1'b0; state <= S_DIST;
          end
        end
        // distances of all classes to centroid cur (seeding or assignment)
        S_DIST, S_ASSIGN: begin
          if (!issue_done) begin
            v1 <= 1'b1; v1_first <= (c == 0); v1_last <= (32'(c) == NCHUNK - 1); g1 <= GW'(g);
            if (32'(c) == NCHUNK - 1) begin
              c <= '0;
              if (g == ngv - 1) issue_done <= 1'b1; else g <= g + 1'b1;
            end else c <= c + 1'b1;
          end
          if (v1) begin
            for (int k = 0; k < PKL; k++) begin
              ldb[k] <= dnew[k];
              if (v1_last) begin
                if (!assign_mode)
                  dmin[g1][k] <= (cur == 0 || dnew[k] < dmin[g1][k]) ? dnew[k] : dmin[g1][k];
                else if (cur == 0 || dnew[k] < dmin[g1][k]) begin
                  dmin[g1][k] <= dnew[k]; asg[g1][k] <= cur;
                end
              end
            end
          end
          if (issue_done && !v1) begin
            g <= '0; c <= '0; issue_done <= 1'b0;
            if (!assign_mode) begin
              if (32'(m) == 32'(KP)) begin i <= '0; state <= S_CLR; end
              else begin i <= '0; state <= S_TOPM; end
            end else begin
              if (32'(cur) == 32'(KP) - 1) begin
                c <= '0; i <= '0; state <= S_BUNDLE;
                for (int k = 0; k < 32'(KMAX); k++) cnt[k] <= '0;
              end else cur <= cur + 1'b1;
            end
          end
        end
        // stream d through the Top-M buffer
        S_TOPM: begin
          if (!issue_done) begin
            if (i == K - 1) issue_done <= 1'b1; else i <= i + 1'b1;
          end else begin
            issue_done <= 1'b0; state <= S_PICK;
          end
        end
        S_PICK: begin
          if (tm_cnt == 0) u <= KW'(m);   // degenerate: all remaining classes are copies
          else u <= tm_idx[draw(rnd[31:16] ^ rnd[15:0], (KW+1)'(tm_cnt))];
          c <= '0; issue_done <= 1'b0; state <= S_COPY;
        end
        // clear the vote rows before refinement
        S_CLR: begin
          accm[i[KW-1:0]] <= '0;
          if (32'(i) == 32'(KP) - 1 || 32'(i) == KMAX - 1) begin
            i <= '0;
            if (cfg_iters == 0) begin c <= '0; state <= S_WB; issue_done <= 1'b0; end
            else begin assign_mode <= 1'b1; cur <= '0; g <= '0; c <= '0; issue_done <= 1'b0; state <= S_ASSIGN; end
          end else i <= i + 1'b1;
        end
        // add every class chunk c into its centroid's vote row
        S_BUNDLE: begin
          if (!issue_done) begin
            v1 <= 1'b1; i1 <= i; a1 <= asg[GW'(32'(i) / PKL)][32'(i) % PKL];
            if (i == K - 1) issue_done <= 1'b1; else i <= i + 1'b1;
          end
          fw_v <= 1'b0;
          if (v1) begin
            accm[a1] <= acc_new;
            fw_v <= 1'b1; fw_a <= a1; fw_row <= acc_new;
            if (c == 0) cnt[a1] <= cnt[a1] + 1'b1;
          end
          if (issue_done && !v1) begin
            issue_done <= 1'b0; i <= '0; fw_v <= 1'b0; state <= S_THRESH;
          end
        end
        // binarise chunk c of every centroid and clear its vote row
        S_THRESH: begin
          if (!issue_done) begin
            v1 <= 1'b1; a1 <= KW'(i);
            if (32'(i) == 32'(KP) - 1) issue_done <= 1'b1; else i <= i + 1'b1;
          end
          if (v1) begin
            cent[32'(a1) * NCHUNK + 32'(c)] <= bin_chunk;
            accm[a1] <= '0;
          end
          if (issue_done && !v1) begin
            issue_done <= 1'b0; i <= '0;
            if (32'(c) == NCHUNK - 1) begin
              c <= '0;
              if (it == cfg_iters - 1) state <= S_WB;
              else begin it <= it + 1'b1; cur <= '0; g <= '0; state <= S_ASSIGN; end
            end else begin c <= c + 1'b1; state <= S_BUNDLE; end
          end
        end
        // write the centroids back as clusters 0 .. K'-1
        S_WB: begin
          if (!issue_done) begin
            v1 <= 1'b1; a1 <= KW'(i); c1 <= c;
            if (32'(c) == NCHUNK - 1) begin
              c <= '0;
              if (32'(i) == 32'(KP) - 1) issue_done <= 1'b1; else i <= i + 1'b1;
            end else c <= c + 1'b1;
          end
          if (v1) begin
            pm_wr_en <= 1'b1; pm_wr_cluster <= a1; pm_wr_chunk <= c1; pm_wr_data <= cent_q;
            if (c1 == 0) begin
              st_we <= 1'b1; st_wr_cluster <= a1; st_wr_mu <= smu[a1]; st_wr_sigma <= ssg[a1];
            end
          end
          if (issue_done && !v1) begin issue_done <= 1'b0; state <= S_DONE; end
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

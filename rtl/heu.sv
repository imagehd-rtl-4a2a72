// heu -- Hyperdimensional Encoding Unit: ID-level encoding of a feature vector.
//
// h = MAJ_i ( P[i] XOR L[level(z_i)] ) over the F features of one sample.
// Each feature z_i (INT8) is quantised to a level index; the level table L
// holds one random HV per level, the position table P one random HV per
// feature. Binding is XOR, bundling is a per-bit vote with a majority
// threshold.
//
// The unit is a PC x (PW x PB) array: per cycle it takes PC features (one
// feature group) and one HV chunk of PW words of PB bits. It works chunk by
// chunk over the HV dimension: for chunk c it walks all F/PC feature groups,
// XORs the PC position words with the PC selected level words, reduces the PC
// bound bits of every dimension with an adder tree (local accumulator) and adds
// that into the chunk's global accumulator. After the last group the chunk is
// thresholded (bit = 1 when more than F/2 votes are 1) and streamed out, so no
// accumulator over the full D dimensions is ever held.
//
// Memories: the position table is split into PC banks, bank b holding features
// b, b+PC, b+2PC, ..., so the PC lanes never collide. The level table is split
// into one bank per level; every cycle each bank delivers its word of the
// current chunk into a level chunk buffer and each lane selects its level from
// it, which gives every lane conflict-free access (the paper uses a banked level
// table with arbitration; this design avoids the arbitration this way).
// Both tables are written through write ports (the paper stores fixed random
// tables on chip; how they are filled is not described).
//
// Interfaces: feature stream f_* (one INT8 feature per beat, features 0..F-1);
// HV chunk stream hv_* (chunk index and last flag; valid/ready, the encoder
// stalls while a chunk is not taken).
// Timing: F cycles to load a sample, then NCHUNK * F/PC cycles plus two
// pipeline cycles to encode it; loading of the next sample starts when the
// last chunk has been issued.
//
// From the paper: the PC x (PW x PB) organisation (16 x 4 x 64), the XOR
// binding, adder-tree reduction into local then global accumulators, chunk-wise
// thresholding and streaming, banked position table. This design's own
// choices: D, F, number of levels, the quantiser (the top log2(L) bits of the
// offset-binary feature), strict-majority threshold with ties going to 0.
module heu
  import imagehd_pkg::*;
#(
  parameter int unsigned D   = HV_D,
  parameter int unsigned F   = N_FEAT,
  parameter int unsigned L   = N_LEVELS,
  parameter int unsigned PCL = PC,
  localparam int unsigned CB     = CHUNK_BITS,
  localparam int unsigned NCHUNK = D / CB,
  localparam int unsigned NGRP   = F / PCL,
  localparam int unsigned LW     = $clog2(L),
  localparam int unsigned CKW    = (NCHUNK > 1) ? $clog2(NCHUNK) : 1,
  localparam int unsigned GW     = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned FW     = $clog2(F),
  localparam int unsigned AW     = $clog2(F + 1),
  localparam int unsigned TW     = $clog2(PCL + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // table write ports
  input  logic                 lt_we,
  input  logic [LW-1:0]        lt_level,
  input  logic [CKW-1:0]       lt_chunk,
  input  logic [CB-1:0]        lt_data,
  input  logic                 pt_we,
  input  logic [FW-1:0]        pt_feat,
  input  logic [CKW-1:0]       pt_chunk,
  input  logic [CB-1:0]        pt_data,
  // feature stream
  input  logic                 f_valid,
  output logic                 f_ready,
  input  logic [7:0]           f_data,
  // encoded HV chunk stream
  output logic                 hv_valid,
  input  logic                 hv_ready,
  output logic [CB-1:0]        hv_chunk,
  output logic [CKW-1:0]       hv_idx,
  output logic                 hv_last,
  output logic                 busy
);

  // ---------------- memories ----------------
  logic [CB-1:0]        lmem [L][NCHUNK];
  logic [CB-1:0]        pmem [PCL][NGRP * NCHUNK];
  logic [PCL-1:0][LW-1:0] fbuf [NGRP];          // level indices, PC per word

  always_ff @(posedge clk) begin
    if (lt_we) lmem[lt_level][lt_chunk] <= lt_data;
    if (pt_we) pmem[32'(pt_feat) % PCL][(32'(pt_feat) / PCL) * NCHUNK + 32'(pt_chunk)] <= pt_data;
  end

  // ---------------- load phase ----------------
  typedef enum logic {S_LOAD, S_ENC} state_t;
  state_t state;
  logic [FW-1:0]  fcnt;
  logic [LW-1:0]  qlev;
  assign qlev    = LW'({~f_data[7], f_data[6:0]} >> (8 - LW));
  assign f_ready = (state == S_LOAD);

  always_ff @(posedge clk) begin
    if (state == S_LOAD && f_valid) fbuf[32'(fcnt) / PCL][32'(fcnt) % PCL] <= qlev;
  end

  // ---------------- encode pipeline ----------------
  logic            stall;
  logic [CKW-1:0]  ch;       // issue chunk
  logic [GW-1:0]   g;        // issue group
  logic            iv, ifirst, ilast;       // read stage valid / flags
  logic [CKW-1:0]  ich;
  logic [CB-1:0]   lvl_q [L];               // level chunk buffer
  logic [CB-1:0]   pos_q [PCL];
  logic [PCL-1:0][LW-1:0] idx_q;
  logic [AW-1:0]   gacc [CB];               // global chunk accumulator
  logic [TW-1:0]   lacc [CB];               // local (adder tree) result

  assign stall = hv_valid && !hv_ready;

  always_ff @(posedge clk) begin
    if (!stall) begin
      for (int l = 0; l < L; l++) lvl_q[l] <= lmem[l][ch];
      for (int b = 0; b < PCL; b++) pos_q[b] <= pmem[b][32'(g) * NCHUNK + 32'(ch)];
      idx_q <= fbuf[g];
    end
  end

  // bind + adder tree: PC bound bits per dimension reduced to a count
  for (genvar k = 0; k < CB; k++) begin : g_tree
    always_comb begin
      lacc[k] = '0;
      for (int b = 0; b < PCL; b++)
        lacc[k] += TW'(pos_q[b][k] ^ lvl_q[idx_q[b]][k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; fcnt <= '0; ch <= '0; g <= '0;
      iv <= 1'b0; ifirst <= 1'b0; ilast <= 1'b0; ich <= '0;
      hv_valid <= 1'b0; hv_chunk <= '0; hv_idx <= '0; hv_last <= 1'b0;
      for (int k = 0; k < CB; k++) gacc[k] <= '0;
    end else begin
      if (hv_valid && hv_ready) hv_valid <= 1'b0;
      if (!stall) begin
        // issue
        iv <= 1'b0;
        unique case (state)
          S_LOAD: if (f_valid) begin
            if (32'(fcnt) == F - 1) begin
              fcnt <= '0; state <= S_ENC; ch <= '0; g <= '0;
            end else fcnt <= fcnt + 1'b1;
          end
          S_ENC: begin
            iv     <= 1'b1;
            ifirst <= (g == 0);
            ilast  <= (32'(g) == NGRP - 1);
            ich    <= ch;
            if (32'(g) == NGRP - 1) begin
              g <= '0;
              if (32'(ch) == NCHUNK - 1) begin ch <= '0; state <= S_LOAD; end
              else ch <= ch + 1'b1;
            end else g <= g + 1'b1;
          end
          default: state <= S_LOAD;
        endcase
        // accumulate / threshold
        if (iv) begin
          for (int k = 0; k < CB; k++)
            gacc[k] <= (ifirst ? '0 : gacc[k]) + AW'(lacc[k]);
          if (ilast) begin
            hv_valid <= 1'b1;
            hv_idx   <= ich;
            hv_last  <= (32'(ich) == NCHUNK - 1);
            for (int k = 0; k < CB; k++)
              hv_chunk[k] <= (32'(ifirst ? AW'(0) : gacc[k]) + 32'(lacc[k]) > F / 2);
          end
        end
      end
    end
  end

  assign busy = (state != S_LOAD) || iv || hv_valid;

endmodule

// proto_mem -- class prototype buffer: the single-tier, bounded cluster memory.
//
// Holds up to KMAX binary cluster HVs of D bits and, per cluster, the running
// similarity statistics mu and sigma-hat used by the novelty test. The HVs are
// split into PK banks (cluster c lives in bank c mod PK at word
// (c / PK) * NCHUNK + chunk), so one read returns the same chunk of PK
// consecutive clusters -- one per cluster PE of the learning and merge units.
//
// Ports: a row read port (group of PK clusters, chunk; data one cycle later),
// a single-cluster chunk write port, a statistics read port (one cycle latency)
// and a statistics write port. The learning unit and the merge unit take turns
// on these ports (the top multiplexes them by mode). mu and sigma are unsigned
// fixed point with 8 fractional bits, in units of matching bits.
//
// From the paper: one cluster memory (no short/long-term split), bounded and on
// chip, storing (h_c, mu_c, sigma_c) per cluster; shared by the learning and
// merge units (compute-flow figure). The banking by PK and the fixed-point
// statistics format are this design's choices.
module proto_mem
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
  localparam int unsigned KW     = $clog2(KMAX)
) (
  input  logic                    clk,
  input  logic                    rd_en,
  input  logic [GW-1:0]           rd_grp,
  input  logic [CKW-1:0]          rd_chunk,
  output logic [PKL-1:0][CB-1:0]  rd_data,
  input  logic                    wr_en,
  input  logic [KW-1:0]           wr_cluster,
  input  logic [CKW-1:0]          wr_chunk,
  input  logic [CB-1:0]           wr_data,
  input  logic [KW-1:0]           st_rd_cluster,
  output logic [23:0]             st_rd_mu,
  output logic [23:0]             st_rd_sigma,
  input  logic                    st_we,
  input  logic [KW-1:0]           st_wr_cluster,
  input  logic [23:0]             st_wr_mu,
  input  logic [23:0]             st_wr_sigma
);

  logic [CB-1:0] bank [PKL][NG * NCHUNK];
  logic [23:0]   mu   [KMAX];
  logic [23:0]   sg   [KMAX];

  always_ff @(posedge clk) begin
    if (wr_en)
      bank[32'(wr_cluster) % PKL][(32'(wr_cluster) / PKL) * NCHUNK + 32'(wr_chunk)] <= wr_data;
    if (rd_en)
      for (int b = 0; b < PKL; b++) rd_data[b] <= bank[b][32'(rd_grp) * NCHUNK + 32'(rd_chunk)];
  end

  always_ff @(posedge clk) begin
    if (st_we) begin
      mu[st_wr_cluster] <= st_wr_mu;
      sg[st_wr_cluster] <= st_wr_sigma;
    end
    st_rd_mu    <= mu[st_rd_cluster];
    st_rd_sigma <= sg[st_rd_cluster];
  end

endmodule

// conv3x3_stem -- the dedicated 3x3 convolution engine for the first network
// layer (a full, not depthwise, 3x3 convolution over the image channels).
//
// The engine takes one input tile (cfg_w x cfg_h pixels, CIN channels) into a
// tile buffer, then computes the output tile: for each output pixel group
// (P pixels) and each output channel, the P pixel lanes walk the 9 * CIN taps
// together, one multiply-accumulate per lane per cycle, with zero padding of one
// pixel at the tile border and stride 1 or 2. The INT32 sum plus bias is
// requantised (rounding shift, INT8 saturation, optional ReLU6 clip) and sent
// as one output beat.
//
// Streams (valid/ready) use the CNN engine's format: one beat = one INT8
// channel value of P adjacent pixels with a lane mask; per pixel group the
// channels in order; groups in raster order. cfg_w must be a multiple of P, so
// the input mask is not needed and is not read; the output mask marks the
// partial last group of a stride-2 row.
// Weights: word (oc, t) with t = 9*ic + 3*dy + dx holds one INT8 tap; bias word
// oc holds the INT32 bias.
// Timing: cfg_h * cfg_w/P * CIN load cycles, then per output beat 9*CIN MAC
// cycles plus one output cycle.
//
// From the paper: a dedicated 3x3 convolution engine that processes the input
// image tiles once before the inverted residual blocks; the tile size. The
// paper only names this engine, so everything about its inside is this
// design's own, simplest choice: a whole-tile input buffer, tap-serial and
// pixel-parallel MACs, MobileNetV2's stem sizes (3 -> 32 channels, stride 2) as
// defaults.
module conv3x3_stem
  import imagehd_pkg::*;
#(
  parameter int unsigned P        = P_PIX,
  parameter int unsigned CIN      = 3,
  parameter int unsigned COUT_MAX = 32,
  parameter int unsigned MAX_W    = TILE_W,
  parameter int unsigned MAX_H    = TILE_H,
  localparam int unsigned NT      = 9 * CIN,
  localparam int unsigned TW      = $clog2(NT),
  localparam int unsigned OW      = $clog2(COUT_MAX + 1),
  localparam int unsigned OAW     = (COUT_MAX > 1) ? $clog2(COUT_MAX) : 1,
  localparam int unsigned XW      = $clog2(MAX_W + 2),
  localparam int unsigned YW      = $clog2(MAX_H + 1),
  localparam int unsigned CW      = (CIN > 1) ? $clog2(CIN) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [OW-1:0]        cfg_out_ch,
  input  logic [XW-1:0]        cfg_w,
  input  logic [YW-1:0]        cfg_h,
  input  logic                 cfg_stride2,
  input  logic [4:0]           cfg_shift,
  input  logic                 cfg_relu,
  input  logic signed [7:0]    cfg_relu_max,
  input  logic                 w_we,
  input  logic [OAW-1:0]       w_oc,
  input  logic [TW-1:0]        w_tap,
  input  logic [7:0]           w_data,
  input  logic                 b_we,
  input  logic [OAW-1:0]       b_oc,
  input  logic [31:0]          b_data,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [P-1:0][7:0]    in_data,
  input  logic [P-1:0]         in_mask,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [P-1:0][7:0]    out_data,
  output logic [P-1:0]         out_mask
);

  logic [7:0]  tbuf [MAX_H][MAX_W][CIN];     // input tile buffer
  logic [7:0]  wmem [COUT_MAX][NT];
  logic [31:0] bmem [COUT_MAX];

  typedef enum logic [1:0] {S_LOAD, S_MAC, S_OUT} state_t;
  state_t state;

  logic [YW-1:0] lr;  logic [XW-1:0] lc;  logic [CW-1:0] lch;   // load position
  logic [YW-1:0] orow; logic [XW-1:0] ocol; logic [OAW-1:0] oc; // output position
  logic [TW-1:0] tap;
  logic signed [31:0] acc [P];
  logic [XW-1:0] wo;
  logic [YW-1:0] ho;

  assign wo = cfg_stride2 ? XW'((32'(cfg_w) + 1) >> 1) : cfg_w;
  assign ho = cfg_stride2 ? YW'((32'(cfg_h) + 1) >> 1) : cfg_h;
  assign in_ready = (state == S_LOAD);

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_oc][w_tap] <= w_data;
    if (b_we) bmem[b_oc] <= b_data;
    if (state == S_LOAD && in_valid)
      for (int p = 0; p < P; p++) tbuf[($clog2(MAX_H))'(lr)][($clog2(MAX_W))'(32'(lc) + p)][lch] <= in_data[p];
  end

  // tap t of lane p: input pixel (orow*s + dy - 1, (ocol+p)*s + dx - 1), channel ic
  logic signed [7:0] px [P];
  logic signed [7:0] wt;
  always_comb begin
    logic [CW-1:0] ic;
    int dy, dx, s, y, x;
    ic = CW'(32'(tap) / 9); dy = (32'(tap) % 9) / 3; dx = 32'(tap) % 3;
    s  = cfg_stride2 ? 2 : 1;
    wt = signed'(wmem[oc][tap]);
    for (int p = 0; p < P; p++) begin
      y = 32'(orow) * s + dy - 1;
      x = (32'(ocol) + p) * s + dx - 1;
      if (y < 0 || y >= 32'(cfg_h) || x < 0 || x >= 32'(cfg_w)) px[p] = 8'sd0;
      else px[p] = signed'(tbuf[y][x][ic]);
    end
  end

  always_comb
    for (int p = 0; p < P; p++) begin
      out_data[p] = requant(acc[p] + signed'(bmem[oc]), cfg_shift, cfg_relu, cfg_relu_max);
      out_mask[p] = (32'(ocol) + p) < 32'(wo);
    end
  assign out_valid = (state == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; lr <= '0; lc <= '0; lch <= '0;
      orow <= '0; ocol <= '0; oc <= '0; tap <= '0;
      for (int p = 0; p < P; p++) acc[p] <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (32'(lch) == CIN - 1) begin
            lch <= '0;
            if (32'(lc) + P >= 32'(cfg_w)) begin
              lc <= '0;
              if (32'(lr) == 32'(cfg_h) - 1) begin
                lr <= '0; state <= S_MAC;
                orow <= '0; ocol <= '0; oc <= '0; tap <= '0;
                for (int p = 0; p < P; p++) acc[p] <= '0;
              end else lr <= lr + 1'b1;
            end else lc <= lc + XW'(P);
          end else lch <= lch + 1'b1;
        end
        S_MAC: begin
          for (int p = 0; p < P; p++) acc[p] <= acc[p] + 32'(px[p]) * 32'(wt);
          if (32'(tap) == NT - 1) state <= S_OUT;
          else tap <= tap + 1'b1;
        end
        S_OUT: if (out_ready) begin
          tap <= '0; state <= S_MAC;
          for (int p = 0; p < P; p++) acc[p] <= '0;
          if (32'(oc) == 32'(cfg_out_ch) - 1) begin
            oc <= '0;
            if (32'(ocol) + P >= 32'(wo)) begin
              ocol <= '0;
              if (32'(orow) == 32'(ho) - 1) begin orow <= '0; state <= S_LOAD; end
              else orow <= orow + 1'b1;
            end else ocol <= ocol + XW'(P);
          end else oc <= oc + 1'b1;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

endmodule

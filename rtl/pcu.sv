// pcu -- Pointwise (1x1) Convolution Unit, INT8.
//
// A 1x1 convolution is a dot product, per pixel, between the pixel's channel
// vector and each filter. The unit has P pixel-parallel processing elements
// (PPEs). Each PPE holds one pixel's channel vector and computes M output
// channels per pass; a pass walks the input channels, one multiply-accumulate
// per PPE and output channel per cycle. The same unit serves as the expansion
// (InCh -> ExpCh) and the projection (ExpCh -> OutCh) stage of an inverted
// residual block; the channel counts are run-time configuration.
//
// Streams (valid/ready, a beat transfers when both are high):
//   in  : one INT8 channel value for each of P pixels of a pixel group, with a
//         lane mask for a partial last group. A group's channels arrive in order
//         0 .. cfg_in_ch-1.
//   out : same format, channels 0 .. cfg_out_ch-1 of the same pixel group.
// Weight buffer: word address og*cfg_in_ch + ic holds the M INT8 weights of
//   output channels og*M .. og*M+M-1 for input channel ic (the buffer is
//   partitioned along output channels, as in the paper). Bias buffer: word og
//   holds M INT32 biases. Both are written through plain write ports; in the
//   full system they are filled from device DRAM.
// Timing per pixel group: cfg_in_ch load cycles, then per output group of M
//   channels cfg_in_ch + 1 MAC cycles and M output beats.
//
// From the paper: P = 2 PPEs, M = 4 output channels per PPE, weights on chip
// and partitioned by output channel. This design's own choices: channel-serial
// pixel-parallel streaming, the bias term, requantisation by a rounding right
// shift with optional clipped ReLU, and no overlap between loading a pixel
// group and computing on it.
module pcu
  import imagehd_pkg::*;
#(
  parameter int unsigned P          = P_PIX,
  parameter int unsigned M          = M_OCH,
  parameter int unsigned MAX_IN_CH  = 960,
  parameter int unsigned MAX_OUT_CH = 1280,
  parameter int unsigned W_DEPTH    = 102400,   // 320 x 1280 / M words
  localparam int unsigned CHW       = $clog2(MAX_OUT_CH + 1),
  localparam int unsigned WAW       = $clog2(W_DEPTH),
  localparam int unsigned BAW       = $clog2(MAX_OUT_CH / M)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration, held stable while a layer runs
  input  logic [CHW-1:0]          cfg_in_ch,
  input  logic [CHW-1:0]          cfg_out_ch,
  input  logic [4:0]              cfg_shift,
  input  logic                    cfg_relu,
  input  logic signed [7:0]       cfg_relu_max,
  // weight / bias buffer write ports
  input  logic                    w_we,
  input  logic [WAW-1:0]          w_addr,
  input  logic [M-1:0][7:0]       w_data,
  input  logic                    b_we,
  input  logic [BAW-1:0]          b_addr,
  input  logic [M-1:0][31:0]      b_data,
  // input stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [P-1:0][7:0]       in_data,
  input  logic [P-1:0]            in_mask,
  // output stream
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [P-1:0][7:0]       out_data,
  output logic [P-1:0]            out_mask
);

  typedef enum logic [1:0] {S_LOAD, S_MAC, S_OUT} state_t;
  state_t state;

  logic [M-1:0][7:0]  wmem [W_DEPTH];
  logic [M-1:0][31:0] bmem [MAX_OUT_CH / M];
  logic [7:0]         fbuf [P][MAX_IN_CH];

  logic [CHW-1:0] ld_cnt, ic, og;
  logic [WAW-1:0] wbase;
  logic [P-1:0]   mask_q;

  // MAC pipeline: the cycle after an input channel is issued, its weights and
  // features are in w_q / f_q and are accumulated
  logic                     v1, last1;
  logic [M-1:0][7:0]        w_q;
  logic [P-1:0][7:0]        f_q;
  logic signed [31:0]       acc [P][M];
  logic [M-1:0][31:0]       bias_q;
  logic [$clog2(M+1)-1:0]   ocnt;

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
    if (b_we) bmem[b_addr] <= b_data;
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid)
      for (int p = 0; p < P; p++) fbuf[p][$clog2(MAX_IN_CH)'(ld_cnt)] <= in_data[p];
  end

  // stage-1 reads
  always_ff @(posedge clk) begin
    w_q    <= wmem[wbase + WAW'(ic)];
    bias_q <= bmem[og[BAW-1:0]];
    for (int p = 0; p < P; p++) f_q[p] <= fbuf[p][$clog2(MAX_IN_CH)'(ic)];
  end

  assign in_ready = (state == S_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; ld_cnt <= '0; ic <= '0; og <= '0; wbase <= '0;
      mask_q <= '0; v1 <= 1'b0; last1 <= 1'b0; ocnt <= '0;
      for (int p = 0; p < P; p++) for (int j = 0; j < M; j++) acc[p][j] <= '0;
    end else begin
      v1 <= 1'b0; last1 <= 1'b0;
      unique case (state)
        S_LOAD: if (in_valid) begin
          mask_q <= in_mask;
          if (ld_cnt == cfg_in_ch - 1) begin
            ld_cnt <= '0; state <= S_MAC; ic <= '0; og <= '0; wbase <= '0;
            for (int p = 0; p < P; p++) for (int j = 0; j < M; j++) acc[p][j] <= '0;
          end else ld_cnt <= ld_cnt + 1'b1;
        end
        S_MAC: begin
          if (ic < cfg_in_ch) begin
            v1 <= 1'b1;
            last1 <= (ic == cfg_in_ch - 1);
            ic <= ic + 1'b1;
          end
          if (v1)
            for (int p = 0; p < P; p++)
              for (int j = 0; j < M; j++)
                acc[p][j] <= acc[p][j] + 32'(signed'(f_q[p])) * 32'(signed'(w_q[j]));
          if (v1 && last1) begin
            state <= S_OUT; ocnt <= '0;
          end
        end
        S_OUT: if (out_ready) begin
          if (32'(ocnt) == M - 1) begin
            ocnt <= '0;
            if (32'(og) == 32'(cfg_out_ch) / M - 1) begin
              state <= S_LOAD;
            end else begin
              og <= og + 1'b1; ic <= '0; wbase <= wbase + WAW'(cfg_in_ch); state <= S_MAC;
              for (int p = 0; p < P; p++) for (int j = 0; j < M; j++) acc[p][j] <= '0;
            end
          end else ocnt <= ocnt + 1'b1;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  always_comb begin
    out_valid = (state == S_OUT);
    out_mask  = mask_q;
    for (int p = 0; p < P; p++)
      out_data[p] = requant(acc[p][$clog2(M)'(ocnt)] + signed'(bias_q[$clog2(M)'(ocnt)]), cfg_shift, cfg_relu, cfg_relu_max);
  end

endmodule

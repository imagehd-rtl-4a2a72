// irb -- streaming inverted residual block (the MobileNetV2 building block).
//
// Dataflow: input buffer -> expansion PCU (1x1, InCh -> ExpCh, ReLU6) ->
// DCU (3x3 depthwise, stride 1 or 2, ReLU6) -> projection PCU (1x1,
// ExpCh -> OutCh, linear) -> residual adder -> output. The stages are
// connected by valid/ready streams and run concurrently on different pixels;
// each unit's input and output registers play the part of the FIFOs between
// stages, with a depth of one beat.
// When the stride is 1 and InCh = OutCh, the input stream is also written into
// the input buffer, a FIFO, and the residual adder adds each buffered input
// value to the matching projection output (INT8, saturating). For the first
// MobileNetV2 block (expansion factor 1) the expansion PCU is bypassed
// (cfg_skip_expand); with the depthwise stage bypassed as well (cfg_skip_dw) the
// projection PCU alone computes a plain 1x1 convolution, which is how the final
// 1x1 convolution of the network runs on the same hardware.
//
// Stream format everywhere: one beat = one INT8 channel value of P adjacent
// pixels (lane mask for a partial group), channels in order per pixel group,
// pixel groups in raster order over a tile of cfg_w x cfg_h pixels.
// Weight write ports of the three units are brought out unchanged.
// Timing: set by the slowest stage; the expansion and projection PCUs need
// about InCh + ExpCh/M*(InCh+1+M) and ExpCh + OutCh/M*(ExpCh+1+M) cycles per
// pixel group.
//
// From the paper: the PCU-DCU-PCU block with input buffer and residual adder
// for stride 1, streaming stages running concurrently, a tile of 32 x 32 pixels, the reuse of the
// PCU for the final 1x1 convolution. This design's own choices: the input
// residual condition stride 1 *and* InCh = OutCh (the paper states only the
// stride; without equal channel counts there is nothing to add), the
// one-beat coupling instead of deeper FIFOs, the input
// buffer depth (three tile rows of up to 160 channels, enough for every
// residual block of MobileNetV2 at this tile width), the residual arithmetic
// (both operands taken on the same scale), the bypass controls, ReLU6 on the
// expansion and depthwise outputs and a linear projection.
module irb
  import imagehd_pkg::*;
#(
  parameter int unsigned P          = P_PIX,
  parameter int unsigned M          = M_OCH,
  parameter int unsigned N          = N_DPE,
  parameter int unsigned MAX_IN_CH  = 960,
  parameter int unsigned MAX_OUT_CH = 1280,
  parameter int unsigned W_DEPTH    = 102400,
  parameter int unsigned MAX_W      = TILE_W,
  parameter int unsigned MAX_H      = TILE_H,
  parameter int unsigned RES_DEPTH  = 3 * (TILE_W / P_PIX) * 160,
  localparam int unsigned CHW       = $clog2(MAX_OUT_CH + 1),
  localparam int unsigned WAW       = $clog2(W_DEPTH),
  localparam int unsigned BAW       = $clog2(MAX_OUT_CH / M),
  localparam int unsigned DCW       = $clog2(MAX_IN_CH + 1),
  localparam int unsigned DKW       = $clog2(MAX_IN_CH / N + 1),
  localparam int unsigned XW        = $clog2(MAX_W + 2),
  localparam int unsigned YW        = $clog2(MAX_H + 1),
  localparam int unsigned RAW       = $clog2(RES_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // layer configuration
  input  logic [CHW-1:0]       cfg_in_ch,
  input  logic [CHW-1:0]       cfg_exp_ch,
  input  logic [CHW-1:0]       cfg_out_ch,
  input  logic [XW-1:0]        cfg_w,
  input  logic [YW-1:0]        cfg_h,
  input  logic                 cfg_stride2,
  input  logic                 cfg_skip_expand,
  input  logic                 cfg_skip_dw,
  input  logic [4:0]           cfg_shift_e,
  input  logic [4:0]           cfg_shift_d,
  input  logic [4:0]           cfg_shift_p,
  input  logic signed [7:0]    cfg_relu6,
  // weight buffers
  input  logic                 we_w_we,
  input  logic [WAW-1:0]       we_w_addr,
  input  logic [M-1:0][7:0]    we_w_data,
  input  logic                 we_b_we,
  input  logic [BAW-1:0]       we_b_addr,
  input  logic [M-1:0][31:0]   we_b_data,
  input  logic                 wd_we,
  input  logic [$clog2(N)-1:0] wd_bank,
  input  logic [DKW-1:0]       wd_addr,
  input  logic [8:0][7:0]      wd_taps,
  input  logic [31:0]          wd_bias,
  input  logic                 wp_w_we,
  input  logic [WAW-1:0]       wp_w_addr,
  input  logic [M-1:0][7:0]    wp_w_data,
  input  logic                 wp_b_we,
  input  logic [BAW-1:0]       wp_b_addr,
  input  logic [M-1:0][31:0]   wp_b_data,
  // streams
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [P-1:0][7:0]    in_data,
  input  logic [P-1:0]         in_mask,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [P-1:0][7:0]    out_data,
  output logic [P-1:0]         out_mask,
  output logic                 res_active        // residual path in use
);

  logic res_en;
  assign res_en = !cfg_stride2 && (cfg_in_ch == cfg_out_ch) && !cfg_skip_dw;
  assign res_active = res_en;

  // ---------------- input fork: expansion path + input buffer ----------------
  logic e_in_valid, e_in_ready;
  logic fifo_full, fifo_empty;
  logic [P-1:0][7:0] fifo_q;
  logic [RAW:0] fifo_cnt;
  logic [RAW-1:0] wp, rp;
  logic [P*8-1:0] rbuf [RES_DEPTH];
  logic fifo_push, fifo_pop;

  assign fifo_full  = (32'(fifo_cnt) == RES_DEPTH);
  assign fifo_empty = (fifo_cnt == 0);
  assign in_ready   = e_in_ready && (!res_en || !fifo_full);
  assign e_in_valid = in_valid && (!res_en || !fifo_full);
  assign fifo_push  = in_valid && in_ready && res_en;

  // ---------------- expansion PCU (or bypass) ----------------
  logic e_out_valid, e_out_ready; logic [P-1:0][7:0] e_out_data; logic [P-1:0] e_out_mask;
  logic pe_in_ready, pe_out_valid; logic [P-1:0][7:0] pe_out_data; logic [P-1:0] pe_out_mask;

  pcu #(.P(P), .M(M), .MAX_IN_CH(MAX_IN_CH), .MAX_OUT_CH(MAX_OUT_CH), .W_DEPTH(W_DEPTH)) u_pcu_e (
    .clk, .rst_n, .cfg_in_ch(cfg_in_ch), .cfg_out_ch(cfg_exp_ch), .cfg_shift(cfg_shift_e),
    .cfg_relu(1'b1), .cfg_relu_max(cfg_relu6),
    .w_we(we_w_we), .w_addr(we_w_addr), .w_data(we_w_data),
    .b_we(we_b_we), .b_addr(we_b_addr), .b_data(we_b_data),
    .in_valid(e_in_valid && !cfg_skip_expand), .in_ready(pe_in_ready), .in_data, .in_mask,
    .out_valid(pe_out_valid), .out_ready(e_out_ready && !cfg_skip_expand),
    .out_data(pe_out_data), .out_mask(pe_out_mask));

  assign e_in_ready  = cfg_skip_expand ? e_out_ready : pe_in_ready;
  assign e_out_valid = cfg_skip_expand ? e_in_valid  : pe_out_valid;
  assign e_out_data  = cfg_skip_expand ? in_data     : pe_out_data;
  assign e_out_mask  = cfg_skip_expand ? in_mask     : pe_out_mask;

  // ---------------- DCU (or bypass) ----------------
  logic d_out_valid, d_out_ready; logic [P-1:0][7:0] d_out_data; logic [P-1:0] d_out_mask;
  logic dd_in_ready, dd_out_valid; logic [P-1:0][7:0] dd_out_data; logic [P-1:0] dd_out_mask;
  logic [CHW-1:0] dw_ch;
  assign dw_ch = cfg_skip_expand ? cfg_in_ch : cfg_exp_ch;

  dcu #(.P(P), .N(N), .MAX_CH(MAX_IN_CH), .MAX_W(MAX_W), .MAX_H(MAX_H)) u_dcu (
    .clk, .rst_n, .cfg_ch(DCW'(dw_ch)), .cfg_w, .cfg_h, .cfg_stride2,
    .cfg_shift(cfg_shift_d), .cfg_relu(1'b1), .cfg_relu_max(cfg_relu6),
    .w_we(wd_we), .w_bank(wd_bank), .w_addr(wd_addr), .w_taps(wd_taps), .w_bias(wd_bias),
    .in_valid(e_out_valid && !cfg_skip_dw), .in_ready(dd_in_ready),
    .in_data(e_out_data), .in_mask(e_out_mask),
    .out_valid(dd_out_valid), .out_ready(d_out_ready && !cfg_skip_dw),
    .out_data(dd_out_data), .out_mask(dd_out_mask));

  assign e_out_ready = cfg_skip_dw ? d_out_ready : dd_in_ready;
  assign d_out_valid = cfg_skip_dw ? e_out_valid : dd_out_valid;
  assign d_out_data  = cfg_skip_dw ? e_out_data  : dd_out_data;
  assign d_out_mask  = cfg_skip_dw ? e_out_mask  : dd_out_mask;

  // ---------------- projection PCU ----------------
  logic p_out_valid, p_out_ready; logic [P-1:0][7:0] p_out_data; logic [P-1:0] p_out_mask;

  pcu #(.P(P), .M(M), .MAX_IN_CH(MAX_IN_CH), .MAX_OUT_CH(MAX_OUT_CH), .W_DEPTH(W_DEPTH)) u_pcu_p (
    .clk, .rst_n, .cfg_in_ch(dw_ch), .cfg_out_ch(cfg_out_ch), .cfg_shift(cfg_shift_p),
    .cfg_relu(1'b0), .cfg_relu_max(cfg_relu6),
    .w_we(wp_w_we), .w_addr(wp_w_addr), .w_data(wp_w_data),
    .b_we(wp_b_we), .b_addr(wp_b_addr), .b_data(wp_b_data),
    .in_valid(d_out_valid), .in_ready(d_out_ready), .in_data(d_out_data), .in_mask(d_out_mask),
    .out_valid(p_out_valid), .out_ready(p_out_ready), .out_data(p_out_data), .out_mask(p_out_mask));

  // ---------------- residual adder ----------------
  assign fifo_q    = rbuf[rp];
  assign out_valid = p_out_valid && (!res_en || !fifo_empty);
  assign p_out_ready = out_ready && (!res_en || !fifo_empty);
  assign fifo_pop  = out_valid && out_ready && res_en;
  assign out_mask  = p_out_mask;
  always_comb
    for (int p = 0; p < P; p++)
      out_data[p] = res_en ? sat8(32'(signed'(p_out_data[p])) + 32'(signed'(fifo_q[p])))
                           : p_out_data[p];

  always_ff @(posedge clk) if (fifo_push) rbuf[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; fifo_cnt <= '0;
    end else begin
      if (fifo_push) wp <= (32'(wp) == RES_DEPTH - 1) ? '0 : wp + 1'b1;
      if (fifo_pop)  rp <= (32'(rp) == RES_DEPTH - 1) ? '0 : rp + 1'b1;
      fifo_cnt <= fifo_cnt + (RAW+1)'(fifo_push) - (RAW+1)'(fifo_pop);
    end
  end

  // the input buffer never overflows or underflows
  assert property (@(posedge clk) disable iff (!rst_n) !(fifo_push && fifo_full));
  assert property (@(posedge clk) disable iff (!rst_n) !(fifo_pop && fifo_empty));

endmodule

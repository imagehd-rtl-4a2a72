// dcu -- Depthwise Convolution Unit: 3x3 depthwise INT8 convolution.
//
// Each channel is convolved with its own 3x3 filter (zero padding of one pixel,
// stride 1 or 2). N depthwise processing elements (DPEs) work in parallel on
// the same 3x3 window position; the channels are block-partitioned, so DPE d
// owns channels d*CPD .. d*CPD+CPD-1 with CPD = cfg_ch / N.
//
// Spatial context comes from three row buffers (rows r-1, r, r+1, used as a
// circular set of three slots) and a register sliding window of 3 rows x 3
// columns per DPE. Input rows are written into the slot after the oldest; once
// row r+1 is complete, centre row r is computed: for every channel index k the
// window sweeps the row one column per cycle, the old centre column becoming the
// left neighbour and a new column entering on the right. An output is produced
// only where row and column satisfy the stride condition (index mod stride = 0).
// After the last input row, the last centre row is computed with a zero row
// below it.
//
// Streams (valid/ready): a beat carries one INT8 channel value for P adjacent
// pixels of a row (lane mask for a partial group); per pixel group, channels
// 0 .. cfg_ch-1 in order; pixel groups in raster order. The output stream has
// the same format at the strided resolution; each output row is held in an
// output row buffer and streamed once computed.
// Weights: bank d, word k holds the nine INT8 taps (tap 3*dy+dx, dy,dx = 0..2
// from the top-left) and the INT32 bias of channel d*CPD+k.
// The tile width must be a multiple of P (true for every MobileNetV2 layer at
// a 32-pixel tile), so the input lane mask is not needed and is not read; the
// output mask marks the partial last group of a stride-2 row.
// Timing: input is not accepted while a centre row is being computed and
// streamed out (about CPD*(W+3) + groups*cfg_ch cycles per output row).
//
// From the paper: 3x3 depthwise, three BRAM row buffers that shift by row, a
// register sliding window shifting one column per cycle, N = 4 channel-parallel
// DPEs with block-partitioned channels and banked weights, the stride
// condition. This design's own choices: the stream format, the output row
// buffer (the "Buffer" between DCU and projection PCU in the compute-flow
// figure), zero padding at the tile edge, the bias and the requantisation.
module dcu
  import imagehd_pkg::*;
#(
  parameter int unsigned P      = P_PIX,
  parameter int unsigned N      = N_DPE,
  parameter int unsigned MAX_CH = 960,
  parameter int unsigned MAX_W  = TILE_W,
  parameter int unsigned MAX_H  = TILE_H,
  localparam int unsigned CPD   = MAX_CH / N,
  localparam int unsigned CW    = $clog2(MAX_CH + 1),
  localparam int unsigned KW    = $clog2(CPD + 1),
  localparam int unsigned XW    = $clog2(MAX_W + 2),
  localparam int unsigned YW    = $clog2(MAX_H + 1),
  localparam int unsigned RBA   = $clog2(MAX_W * CPD)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CW-1:0]        cfg_ch,       // channels (multiple of N)
  input  logic [XW-1:0]        cfg_w,        // input width (multiple of P)
  input  logic [YW-1:0]        cfg_h,        // input height
  input  logic                 cfg_stride2,  // 0: stride 1, 1: stride 2
  input  logic [4:0]           cfg_shift,
  input  logic                 cfg_relu,
  input  logic signed [7:0]    cfg_relu_max,
  input  logic                 w_we,
  input  logic [$clog2(N)-1:0] w_bank,
  input  logic [KW-1:0]        w_addr,
  input  logic [8:0][7:0]      w_taps,
  input  logic [31:0]          w_bias,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [P-1:0][7:0]    in_data,
  input  logic [P-1:0]         in_mask,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [P-1:0][7:0]    out_data,
  output logic [P-1:0]         out_mask
);

  typedef enum logic [1:0] {S_IN, S_COMP, S_OUT} state_t;
  state_t state;

  logic [7:0]        rb   [3][N][MAX_W * CPD];   // row buffers, banked by DPE
  logic [7:0]        ob   [N][MAX_W * CPD];      // output row buffer
  logic [8:0][7:0]   wtap [N][CPD];
  logic [31:0]       wb   [N][CPD];

  logic [KW-1:0] cpd;                // channels per DPE for this layer
  assign cpd = KW'(cfg_ch / CW'(N));

  // ---------------- input side ----------------
  logic [XW-1:0]         in_col;      // first column of the current group
  logic [KW-1:0]         in_k;
  logic [$clog2(N)-1:0]  in_d;
  logic [YW-1:0]         in_row;
  logic [1:0]            ws;          // slot being written

  assign in_ready = (state == S_IN);

  always_ff @(posedge clk) begin
    if (w_we) begin
      wtap[w_bank][w_addr] <= w_taps;
      wb[w_bank][w_addr]   <= w_bias;
    end
    if (state == S_IN && in_valid)
      for (int p = 0; p < P; p++)
        rb[ws][in_d][RBA'((32'(in_col) + p) * CPD + 32'(in_k))] <= in_data[p];
  end

  // ---------------- compute side ----------------
  logic [YW-1:0]  rc;                 // centre row being computed
  logic [1:0]     sa, sc, sb;         // slots of rows rc-1, rc, rc+1
  logic           va, vb;             // above / below rows exist
  logic           tail;               // last centre row still to do
  logic [KW-1:0]  ck;                 // channel index within each DPE
  logic [XW-1:0]  rd_col;             // column issued to the row buffers
  logic           issue_done;
  logic           sv;                 // a column was read last cycle
  logic [XW-1:0]  sv_col;
  logic [7:0]     win [N][3][3];      // [dpe][row][col], col 2 = newest
  logic           wv;                 // window holds a full neighbourhood
  logic [XW-1:0]  wv_ctr;             // centre column of the window
  logic [7:0]     rdat [N][3];

  always_ff @(posedge clk) begin
    for (int d = 0; d < N; d++) begin
      rdat[d][0] <= rb[sa][d][RBA'(32'(rd_col) * CPD + 32'(ck))];
      rdat[d][1] <= rb[sc][d][RBA'(32'(rd_col) * CPD + 32'(ck))];
      rdat[d][2] <= rb[sb][d][RBA'(32'(rd_col) * CPD + 32'(ck))];
    end
  end

  // DPE arithmetic on the current window
  logic signed [7:0] dpe_out [N];
  always_comb begin
    for (int d = 0; d < N; d++) begin
      logic signed [31:0] acc;
      acc = signed'(wb[d][ck]);
      for (int y = 0; y < 3; y++)
        for (int x = 0; x < 3; x++)
          acc += 32'(signed'(win[d][y][x])) * 32'(signed'(wtap[d][ck][3*y+x]));
      dpe_out[d] = requant(acc, cfg_shift, cfg_relu, cfg_relu_max);
    end
  end

  // ---------------- output side ----------------
  logic [XW-1:0]        wo;           // output width
  logic [XW-1:0]        oc;           // first output column of group
  logic [KW-1:0]        ok;
  logic [$clog2(N)-1:0] od;
  assign wo = cfg_stride2 ? XW'((32'(cfg_w) + 1) >> 1) : cfg_w;

  always_ff @(posedge clk) begin
    if (state == S_COMP && wv && (!cfg_stride2 || !wv_ctr[0]))
      for (int d = 0; d < N; d++)
        ob[d][RBA'((cfg_stride2 ? (32'(wv_ctr) >> 1) : 32'(wv_ctr)) * CPD + 32'(ck))] <= dpe_out[d];
  end

  always_comb begin
    out_valid = (state == S_OUT);
    for (int p = 0; p < P; p++) begin
      out_mask[p] = (32'(oc) + p) < 32'(wo);
      out_data[p] = ob[od][RBA'((32'(oc) + p) * CPD + 32'(ok))];
    end
  end

  // start the computation of centre row r_c (slot of the row below given)
  task automatic start_comp(input logic [YW-1:0] r_c, input logic [1:0] s_c, input logic has_below);
    rc <= r_c;
    sc <= s_c;
    sa <= (s_c == 0) ? 2'd2 : s_c - 1'b1;
    sb <= (s_c == 2) ? 2'd0 : s_c + 1'b1;
    va <= (r_c != 0);
    vb <= has_below;
    ck <= '0; rd_col <= '0; issue_done <= 1'b0; sv <= 1'b0; wv <= 1'b0;
    for (int d = 0; d < N; d++) for (int y = 0; y < 3; y++) for (int x = 0; x < 3; x++) win[d][y][x] <= '0;
    state <= S_COMP;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN; in_col <= '0; in_k <= '0; in_d <= '0; in_row <= '0; ws <= '0;
      rc <= '0; sa <= '0; sc <= '0; sb <= '0; va <= 1'b0; vb <= 1'b0;
      tail <= 1'b0; ck <= '0; rd_col <= '0; issue_done <= 1'b0; sv <= 1'b0; sv_col <= '0;
      wv <= 1'b0; wv_ctr <= '0; oc <= '0; ok <= '0; od <= '0;
      for (int d = 0; d < N; d++) for (int y = 0; y < 3; y++) for (int x = 0; x < 3; x++) win[d][y][x] <= '0;
    end else begin
      unique case (state)
        // ---- accept one input row ----
        S_IN: if (in_valid) begin
          if (in_k == cpd - 1) begin
            in_k <= '0;
            if (32'(in_d) == N - 1) begin
              in_d <= '0;
              if (32'(in_col) + P >= 32'(cfg_w)) begin
                // row complete
                in_col <= '0;
                if (in_row == cfg_h - 1) begin
                  in_row <= '0;
                  tail   <= (!cfg_stride2 || !in_row[0]);
                end else in_row <= in_row + 1'b1;
                ws <= (ws == 2) ? 2'd0 : ws + 1'b1;
                if (in_row != 0 && (!cfg_stride2 || in_row[0]))
                  start_comp(in_row - 1'b1, (ws == 0) ? 2'd2 : ws - 1'b1, 1'b1);
                else if (in_row == cfg_h - 1 && (!cfg_stride2 || !in_row[0]))
                  begin start_comp(in_row, ws, 1'b0); tail <= 1'b0; end
              end else in_col <= in_col + XW'(P);
            end else in_d <= in_d + 1'b1;
          end else in_k <= in_k + 1'b1;
        end
        // ---- sweep the window across the centre row ----
        S_COMP: begin
          // issue column reads 0 .. cfg_w (cfg_w is the right padding column)
          sv <= !issue_done;
          sv_col <= rd_col;
          if (!issue_done) begin
            if (rd_col == cfg_w) issue_done <= 1'b1;
            else rd_col <= rd_col + 1'b1;
          end
          if (sv) begin
            for (int d = 0; d < N; d++)
              for (int y = 0; y < 3; y++) begin
                win[d][y][0] <= win[d][y][1];
                win[d][y][1] <= win[d][y][2];
              end
            for (int d = 0; d < N; d++) begin
              win[d][0][2] <= (va && sv_col != cfg_w) ? rdat[d][0] : 8'd0;
              win[d][1][2] <= (sv_col != cfg_w)       ? rdat[d][1] : 8'd0;
              win[d][2][2] <= (vb && sv_col != cfg_w) ? rdat[d][2] : 8'd0;
            end
          end
          wv     <= sv && (sv_col != 0);
          wv_ctr <= sv_col - 1'b1;
          if (wv && wv_ctr == cfg_w - 1) begin
            // row sweep of this channel index done
            for (int d = 0; d < N; d++) for (int y = 0; y < 3; y++) for (int x = 0; x < 3; x++) win[d][y][x] <= '0;
            wv <= 1'b0; sv <= 1'b0;
            if (ck == cpd - 1) begin
              state <= S_OUT; oc <= '0; ok <= '0; od <= '0;
            end else begin
              ck <= ck + 1'b1; rd_col <= '0; issue_done <= 1'b0;
            end
          end
        end
        // ---- stream the output row ----
        S_OUT: if (out_ready) begin
          if (ok == cpd - 1) begin
            ok <= '0;
            if (32'(od) == N - 1) begin
              od <= '0;
              if (32'(oc) + P >= 32'(wo)) begin
                oc <= '0;
                if (tail) begin
                  tail <= 1'b0;
                  start_comp(rc + 1'b1, sb, 1'b0);
                end else state <= S_IN;
              end else oc <= oc + XW'(P);
            end else od <= od + 1'b1;
          end else ok <= ok + 1'b1;
        end
        default: state <= S_IN;
      endcase
    end
  end

endmodule

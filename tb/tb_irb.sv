// tb_irb -- self-checking testbench for the inverted residual block.
// Three layers run back to back through the same block, each compared value by
// value with a reference computed here from the same INT8 arithmetic:
//   1. expansion 4 -> 8, depthwise stride 1, projection 8 -> 4, residual add;
//   2. no expansion, depthwise stride 2 on 8 channels, projection 8 -> 4;
//   3. plain 1x1 convolution 8 -> 16 on a 3-pixel row (partial pixel group).
// The output stream sees random back-pressure.
module tb_irb;
  import imagehd_pkg::*;
  localparam int P = 2, M = 4, N = 4, MAXI = 16, MAXO = 16, WD = 256, MAXW = 8, MAXH = 8;
  localparam int RD = 3 * (MAXW / P) * MAXI;
  localparam logic signed [7:0] R6 = 8'sd96;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [$clog2(MAXO+1)-1:0] cfg_in_ch, cfg_exp_ch, cfg_out_ch;
  logic [$clog2(MAXW+2)-1:0] cfg_w; logic [$clog2(MAXH+1)-1:0] cfg_h;
  logic cfg_stride2, cfg_skip_expand, cfg_skip_dw;
  logic [4:0] cfg_shift_e = 6, cfg_shift_d = 5, cfg_shift_p = 6;
  logic signed [7:0] cfg_relu6 = R6;
  logic we_w_we = 0, we_b_we = 0, wd_we = 0, wp_w_we = 0, wp_b_we = 0;
  logic [$clog2(WD)-1:0] we_w_addr, wp_w_addr;
  logic [M-1:0][7:0] we_w_data, wp_w_data;
  logic [$clog2(MAXO/M)-1:0] we_b_addr, wp_b_addr;
  logic [M-1:0][31:0] we_b_data, wp_b_data;
  logic [1:0] wd_bank; logic [$clog2(MAXI/N+1)-1:0] wd_addr; logic [8:0][7:0] wd_taps; logic [31:0] wd_bias;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, res_active;
  logic [P-1:0][7:0] in_data, out_data; logic [P-1:0] in_mask, out_mask;
  int checks = 0, failures = 0;

  irb #(.P(P), .M(M), .N(N), .MAX_IN_CH(MAXI), .MAX_OUT_CH(MAXO), .W_DEPTH(WD),
        .MAX_W(MAXW), .MAX_H(MAXH), .RES_DEPTH(RD)) dut (.*);

  // layer data
  int IC, EC, OC, W, H, S;
  logic signed [7:0]  X  [MAXH][MAXW][MAXO];
  logic signed [7:0]  E  [MAXH][MAXW][MAXO];
  logic signed [7:0]  Dd [MAXH][MAXW][MAXO];
  logic signed [7:0]  Y  [MAXH][MAXW][MAXO];
  logic signed [7:0]  We [MAXO][MAXO]; logic signed [31:0] Be [MAXO];
  logic signed [7:0]  Wp [MAXO][MAXO]; logic signed [31:0] Bp [MAXO];
  logic signed [7:0]  K  [MAXO][9];    logic signed [31:0] Bd [MAXO];

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_weights(input bit exp_en, input bit dw_en);
    int dc;
    dc = exp_en ? EC : IC;
    for (int o = 0; o < MAXO; o++) begin
      Be[o] = $signed($urandom_range(0, 4000)) - 2000;
      Bp[o] = $signed($urandom_range(0, 4000)) - 2000;
      Bd[o] = $signed($urandom_range(0, 2000)) - 1000;
      for (int i = 0; i < MAXO; i++) begin We[o][i] = 8'($urandom); Wp[o][i] = 8'($urandom); end
      for (int t = 0; t < 9; t++) K[o][t] = 8'($urandom);
    end
    if (exp_en) begin
      for (int og = 0; og < EC / M; og++) begin
        for (int ic = 0; ic < IC; ic++) begin
          @(negedge clk); we_w_we = 1; we_w_addr = 8'(og * IC + ic);
          for (int m = 0; m < M; m++) we_w_data[m] = We[og*M+m][ic];
        end
        @(negedge clk); we_w_we = 0; we_b_we = 1; we_b_addr = 2'(og);
        for (int m = 0; m < M; m++) we_b_data[m] = Be[og*M+m];
        @(negedge clk); we_b_we = 0;
      end
    end
    if (dw_en) begin
      for (int ch = 0; ch < dc; ch++) begin
        @(negedge clk); wd_we = 1; wd_bank = 2'(ch / (dc / N)); wd_addr = 3'(ch % (dc / N));
        wd_bias = Bd[ch]; for (int t = 0; t < 9; t++) wd_taps[t] = K[ch][t];
      end
      @(negedge clk); wd_we = 0;
    end
    for (int og = 0; og < OC / M; og++) begin
      for (int ic = 0; ic < dc; ic++) begin
        @(negedge clk); wp_w_we = 1; wp_w_addr = 8'(og * dc + ic);
        for (int m = 0; m < M; m++) wp_w_data[m] = Wp[og*M+m][ic];
      end
      @(negedge clk); wp_w_we = 0; wp_b_we = 1; wp_b_addr = 2'(og);
      for (int m = 0; m < M; m++) wp_b_data[m] = Bp[og*M+m];
      @(negedge clk); wp_b_we = 0;
    end
  endtask

  // reference model of the three stages
  task automatic reference(input bit exp_en, input bit dw_en, input bit res);
    int dc, ho, wo;
    dc = exp_en ? EC : IC;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) for (int e = 0; e < dc; e++) begin
      longint a;
      if (exp_en) begin
        a = Be[e];
        for (int i = 0; i < IC; i++) a += longint'(X[r][c][i]) * longint'(We[e][i]);
        E[r][c][e] = requant(32'(a), cfg_shift_e, 1'b1, R6);
      end else E[r][c][e] = X[r][c][e];
    end
    ho = dw_en ? (H + S - 1) / S : H; wo = dw_en ? (W + S - 1) / S : W;
    for (int r = 0; r < ho; r++) for (int c = 0; c < wo; c++) for (int e = 0; e < dc; e++) begin
      longint a;
      if (dw_en) begin
        a = Bd[e];
        for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++)
          if (r*S+dy >= 0 && r*S+dy < H && c*S+dx >= 0 && c*S+dx < W)
            a += longint'(E[r*S+dy][c*S+dx][e]) * longint'(K[e][3*(dy+1)+(dx+1)]);
        Dd[r][c][e] = requant(32'(a), cfg_shift_d, 1'b1, R6);
      end else Dd[r][c][e] = E[r][c][e];
    end
    for (int r = 0; r < ho; r++) for (int c = 0; c < wo; c++) for (int o = 0; o < OC; o++) begin
      longint a; logic signed [7:0] q;
      a = Bp[o];
      for (int e = 0; e < dc; e++) a += longint'(Dd[r][c][e]) * longint'(Wp[o][e]);
      q = requant(32'(a), cfg_shift_p, 1'b0, R6);
      Y[r][c][o] = res ? sat8(32'(q) + 32'(X[r][c][o])) : q;
    end
  endtask

  task automatic run_layer(input int ic, ec, oc, w, h, s, input bit exp_en, input bit dw_en);
    int ho, wo, gpr, nbeats, got;
    IC = ic; EC = ec; OC = oc; W = w; H = h; S = s;
    cfg_in_ch = 5'(ic); cfg_exp_ch = 5'(ec); cfg_out_ch = 5'(oc); cfg_w = 4'(w); cfg_h = 4'(h);
    cfg_stride2 = (s == 2); cfg_skip_expand = !exp_en; cfg_skip_dw = !dw_en;
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) for (int i = 0; i < ic; i++) X[r][c][i] = 8'($urandom);
    load_weights(exp_en, dw_en);
    reference(exp_en, dw_en, (s == 1) && (ic == oc) && dw_en);
    checks++;
    if (res_active !== ((s == 1) && (ic == oc) && dw_en)) begin failures++; $display("res_active wrong"); end
    ho = dw_en ? (h + s - 1) / s : h; wo = dw_en ? (w + s - 1) / s : w;
    gpr = (wo + P - 1) / P;
    nbeats = ho * gpr * oc;
    fork
      begin
        for (int r = 0; r < h; r++) for (int c = 0; c < w; c += P) for (int i = 0; i < ic; i++) begin
          @(negedge clk); in_valid = 1;
          for (int p = 0; p < P; p++) begin
            in_mask[p] = (c + p) < w; in_data[p] = ((c + p) < w) ? X[r][c+p][i] : 8'sd0;
          end
          do @(posedge clk); while (!in_ready);
          @(negedge clk); in_valid = 0;
        end
      end
      begin
        got = 0;
        while (got < nbeats) begin
          int orow, ocol, och;
          @(negedge clk); out_ready = ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            orow = got / (gpr * oc); ocol = ((got / oc) % gpr) * P; och = got % oc;
            for (int p = 0; p < P; p++) begin
              logic em; em = (ocol + p) < wo;
              checks++;
              if (out_mask[p] !== em) begin failures++; $display("mask r%0d c%0d", orow, ocol+p); end
              else if (em && $signed(out_data[p]) !== Y[orow][ocol+p][och]) begin
                failures++;
                $display("layer s%0d e%0d d%0d mismatch r%0d c%0d o%0d got %0d exp %0d", s, exp_en, dw_en,
                         orow, ocol+p, och, $signed(out_data[p]), Y[orow][ocol+p][och]);
              end
            end
            got++;
          end
        end
        @(negedge clk); out_ready = 0;
      end
    join
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run_layer(4, 8, 4, 8, 4, 1, 1'b1, 1'b1);
    run_layer(8, 8, 4, 8, 5, 2, 1'b0, 1'b1);
    run_layer(8, 8, 16, 3, 1, 1, 1'b0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

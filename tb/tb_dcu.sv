// tb_dcu -- self-checking testbench for the depthwise convolution unit.
// Runs a stride-1 tile and then a stride-2 tile of random INT8 data through the
// unit and compares every output with a 3x3 zero-padded depthwise convolution
// computed here. The output stream sees random back-pressure.
module tb_dcu;
  localparam int P = 2, N = 4, MAXCH = 8, MAXW = 8, MAXH = 8;
  localparam int CH = 8, W = 8, H = 7, CPD = CH / N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [$clog2(MAXCH+1)-1:0] cfg_ch = CH;
  logic [$clog2(MAXW+2)-1:0] cfg_w = W;
  logic [$clog2(MAXH+1)-1:0] cfg_h = H;
  logic cfg_stride2 = 0;
  logic [4:0] cfg_shift = 5; logic cfg_relu = 1; logic signed [7:0] cfg_relu_max = 8'sd127;
  logic w_we = 0; logic [1:0] w_bank; logic [$clog2(CPD+1)-1:0] w_addr; logic [8:0][7:0] w_taps; logic [31:0] w_bias;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [P-1:0][7:0] in_data, out_data; logic [P-1:0] in_mask, out_mask;
  int checks = 0, failures = 0;

  dcu #(.P(P), .N(N), .MAX_CH(MAXCH), .MAX_W(MAXW), .MAX_H(MAXH)) dut (.*);

  logic signed [7:0]  X [H][W][CH];
  logic signed [7:0]  K [CH][9];
  logic signed [31:0] Bs [CH];

  function automatic logic signed [7:0] refout(int r, int c, int ch);
    longint a, q;
    a = Bs[ch];
    for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++)
      if (r+dy >= 0 && r+dy < H && c+dx >= 0 && c+dx < W)
        a += longint'(X[r+dy][c+dx][ch]) * longint'(K[ch][3*(dy+1)+(dx+1)]);
    q = (a + 16) >>> 5;
    if (q > 127) q = 127; if (q < 0) q = 0;
    return 8'(q);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_tile(input int s);
    int ho, wo, nbeats, got;
    ho = (H + s - 1) / s; wo = (W + s - 1) / s;
    nbeats = ho * ((wo + P - 1) / P) * CH;
    cfg_stride2 = (s == 2);
    fork
      begin
        for (int r = 0; r < H; r++) for (int c = 0; c < W; c += P) for (int ch = 0; ch < CH; ch++) begin
          @(negedge clk); in_valid = 1; in_mask = '1;
          for (int p = 0; p < P; p++) in_data[p] = X[r][c+p][ch];
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
            orow = got / (((wo + P - 1) / P) * CH);
            ocol = ((got / CH) % ((wo + P - 1) / P)) * P;
            och  = got % CH;
            for (int p = 0; p < P; p++) begin
              logic exp_m; exp_m = (ocol + p) < wo;
              checks++;
              if (out_mask[p] !== exp_m) failures++;
              else if (exp_m && $signed(out_data[p]) !== refout(orow*s, (ocol+p)*s, och)) begin
                failures++;
                $display("s%0d mismatch r%0d c%0d ch%0d got %0d exp %0d", s, orow, ocol+p, och,
                         $signed(out_data[p]), refout(orow*s, (ocol+p)*s, och));
              end
            end
            got++;
          end
        end
      end
    join
  endtask

  initial begin
    for (int ch = 0; ch < CH; ch++) begin
      Bs[ch] = $signed($urandom_range(0, 2000)) - 1000;
      for (int t = 0; t < 9; t++) K[ch][t] = 8'($urandom);
    end
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) for (int ch = 0; ch < CH; ch++) X[r][c][ch] = 8'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int ch = 0; ch < CH; ch++) begin
      @(negedge clk); w_we = 1; w_bank = 2'(ch / CPD); w_addr = 2'(ch % CPD); w_bias = Bs[ch];
      for (int t = 0; t < 9; t++) w_taps[t] = K[ch][t];
    end
    @(negedge clk); w_we = 0;
    run_tile(1);
    run_tile(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_conv3x3_stem -- self-checking testbench for the 3x3 stem convolution.
// Runs a stride-2 tile and then a stride-1 tile (odd height, so the stride-2
// output has a partial last row pair) of random INT8 data through the engine
// and compares every output beat, and its lane mask, with a zero-padded full
// 3x3 convolution computed here. The output stream sees random back-pressure.
module tb_conv3x3_stem;
  import imagehd_pkg::*;
  localparam int P = 2, CIN = 3, COUT = 5, MAXW = 8, MAXH = 8;
  localparam int W = 6, H = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [$clog2(COUT+1)-1:0] cfg_out_ch = COUT;
  logic [$clog2(MAXW+2)-1:0] cfg_w = W;
  logic [$clog2(MAXH+1)-1:0] cfg_h = H;
  logic cfg_stride2 = 1;
  logic [4:0] cfg_shift = 6; logic cfg_relu = 1; logic signed [7:0] cfg_relu_max = 8'sd96;
  logic w_we = 0, b_we = 0;
  logic [$clog2(COUT)-1:0] w_oc, b_oc; logic [$clog2(9*CIN)-1:0] w_tap;
  logic [7:0] w_data; logic [31:0] b_data;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [P-1:0][7:0] in_data, out_data; logic [P-1:0] in_mask = '1, out_mask;
  int checks = 0, failures = 0;

  conv3x3_stem #(.P(P), .CIN(CIN), .COUT_MAX(COUT), .MAX_W(MAXW), .MAX_H(MAXH)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic signed [7:0]  X [H][W][CIN];
  logic signed [7:0]  K [COUT][CIN][3][3];
  logic signed [31:0] Bs [COUT];

  function automatic logic signed [7:0] refout(int r, int c, int oc, int s);
    int a;
    a = Bs[oc];
    for (int ic = 0; ic < CIN; ic++)
      for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++) begin
        int y, x;
        y = r * s + dy - 1; x = c * s + dx - 1;
        if (y >= 0 && y < H && x >= 0 && x < W) a += int'(X[y][x][ic]) * int'(K[oc][ic][dy][dx]);
      end
    return requant(a, cfg_shift, cfg_relu, cfg_relu_max);
  endfunction

  always @(negedge clk) out_ready = rst_n && ($urandom % 4 != 0);

  task automatic run_tile(input int s);
    int ho, wo;
    ho = (H + s - 1) / s; wo = (W + s - 1) / s;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) for (int ic = 0; ic < CIN; ic++)
      X[r][c][ic] = 8'($urandom);
    @(negedge clk); cfg_stride2 = (s == 2);
    fork
      begin
        for (int r = 0; r < H; r++) for (int c = 0; c < W; c += P) for (int ic = 0; ic < CIN; ic++) begin
          @(negedge clk); in_valid = 1;
          for (int p = 0; p < P; p++) in_data[p] = X[r][c+p][ic];
          do @(posedge clk); while (!in_ready);
          @(negedge clk); in_valid = 0;
        end
      end
      begin
        for (int r = 0; r < ho; r++) for (int c = 0; c < wo; c += P) for (int oc = 0; oc < COUT; oc++) begin
          do @(posedge clk); while (!(out_valid && out_ready));
          for (int p = 0; p < P; p++) begin
            checks++;
            if (out_mask[p] !== (c + p < wo)) begin
              failures++; $display("s%0d mask r%0d c%0d lane %0d", s, r, c, p);
            end else if (c + p < wo && out_data[p] !== refout(r, c + p, oc, s)) begin
              failures++;
              $display("s%0d r%0d c%0d oc%0d: got %0d exp %0d", s, r, c + p, oc, $signed(out_data[p]), refout(r, c + p, oc, s));
            end
          end
        end
      end
    join
  endtask

  initial begin
    for (int oc = 0; oc < COUT; oc++) begin
      Bs[oc] = $signed($urandom_range(0, 8000)) - 4000;
      for (int ic = 0; ic < CIN; ic++) for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++)
        K[oc][ic][dy][dx] = 8'($urandom);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int oc = 0; oc < COUT; oc++) begin
      for (int ic = 0; ic < CIN; ic++) for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++) begin
        @(negedge clk); w_we = 1; w_oc = 3'(oc); w_tap = 5'(9 * ic + 3 * dy + dx); w_data = K[oc][ic][dy][dx];
      end
      @(negedge clk); w_we = 0; b_we = 1; b_oc = 3'(oc); b_data = Bs[oc];
      @(negedge clk); b_we = 0;
    end
    run_tile(2);
    run_tile(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

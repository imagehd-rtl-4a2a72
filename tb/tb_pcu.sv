// tb_pcu -- self-checking testbench for the pointwise convolution unit.
// Loads random INT8 weights and INT32 biases, streams random pixel groups
// (including a partial group with one lane masked off) and compares every
// output value with a dot product computed here, with random back-pressure on
// the output stream.
module tb_pcu;
  localparam int P = 2, M = 4, MAXI = 16, MAXO = 16, WD = 64;
  localparam int IN_CH = 12, OUT_CH = 8, NGRP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [$clog2(MAXO+1)-1:0] cfg_in_ch = IN_CH, cfg_out_ch = OUT_CH;
  logic [4:0] cfg_shift = 6; logic cfg_relu = 1; logic signed [7:0] cfg_relu_max = 8'sd96;
  logic w_we = 0, b_we = 0; logic [$clog2(WD)-1:0] w_addr; logic [M-1:0][7:0] w_data;
  logic [$clog2(MAXO/M)-1:0] b_addr; logic [M-1:0][31:0] b_data;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [P-1:0][7:0] in_data, out_data; logic [P-1:0] in_mask, out_mask;
  int checks = 0, failures = 0;

  pcu #(.P(P), .M(M), .MAX_IN_CH(MAXI), .MAX_OUT_CH(MAXO), .W_DEPTH(WD)) dut (.*);

  logic signed [7:0]  W [OUT_CH][IN_CH];
  logic signed [31:0] Bs [OUT_CH];
  logic signed [7:0]  X [NGRP][P][IN_CH];
  logic [P-1:0]       MSK [NGRP];

  function automatic logic signed [7:0] ref_q(input longint a);
    longint r;
    r = (a + 32) >>> 6;
    if (r > 127) r = 127; if (r < -128) r = -128;
    if (r < 0) r = 0; if (r > 96) r = 96;
    return 8'(r);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // output checker with random back-pressure
  initial begin : chk
    int g, o; g = 0; o = 0;
    wait (rst_n);
    while (g < NGRP) begin
      @(negedge clk); out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        for (int p = 0; p < P; p++) begin
          longint a; a = Bs[o];
          for (int i = 0; i < IN_CH; i++) a += longint'(X[g][p][i]) * longint'(W[o][i]);
          checks++;
          if (out_mask !== MSK[g]) failures++;
          if ($signed(out_data[p]) !== ref_q(a)) begin
            failures++; $display("mismatch g%0d p%0d och%0d got %0d exp %0d", g, p, o, $signed(out_data[p]), ref_q(a));
          end
        end
        o++; if (o == OUT_CH) begin o = 0; g++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int o = 0; o < OUT_CH; o++) begin
      Bs[o] = $signed($urandom_range(0, 4000)) - 2000;
      for (int i = 0; i < IN_CH; i++) W[o][i] = 8'($urandom);
    end
    for (int g = 0; g < NGRP; g++) begin
      MSK[g] = (g == NGRP-1) ? 2'b01 : 2'b11;
      for (int p = 0; p < P; p++) for (int i = 0; i < IN_CH; i++) X[g][p][i] = 8'($urandom);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int og = 0; og < OUT_CH/M; og++) begin
      for (int i = 0; i < IN_CH; i++) begin
        @(negedge clk); w_we = 1; w_addr = 6'(og*IN_CH + i);
        for (int j = 0; j < M; j++) w_data[j] = W[og*M+j][i];
      end
      @(negedge clk); w_we = 0; b_we = 1; b_addr = 2'(og);
      for (int j = 0; j < M; j++) b_data[j] = Bs[og*M+j];
    end
    @(negedge clk); b_we = 0;
    for (int g = 0; g < NGRP; g++)
      for (int i = 0; i < IN_CH; i++) begin
        @(negedge clk); in_valid = ($urandom_range(0,1) == 1) || 1'b1;
        in_mask = MSK[g]; for (int p = 0; p < P; p++) in_data[p] = X[g][p][i];
        do @(posedge clk); while (!in_ready);
        @(negedge clk); in_valid = 0;
      end
  end
endmodule

// tb_heu -- self-checking testbench for the hyperdimensional encoding unit.
// Fills the level and position tables with random HVs, encodes three random
// feature vectors and compares every output chunk with a bit-level reference
// encoding (quantise, XOR-bind, count votes, strict majority). Also checks the
// encode time: NCHUNK * F/PC cycles plus two pipeline cycles from the last feature
// beat to the last chunk, and that back-pressure on the HV stream is honoured.
module tb_heu;
  import imagehd_pkg::*;
  localparam int D = 512, F = 64, L = 16, PCL = 16, NCH = D / CHUNK_BITS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lt_we = 0, pt_we = 0; logic [3:0] lt_level; logic [0:0] lt_chunk, pt_chunk;
  logic [CHUNK_BITS-1:0] lt_data, pt_data; logic [5:0] pt_feat;
  logic f_valid = 0, f_ready; logic [7:0] f_data;
  logic hv_valid, hv_ready = 1; logic [CHUNK_BITS-1:0] hv_chunk; logic [0:0] hv_idx; logic hv_last, busy;
  int checks = 0, failures = 0;

  heu #(.D(D), .F(F), .L(L), .PCL(PCL)) dut (.*);

  logic [D-1:0] LT [L];
  logic [D-1:0] PT [F];
  logic [7:0]   Z [F];

  function automatic logic [D-1:0] ref_enc();
    logic [D-1:0] h;
    for (int k = 0; k < D; k++) begin
      int v; v = 0;
      for (int i = 0; i < F; i++) v += int'(PT[i][k] ^ LT[(Z[i] ^ 8'h80) >> 4][k]);
      h[k] = (v > F / 2);
    end
    return h;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [D-1:0] exp_h;
    int t0, t1;
    for (int l = 0; l < L; l++) for (int w = 0; w < D/32; w++) LT[l][w*32 +: 32] = $urandom;
    for (int i = 0; i < F; i++) for (int w = 0; w < D/32; w++) PT[i][w*32 +: 32] = $urandom;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int l = 0; l < L; l++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); lt_we = 1; lt_level = 4'(l); lt_chunk = 1'(c); lt_data = LT[l][c*CHUNK_BITS +: CHUNK_BITS];
    end
    @(negedge clk); lt_we = 0;
    for (int i = 0; i < F; i++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); pt_we = 1; pt_feat = 6'(i); pt_chunk = 1'(c); pt_data = PT[i][c*CHUNK_BITS +: CHUNK_BITS];
    end
    @(negedge clk); pt_we = 0;
    for (int s = 0; s < 3; s++) begin
      int got;
      for (int i = 0; i < F; i++) Z[i] = (s == 2) ? 8'($urandom_range(0, 20)) : 8'($urandom);
      exp_h = ref_enc();
      for (int i = 0; i < F; i++) begin
        @(negedge clk); f_valid = 1; f_data = Z[i];
        do @(posedge clk); while (!f_ready);
      end
      t0 = $time; @(negedge clk); f_valid = 0;
      got = 0;
      while (got < NCH) begin
        @(negedge clk); hv_ready = (s == 1) ? ($urandom_range(0,1) == 1) : 1'b1;
        @(posedge clk);
        if (hv_valid && hv_ready) begin
          checks++;
          if (hv_chunk !== exp_h[int'(hv_idx)*CHUNK_BITS +: CHUNK_BITS] || int'(hv_idx) != got) begin
            failures++; $display("sample %0d chunk %0d mismatch", s, got);
          end
          if (hv_last !== (got == NCH-1)) failures++;
          got++;
          t1 = $time;
        end
      end
      if (s == 0) begin
        checks++;
        if ((t1 - t0) / 10 != NCH * (F / PCL) + 2) begin
          failures++; $display("latency %0d cycles", (t1 - t0) / 10);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

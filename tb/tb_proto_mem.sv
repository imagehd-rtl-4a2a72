// tb_proto_mem -- writes random HV chunks and statistics for every cluster of a
// small prototype memory, then reads every (group, chunk) row and every
// statistics entry back and compares them with a copy kept here.
module tb_proto_mem;
  import imagehd_pkg::*;
  localparam int D = 512, KMAX = 32, PKL = 16, NCH = D / CHUNK_BITS, NG = KMAX / PKL;
  logic clk = 0; always #5 clk = ~clk;
  logic rd_en = 0; logic [0:0] rd_grp; logic [0:0] rd_chunk; logic [PKL-1:0][CHUNK_BITS-1:0] rd_data;
  logic wr_en = 0; logic [4:0] wr_cluster; logic [0:0] wr_chunk; logic [CHUNK_BITS-1:0] wr_data;
  logic [4:0] st_rd_cluster = 0; logic [23:0] st_rd_mu, st_rd_sigma;
  logic st_we = 0; logic [4:0] st_wr_cluster; logic [23:0] st_wr_mu, st_wr_sigma;
  int checks = 0, failures = 0;
  proto_mem #(.D(D), .KMAX(KMAX), .PKL(PKL)) dut (.*);
  logic [CHUNK_BITS-1:0] H [KMAX][NCH];
  logic [23:0] MU [KMAX], SG [KMAX];
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < KMAX; c++) begin
      MU[c] = 24'($urandom); SG[c] = 24'($urandom);
      for (int k = 0; k < NCH; k++) for (int w = 0; w < CHUNK_BITS/32; w++) H[c][k][w*32 +: 32] = $urandom;
    end
    for (int c = 0; c < KMAX; c++) for (int k = 0; k < NCH; k++) begin
      @(negedge clk); wr_en = 1; wr_cluster = 5'(c); wr_chunk = 1'(k); wr_data = H[c][k];
      st_we = 1; st_wr_cluster = 5'(c); st_wr_mu = MU[c]; st_wr_sigma = SG[c];
    end
    @(negedge clk); wr_en = 0; st_we = 0;
    for (int g = 0; g < NG; g++) for (int k = 0; k < NCH; k++) begin
      @(negedge clk); rd_en = 1; rd_grp = 1'(g); rd_chunk = 1'(k);
      @(negedge clk); rd_en = 0;
      for (int b = 0; b < PKL; b++) begin checks++; if (rd_data[b] !== H[g*PKL+b][k]) failures++; end
    end
    for (int c = 0; c < KMAX; c++) begin
      @(negedge clk); st_rd_cluster = 5'(c);
      @(negedge clk); checks++; if (st_rd_mu !== MU[c] || st_rd_sigma !== SG[c]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_topm_buffer -- streams random (dist, idx) pairs, many with repeated
// distances, into the Top-M buffer and after every insertion compares the
// buffer with a sorted list kept here (largest first, earlier pair first on a
// tie). Also checks the clear.
module tb_topm_buffer;
  localparam int M = 8, DW = 6, IW = 7;
  logic clk = 0, rst_n = 0, clr = 0, ins_valid = 0; always #5 clk = ~clk;
  logic [DW-1:0] ins_dist; logic [IW-1:0] ins_idx;
  logic [M-1:0][DW-1:0] top_dist; logic [M-1:0][IW-1:0] top_idx; logic [3:0] count;
  int checks = 0, failures = 0;
  topm_buffer #(.M(M), .DW(DW), .IW(IW)) dut (.*);
  int rd [$], ri [$];
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      rd.delete(); ri.delete();
      checks++; if (count != 0) failures++;
      for (int n = 0; n < (round == 2 ? 5 : 60); n++) begin
        int d, pos;
        d = $urandom_range(0, 20);
        ins_valid = 1; ins_dist = DW'(d); ins_idx = IW'(n);
        @(negedge clk); ins_valid = 0;
        pos = rd.size();
        for (int k = 0; k < rd.size(); k++) if (d > rd[k]) begin pos = k; break; end
        rd.insert(pos, d); ri.insert(pos, n);
        if (rd.size() > M) begin void'(rd.pop_back()); void'(ri.pop_back()); end
        checks++;
        if (int'(count) != rd.size()) failures++;
        for (int k = 0; k < rd.size(); k++) begin
          checks++;
          if (int'(top_dist[k]) != rd[k] || int'(top_idx[k]) != ri[k]) begin
            failures++; $display("slot %0d got (%0d,%0d) exp (%0d,%0d)", k, top_dist[k], top_idx[k], rd[k], ri[k]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

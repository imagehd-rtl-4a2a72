// topm_buffer -- streaming Top-M insertion buffer.
//
// Keeps the M largest (dist, idx) pairs seen since the last clear, sorted with
// the largest first. Every slot has a comparator against the incoming pair
// (the comparator chain); an incoming pair enters at the first slot whose
// entry it beats, the entries from there on move down by one (the shift
// network) and the last one drops out. A pair that only ties an entry goes
// behind it, so earlier pairs win ties. One insertion per cycle; the contents
// are updated at the clock edge. count is the number of valid entries.
// From the paper: M (dist, idx) pairs, a chain of M comparators and a small
// shift network. Widths and the tie rule are this design's choice.
module topm_buffer #(
  parameter int unsigned M  = 8,
  parameter int unsigned DW = 14,
  parameter int unsigned IW = 7
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  ins_valid,
  input  logic [DW-1:0]         ins_dist,
  input  logic [IW-1:0]         ins_idx,
  output logic [M-1:0][DW-1:0]  top_dist,
  output logic [M-1:0][IW-1:0]  top_idx,
  output logic [$clog2(M+1)-1:0] count
);
  logic [M-1:0] vld, gt;

  always_comb
    for (int k = 0; k < M; k++) gt[k] = !vld[k] || (ins_dist > top_dist[k]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0; top_dist <= '0; top_idx <= '0; count <= '0;
    end else if (clr) begin
      vld <= '0; count <= '0;
    end else if (ins_valid) begin
      for (int k = 0; k < M; k++) begin
        if (gt[k] && (k == 0 || !gt[k-1])) begin
          top_dist[k] <= ins_dist; top_idx[k] <= ins_idx; vld[k] <= 1'b1;
        end else if (k > 0 && gt[k-1]) begin
          top_dist[k] <= top_dist[k-1]; top_idx[k] <= top_idx[k-1]; vld[k] <= vld[k-1];
        end
      end
      if (32'(count) < M) count <= count + 1'b1;
    end
  end
endmodule

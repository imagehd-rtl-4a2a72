// tb_lfsr32 -- checks the LFSR against a reference step computed here from the
// polynomial x^32 + x^22 + x^2 + x + 1 (Fibonacci-equivalent check of the
// Galois update), that it holds when not enabled, and that it never reaches
// zero in 5000 steps.
module tb_lfsr32;
  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] rnd, model;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  lfsr32 #(.SEED(32'h1234_5678)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    model = 32'h1234_5678;
    @(negedge clk); checks++; if (rnd !== model) failures++;
    en = 1;
    for (int i = 0; i < 5000; i++) begin
      logic fb;
      @(negedge clk);
      // reference: shift right, feedback bit enters at 31 and is XORed into
      // the tap positions 21, 1 and 0
      fb = model[0];
      model = {fb, model[31:1]};
      if (fb) begin model[21] ^= 1'b1; model[1] ^= 1'b1; model[0] ^= 1'b1; end
      checks++;
      if (rnd !== model || rnd == 0) failures++;
      if (i == 100) begin
        en = 0; @(negedge clk); checks++; if (rnd !== model) failures++; en = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

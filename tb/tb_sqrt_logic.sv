// tb_sqrt_logic -- self-checking test of the square-root estimate and the
// Babylonian averaging step. The estimate x0 is checked for every 14-bit
// radicand against a power-of-two model, and it is checked to lie within a
// factor 1.5 of the true root; x_next = (x + q)/2 is checked on random inputs.
module tb_sqrt_logic;
  import gipps_ref_pkg::*;

  logic [13:0] s, x, q, x0, x_next;
  int checks = 0, failures = 0;
  logic clk = 0;

  sqrt_logic dut (.s, .x, .q, .x0, .x_next);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string what);
    failures++;
    if (failures < 10) $display("FAIL %s", what);
  endtask

  initial begin
    real root, ratio;
    for (int sv = 0; sv < 16384; sv++) begin
      s = 14'(sv); x = 14'($urandom); q = 14'($urandom);
      #1;
      checks++;
      if (int'(x0) != ref_x0(sv)) fail($sformatf("x0(%0d) = %0d, want %0d", sv, x0, ref_x0(sv)));
      if (sv > 0) begin
        root  = $sqrt(real'(sv) * 64.0);
        ratio = real'(x0) / root;
        checks++;
        if (ratio < 0.70 || ratio > 1.5) fail($sformatf("x0(%0d) = %0d far from %f", sv, x0, root));
      end
      checks++;
      if (sv == 0) begin
        if (x_next != 0) fail("x_next for s=0");
      end else if (int'(x_next) != (int'(x) + int'(q)) / 2)
        fail($sformatf("x_next(%0d,%0d) = %0d", x, q, x_next));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

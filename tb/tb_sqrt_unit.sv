// tb_sqrt_unit -- self-checking test of the divider shared with the square-root
// logic. Divide mode is checked against (n*64)/d. In square-root mode two
// Babylonian steps (the first from the built-in estimate) are run for every
// 14-bit radicand and compared bit for bit with an integer model, and with
// the true root: after two steps the error must be under 0.3 % plus 2 codes.
module tb_sqrt_unit;
  import gipps_ref_pkg::*;

  logic        sqrt_mode, first, ovf;
  logic [13:0] n, d, s, x, q, x_next;
  int checks = 0, failures = 0;
  logic clk = 0;

  sqrt_unit dut (.sqrt_mode, .first, .n, .d, .s, .x, .q, .ovf, .x_next);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string what);
    failures++;
    if (failures < 10) $display("FAIL %s", what);
  endtask

  initial begin
    int  x1, x2;
    real root;
    // divide mode
    sqrt_mode = 0; first = 0;
    for (int i = 0; i < 5000; i++) begin
      int nv, dv;
      nv = int'($urandom_range(0, 16383)); dv = int'($urandom_range(0, 16383));
      n = 14'(nv); d = 14'(dv); s = 14'($urandom); x = 14'($urandom);
      #1;
      checks++;
      if (int'(q) != ref_div(nv, dv) || ovf != ref_div_ovf(nv, dv))
        fail($sformatf("div %0d/%0d = %0d", nv, dv, q));
    end
    // square-root mode, every radicand
    sqrt_mode = 1;
    for (int sv = 0; sv < 16384; sv++) begin
      s = 14'(sv); n = 14'($urandom); d = 14'($urandom);
      first = 1; x = 14'($urandom);
      #1;
      x1 = int'(x_next);
      first = 0; x = x_next;
      #1;
      x2 = int'(x_next);
      checks++;
      if (x2 != ref_sqrt(sv)) fail($sformatf("sqrt(%0d) = %0d, model %0d", sv, x2, ref_sqrt(sv)));
      root = $sqrt(real'(sv) * 64.0);
      checks++;
      if (fabs(real'(x2) - root) > 0.003 * root + 2.0)
        fail($sformatf("sqrt(%0d) = %0d, true %f (x1 %0d)", sv, x2, root, x1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_array_multiplier -- self-checking test of the Q8.6 array multiplier.
// Corner values and 20000 random pairs are compared with the integer product
// (a*b)/64, saturated to all ones, and with its overflow flag.
module tb_array_multiplier;
  import gipps_ref_pkg::*;

  logic [13:0] a, b, p;
  logic        ovf;
  int checks = 0, failures = 0;
  logic clk = 0;

  array_multiplier dut (.a, .b, .p, .ovf);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int av, input int bv);
    a = 14'(av); b = 14'(bv);
    #1;
    checks++;
    if (int'(p) != ref_mul(av, bv) || ovf != ref_mul_ovf(av, bv)) begin
      failures++;
      if (failures < 10)
        $display("FAIL mul %0d*%0d: got %0d ovf %0b, want %0d ovf %0b",
                 av, bv, p, ovf, ref_mul(av, bv), ref_mul_ovf(av, bv));
    end
  endtask

  initial begin
    int corner[8] = '{0, 1, 63, 64, 65, 127, 8191, 16383};
    foreach (corner[i]) foreach (corner[j]) check(corner[i], corner[j]);
    for (int i = 0; i < 20000; i++) check(int'($urandom_range(0, 16383)), int'($urandom_range(0, 16383)));
    // realistic small operands (below 4.0) where no overflow occurs
    for (int i = 0; i < 5000; i++) check(int'($urandom_range(0, 255)), int'($urandom_range(0, 255)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

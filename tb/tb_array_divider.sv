// tb_array_divider -- self-checking test of the Q8.6 array divider.
// Corner values (zero divisor, quotients at the edge of the range) and random
// pairs are compared with (n*64)/d, saturated to all ones, and its overflow flag.
module tb_array_divider;
  import gipps_ref_pkg::*;

  logic [13:0] n, d, q;
  logic        ovf;
  int checks = 0, failures = 0;
  logic clk = 0;

  array_divider dut (.n, .d, .q, .ovf);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int nv, input int dv);
    n = 14'(nv); d = 14'(dv);
    #1;
    checks++;
    if (int'(q) != ref_div(nv, dv) || ovf != ref_div_ovf(nv, dv)) begin
      failures++;
      if (failures < 10)
        $display("FAIL div %0d/%0d: got %0d ovf %0b, want %0d ovf %0b",
                 nv, dv, q, ovf, ref_div(nv, dv), ref_div_ovf(nv, dv));
    end
  endtask

  initial begin
    int corner[9] = '{0, 1, 2, 63, 64, 65, 255, 8191, 16383};
    foreach (corner[i]) foreach (corner[j]) check(corner[i], corner[j]);
    // quotient exactly at and just past the top of the range
    check(16383, 64); check(256, 1); check(255, 1); check(511, 2); check(512, 2);
    for (int i = 0; i < 20000; i++) check(int'($urandom_range(0, 16383)), int'($urandom_range(0, 16383)));
    // speed ratios V/V* as the accelerator uses them
    for (int i = 0; i < 20000; i++) check(int'($urandom_range(0, 8000)), int'($urandom_range(1, 8000)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

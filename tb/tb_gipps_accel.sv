// tb_gipps_accel -- end-to-end test of one Gipps processing element at its
// default (full) size.
//
// Drives a stream of speed updates through the start/ready/done handshake and
// checks each result bit for bit against an integer model of the datapath,
// against the real-valued Gipps equation (within a tolerance for Q8.6
// rounding), and checks that done comes exactly four clock edges after the
// edge that accepted start. It also runs a small platoon: several vehicles
// accelerating step by step towards their desired speeds, each result fed
// back as the next current speed, until all are within 1 km/h of it.
//
// Mechanisms counted (each must occur): back-to-back starts in the done
// cycle, starts after idle gaps, V >= V* (clamped, no acceleration), divide by
// zero (V* = 0), result saturation, and square-root estimates from both even
// and odd leading-one positions.
module tb_gipps_accel;
  import gipps_pkg::*;
  import gipps_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  fix_t accel, tstep, v_des, v_cur, v_next;
  logic ready, done, sat;
  int   checks = 0, failures = 0, cycle = 0;
  int   n_b2b = 0, n_gap = 0, n_clamp = 0, n_div0 = 0, n_sat = 0, n_even = 0, n_odd = 0;
  real  max_err = 0.0;
  string worst = "";

  gipps_accel dut (.clk, .rst_n, .start, .accel, .tstep, .v_des, .v_cur,
                   .ready, .done, .v_next, .sat);

  always #2 clk = ~clk;   // 250 MHz
  always @(posedge clk) cycle++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string what);
    failures++;
    if (failures < 15) $display("FAIL %s", what);
  endtask

  // First-order bound on the Q8.6 rounding error of one evaluation: each
  // truncation (q = 1/64) of a*T, V/V*, 1-r, the root and the products,
  // relative to the value it perturbs.
  function automatic real tolerance(input real a, input real t, input real vd, input real v);
    real q, r, f, s, m, inc;
    q   = 1.0 / 64.0;
    r   = v / vd;
    f   = (r >= 1.0) ? q : ((1.0 - r) < q ? q : (1.0 - r));
    s   = r + 2.0 * q;
    m   = 2.5 * a * t * f;
    inc = m * $sqrt(s);
    return inc * (q / (a * t + q) + 2.0 * q / f + q / s + 0.01) + m * 2.0 * q + 3.0 * q;
  endfunction

  // One evaluation; returns the result. back2back: start in the done cycle.
  task automatic run(input int a, input int t, input int vd, input int v,
                     input bit gap, output int va);
    int  want, t0, s, k;
    bit  want_sat;
    real rv;
    if (gap) begin
      repeat (1 + $urandom_range(0, 2)) @(posedge clk);
      #1 n_gap++;
    end else n_b2b++;
    checks++;
    if (!ready) fail("not ready");
    accel = 14'(a); tstep = 14'(t); v_des = 14'(vd); v_cur = 14'(v);
    start = 1;
    @(posedge clk);
    #1 start = 0;
    t0 = cycle;          // count of the edge that accepted start
    accel = 14'($urandom); tstep = 14'($urandom); v_des = 14'($urandom); v_cur = 14'($urandom);
    while (!done) @(posedge clk) #1;
    va = int'(v_next);
    checks++;
    if (cycle - t0 != 4) fail($sformatf("latency %0d cycles", cycle - t0));
    want = ref_gipps(a, t, vd, v, want_sat);
    checks++;
    if (va != want || sat != want_sat)
      fail($sformatf("a=%0d T=%0d V*=%0d V=%0d: got %0d sat %0b, model %0d sat %0b",
                     a, t, vd, v, va, sat, want, want_sat));
    if (vd == 0) n_div0++;
    if (vd != 0 && v >= vd) n_clamp++;
    if (want_sat) n_sat++;
    s = ref_sat(ref_div(v, vd) + 2);
    k = 0; while ((2 ** (k + 1)) <= s) k++;
    if (k % 2 == 0) n_even++; else n_odd++;
    if (!want_sat && vd > 0) begin
      rv = real_gipps(a / 64.0, t / 64.0, vd / 64.0, v / 64.0, 2.0 / 64.0);
      checks++;
      if (fabs(va / 64.0 - rv) > max_err) begin
        max_err  = fabs(va / 64.0 - rv);
        worst    = $sformatf("a=%0d T=%0d V*=%0d V=%0d -> %f, real %f", a, t, vd, v, va / 64.0, rv);
      end
      if (fabs(va / 64.0 - rv) > tolerance(a / 64.0, t / 64.0, vd / 64.0, v / 64.0))
        fail($sformatf("a=%0d T=%0d V*=%0d V=%0d: %f vs real %f", a, t, vd, v, va / 64.0, rv));
    end
  endtask

  initial begin
    int va;
    int vs[6], vds[6];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // the example of the equation: 2 m/s^2, T = 0.75 s, V* = 100, V = 40
    run(128, 48, 6400, 2560, 1, va);
    // corner cases
    run(128, 48, 0, 2560, 0, va);        // V* = 0
    run(128, 48, 3200, 3200, 0, va);     // V = V*
    run(128, 48, 3200, 5000, 1, va);     // V > V*
    run(16383, 16383, 6400, 100, 0, va); // product saturates
    run(2000, 2000, 16000, 16000 - 200, 0, va);
    run(1000, 300, 16383, 16300, 0, va); // sum saturates
    run(128, 48, 6400, 0, 1, va);        // standing start
    // random realistic updates: a in 0.5..4, T in 0.5..1.5, V* up to 200, V up to 1.1 V*
    for (int i = 0; i < 3000; i++) begin
      int a, t, vd, v;
      a  = int'($urandom_range(32, 256));
      t  = int'($urandom_range(32, 96));
      vd = int'($urandom_range(64, 12800));
      v  = int'($urandom_range(0, vd + vd / 10));
      run(a, t, vd, v, bit'($urandom_range(0, 1)), va);
    end
    $display("realistic operands: max |error| against real-valued model: %f (%s)", max_err, worst);
    max_err = 0.0;
    // random full-range operands
    for (int i = 0; i < 2000; i++)
      run(int'($urandom_range(0, 16383)), int'($urandom_range(0, 16383)),
          int'($urandom_range(0, 16383)), int'($urandom_range(0, 16383)),
          bit'($urandom_range(0, 1)), va);

    // platoon: six vehicles accelerate from rest towards their desired speeds
    for (int c = 0; c < 6; c++) begin vs[c] = 0; vds[c] = 64 * (50 + 15 * c); end
    for (int stp = 0; stp < 400; stp++)
      for (int c = 0; c < 6; c++) begin
        run(96, 48, vds[c], vs[c], 0, va);
        checks++;
        if (va < vs[c] || va > vds[c] + 64) fail($sformatf("platoon car %0d speed %0d", c, va));
        vs[c] = va;
      end
    for (int c = 0; c < 6; c++) begin
      checks++;
      if (vds[c] - vs[c] > 64) fail($sformatf("car %0d stalled at %0d of %0d", c, vs[c], vds[c]));
    end

    $display("mechanisms: back2back=%0d gap=%0d clamp=%0d div0=%0d sat=%0d even=%0d odd=%0d",
             n_b2b, n_gap, n_clamp, n_div0, n_sat, n_even, n_odd);
    $display("full-range and platoon: max |error| against real-valued model: %f (%s)", max_err, worst);
    if (n_b2b == 0 || n_gap == 0 || n_clamp == 0 || n_div0 == 0 || n_sat == 0 ||
        n_even == 0 || n_odd == 0) fail("a mechanism was never exercised");
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

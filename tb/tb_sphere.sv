// tb_sphere: end-to-end test of the 3-D CORDIC processor at its default
// parameters (16-bit words, 16 micro-rotations per stage).
//
// Stimulus: the paper's worked examples (r = 16'h0E68, i.e. 1/G^2 x 10000,
// with (theta, phi) = (45, 45), (60, 30) and (45, 30) degrees), then random
// radii and angles in -90..+90 deg, with itr held high or stalled at random,
// and loads issued while a conversion is running (they must be ignored).
// Checks per conversion: x, y, z equal a bit-exact two-stage reference;
// x, y are within tolerance of G^2 r sin(theta) cos(phi) and
// G^2 r sin(theta) sin(phi), z of G r cos(theta); the conversion takes 32
// cycles counting the load cycle, plus one per stall cycle; done is high
// afterwards. For the worked examples x, y, z are also held against the
// hex values the paper calculates (within 8 LSB, i.e. 8e-4) and must equal
// exactly the outputs printed in its simulation waveforms. Mechanisms
// counted and required at least once: stage hand-off, stall, ignored load,
// negative angle. The hand-off is inferred from the port-level schedule:
// done must rise exactly when 15 + 1 + 15 iteration cycles after the load
// cycle have elapsed, stall cycles excluded.
module tb_sphere;
  import cordic_ref_pkg::*;

  logic        f_clk = 1'b0;
  logic        resetn, load, itr, done;
  logic signed [15:0] r, theta, phi, x, y, z;
  int          checks = 0, failures = 0;
  int          n_handoff = 0, n_stall = 0, n_ignored = 0, n_neg = 0;
  real         g;

  always #5 f_clk = ~f_clk;

  sphere dut (.f_clk, .resetn, .load, .itr, .r, .theta, .phi, .x, .y, .z, .done);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic convert(input shortint ar, input shortint at, input shortint ap,
                         input int stall_pct, input bit poke,
                         output shortint rx, output shortint ry, output shortint rz);
    int cycles = 0, stalls = 0;
    int left1 = NIT - 1, left2 = 0;  // iterations still owed by each stage
    bit handed = 1'b0;
    shortint ex, ey, ez;
    @(negedge f_clk);
    load = 1'b1; r = ar; theta = at; phi = ap;
    itr  = 1'($urandom_range(0, 1));
    @(posedge f_clk); cycles++;
    forever begin
      @(negedge f_clk);
      #0;
      if (done) break;
      load = 1'b0;
      if (poke && (cycles == 3 || cycles == 20)) begin
        load = 1'b1; r = 16'sh0100; theta = -16'sh0AAA; phi = 16'sh1555;
        n_ignored++;
      end
      itr = ($urandom_range(0, 99) < stall_pct) ? 1'b0 : 1'b1;
      // Expected schedule: stage 1 owes 15 iterations after the load cycle,
      // then one hand-off cycle loads stage 2 (and performs its iteration 0)
      // whatever itr is, then stage 2 owes 15. A cycle with itr low while an
      // iteration is owed is a stall.
      if (left1 > 0) begin
        if (itr) left1--; else stalls++;
      end else if (!handed) begin
        handed = 1'b1; left2 = NIT - 1;
      end else if (left2 > 0) begin
        if (itr) left2--; else stalls++;
      end
      @(posedge f_clk); cycles++;
      if (cycles > 400) break;
    end
    load = 1'b0;
    rx = x; ry = y; rz = z;
    if (stalls > 0) n_stall++;
    if (at < 0 || ap < 0) n_neg++;
    sphere(ar, at, ap, ex, ey, ez);
    check(rx == ex && ry == ey && rz == ez,
          $sformatf("exact r=%04h th=%04h ph=%04h: got %04h %04h %04h ref %04h %04h %04h",
                    ar, at, ap, rx, ry, rz, ex, ey, ez));
    check(cycles == 32 + stalls && handed,
          $sformatf("latency th=%04h ph=%04h: %0d cycles, %0d stalls", at, ap, cycles, stalls));
    if (handed) n_handoff++;
    begin
      real t  = word_to_rad(at);
      real p  = word_to_rad(ap);
      int  ix = int'($floor(g * g * ar * $sin(t) * $cos(p) + 0.5));
      int  iy = int'($floor(g * g * ar * $sin(t) * $sin(p) + 0.5));
      int  iz = int'($floor(g * ar * $cos(t) + 0.5));
      int  tol = 12 + int'(g * g * iabs(int'(ar)) * 1.0e-3);
      check(iabs(int'(rx) - ix) <= tol && iabs(int'(ry) - iy) <= tol &&
            iabs(int'(rz) - iz) <= tol,
            $sformatf("accuracy r=%0d th=%04h ph=%04h: got %0d %0d %0d ideal %0d %0d %0d",
                      ar, at, ap, rx, ry, rz, ix, iy, iz));
    end
  endtask

  // Paper's worked examples: theta, phi and the calculated x, y, z.
  localparam int NP = 3;
  localparam logic [15:0] P_T [NP] = '{16'h1000, 16'h1555, 16'h1000};
  localparam logic [15:0] P_P [NP] = '{16'h1000, 16'h0AAA, 16'h0AAA};
  localparam logic [15:0] P_X [NP] = '{16'h1388, 16'h1D4C, 16'h17EC};
  localparam logic [15:0] P_Y [NP] = '{16'h1388, 16'h10EA, 16'h0DCF};
  localparam logic [15:0] P_Z [NP] = '{16'h10C6, 16'h0BDC, 16'h10C5};
  // Printed simulation outputs: waveforms for (45, 45) and (60, 30), results
  // table for (45, 30). That table's y entry for (45, 30) repeats its z
  // column (10C5) and is not compared (FFFF marks it).
  localparam logic [15:0] S_X [NP] = '{16'h138A, 16'h1D52, 16'h17F0};
  localparam logic [15:0] S_Y [NP] = '{16'h138A, 16'h10E7, 16'hFFFF};
  localparam logic [15:0] S_Z [NP] = '{16'h10C4, 16'h0BDC, 16'h10C4};

  initial begin
    repeat (200000) @(posedge f_clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    shortint rx, ry, rz;
    g = gain(16);
    resetn = 1'b0; load = 1'b0; itr = 1'b0; r = '0; theta = '0; phi = '0;
    repeat (3) @(posedge f_clk);
    @(negedge f_clk) resetn = 1'b1;
    check(!done, "no result after reset");

    for (int k = 0; k < NP; k++) begin
      convert(16'sh0E68, shortint'(P_T[k]), shortint'(P_P[k]), 0, 1'b0, rx, ry, rz);
      $display("r=0E68 theta=%04h phi=%04h -> x=%04h y=%04h z=%04h (paper calc %04h %04h %04h)",
               P_T[k], P_P[k], rx, ry, rz, P_X[k], P_Y[k], P_Z[k]);
      check(iabs(int'(rx) - int'(P_X[k])) <= 8 && iabs(int'(ry) - int'(P_Y[k])) <= 8 &&
            iabs(int'(rz) - int'(P_Z[k])) <= 8,
            $sformatf("paper example theta=%04h phi=%04h", P_T[k], P_P[k]));
      // Simulation results printed in the paper's waveforms and table.
      check(rx == shortint'(S_X[k]) && (S_Y[k] == 16'hFFFF || ry == shortint'(S_Y[k])) &&
            rz == shortint'(S_Z[k]),
            $sformatf("printed simulation result theta=%04h phi=%04h", P_T[k], P_P[k]));
    end

    for (int k = 0; k < 200; k++) begin
      shortint ar, at, ap;
      ar = shortint'($urandom_range(0, 4800));
      at = shortint'(int'($urandom_range(0, 16384)) - 8192);
      ap = shortint'(int'($urandom_range(0, 16384)) - 8192);
      convert(ar, at, ap, (k % 3 == 0) ? 0 : 30, (k % 5 == 2), rx, ry, rz);
    end

    check(n_handoff >= NP + 200, $sformatf("stage hand-offs %0d", n_handoff));
    check(n_stall > 0,   $sformatf("stalls exercised %0d", n_stall));
    check(n_ignored > 0, $sformatf("loads while busy exercised %0d", n_ignored));
    check(n_neg > 0,     $sformatf("negative angles exercised %0d", n_neg));
    $display("sphere: %0d hand-offs, %0d conversions with stalls, %0d ignored loads, %0d with negative angles",
             n_handoff, n_stall, n_ignored, n_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

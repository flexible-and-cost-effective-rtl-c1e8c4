// tb_cordic: checks one 2-D CORDIC stage together with its angle table.
//
// Stimulus: the twelve angles of the paper's 2-D results table (x0 = 16'h17B9
// = 0.607253 x 10000, y0 = 0, z0 = -90..+90 deg), then random vectors and
// angles within +/-90 deg, some with itr held high and some with random
// stalls (itr low), and loads issued while busy, which must be ignored.
// Checks per operation: x, y, z equal a bit-exact reference; x and y lie
// within 6 LSB plus 6e-4 of the vector length of G*(x0 cos z0 - y0 sin z0)
// and G*(y0 cos z0 + x0 sin z0);
// |z| <= 8 LSB; the operation takes 16 cycles, counting the load cycle, plus
// one per stall cycle; count_out sequence feeds the table correctly (implied
// by exact results). For the table angles, x and y must also lie within
// 6 LSB of the printed cos/sin x 10000 values (its +45 deg row prints 1BF9
// for both, read here as 1B9F = 7071, the value printed for -45 deg).
module tb_cordic;
  import cordic_ref_pkg::*;

  logic        f_clk = 1'b0;
  logic        resetn, load, itr;
  logic signed [15:0] x0, y0, z0, angle, x, y, z;
  logic [3:0]  count_out;
  logic        busy, done;
  int          checks = 0, failures = 0;
  int          n_stall = 0, n_ignored = 0, n_neg = 0, n_pos = 0;
  real         g;

  always #5 f_clk = ~f_clk;

  cordic dut (
    .f_clk, .resetn, .load, .itr, .x0, .y0, .z0, .angle,
    .x, .y, .z, .count_out, .busy, .done
  );

  angle_rom u_rom (.outclock(f_clk), .address(count_out), .q(angle));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // One operation. stall_pct: chance (in %) of itr low in a busy cycle.
  // poke: issue a load with other operands while busy.
  task automatic run_op(input shortint ax, input shortint ay, input shortint az,
                        input int stall_pct, input bit poke,
                        output shortint rx, output shortint ry, output shortint rz);
    int cycles = 0, stalls = 0;
    shortint ex, ey, ez;
    @(negedge f_clk);
    load = 1'b1; x0 = ax; y0 = ay; z0 = az;
    itr  = 1'($urandom_range(0, 1));
    @(posedge f_clk); cycles++;
    forever begin
      @(negedge f_clk);
      #0;
      if (done) break;
      load = 1'b0;
      if (poke && cycles == 5) begin
        load = 1'b1; x0 = 16'sh1234; y0 = -16'sh0777; z0 = -16'sh1555;
        n_ignored++;
      end
      itr = ($urandom_range(0, 99) < stall_pct) ? 1'b0 : 1'b1;
      if (busy && !itr) stalls++;
      @(posedge f_clk); cycles++;
      if (cycles > 200) break;
    end
    load = 1'b0;
    rx = x; ry = y; rz = z;
    if (stalls > 0) n_stall++;
    if (az < 0) n_neg++; else n_pos++;
    rotate(ax, ay, az, ex, ey, ez);
    check(rx == ex && ry == ey && rz == ez,
          $sformatf("exact x0=%04h y0=%04h z0=%04h: got %04h %04h %04h ref %04h %04h %04h",
                    ax, ay, az, rx, ry, rz, ex, ey, ez));
    check(cycles == 16 + stalls,
          $sformatf("latency z0=%04h: %0d cycles, %0d stalls", az, cycles, stalls));
    begin
      real a = word_to_rad(az);
      int ix = int'($floor(g * (ax * $cos(a) - ay * $sin(a)) + 0.5));
      int iy = int'($floor(g * (ay * $cos(a) + ax * $sin(a)) + 0.5));
      // 6 LSB of truncation plus about three angle LSBs (3 x 1.9e-4 rad) of
      // direction error on the rotated vector's length.
      int tol = 6 + int'(g * $sqrt(real'(ax) * ax + real'(ay) * ay) * 6.0e-4);
      check(iabs(int'(rx) - ix) <= tol && iabs(int'(ry) - iy) <= tol && iabs(int'(rz)) <= 8,
            $sformatf("accuracy z0=%04h: got %0d %0d %0d ideal %0d %0d", az, rx, ry, rz, ix, iy));
    end
  endtask

  // Paper's 2-D results table: angle word, theoretical cos and sin x 10000.
  localparam int NT = 12;
  localparam logic [15:0] T_Z [NT] = '{16'h2000, 16'h1AAA, 16'h1555, 16'h1000, 16'h0AAA, 16'h0555,
                                       16'hFAAA, 16'hF555, 16'hF000, 16'hEAAA, 16'hE555, 16'hE000};
  localparam logic [15:0] T_C [NT] = '{16'h0000, 16'h0A1C, 16'h1388, 16'h1B9F, 16'h21D4, 16'h25BB,
                                       16'h25BB, 16'h21D4, 16'h1B9F, 16'h1388, 16'h0A1C, 16'h0000};
  localparam logic [15:0] T_S [NT] = '{16'h2710, 16'h25BB, 16'h21D4, 16'h1B9F, 16'h1388, 16'h0A1C,
                                       16'hF5E4, 16'hEC78, 16'hE461, 16'hDE2C, 16'hDA45, 16'hD8F0};

  initial begin
    repeat (100000) @(posedge f_clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    shortint rx, ry, rz;
    g = gain(16);
    resetn = 1'b0; load = 1'b0; itr = 1'b0; x0 = '0; y0 = '0; z0 = '0;
    repeat (3) @(posedge f_clk);
    @(negedge f_clk) resetn = 1'b1;
    check(!busy && !done && count_out == 4'd0, "idle after reset");

    // Paper's angle sweep with itr held high.
    for (int k = 0; k < NT; k++) begin
      run_op(16'sh17B9, 16'sd0, shortint'(T_Z[k]), 0, 1'b0, rx, ry, rz);
      check(iabs(int'(rx) - int'(shortint'(T_C[k]))) <= 6 &&
            iabs(int'(ry) - int'(shortint'(T_S[k]))) <= 6,
            $sformatf("table z=%04h: got %04h %04h paper %04h %04h", T_Z[k], rx, ry, T_C[k], T_S[k]));
    end
    // 45 deg: the paper's printed simulation result rounds the same way.
    run_op(16'sh17B9, 16'sd0, 16'sh1000, 0, 1'b0, rx, ry, rz);
    check(iabs(int'(rx) - 16'sh1B9F) <= 6, "45 deg cosine");

    // Random vectors, with and without stalls, some with loads while busy.
    for (int k = 0; k < 300; k++) begin
      shortint ax, ay, az;
      ax = shortint'(int'($urandom_range(0, 18000)) - 9000);
      ay = shortint'(int'($urandom_range(0, 18000)) - 9000);
      az = shortint'(int'($urandom_range(0, 16384)) - 8192);
      run_op(ax, ay, az, (k % 3 == 0) ? 0 : 30, (k % 7 == 3), rx, ry, rz);
    end

    check(n_stall > 0,   $sformatf("stalls exercised %0d", n_stall));
    check(n_ignored > 0, $sformatf("loads while busy exercised %0d", n_ignored));
    check(n_neg > 0 && n_pos > 0, "both rotation directions exercised");
    $display("cordic: %0d ops with stalls, %0d loads while busy, %0d negative, %0d positive angles",
             n_stall, n_ignored, n_neg, n_pos);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

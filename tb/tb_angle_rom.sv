// tb_angle_rom: checks the arctangent table.
//
// Drives every address in order and then at random, and checks that q shows
// round(atan(2^-i) deg * 65536/720) exactly one clock after the address,
// with the value rebuilt here from real arithmetic. The first two entries are
// also held against the hex values printed for them (45 deg = 16'h1000 and
// 26.565 deg = 16'h0972).
module tb_angle_rom;
  import cordic_ref_pkg::*;

  logic        clk = 1'b0;
  logic [3:0]  address;
  logic [15:0] q;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  angle_rom dut (.outclock(clk), .address(address), .q(q));

  task automatic check_addr(input logic [3:0] a);
    address = a;
    @(posedge clk);
    #1;
    checks++;
    if (q !== 16'(atan_word(int'(a)))) begin
      failures++;
      $display("FAIL addr %0d: q=%04h expected %04h", a, q, 16'(atan_word(int'(a))));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    address = '0;
    @(posedge clk);
    for (int i = 0; i < 16; i++) check_addr(4'(i));
    for (int n = 0; n < 200; n++) check_addr(4'($urandom_range(0, 15)));
    // Printed table values.
    address = 4'd0; @(posedge clk); #1;
    checks++; if (q !== 16'h1000) begin failures++; $display("FAIL entry 0 %04h", q); end
    address = 4'd1; @(posedge clk); #1;
    checks++; if (q !== 16'h0972) begin failures++; $display("FAIL entry 1 %04h", q); end
    // Registered output: q must not follow the address before the edge.
    address = 4'd15; #2;
    checks++; if (q !== 16'h0972) begin failures++; $display("FAIL q changed before the clock"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

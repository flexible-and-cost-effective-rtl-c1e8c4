// sphere: 3-D CORDIC processor, spherical (r, theta, phi) to Cartesian
// (x, y, z).
//
// Two 2-D CORDIC stages in rotation mode run one after the other, each with
// its own arctangent table:
//   stage 1: x0 = r,             y0 = 0, z0 = theta -> G*r*cos(theta), G*r*sin(theta)
//   stage 2: x0 = G*r*sin(theta), y0 = 0, z0 = phi   -> G^2*r*sin(theta)*cos(phi),
//                                                       G^2*r*sin(theta)*sin(phi)
// Outputs: x and y are stage 2's x and y; z is stage 1's x = G*r*cos(theta).
// Because stage 2 sees the gain twice and z only once, unit-radius inputs
// use r = 16'h0E68 (1/G^2 x 10000): x and y then come out in units of 1/10000
// and z carries one residual factor 1/G (the paper's own calculation,
// z = 0.4295 x 10000 for theta = 45 deg, makes the same choice).
//
// Interface: f_clk, resetn (asynchronous, active low), load, itr, r, theta,
// phi and x, y, z follow the paper's entity; done is added by this design.
// Angles use the 2^16/720-per-degree format, magnitudes are x 10000
// (see cordic_pkg). theta and phi must lie within about +/-99 deg.
//
// Timing: load (ignored while busy) starts stage 1 and captures phi, so r,
// theta and phi need only be valid in the load cycle; the cycle after stage 1
// finishes, stage 2 loads stage 1's y and performs its first iteration. With
// itr held high the result is ready, and done rises, 32 clock cycles after
// the load cycle begins, counting the load cycle as the first (the paper's
// 32-cycle latency). itr low stalls whichever stage is iterating. x, y and z
// show intermediate values while busy; they are valid while done is high,
// until the next load. The residual angles of both stages (z1, z2) are not
// needed and are left unread; the stages keep them because the 2-D entity
// has a z output of its own.
module sphere
  import cordic_pkg::*;
#(
  parameter int unsigned W     = DATA_W,
  parameter int unsigned NITER = N_ITER,
  parameter int unsigned CW    = ADDR_W
) (
  input  logic                f_clk,
  input  logic                resetn,
  input  logic                load,
  input  logic                itr,
  input  logic signed [W-1:0] r,
  input  logic signed [W-1:0] theta,
  input  logic signed [W-1:0] phi,
  output logic signed [W-1:0] x,
  output logic signed [W-1:0] y,
  output logic signed [W-1:0] z,
  output logic                done
);

  logic [CW-1:0]       addr1, addr2;
  logic [W-1:0]        atan1, atan2;
  logic signed [W-1:0] x1, y1, z1, x2, y2, z2;
  logic                busy1, done1, busy2, done2;
  logic                done1_q;
  logic                load1, load2;
  logic                busy;
  logic signed [W-1:0] phi_q;      // phi held for stage 2

  // Stage 2 starts on the rising edge of stage 1's done.
  assign load2 = done1 && !done1_q;
  assign busy  = busy1 || busy2 || load2;
  assign load1 = load && !busy;

  always_ff @(posedge f_clk or negedge resetn) begin
    if (!resetn) begin
      done1_q <= 1'b0;
      phi_q   <= '0;
    end else begin
      done1_q <= done1;
      if (load1) phi_q <= phi;
    end
  end

  angle_rom #(.DEPTH(NITER), .AW(CW), .DW(W)) u_rom1 (
    .outclock (f_clk),
    .address  (addr1),
    .q        (atan1)
  );

  cordic #(.W(W), .NITER(NITER), .CW(CW)) u_stage1 (
    .f_clk     (f_clk),
    .resetn    (resetn),
    .load      (load1),
    .itr       (itr),
    .x0        (r),
    .y0        ('0),
    .z0        (theta),
    .angle     (atan1),
    .x         (x1),
    .y         (y1),
    .z         (z1),
    .count_out (addr1),
    .busy      (busy1),
    .done      (done1)
  );

  angle_rom #(.DEPTH(NITER), .AW(CW), .DW(W)) u_rom2 (
    .outclock (f_clk),
    .address  (addr2),
    .q        (atan2)
  );

  cordic #(.W(W), .NITER(NITER), .CW(CW)) u_stage2 (
    .f_clk     (f_clk),
    .resetn    (resetn),
    .load      (load2),
    .itr       (itr),
    .x0        (y1),
    .y0        ('0),
    .z0        (phi_q),
    .angle     (atan2),
    .x         (x2),
    .y         (y2),
    .z         (z2),
    .count_out (addr2),
    .busy      (busy2),
    .done      (done2)
  );

  assign x    = x2;
  assign y    = y2;
  assign z    = x1;
  assign done = done1 && done2 && !busy;

  // Stage 2 is only ever started when it is idle.
  a_stage2_idle: assert property (@(posedge f_clk) disable iff (!resetn)
                                  load2 |-> !busy2);

endmodule

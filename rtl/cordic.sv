// cordic: one 2-D CORDIC processor in rotation mode (polar to Cartesian).
//
// Rotates the vector (x0, y0) by the angle z0 through N_ITER micro-rotations
// by +/- atan(2^-i). At each step the sign of the residual angle z picks the
// direction d = +1 (z >= 0) or -1 (z < 0) and
//     x <- x - d * (y >>> i)
//     y <- y + d * (x >>> i)
//     z <- z - d * atan(2^-i)
// using only adders/subtractors and shifters, as in Volder's unit (X, Y and
// angle registers, shift gates and three adder-subtractors). With x0 = R,
// y0 = 0 and z0 = theta the result is x = G*R*cos(theta), y = G*R*sin(theta),
// z ~ 0, where G ~= 1.6468 is the CORDIC gain; the caller removes G by
// pre-scaling R (x0 = 16'h17B9 = 0.607253*10000 yields cos and sin x 10000).
// Convergence needs |z0| <= ~99.9 deg.
//
// Interface (names from the paper's entity): f_clk, resetn (asynchronous,
// active low), load, itr, x0/y0/z0, angle (the look-up table word), outputs
// x/y/z and count_out (the look-up table address). busy and done are added
// by this design so a sequencer can tell when the result is ready.
//
// Timing: a cycle with load high while idle loads x0/y0/z0 and performs
// iteration 0 at the same clock edge; iterations 1..N_ITER-1 follow, one per
// clock edge on which itr is high (itr low stalls the stage). With itr held
// high the result is in x/y/z, and done is high, 16 clock cycles after the
// load cycle begins, counting the load cycle as the first (the paper's
// 16-cycle latency). load is ignored while busy.
//
// The angle table is outside this module and has a registered output, so
// count_out carries the index of the iteration that will be performed at the
// *next* clock edge; the table word for it then arrives on angle in time.
// x, y and z show the working registers, including intermediate values.
module cordic
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
  input  logic signed [W-1:0] x0,
  input  logic signed [W-1:0] y0,
  input  logic signed [W-1:0] z0,
  input  logic signed [W-1:0] angle,
  output logic signed [W-1:0] x,
  output logic signed [W-1:0] y,
  output logic signed [W-1:0] z,
  output logic [CW-1:0]       count_out,
  output logic                busy,
  output logic                done
);

  localparam logic [CW-1:0] LAST = CW'(NITER - 1);

  logic [CW-1:0] iter_q, iter_d;   // index of the next iteration to perform
  logic          start;            // load accepted this cycle
  logic          step;             // one micro-rotation at this clock edge
  logic          last;             // this micro-rotation is the final one

  logic signed [W-1:0] xa, ya, za; // operands of the adder-subtractors
  logic signed [W-1:0] xs, ys;     // shifted operands (shift gates)
  logic signed [W-1:0] xn, yn, zn; // results of the adder-subtractors
  logic [CW-1:0]       shamt;

  assign start = load && !busy;
  assign step  = start || (busy && itr);
  assign last  = step && ((start ? '0 : iter_q) == LAST);

  // Operand selection: a load feeds the inputs straight into iteration 0.
  always_comb begin
    if (start) begin
      xa = x0; ya = y0; za = z0; shamt = '0;
    end else begin
      xa = x;  ya = y;  za = z;  shamt = iter_q;
    end
    xs = xa >>> shamt;
    ys = ya >>> shamt;
    if (!za[W-1]) begin            // d = +1
      xn = xa - ys;
      yn = ya + xs;
      zn = za - angle;
    end else begin                 // d = -1
      xn = xa + ys;
      yn = ya - xs;
      zn = za + angle;
    end
  end

  // Next iteration index: this is also the look-up table address.
  always_comb begin
    if (!step)     iter_d = iter_q;
    else if (last) iter_d = '0;
    else           iter_d = (start ? CW'(1) : iter_q + CW'(1));
  end
  assign count_out = iter_d;

  always_ff @(posedge f_clk or negedge resetn) begin
    if (!resetn) begin
      x      <= '0;
      y      <= '0;
      z      <= '0;
      iter_q <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
    end else begin
      iter_q <= iter_d;
      if (step) begin
        x <= xn;
        y <= yn;
        z <= zn;
      end
      if (start) done <= 1'b0;
      if (last) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else if (start) begin
        busy <= 1'b1;
      end
    end
  end

  // The counter never leaves the table while iterating.
  a_iter_range: assert property (@(posedge f_clk) disable iff (!resetn)
                                 busy |-> (int'(iter_q) < NITER));
  // busy and done are never high together.
  a_busy_done:  assert property (@(posedge f_clk) disable iff (!resetn)
                                 !(busy && done));

endmodule

// angle_rom: the arctangent look-up table of one 2-D CORDIC stage.
//
// A 16-word by 16-bit read-only memory holding atan(2^-i), i = 0..15, in the
// processor's angle format (cordic_pkg::ATAN_TABLE gives the formula). The
// interface is the paper's: a 4-bit address and a clock named outclock, with
// the data word q registered on the rising edge of outclock, so q shows the
// word addressed in the previous cycle (one cycle read latency). The CORDIC
// stage therefore drives the address with the index of the iteration it will
// perform in the next cycle.
//
// Follows the paper: depth, width, port names and table contents. Own choice:
// rounding the table entries to whole LSBs, and q resetting to nothing (the
// paper gives no reset pin, so q is simply undefined until the first clock).
module angle_rom
  import cordic_pkg::*;
#(
  parameter int unsigned DEPTH = N_ITER,
  parameter int unsigned AW    = ADDR_W,
  parameter int unsigned DW    = DATA_W
) (
  input  logic          outclock,
  input  logic [AW-1:0] address,
  output logic [DW-1:0] q
);

  logic [DW-1:0] mem [DEPTH];

  // Contents come from the shared table; entries past its end read as zero.
  always_comb begin
    for (int i = 0; i < DEPTH; i++)
      mem[i] = (i < N_ITER) ? DW'(ATAN_TABLE[i]) : '0;
  end

  always_ff @(posedge outclock)
    q <= (int'(address) < DEPTH) ? mem[address] : '0;

endmodule

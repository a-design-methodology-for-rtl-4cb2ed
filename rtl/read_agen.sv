// read_agen -- read address generator of one physical memory unit.
//
// The PMU layout puts the data of full perfect access pattern l in bin l
// (2*Q words), and within the bin the two words read while fold k runs sit at
// offsets 2k and 2k+1.  Reads run in time order (pattern-major, fold-minor),
// so at read step s = l*Q + k the two ports read 2s and 2s+1: the generator is
// a plain forward counter.  The step advances on every cycle `adv` is high and
// wraps after STEPS = NPAT*Q steps, so it is back at 0 for the next phase.
//
// Interface: `adv` counts one read step; addr1/addr2 are the current step's
// port-1 / port-2 addresses (combinational from the step register).
// Timing: the address for step s is on the outputs in the cycle in which the
// step is used; `adv` in that cycle moves to step s+1.  Bit 0 of addr1 is
// always 0 and bit 0 of addr2 always 1: the ports own the even and odd words.
// Follows the paper: bins of 2q words, one per full pattern, linear counter.
// Own choices: synchronous active-high reset to step 0; wrap-around.
module read_agen #(
  parameter int STEPS = 12,
  parameter int AW    = 5
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          adv,
  output logic [AW-1:0] addr1,
  output logic [AW-1:0] addr2
);
  localparam int SW = (STEPS <= 1) ? 1 : $clog2(STEPS);

  logic [SW-1:0] step;

  always_ff @(posedge clk) begin
    if (rst)      step <= '0;
    else if (adv) step <= (32'(step) == STEPS - 1) ? '0 : step + 1'b1;
  end

  always_comb begin
    addr1 = AW'({step, 1'b0});
    addr2 = AW'({step, 1'b1});
  end
endmodule

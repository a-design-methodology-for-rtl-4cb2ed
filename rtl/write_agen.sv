// write_agen -- write address generator of one physical memory unit.
//
// After computing, the PPU collocated with this PMU writes the data of each of
// its edges into the PMU, two words per cycle.  At write step c = l*Q + k the
// PPU emits edges 2l and 2l+1 of its logical node in fold k.  Each word must
// land where the opposite side will read it (bin and offset of that reader's
// pattern and fold, see read_agen), so the write order is structured but not
// linear and is held in a look-up table.  The table is computed at
// elaboration by pg_pkg::waddr for every memory-unit id, and the runtime
// `mu_id` selects the row (the paper's memory unit carries its id as a port).
//
// Interface: `adv` counts one write step; addr1/addr2 are this step's port
// addresses; `dummy2` is high when the second edge of the step is the dummy
// edge (nothing to write on port 2).
// Timing: combinational from the step register, like read_agen.
// Follows the paper: the write order comes from the read order of the other
// side; an LUT implements it.  Own choice: the LUT is generated from the
// incidence formula instead of being typed in, and the layout follows the
// bin-major layout of the PMU section (see README on the paper's
// inconsistent fold-major example formula).
module write_agen
  import pg_pkg::*;
#(
  parameter int READER_SIDE = SIDE_H,
  parameter int N           = 5,
  parameter int Q           = 3,
  parameter int AW          = 5,
  parameter int MW          = 3
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          adv,
  input  logic [MW-1:0] mu_id,
  output logic [AW-1:0] addr1,
  output logic [AW-1:0] addr2,
  output logic          dummy2
);
  localparam int STEPS = NPAT * Q;
  localparam int SW    = (STEPS <= 1) ? 1 : $clog2(STEPS);

  logic [SW-1:0] step;
  logic [AW-1:0] lut   [N][STEPS][2];
  logic          lut_d [STEPS];

  for (genvar m = 0; m < N; m++) begin : g_m
    for (genvar c = 0; c < STEPS; c++) begin : g_c
      for (genvar p = 0; p < 2; p++) begin : g_p
        localparam int A = waddr(READER_SIDE, N, Q, m, c, p);
        assign lut[m][c][p] = (A < 0) ? '0 : AW'(A);
      end
    end
  end

  for (genvar c = 0; c < STEPS; c++) begin : g_d
    assign lut_d[c] = (rbase(1 - READER_SIDE, 2 * (c / Q) + 1) < 0);
  end

  always_ff @(posedge clk) begin
    if (rst)      step <= '0;
    else if (adv) step <= (32'(step) == STEPS - 1) ? '0 : step + 1'b1;
  end

  always_comb begin
    addr1  = lut[mu_id][step][0];
    addr2  = lut[mu_id][step][1];
    dummy2 = lut_d[step];
  end
endmodule

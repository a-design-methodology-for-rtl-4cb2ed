// demux_switch -- the 2-to-rho_hat switch at the two output ports of a PMU.
//
// In every read cycle the PMU delivers two words (port 1 and port 2).  This
// switch steers each of them onto one of the RH point-to-point wires that
// leave the PMU; wire w leads to PPU (P_IDX - wire_off(w)) mod N of the
// opposite side.  Which wire each port drives depends only on the index l of
// the full perfect access pattern being read, not on the fold, so the port
// selection schedule is a small LUT of NPAT entries (pg_pkg::dmx_sel).  A
// port whose schedule entry is "none" (the dummy edge of the last pattern)
// drives no wire; instead of tri-stating, every wire carries a valid bit that
// is low when the wire is not driven.
//
// Interface: en (a read word is present), pat (pattern l of that word),
// d1/d2 from the PMU; w_data/w_valid, one per wire.
// Timing: purely combinational; the wire register stage sits in
// pg_interconnect.
// Follows the paper: LUT-driven 2-to-rho_hat demultiplexer, one LUT per
// switch, rho_hat = rho + theta wires.  Own choice: valid bits instead of
// tri-state outputs, LUT contents generated from the incidence formula.
module demux_switch
  import pg_pkg::*;
#(
  parameter int SIDE   = SIDE_H,
  parameter int N      = 5,
  parameter int P_IDX  = 0,
  parameter int DATA_W = 1,
  parameter int RH     = rho_hat(SIDE, N),
  parameter int PW     = idx_w(NPAT)
) (
  input  logic              en,
  input  logic [PW-1:0]     pat,
  input  logic [DATA_W-1:0] d1,
  input  logic [DATA_W-1:0] d2,
  output logic [DATA_W-1:0] w_data  [RH],
  output logic              w_valid [RH]
);
  // sel[l][port]: wire index + 1, 0 = port idle
  localparam int SELW = idx_w(RH + 1);
  logic [SELW-1:0] sel [NPAT][2];

  for (genvar l = 0; l < NPAT; l++) begin : g_l
    for (genvar p = 0; p < 2; p++) begin : g_p
      assign sel[l][p] = SELW'(dmx_sel(SIDE, N, P_IDX, l, p) + 1);
    end
  end

  always_comb begin
    for (int w = 0; w < RH; w++) begin
      w_valid[w] = 1'b0;
      w_data[w]  = '0;
      if (en && 32'(sel[pat][0]) == w + 1) begin
        w_valid[w] = 1'b1;
        w_data[w]  = d1;
      end
      if (en && 32'(sel[pat][1]) == w + 1) begin
        w_valid[w] = 1'b1;
        w_data[w]  = d2;
      end
    end
  end
endmodule

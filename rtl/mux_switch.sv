// mux_switch -- the rho_hat-to-2 switch at the two input ports of a PPU.
//
// Wire w arriving at PPU i comes from PMU (i + wire_off(w)) mod N of the
// opposite side.  In pattern l the PPU needs, on input port 0, the word of
// its edge 2l and, on input port 1, the word of edge 2l+1; by circulance the
// wires carrying them are the same for every PPU and every fold
// (pg_pkg::wire0/wire1), so all these switches share one NPAT-entry LUT.
// For the dummy edge of the last pattern the second port reports not-valid,
// and the PPU ignores it.
//
// Interface: en (inputs are due this cycle), pat (pattern l), RH wires with
// valid bits; two outputs with valid bits.
// Timing: combinational; the PPU registers the result.
// Follows the paper: LUT-driven multiplexer, schedule reciprocal to the
// 2-to-rho_hat switches.  Own choice: an output is valid only if its selected
// wire is valid and en is high.
module mux_switch
  import pg_pkg::*;
#(
  parameter int SIDE   = SIDE_H,
  parameter int N      = 5,
  parameter int DATA_W = 1,
  parameter int RH     = rho_hat(SIDE, N),
  parameter int PW     = idx_w(NPAT)
) (
  input  logic              en,
  input  logic [PW-1:0]     pat,
  input  logic [DATA_W-1:0] w_data  [RH],
  input  logic              w_valid [RH],
  output logic [DATA_W-1:0] d0,
  output logic              v0,
  output logic [DATA_W-1:0] d1,
  output logic              v1
);
  localparam int SELW = idx_w(RH + 1);
  logic [SELW-1:0] sel [NPAT][2];   // wire index + 1, 0 = no wire

  for (genvar l = 0; l < NPAT; l++) begin : g_l
    assign sel[l][0] = SELW'(wire0(SIDE, N, l) + 1);
    assign sel[l][1] = SELW'(wire1(SIDE, N, l) + 1);
  end

  always_comb begin
    d0 = '0; v0 = 1'b0;
    d1 = '0; v1 = 1'b0;
    for (int w = 0; w < RH; w++) begin
      if (32'(sel[pat][0]) == w + 1) begin
        d0 = w_data[w];
        v0 = en & w_valid[w];
      end
      if (32'(sel[pat][1]) == w + 1) begin
        d1 = w_data[w];
        v1 = en & w_valid[w];
      end
    end
  end
endmodule

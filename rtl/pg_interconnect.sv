// pg_interconnect -- one instance of the folded PG point-to-point
// interconnect, with one pipeline register per wire.
//
// The N demux switches of the memory side each drive RH wires; the N mux
// switches of the processing side each receive RH wires.  Wire w of PMU p is
// hard-wired to wire w of PPU (p - wire_off(w)) mod N, i.e. PPU i receives on
// its wire w what PMU (i + wire_off(w)) mod N sends.  Because the PG graph is
// circulant and N divides J, these N*RH connections serve every fold without
// any reconfiguration (the overlay of edges across folds).  The register
// stage models the cycle in which the data travel on the wires: the mux
// switches use the data one cycle after the demux switches drove them.
//
// Interface: s_data/s_valid [N][RH] from the demux switches (index = PMU),
// r_data/r_valid [N][RH] to the mux switches (index = PPU).
// Timing: one clock of latency; valid bits reset to 0.
// Follows the paper: static circulant wiring, one wire per (PMU, PPU) pair
// plus one per same-PMU pattern.  Own choice: the register stage (the paper
// staggers the two switch types by one cycle).
module pg_interconnect
  import pg_pkg::*;
#(
  parameter int SIDE   = SIDE_H,
  parameter int N      = 5,
  parameter int DATA_W = 1,
  parameter int RH     = rho_hat(SIDE, N)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [DATA_W-1:0] s_data  [N][RH],
  input  logic              s_valid [N][RH],
  output logic [DATA_W-1:0] r_data  [N][RH],
  output logic              r_valid [N][RH]
);
  for (genvar i = 0; i < N; i++) begin : g_ppu
    for (genvar w = 0; w < RH; w++) begin : g_w
      localparam int P = (i + wire_off(SIDE, N, w)) % N;
      always_ff @(posedge clk) begin
        if (rst) r_valid[i][w] <= 1'b0;
        else     r_valid[i][w] <= s_valid[P][w];
        r_data[i][w] <= s_data[P][w];
      end
    end
  end
endmodule

// var_ppu -- physical processing unit of the point side: Q overlaid variable
// (bit) nodes of a hard-decision bit-flipping decoder.
//
// Each variable node holds its current hard decision.  It sends that bit on
// all its edges; from its GAMMA check nodes it receives the parities, counts
// the unsatisfied ones and, when the count reaches THRESH, flips its bit
// (all nodes flip in parallel at the end of the half iteration).  Folding
// overlays Q logical nodes, so the bit and the counter exist in Q copies,
// selected by the fold index that accompanies the inputs.  Invalid inputs
// (dummy edge) are not counted.  Channel bits are loaded fold by fold
// (multiplexed input) and the decisions read out the same way.
//
// Interface: load_en/load_fold/load_bits write Q bits one fold per cycle;
// acc_clr clears the counters; in_en/in_fold with two inputs per cycle;
// flip_en applies the flip rule to all Q nodes; out_fold selects out_d.
// Timing: all updates at the clock edge; out_d is combinational.
// Follows the paper: Q register copies, dummy input ignored, counting of all
// inputs.  Own choices: THRESH = 4 (majority of 7), the exact flip rule.
module var_ppu #(
  parameter int Q      = 3,
  parameter int GAMMA  = 7,
  parameter int THRESH = 4,
  parameter int FW     = (Q <= 1) ? 1 : $clog2(Q)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          load_en,
  input  logic [FW-1:0] load_fold,
  input  logic          load_bit,
  input  logic          acc_clr,
  input  logic          in_en,
  input  logic [FW-1:0] in_fold,
  input  logic          in_d0,
  input  logic          in_v0,
  input  logic          in_d1,
  input  logic          in_v1,
  input  logic          flip_en,
  input  logic [FW-1:0] out_fold,
  output logic          out_d
);
  localparam int CW = $clog2(GAMMA + 1);

  logic [Q-1:0]  bits;
  logic [CW-1:0] cnt [Q];

  always_ff @(posedge clk) begin
    if (rst) begin
      bits <= '0;
      for (int f = 0; f < Q; f++) cnt[f] <= '0;
    end else begin
      if (load_en) bits[load_fold] <= load_bit;
      if (acc_clr) begin
        for (int f = 0; f < Q; f++) cnt[f] <= '0;
      end else if (in_en) begin
        cnt[in_fold] <= cnt[in_fold] + CW'(in_v0 & in_d0) + CW'(in_v1 & in_d1);
      end
      if (flip_en) begin
        for (int f = 0; f < Q; f++) begin
          if (32'(cnt[f]) >= THRESH) begin
            bits[f] <= ~bits[f];
          end
        end
      end
    end
  end

  assign out_d = bits[out_fold];
endmodule

// check_ppu -- physical processing unit of the hyperplane side: Q overlaid
// check nodes of a hard-decision bit-flipping decoder.
//
// A check node computes the parity (XOR) of the bits on all its GAMMA edges
// and sends that parity back on every edge (1 = check unsatisfied).  Folding
// overlays Q logical check nodes on this unit; their inputs arrive
// interleaved (pattern l of fold 0, fold 1, ..., fold Q-1, then pattern l+1),
// so the accumulating register exists in Q copies, selected by the fold index
// that comes with the inputs.  Inputs whose valid bit is low (dummy edge) are
// ignored.
//
// Interface: acc_clr clears all Q parities; in_en/in_fold with two inputs
// (data + valid) per cycle; out_fold selects the parity driven on out_d
// (write-back and read-out); unsat is the OR of the Q parities.
// Timing: accumulation at the clock edge; out_d and unsat are combinational
// from the registers.  One input pair per cycle (T = 1).
// Follows the paper: Q copies of each register that holds a partial result
// across folds; node ignores the dummy input.  Own choice: the check-node
// function itself (the paper names bit flipping but gives no node equations).
module check_ppu #(
  parameter int Q  = 3,
  parameter int FW = (Q <= 1) ? 1 : $clog2(Q)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          acc_clr,
  input  logic          in_en,
  input  logic [FW-1:0] in_fold,
  input  logic          in_d0,
  input  logic          in_v0,
  input  logic          in_d1,
  input  logic          in_v1,
  input  logic [FW-1:0] out_fold,
  output logic          out_d,
  output logic          unsat
);
  logic [Q-1:0] parity;

  always_ff @(posedge clk) begin
    if (rst || acc_clr) parity <= '0;
    else if (in_en)     parity[in_fold] <= parity[in_fold] ^ (in_v0 & in_d0) ^ (in_v1 & in_d1);
  end

  assign out_d = parity[out_fold];
  assign unsat = |parity;
endmodule

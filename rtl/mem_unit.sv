// mem_unit -- physical memory unit (PMU): a dual-port memory with its own
// read and write address generators and the address multiplexer.
//
// The PMU overlays the Q logical memory units of one PPU.  It holds
// DEPTH = 2*Q*NPAT words (24 for the 15-node, degree-7, Q=3 decoder: NPAT=4
// bins, one per full perfect access pattern, of 2*Q words; the last bin is
// half dummy because the degree is odd).  The PPU collocated with it writes
// its results here (write_agen places them), and the PPUs of the opposite
// side read them back in time order (read_agen counts linearly).
//
// Interface, as in the paper's interface diagram: clk, rst, en_use,
// mu_id, rd_w_bar1/2 (1 = read, 0 = write, per port), d_in1/2, d_out1/2.
// A cycle with en_use=1 is one step.  If both ports read, it is a read step;
// if either port writes, it is a write step (a port left at 1 during a write
// step is idle; the controller does this for the dummy edge).
// Timing: writes happen at the clock edge ending the step.  Reads are
// synchronous: d_out1/2 show the words of step s in the cycle after step s.
// Own choices: synchronous active-high reset of the address counters (the
// memory array itself is not reset); the step counters of read and write
// advance only on read / write steps respectively, so a read phase and a write
// phase must each run all NPAT*Q steps.
module mem_unit
  import pg_pkg::*;
#(
  parameter int READER_SIDE = SIDE_H,
  parameter int N           = 5,
  parameter int Q           = 3,
  parameter int DATA_W      = 1,
  parameter int MW          = idx_w(N)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              en_use,
  input  logic [MW-1:0]     mu_id,
  input  logic              rd_w_bar1,
  input  logic              rd_w_bar2,
  input  logic [DATA_W-1:0] d_in1,
  input  logic [DATA_W-1:0] d_in2,
  output logic [DATA_W-1:0] d_out1,
  output logic [DATA_W-1:0] d_out2
);
  localparam int STEPS = NPAT * Q;
  localparam int DEPTH = 2 * STEPS;
  localparam int AW    = idx_w(DEPTH);

  logic          rd_step, wr_step;
  logic [AW-1:0] ra1, ra2, wa1, wa2, a1, a2;
  logic          dummy2;
  logic [DATA_W-1:0] mem [DEPTH];

  assign rd_step = en_use & rd_w_bar1 & rd_w_bar2;
  assign wr_step = en_use & ~(rd_w_bar1 & rd_w_bar2);

  read_agen #(.STEPS(STEPS), .AW(AW)) u_ragen (
    .clk, .rst, .adv(rd_step), .addr1(ra1), .addr2(ra2)
  );

  write_agen #(.READER_SIDE(READER_SIDE), .N(N), .Q(Q), .AW(AW), .MW(MW)) u_wagen (
    .clk, .rst, .adv(wr_step), .mu_id, .addr1(wa1), .addr2(wa2), .dummy2
  );

  // Address multiplexer: each port takes the write address when it writes.
  assign a1 = rd_w_bar1 ? ra1 : wa1;
  assign a2 = rd_w_bar2 ? ra2 : wa2;

  always_ff @(posedge clk) begin
    if (en_use) begin
      if (!rd_w_bar1) mem[a1] <= d_in1;
      if (!rd_w_bar2) mem[a2] <= d_in2;
      d_out1 <= mem[a1];
      d_out2 <= mem[a2];
    end
  end

  // The two ports never write the same word, and port 2 never writes a dummy edge.
  always_ff @(posedge clk) begin
    if (!rst && en_use && !rd_w_bar1 && !rd_w_bar2)
      a_no_wr_clash: assert (a1 != a2) else $error("mem_unit: both ports write word %0d", a1);
    if (!rst && en_use && !rd_w_bar2)
      a_no_dummy_wr: assert (!dummy2) else $error("mem_unit: write of a dummy edge");
  end
endmodule

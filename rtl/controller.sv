// controller -- centralised control path of the folded decoder.
//
// The decoder runs a flooding schedule: all point (variable) nodes send, then
// all hyperplane (check) nodes compute and send back, and so on.  Each half
// iteration is a write phase followed by a read phase:
//   write phase  NPAT*Q steps.  At step c the writing PPUs emit the data of
//                pattern c div Q of their fold c mod Q into their own PMUs
//                (port 2 stays idle on the dummy edge).
//   read phase   NPAT*Q steps, plus 2 cycles of drain.  At step c every PMU of
//                the written side reads words 2c and 2c+1; one cycle later the
//                demux switches steer them with pattern c div Q; one cycle
//                after that (interconnect register) the mux switches and the
//                reading PPUs take them with fold c mod Q.  The controller
//                delays the pattern/fold tags through the same two stages.
//   finish       one cycle: after the check side, stop if no check is
//                unsatisfied or MAX_ITER flips were done; after the point
//                side, every variable node applies its flip rule.
// Before the first half the Q channel-bit words are taken from the input
// (one fold per accepted beat); at the end the decisions leave the same way.
// The sequence is: LOAD, PW, HR, HF, then [HW, PR, PF, PW, HR, HF] per
// iteration, then OUT.  One iteration therefore lasts 2*(2*NPAT*Q + 3)
// cycles (54 for the default sizes).
//
// Interface: in_valid/in_ready handshake for input beats, out_valid/out_fold
// for output beats, unsat_any from the check PPUs; control words and tags to
// the datapath.  Status: busy, done (one-cycle pulse with the last output
// beat), converged, iters.
// Follows the paper: one central control path; read and write intervals each
// NPAT*Q cycles; the 2-to-rho_hat and rho_hat-to-2 switches are enabled one
// cycle apart.  Own choices: an FSM with counters rather than a microcode ROM,
// the early stop on a zero syndrome, MAX_ITER, non-overlapped write and read
// phases.
module controller
  import pg_pkg::*;
#(
  parameter int Q        = 3,
  parameter int MAX_ITER = 8,
  parameter int FW       = idx_w(Q),
  parameter int PW       = idx_w(NPAT),
  parameter int IW       = $clog2(MAX_ITER + 1)
) (
  input  logic          clk,
  input  logic          rst,
  // input beats
  input  logic          in_valid,
  output logic          in_ready,
  // output beats
  output logic          out_valid,
  output logic [FW-1:0] out_fold,
  // from the check PPUs
  input  logic          unsat_any,
  // memory units of the point side and of the hyperplane side
  output pmu_ctrl_t     pt_ctrl,
  output pmu_ctrl_t     hp_ctrl,
  // writers: fold whose data the PPUs drive (write-back and read-out)
  output logic [FW-1:0] wr_fold,
  // read path, stage 1 (demux switches) and stage 2 (mux switches, PPUs)
  output logic          dmx_en_pt,
  output logic          dmx_en_hp,
  output logic [PW-1:0] dmx_pat,
  output logic          rd_en_chk,
  output logic          rd_en_var,
  output logic [PW-1:0] rd_pat,
  output logic [FW-1:0] rd_fold,
  // PPU housekeeping
  output logic          load_en,
  output logic [FW-1:0] load_fold,
  output logic          acc_clr_chk,
  output logic          acc_clr_var,
  output logic          flip_en,
  // status
  output logic          busy,
  output logic          done,
  output logic          converged,
  output logic [IW-1:0] iters
);
  localparam int STEPS = NPAT * Q;
  localparam int SW    = $clog2(STEPS + 2);

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_PW, S_HR, S_HF, S_HW, S_PR, S_PF, S_OUT
  } state_t;

  state_t        state;
  logic [SW-1:0] step;
  logic [FW-1:0] beat;
  logic          rd_act;      // a read step of either side (stage 0)
  logic          rd_side_h;   // stage 0: hyperplane side is the reader
  logic [PW-1:0] pat0;
  logic [FW-1:0] fold0;
  logic          s1_h, s1_p;
  logic [PW-1:0] s1_pat;
  logic [FW-1:0] s1_fold;

  wire last_step  = (32'(step) == STEPS - 1);
  wire last_drain = (32'(step) == STEPS + 1);
  wire last_beat  = (32'(beat) == Q - 1);

  // ---- sequencing --------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      step      <= '0;
      beat      <= '0;
      iters     <= '0;
      converged <= 1'b0;
    end else begin
      case (state)
        S_IDLE: begin
          beat <= '0;
          if (in_valid) state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          beat <= last_beat ? '0 : beat + 1'b1;
          if (last_beat) begin
            state <= S_PW;
            step  <= '0;
            iters <= '0;
          end
        end
        S_PW, S_HW: begin
          step <= last_step ? '0 : step + 1'b1;
          if (last_step) state <= (state == S_PW) ? S_HR : S_PR;
        end
        S_HR, S_PR: begin
          step <= last_drain ? '0 : step + 1'b1;
          if (last_drain) state <= (state == S_HR) ? S_HF : S_PF;
        end
        S_HF: begin
          if (!unsat_any || 32'(iters) == MAX_ITER) begin
            converged <= !unsat_any;
            state     <= S_OUT;
            beat      <= '0;
          end else begin
            state <= S_HW;
          end
        end
        S_PF: begin
          iters <= iters + 1'b1;
          state <= S_PW;
        end
        S_OUT: begin
          beat <= last_beat ? '0 : beat + 1'b1;
          if (last_beat) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- stage 0: memory-unit control and writer tags ----------------------
  always_comb begin
    pt_ctrl   = '{en_use: 1'b0, rd_w_bar1: 1'b1, rd_w_bar2: 1'b1};
    hp_ctrl   = '{en_use: 1'b0, rd_w_bar1: 1'b1, rd_w_bar2: 1'b1};
    rd_act    = 1'b0;
    rd_side_h = 1'b0;
    pat0      = PW'(32'(step) / Q);
    fold0     = FW'(32'(step) % Q);
    wr_fold   = fold0;
    case (state)
      S_PW: pt_ctrl = '{en_use: 1'b1, rd_w_bar1: 1'b0,
                        rd_w_bar2: (2 * 32'(pat0) + 1 >= GAMMA)};
      S_HW: hp_ctrl = '{en_use: 1'b1, rd_w_bar1: 1'b0,
                        rd_w_bar2: (2 * 32'(pat0) + 1 >= GAMMA)};
      S_HR: if (32'(step) < STEPS) begin
        pt_ctrl   = '{en_use: 1'b1, rd_w_bar1: 1'b1, rd_w_bar2: 1'b1};
        rd_act    = 1'b1;
        rd_side_h = 1'b1;
      end
      S_PR: if (32'(step) < STEPS) begin
        hp_ctrl = '{en_use: 1'b1, rd_w_bar1: 1'b1, rd_w_bar2: 1'b1};
        rd_act  = 1'b1;
      end
      S_OUT:  wr_fold = beat;
      default: ;
    endcase
  end

  // ---- stages 1 and 2 of the read path -----------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      s1_h      <= 1'b0;
      s1_p      <= 1'b0;
      rd_en_chk <= 1'b0;
      rd_en_var <= 1'b0;
    end else begin
      s1_h      <= rd_act & rd_side_h;
      s1_p      <= rd_act & ~rd_side_h;
      rd_en_chk <= s1_h;
      rd_en_var <= s1_p;
    end
    s1_pat  <= pat0;
    s1_fold <= fold0;
    rd_pat  <= s1_pat;
    rd_fold <= s1_fold;
  end

  assign dmx_en_pt = s1_h;   // point PMUs are read by the hyperplane side
  assign dmx_en_hp = s1_p;
  assign dmx_pat   = s1_pat;

  assign in_ready    = (state == S_LOAD);
  assign load_en     = (state == S_LOAD) && in_valid;
  assign load_fold   = beat;
  assign acc_clr_chk = (state == S_PW);
  assign acc_clr_var = (state == S_HW);
  assign flip_en     = (state == S_PF);
  assign out_valid   = (state == S_OUT);
  assign out_fold    = beat;
  assign done        = (state == S_OUT) && last_beat;
  assign busy        = (state != S_IDLE);
endmodule

// pg_fold_decoder -- folded hard-decision bit-flipping decoder over the
// point/hyperplane graph of PG(3,GF(2)) (15 + 15 nodes, degree 7), folded by
// Q = 3 onto N = 5 processing units and 5 memory units per side.
//
// Structure (one column per PPU index i = 0..N-1):
//   point side       var_ppu i  -> mem_unit (point PMU i)  -> demux_switch
//   PG interconnect  pg_interconnect (SIDE_H): point PMUs to hyperplane PPUs
//   hyperplane side  mux_switch -> check_ppu i -> mem_unit (hyperplane PMU i)
//                    -> demux_switch
//   PG interconnect  pg_interconnect (SIDE_P): hyperplane PMUs to point PPUs
//   point side       mux_switch -> var_ppu i
// A single controller sequences everything.  Every PPU writes only to its
// own PMU; all traffic between the sides goes over the two static wire sets,
// which are the same for all Q folds.
//
// Interface:
//   in_valid/in_ready/in_bits  Q beats of N received hard bits; beat k holds
//                              the bits of points k*N .. k*N+N-1 (bit i =
//                              point k*N+i).
//   out_valid/out_fold/out_bits Q beats of N decoded bits, same order.
//   done       one-cycle pulse with the last output beat.
//   converged  all checks satisfied at the end; iters = flips performed.
//   busy       a block is in progress.
// Timing: after the last input beat, 27 + 54*iters cycles pass until the
// first output beat (default sizes); one iteration is 54 cycles.
// Follows the paper: two sets of J/q PPUs, PMUs, 2-to-rho_hat and
// rho_hat-to-2 switches, two static interconnects, write-back to the local
// PMU, first design option (all folds per pattern).  Own choices are listed in
// the README (node equations, stop rule, I/O beats, phase overlap).
module pg_fold_decoder
  import pg_pkg::*;
#(
  parameter int Q        = 3,
  parameter int MAX_ITER = 8,
  parameter int THRESH   = 4,
  parameter int N        = J / Q,
  parameter int FW       = idx_w(Q),
  parameter int IW       = $clog2(MAX_ITER + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [N-1:0]  in_bits,
  output logic          out_valid,
  output logic [FW-1:0] out_fold,
  output logic [N-1:0]  out_bits,
  output logic          done,
  output logic          converged,
  output logic [IW-1:0] iters,
  output logic          busy
);
  if (J % Q != 0) begin : g_bad_q
    $error("pg_fold_decoder: fold factor Q must divide J");
  end

  localparam int PW   = idx_w(NPAT);
  localparam int MW   = idx_w(N);
  localparam int RH_H = rho_hat(SIDE_H, N);   // wires read by hyperplane PPUs
  localparam int RH_P = rho_hat(SIDE_P, N);   // wires read by point PPUs

  pmu_ctrl_t     pt_ctrl, hp_ctrl;
  logic [FW-1:0] wr_fold, rd_fold, load_fold;
  logic [PW-1:0] dmx_pat, rd_pat;
  logic          dmx_en_pt, dmx_en_hp, rd_en_chk, rd_en_var;
  logic          load_en, acc_clr_chk, acc_clr_var, flip_en;
  logic [N-1:0]  unsat, var_out, chk_out;

  // point PMUs -> hyperplane PPUs
  logic pt_q1 [N], pt_q2 [N];
  logic ph_sd [N][RH_H], ph_sv [N][RH_H], ph_rd [N][RH_H], ph_rv [N][RH_H];
  // hyperplane PMUs -> point PPUs
  logic hp_q1 [N], hp_q2 [N];
  logic hp_sd [N][RH_P], hp_sv [N][RH_P], hp_rd [N][RH_P], hp_rv [N][RH_P];

  controller #(.Q(Q), .MAX_ITER(MAX_ITER)) u_ctrl (
    .clk, .rst,
    .in_valid, .in_ready,
    .out_valid, .out_fold,
    .unsat_any(|unsat),
    .pt_ctrl, .hp_ctrl,
    .wr_fold,
    .dmx_en_pt, .dmx_en_hp, .dmx_pat,
    .rd_en_chk, .rd_en_var, .rd_pat, .rd_fold,
    .load_en, .load_fold,
    .acc_clr_chk, .acc_clr_var, .flip_en,
    .busy, .done, .converged, .iters
  );

  for (genvar i = 0; i < N; i++) begin : g_col
    logic m_d0, m_v0, m_d1, m_v1;   // into check PPU i
    logic n_d0, n_v0, n_d1, n_v1;   // into variable PPU i

    // ---- point side: variable node PPU and its memory unit ---------------
    var_ppu #(.Q(Q), .GAMMA(GAMMA), .THRESH(THRESH)) u_var (
      .clk, .rst,
      .load_en, .load_fold, .load_bit(in_bits[i]),
      .acc_clr(acc_clr_var),
      .in_en(rd_en_var), .in_fold(rd_fold),
      .in_d0(n_d0), .in_v0(n_v0), .in_d1(n_d1), .in_v1(n_v1),
      .flip_en,
      .out_fold(wr_fold), .out_d(var_out[i])
    );

    mem_unit #(.READER_SIDE(SIDE_H), .N(N), .Q(Q), .DATA_W(1)) u_pt_mu (
      .clk, .rst,
      .en_use(pt_ctrl.en_use), .mu_id(MW'(i)),
      .rd_w_bar1(pt_ctrl.rd_w_bar1), .rd_w_bar2(pt_ctrl.rd_w_bar2),
      .d_in1(var_out[i]), .d_in2(var_out[i]),
      .d_out1(pt_q1[i]), .d_out2(pt_q2[i])
    );

    demux_switch #(.SIDE(SIDE_H), .N(N), .P_IDX(i)) u_pt_dmx (
      .en(dmx_en_pt), .pat(dmx_pat), .d1(pt_q1[i]), .d2(pt_q2[i]),
      .w_data(ph_sd[i]), .w_valid(ph_sv[i])
    );

    // ---- hyperplane side: check node PPU and its memory unit -------------
    mux_switch #(.SIDE(SIDE_H), .N(N)) u_chk_mux (
      .en(rd_en_chk), .pat(rd_pat), .w_data(ph_rd[i]), .w_valid(ph_rv[i]),
      .d0(m_d0), .v0(m_v0), .d1(m_d1), .v1(m_v1)
    );

    check_ppu #(.Q(Q)) u_chk (
      .clk, .rst,
      .acc_clr(acc_clr_chk),
      .in_en(rd_en_chk), .in_fold(rd_fold),
      .in_d0(m_d0), .in_v0(m_v0), .in_d1(m_d1), .in_v1(m_v1),
      .out_fold(wr_fold), .out_d(chk_out[i]),
      .unsat(unsat[i])
    );

    mem_unit #(.READER_SIDE(SIDE_P), .N(N), .Q(Q), .DATA_W(1)) u_hp_mu (
      .clk, .rst,
      .en_use(hp_ctrl.en_use), .mu_id(MW'(i)),
      .rd_w_bar1(hp_ctrl.rd_w_bar1), .rd_w_bar2(hp_ctrl.rd_w_bar2),
      .d_in1(chk_out[i]), .d_in2(chk_out[i]),
      .d_out1(hp_q1[i]), .d_out2(hp_q2[i])
    );

    demux_switch #(.SIDE(SIDE_P), .N(N), .P_IDX(i)) u_hp_dmx (
      .en(dmx_en_hp), .pat(dmx_pat), .d1(hp_q1[i]), .d2(hp_q2[i]),
      .w_data(hp_sd[i]), .w_valid(hp_sv[i])
    );

    mux_switch #(.SIDE(SIDE_P), .N(N)) u_var_mux (
      .en(rd_en_var), .pat(rd_pat), .w_data(hp_rd[i]), .w_valid(hp_rv[i]),
      .d0(n_d0), .v0(n_v0), .d1(n_d1), .v1(n_v1)
    );
  end

  pg_interconnect #(.SIDE(SIDE_H), .N(N)) u_ic_h (
    .clk, .rst, .s_data(ph_sd), .s_valid(ph_sv), .r_data(ph_rd), .r_valid(ph_rv)
  );

  pg_interconnect #(.SIDE(SIDE_P), .N(N)) u_ic_p (
    .clk, .rst, .s_data(hp_sd), .s_valid(hp_sv), .r_data(hp_rd), .r_valid(hp_rv)
  );

  assign out_bits = var_out;
endmodule

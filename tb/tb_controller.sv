// tb_controller -- checks the control sequence cycle by cycle.  Each run
// feeds three input beats with random gaps, then a scenario in which the
// check side reports "unsatisfied" for the first U finish cycles (U random,
// sometimes larger than MAX_ITER).  From the cycle after the last input beat
// the expected timeline is (x = cycle, j = x div 54, y = x mod 54):
//   y  0..11  point memories written, port 2 idle on steps 9..11, clear checks
//   y 12..23  point memories read (step y-12); switch enable one cycle later,
//             check-side input enable two cycles later, with pattern/fold tags
//   y 26      decision: stop when not unsatisfied or j == MAX_ITER
//   y 27..38  hyperplane memories written, clear variable counters
//   y 39..50  hyperplane memories read, tags as above
//   y 53      flip
// then three output beats, done on the last, converged and iters reported.
module tb_controller;
  import pg_pkg::*;
  localparam int MAXI = 8;
  logic clk = 1'b0, rst = 1'b1;
  logic in_valid = 1'b0, in_ready, out_valid, unsat_any = 1'b0;
  logic [1:0] out_fold, wr_fold, rd_fold, load_fold, dmx_pat, rd_pat;
  pmu_ctrl_t pt_ctrl, hp_ctrl;
  logic dmx_en_pt, dmx_en_hp, rd_en_chk, rd_en_var, load_en;
  logic acc_clr_chk, acc_clr_var, flip_en, busy, done, converged;
  logic [3:0] iters;
  int checks = 0, failures = 0;

  controller dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp, int x);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s = %0d exp %0d at x=%0d", what, got, exp, x);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int run = 0; run < 12; run++) begin
      automatic int u = $urandom_range(10);
      automatic int jstop = (u < MAXI) ? u : MAXI;
      automatic int beats = 0;
      automatic int total = 54 * jstop + 27;
      // input phase
      while (beats < 3) begin
        in_valid <= ($urandom_range(2) != 0);
        @(negedge clk);
        if (in_ready) begin
          expect_eq("load_en", int'(load_en), int'(in_valid), -1);
          if (in_valid) expect_eq("load_fold", int'(load_fold), beats, -1);
        end else begin
          expect_eq("load_en idle", int'(load_en), 0, -1);
        end
        @(posedge clk);
        if (in_valid && in_ready) beats++;
      end
      in_valid <= 1'b0;
      // decoding
      for (int x = 0; x < total + 3; x++) begin
        automatic int j = x / 54, y = x % 54;
        automatic bit pw = (y < 12), hw = (y >= 27 && y < 39);
        automatic bit hr = (y >= 12 && y < 24), pr = (y >= 39 && y < 51);
        automatic bit h1 = (y >= 13 && y < 25), p1 = (y >= 40 && y < 52);
        automatic bit h2 = (y >= 14 && y < 26), p2 = (y >= 41 && y < 53);
        automatic bit outp = (x >= total);
        unsat_any <= (j < u);
        @(negedge clk);
        if (outp) begin
          expect_eq("out_valid", int'(out_valid), 1, x);
          expect_eq("out_fold", int'(out_fold), x - total, x);
          expect_eq("done", int'(done), int'(x == total + 2), x);
          expect_eq("converged", int'(converged), int'(u <= MAXI), x);
          expect_eq("iters", int'(iters), jstop, x);
          expect_eq("pt_en", int'(pt_ctrl.en_use), 0, x);
          expect_eq("hp_en", int'(hp_ctrl.en_use), 0, x);
        end else begin
          expect_eq("out_valid", int'(out_valid), 0, x);
          expect_eq("busy", int'(busy), 1, x);
          expect_eq("pt_en", int'(pt_ctrl.en_use), int'(pw || hr), x);
          expect_eq("hp_en", int'(hp_ctrl.en_use), int'(hw || pr), x);
          if (pw) begin
            expect_eq("pt_rw1", int'(pt_ctrl.rd_w_bar1), 0, x);
            expect_eq("pt_rw2", int'(pt_ctrl.rd_w_bar2), int'(y >= 9), x);
            expect_eq("wr_fold", int'(wr_fold), y % 3, x);
          end
          if (hw) begin
            expect_eq("hp_rw1", int'(hp_ctrl.rd_w_bar1), 0, x);
            expect_eq("hp_rw2", int'(hp_ctrl.rd_w_bar2), int'(y - 27 >= 9), x);
            expect_eq("wr_fold", int'(wr_fold), (y - 27) % 3, x);
          end
          if (hr) expect_eq("pt_read", int'(pt_ctrl.rd_w_bar1 && pt_ctrl.rd_w_bar2), 1, x);
          if (pr) expect_eq("hp_read", int'(hp_ctrl.rd_w_bar1 && hp_ctrl.rd_w_bar2), 1, x);
          expect_eq("dmx_en_pt", int'(dmx_en_pt), int'(h1), x);
          expect_eq("dmx_en_hp", int'(dmx_en_hp), int'(p1), x);
          if (h1) expect_eq("dmx_pat", int'(dmx_pat), (y - 13) / 3, x);
          if (p1) expect_eq("dmx_pat", int'(dmx_pat), (y - 40) / 3, x);
          expect_eq("rd_en_chk", int'(rd_en_chk), int'(h2), x);
          expect_eq("rd_en_var", int'(rd_en_var), int'(p2), x);
          if (h2) begin
            expect_eq("rd_pat", int'(rd_pat), (y - 14) / 3, x);
            expect_eq("rd_fold", int'(rd_fold), (y - 14) % 3, x);
          end
          if (p2) begin
            expect_eq("rd_pat", int'(rd_pat), (y - 41) / 3, x);
            expect_eq("rd_fold", int'(rd_fold), (y - 41) % 3, x);
          end
          expect_eq("acc_clr_chk", int'(acc_clr_chk), int'(pw), x);
          expect_eq("acc_clr_var", int'(acc_clr_var), int'(hw), x);
          expect_eq("flip_en", int'(flip_en), int'(y == 53), x);
          expect_eq("in_ready", int'(in_ready), 0, x);
        end
        @(posedge clk);
      end
      @(negedge clk);
      expect_eq("busy after", int'(busy), 0, -1);
      expect_eq("out_valid after", int'(out_valid), 0, -1);
      repeat ($urandom_range(3)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

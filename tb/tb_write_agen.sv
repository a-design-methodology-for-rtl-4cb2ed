// tb_write_agen -- checks the write-address LUT of both memory sides against
// an independent reference: for every memory unit, write step and port, the
// address must be the word from which the reading node will later fetch that
// edge (tb_ref_pkg::wr_t), and the second port must be flagged as a
// dummy exactly in the last pattern.  The memory-unit number is changed at
// random every cycle, as it is a static strap in the real design.
module tb_write_agen;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, adv = 1'b0;
  logic [2:0] mu_h, mu_p;
  logic [4:0] a1_h, a2_h, a1_p, a2_p;
  logic       dm_h, dm_p;
  int checks = 0, failures = 0;
  int c = 0;

  // Point memories (read by hyperplane units) and hyperplane memories.
  write_agen #(.READER_SIDE(0), .N(5), .Q(3), .AW(5), .MW(3)) dut_h
    (.clk, .rst, .adv, .mu_id(mu_h), .addr1(a1_h), .addr2(a2_h), .dummy2(dm_h));
  write_agen #(.READER_SIDE(1), .N(5), .Q(3), .AW(5), .MW(3)) dut_p
    (.clk, .rst, .adv, .mu_id(mu_p), .addr1(a1_p), .addr2(a2_p), .dummy2(dm_p));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int side, int m, logic [4:0] a1, logic [4:0] a2, logic dm);
    int e1 = wr_t[side][m][c][0];
    int e2 = wr_t[side][m][c][1];
    checks += 3;
    if (a1 != 5'(e1)) begin failures++; $display("FAIL side%0d m%0d c%0d addr1 %0d exp %0d", side, m, c, a1, e1); end
    if (dm != (e2 < 0)) begin failures++; $display("FAIL side%0d m%0d c%0d dummy %0b", side, m, c, dm); end
    if (e2 >= 0 && a2 != 5'(e2)) begin failures++; $display("FAIL side%0d m%0d c%0d addr2 %0d exp %0d", side, m, c, a2, e2); end
  endtask

  initial begin
    build();
    mu_h = 3'd0;
    mu_p = 3'd0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 600; n++) begin
      adv  <= ($urandom_range(3) != 0);
      mu_h <= 3'($urandom_range(4));
      mu_p <= 3'($urandom_range(4));
      @(negedge clk);
      check(0, int'(mu_h), a1_h, a2_h, dm_h);
      check(1, int'(mu_p), a1_p, a2_p, dm_p);
      @(posedge clk);
      if (adv) c = (c + 1) % 12;
    end
    // Each memory unit must receive 21 distinct addresses per sweep.
    for (int side = 0; side < 2; side++)
      for (int m = 0; m < 5; m++) begin
        automatic bit seen [24];
        automatic int cnt = 0;
        foreach (seen[x]) seen[x] = 0;
        for (int s = 0; s < 12; s++)
          for (int p = 0; p < 2; p++)
            if (wr_t[side][m][s][p] >= 0) begin
              if (seen[wr_t[side][m][s][p]]) failures++;
              seen[wr_t[side][m][s][p]] = 1;
              cnt++;
            end
        checks++;
        if (cnt != 21) begin failures++; $display("FAIL side%0d m%0d count %0d", side, m, cnt); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

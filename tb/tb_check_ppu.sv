// tb_check_ppu -- drives random input pairs with random fold tags and valid
// bits into a check processing unit and compares, every cycle, the parity of
// each of the three folded check nodes (read out through out_fold) and the
// "any unsatisfied" flag with a model.  acc_clr is pulsed at random.
module tb_check_ppu;
  logic clk = 1'b0, rst = 1'b1;
  logic acc_clr = 1'b0, in_en = 1'b0, in_d0, in_v0, in_d1, in_v1;
  logic [1:0] in_fold, out_fold;
  logic out_d, unsat;
  bit   par [3];
  int checks = 0, failures = 0;

  check_ppu dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (par[f]) par[f] = 0;
    {in_d0, in_v0, in_d1, in_v1} = '0;
    in_fold = '0;
    out_fold = '0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 2000; n++) begin
      acc_clr <= ($urandom_range(30) == 0);
      in_en   <= ($urandom_range(3) != 0);
      in_fold <= 2'($urandom_range(2));
      in_d0 <= 1'($urandom); in_v0 <= ($urandom_range(5) != 0);
      in_d1 <= 1'($urandom); in_v1 <= ($urandom_range(5) != 0);
      @(posedge clk);
      if (acc_clr) foreach (par[f]) par[f] = 0;
      else if (in_en) par[in_fold] ^= (in_v0 && in_d0) ^ (in_v1 && in_d1);
      @(negedge clk);
      for (int f = 0; f < 3; f++) begin
        out_fold = 2'(f);
        #1;
        checks++;
        if (out_d != par[f]) begin failures++; $display("FAIL fold%0d parity %0b exp %0b", f, out_d, par[f]); end
      end
      checks++;
      if (unsat != (par[0] || par[1] || par[2])) begin failures++; $display("FAIL unsat %0b", unsat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_read_agen -- checks that the read address generator counts forward
// linearly (port 1 = 2s, port 2 = 2s+1 at step s), holds without adv and
// wraps after 12 steps (4 patterns x 3 folds).
module tb_read_agen;
  logic clk = 1'b0, rst = 1'b1, adv = 1'b0;
  logic [4:0] addr1, addr2;
  int checks = 0, failures = 0;
  int s = 0;

  read_agen #(.STEPS(12), .AW(5)) dut (.clk, .rst, .adv, .addr1, .addr2);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 200; n++) begin
      adv <= ($urandom_range(2) != 0);
      @(negedge clk);
      checks += 2;
      if (addr1 != 5'(2 * s))     begin failures++; $display("FAIL addr1 %0d exp %0d", addr1, 2 * s); end
      if (addr2 != 5'(2 * s + 1)) begin failures++; $display("FAIL addr2 %0d exp %0d", addr2, 2 * s + 1); end
      @(posedge clk);
      if (adv) s = (s + 1) % 12;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

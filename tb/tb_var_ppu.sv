// tb_var_ppu -- loads random channel bits into the three folded variable
// nodes of one unit, accumulates random unsatisfied-check messages (with
// invalid dummy inputs mixed in) and applies the flip rule, comparing bits
// and counts with a model: a bit flips when at least THRESH = 4 of its
// incoming messages are 1.  Load, clear, accumulate and flip overlap at
// random.
module tb_var_ppu;
  localparam int THRESH = 4;
  logic clk = 1'b0, rst = 1'b1;
  logic load_en = 1'b0, load_bit, acc_clr = 1'b0, in_en = 1'b0, flip_en = 1'b0;
  logic in_d0, in_v0, in_d1, in_v1;
  logic [1:0] load_fold, in_fold, out_fold;
  logic out_d;
  bit b [3];
  int cnt [3];
  int checks = 0, failures = 0, flips = 0;

  var_ppu dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (b[f]) begin b[f] = 0; cnt[f] = 0; end
    {in_d0, in_v0, in_d1, in_v1, load_bit} = '0;
    {load_fold, in_fold, out_fold} = '0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 3000; n++) begin
      load_en   <= ($urandom_range(6) == 0);
      load_fold <= 2'($urandom_range(2));
      load_bit  <= 1'($urandom);
      acc_clr   <= ($urandom_range(12) == 0);
      in_en     <= ($urandom_range(3) != 0);
      in_fold   <= 2'($urandom_range(2));
      in_d0 <= 1'($urandom); in_v0 <= ($urandom_range(5) != 0);
      in_d1 <= 1'($urandom); in_v1 <= ($urandom_range(5) != 0);
      flip_en   <= ($urandom_range(8) == 0);
      @(posedge clk);
      begin
        automatic bit nb [3] = b;
        // a flip takes precedence over a load in the same cycle
        if (load_en) nb[load_fold] = load_bit;
        if (flip_en)
          for (int f = 0; f < 3; f++) if (cnt[f] >= THRESH) begin nb[f] = !b[f]; flips++; end
        b = nb;
        if (acc_clr) foreach (cnt[f]) cnt[f] = 0;
        else if (in_en) cnt[in_fold] += int'(in_v0 && in_d0) + int'(in_v1 && in_d1);
      end
      @(negedge clk);
      for (int f = 0; f < 3; f++) begin
        out_fold = 2'(f);
        #1;
        checks++;
        if (out_d != b[f]) begin failures++; $display("FAIL n%0d fold%0d bit %0b exp %0b", n, f, out_d, b[f]); end
      end
      // keep counts inside the 0..7 range the unit is built for
      if (cnt[0] > 5 || cnt[1] > 5 || cnt[2] > 5) begin
        acc_clr <= 1'b1; in_en <= 1'b0; flip_en <= 1'b0; load_en <= 1'b0;
        @(posedge clk);
        foreach (cnt[f]) cnt[f] = 0;
        @(negedge clk);
      end
    end
    checks++;
    if (flips == 0) begin failures++; $display("FAIL no flip exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

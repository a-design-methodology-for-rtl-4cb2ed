// tb_pg_fold_decoder_e2e -- end-to-end test of the folded decoder with the
// flip threshold lowered to 3 and the iteration limit to MAX_ITER = 1 (graph
// and fold sizes at their defaults).  At threshold 4 every word of this code
// settles after one flip; at threshold 3 about half of all words need two, so
// both ways a decode ends -- zero syndrome and iteration limit -- occur.
//
// The reference builds the PG(3,GF(2)) incidence on its own, from GF(16)
// with primitive polynomial x^4 + x + 1: point p lies on hyperplane h when
// bit 3 of alpha^((p - h) mod 15) is 0 (hyperplane 0 = the points with
// x3 = 0).  It enumerates all 2^15 words to find the code words, then runs a
// plain, unfolded bit-flipping decoder (syndrome, count unsatisfied checks,
// flip at >= 3, stop on zero syndrome or after 1 flip) and compares the
// decoded word, the converged flag, the number of iterations and the latency
// (28 + 54*iters cycles from the edge that takes the last input beat to the
// first output beat) with the design.  Mechanisms that must occur at least
// once: dummy-edge write skip, same-PMU pattern, early stop, iteration-limit
// stop, a decode with flips.
module tb_pg_fold_decoder_e2e;
  localparam int J = 15, Q = 3, N = 5, MAX_ITER = 1, THRESH = 3;

  logic clk = 1'b0, rst = 1'b1;
  logic in_valid = 1'b0, in_ready;
  logic [N-1:0] in_bits = '0;
  logic out_valid, done, converged, busy;
  logic [1:0] out_fold;
  logic [N-1:0] out_bits;
  logic [0:0] iters;

  pg_fold_decoder #(.MAX_ITER(MAX_ITER), .THRESH(THRESH)) dut (
    .clk, .rst, .in_valid, .in_ready, .in_bits,
    .out_valid, .out_fold, .out_bits, .done, .converged, .iters, .busy
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference --------------------------------------------------------
  bit inc [J][J];   // inc[h][p]
  logic [J-1:0] codewords [$];

  function automatic logic [3:0] gf_pow(int e);
    logic [3:0] a = 4'b0001;
    for (int i = 0; i < e; i++) a = {a[2:0], 1'b0} ^ (a[3] ? 4'b0011 : 4'b0000);
    return a;
  endfunction

  function automatic logic [J-1:0] syndrome(logic [J-1:0] b);
    logic [J-1:0] s = '0;
    for (int h = 0; h < J; h++)
      for (int p = 0; p < J; p++) if (inc[h][p]) s[h] ^= b[p];
    return s;
  endfunction

  task automatic ref_decode(input logic [J-1:0] rx, output logic [J-1:0] dec,
                            output bit conv, output int it);
    logic [J-1:0] b = rx, s;
    int cnt;
    it = 0;
    forever begin
      s = syndrome(b);
      if (s == '0 || it == MAX_ITER) break;
      for (int p = 0; p < J; p++) begin
        cnt = 0;
        for (int h = 0; h < J; h++) if (inc[h][p] && s[h]) cnt++;
        if (cnt >= THRESH) b[p] = ~b[p];
      end
      it++;
    end
    dec = b;
    conv = (s == '0);
  endtask

  // ---- coverage of mechanisms -------------------------------------------
  int n_dummy = 0, n_same = 0, n_early = 0, n_limit = 0, n_flip = 0;
  always @(posedge clk) begin
    if (dut.pt_ctrl.en_use && !dut.pt_ctrl.rd_w_bar1 && dut.pt_ctrl.rd_w_bar2) n_dummy++;
    if (dut.rd_en_var && dut.rd_pat == 0) n_same++;   // point-side pattern 0: both edges in one PMU
  end

  // ---- one decode ---------------------------------------------------------
  task automatic run(input logic [J-1:0] rx);
    logic [J-1:0] exp_dec, got = '0;
    bit exp_conv;
    int exp_it;
    longint t_in, t_out;
    ref_decode(rx, exp_dec, exp_conv, exp_it);
    // input beats
    for (int k = 0; k < Q; k++) begin
      in_valid <= 1'b1;
      in_bits  <= rx[k*N +: N];
      do @(posedge clk); while (!in_ready);
    end
    t_in = cyc;
    in_valid <= 1'b0;
    // output beats
    do @(posedge clk); while (!out_valid);
    t_out = cyc;
    for (int k = 0; k < Q; k++) begin
      checks++;
      if (out_fold != 2'(k)) begin
        failures++;
        $display("FAIL out_fold %0d expected %0d", out_fold, k);
      end
      got[k*N +: N] = out_bits;
      if (k == Q - 1) begin
        checks++;
        if (!done) begin failures++; $display("FAIL done missing"); end
      end
      if (k < Q - 1) @(posedge clk);
    end
    checks += 4;
    if (got != exp_dec) begin
      failures++;
      $display("FAIL rx=%h got=%h exp=%h", rx, got, exp_dec);
    end
    if (converged != exp_conv) begin
      failures++;
      $display("FAIL rx=%h converged=%0d exp %0d", rx, converged, exp_conv);
    end
    if (int'(iters) != exp_it) begin
      failures++;
      $display("FAIL rx=%h iters=%0d exp %0d", rx, iters, exp_it);
    end
    if (t_out - t_in != 28 + 54 * exp_it) begin
      failures++;
      $display("FAIL rx=%h latency=%0d exp %0d", rx, t_out - t_in, 28 + 54 * exp_it);
    end
    if (exp_conv) n_early++; else n_limit++;
    if (exp_it > 0) n_flip++;
    @(posedge clk);
  endtask

  initial begin
    logic [J-1:0] cw, e;
    // incidence from GF(16)
    for (int h = 0; h < J; h++)
      for (int p = 0; p < J; p++) inc[h][p] = (gf_pow((p - h + J) % J) & 4'b1000) == 0;
    for (int v = 0; v < (1 << J); v++)
      if (syndrome(J'(v)) == '0) codewords.push_back(J'(v));
    $display("code words: %0d", codewords.size());
    checks++;
    if (codewords.size() != 1024) failures++;

    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);

    // every single error on random code words
    for (int p = 0; p < J; p++) begin
      cw = codewords[$urandom_range(codewords.size() - 1)];
      run(cw ^ (J'(1) << p));
    end
    // error-free words
    for (int i = 0; i < 5; i++) run(codewords[$urandom_range(codewords.size() - 1)]);
    // two and three errors
    for (int i = 0; i < 30; i++) begin
      cw = codewords[$urandom_range(codewords.size() - 1)];
      e  = '0;
      for (int x = 0; x < 2 + (i % 2); x++) e[$urandom_range(J - 1)] = 1'b1;
      run(cw ^ e);
    end
    // arbitrary words
    for (int i = 0; i < 30; i++) run(J'($urandom));
    // words on which the flipping does not settle within MAX_ITER
    begin
      logic [J-1:0] d;
      bit c;
      int it, found = 0;
      for (int v = 0; v < (1 << J) && found < 5; v += 7) begin
        ref_decode(J'(v), d, c, it);
        if (!c) begin
          run(J'(v));
          found++;
        end
      end
    end

    $display("mechanisms: dummy=%0d same_pmu=%0d early_stop=%0d iter_limit=%0d flips=%0d",
             n_dummy, n_same, n_early, n_limit, n_flip);
    checks += 5;
    if (n_dummy == 0) failures++;
    if (n_same  == 0) failures++;
    if (n_early == 0) failures++;
    if (n_limit == 0) failures++;
    if (n_flip  == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_demux_switch -- checks the 2-to-rho_hat switch of every memory unit of
// both sides.  For a random pattern the reference works out which readers
// fetch from this memory unit (tb_ref_pkg tables): the lower-ranked one must
// get port 1's word, the other port 2's, each on the wire that carries its
// edge, and that wire must lead back to the reader.  All other wires, and all
// wires when en = 0, must be invalid.
module tb_demux_switch;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  logic       en;
  logic [1:0] pat;
  logic [7:0] d1 [2][5], d2 [2][5];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar s = 0; s < 2; s++) begin : g_s
    localparam int RH = (s == 0) ? 5 : 6;
    for (genvar p = 0; p < 5; p++) begin : g_p
      logic [7:0] wd [RH];
      logic       wv [RH];
      demux_switch #(.SIDE(s), .N(5), .P_IDX(p), .DATA_W(8), .RH(RH), .PW(2)) dut (
        .en, .pat, .d1(d1[s][p]), .d2(d2[s][p]), .w_data(wd), .w_valid(wv));

      always @(negedge clk) begin
        automatic int l = int'(pat), rank = 0;
        automatic bit exp_v [RH];
        automatic logic [7:0] exp_d [RH];
        for (int w = 0; w < RH; w++) begin exp_v[w] = 0; exp_d[w] = '0; end
        for (int i = 0; i < 5; i++)
          for (int t = 2 * l; t <= 2 * l + 1; t++)
            if (nb_t[s][i][t] >= 0 && nb_t[s][i][t] % 5 == p) begin
              checks++;
              if (woff_t[s][ew_t[s][t]] != (p - i + 5) % 5) begin
                failures++;
                $display("FAIL ref wiring side%0d p%0d i%0d t%0d", s, p, i, t);
              end
              if (en) begin
                exp_v[ew_t[s][t]] = 1;
                exp_d[ew_t[s][t]] = (rank == 0) ? d1[s][p] : d2[s][p];
              end
              rank++;
            end
        for (int w = 0; w < RH; w++) begin
          checks++;
          if (wv[w] != exp_v[w] || (exp_v[w] && wd[w] != exp_d[w])) begin
            failures++;
            $display("FAIL side%0d p%0d pat%0d en%0b wire%0d v%0b d%h exp v%0b d%h",
                     s, p, l, en, w, wv[w], wd[w], exp_v[w], exp_d[w]);
          end
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build();
    for (int n = 0; n < 400; n++) begin
      @(posedge clk);
      en  <= ($urandom_range(4) != 0);
      pat <= 2'($urandom_range(3));
      for (int s = 0; s < 2; s++)
        for (int p = 0; p < 5; p++) begin
          d1[s][p] <= 8'($urandom);
          d2[s][p] <= 8'($urandom);
        end
    end
    @(posedge clk);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

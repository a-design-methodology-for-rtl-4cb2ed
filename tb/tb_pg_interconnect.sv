// tb_pg_interconnect -- checks the registered static wiring of both sides:
// one cycle after memory unit p drives wire w, processing unit i must see it
// on its wire w when p = (i + offset of w) mod 5 (tb_ref_pkg::woff_t).
// Reset must clear every valid bit.
module tb_pg_interconnect;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar s = 0; s < 2; s++) begin : g_s
    localparam int RH = (s == 0) ? 5 : 6;
    logic [7:0] sd [5][RH], rd [5][RH], sd_q [5][RH];
    logic       sv [5][RH], rv [5][RH], sv_q [5][RH];
    pg_interconnect #(.SIDE(s), .N(5), .DATA_W(8), .RH(RH)) dut (
      .clk, .rst, .s_data(sd), .s_valid(sv), .r_data(rd), .r_valid(rv));

    always @(posedge clk) begin
      for (int p = 0; p < 5; p++)
        for (int w = 0; w < RH; w++) begin
          sd[p][w] <= 8'($urandom);
          sv[p][w] <= 1'($urandom_range(1));
          sd_q[p][w] <= sd[p][w];
          sv_q[p][w] <= rst ? 1'b0 : sv[p][w];
        end
    end

    always @(negedge clk) begin
      if ($time > 30)
        for (int i = 0; i < 5; i++)
          for (int w = 0; w < RH; w++) begin
            automatic int p = (i + woff_t[s][w]) % 5;
            checks++;
            if (rv[i][w] != sv_q[p][w] || (sv_q[p][w] && rd[i][w] != sd_q[p][w])) begin
              failures++;
              $display("FAIL side%0d ppu%0d wire%0d v%0b d%h exp v%0b d%h",
                       s, i, w, rv[i][w], rd[i][w], sv_q[p][w], sd_q[p][w]);
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
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (150) @(posedge clk);
    rst <= 1'b1;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (150) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

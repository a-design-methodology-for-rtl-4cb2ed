// tb_mux_switch -- checks the rho_hat-to-2 switch at a processing unit's
// inputs on both sides: in pattern l input 0 must take the wire that carries
// edge 2l and input 1 the wire of edge 2l+1 (tb_ref_pkg::ew_t), passing the
// wire's valid bit gated by en; input 1 must be invalid on the dummy edge.
module tb_mux_switch;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  logic       en;
  logic [1:0] pat;
  logic [7:0] wd [2][6];
  logic       wv [2][6];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar s = 0; s < 2; s++) begin : g_s
    localparam int RH = (s == 0) ? 5 : 6;
    logic [7:0] wd_l [RH];
    logic       wv_l [RH];
    logic [7:0] o0, o1;
    logic       ov0, ov1;
    for (genvar w = 0; w < RH; w++) begin : g_w
      assign wd_l[w] = wd[s][w];
      assign wv_l[w] = wv[s][w];
    end
    mux_switch #(.SIDE(s), .N(5), .DATA_W(8), .RH(RH), .PW(2)) dut (
      .en, .pat, .w_data(wd_l), .w_valid(wv_l), .d0(o0), .v0(ov0), .d1(o1), .v1(ov1));

    always @(negedge clk) begin
      automatic int l = int'(pat);
      automatic int e0 = ew_t[s][2*l], e1 = ew_t[s][2*l+1];
      automatic bit xv0 = en && wv[s][e0];
      automatic bit xv1 = (e1 >= 0) && en && wv[s][e1];
      checks += 2;
      if (ov0 != xv0 || (xv0 && o0 != wd[s][e0])) begin
        failures++;
        $display("FAIL side%0d pat%0d port0 v%0b d%h", s, l, ov0, o0);
      end
      if (ov1 != xv1 || (xv1 && o1 != wd[s][e1])) begin
        failures++;
        $display("FAIL side%0d pat%0d port1 v%0b d%h", s, l, ov1, o1);
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
        for (int w = 0; w < 6; w++) begin
          wd[s][w] <= 8'($urandom);
          wv[s][w] <= ($urandom_range(3) != 0);
        end
    end
    @(posedge clk);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

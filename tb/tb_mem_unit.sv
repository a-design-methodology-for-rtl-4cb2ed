// tb_mem_unit -- runs write sweeps followed by read sweeps through one point
// memory and one hyperplane memory with 8-bit data.  Writes are placed by the
// reference table (tb_ref_pkg::wr_t); the linear read sweep must return, at
// step s, the words 2s and 2s+1 written earlier, one cycle after the step.
// Idle cycles (en_use = 0) are inserted at random and must change nothing.
// Port 2 is held at read (idle) during the dummy write steps.
module tb_mem_unit;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic       en [2];
  logic       rw1 [2], rw2 [2];
  logic [7:0] di1 [2], di2 [2], do1 [2], do2 [2];
  logic [2:0] mu [2];
  logic [7:0] ref_mem [2][24];
  bit         ref_ok  [2][24];
  int checks = 0, failures = 0;

  for (genvar s = 0; s < 2; s++) begin : g_s
    mem_unit #(.READER_SIDE(s), .N(5), .Q(3), .DATA_W(8), .MW(3)) dut (
      .clk, .rst, .en_use(en[s]), .mu_id(mu[s]), .rd_w_bar1(rw1[s]), .rd_w_bar2(rw2[s]),
      .d_in1(di1[s]), .d_in2(di2[s]), .d_out1(do1[s]), .d_out2(do2[s]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle_maybe();
    while ($urandom_range(3) == 0) begin
      for (int s = 0; s < 2; s++) begin
        en[s]  <= 1'b0;
        rw1[s] <= 1'($urandom_range(1));
        rw2[s] <= 1'($urandom_range(1));
        di1[s] <= 8'($urandom);
        di2[s] <= 8'($urandom);
      end
      @(posedge clk);
    end
  endtask

  initial begin
    build();
    for (int s = 0; s < 2; s++) begin
      en[s] = 1'b0; rw1[s] = 1'b1; rw2[s] = 1'b1; di1[s] = '0; di2[s] = '0;
      mu[s] = 3'($urandom_range(4));
      foreach (ref_ok[s][a]) ref_ok[s][a] = 0;
    end
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int round = 0; round < 6; round++) begin
      if (round == 3)
        for (int s = 0; s < 2; s++) begin
          mu[s] = 3'($urandom_range(4));
          foreach (ref_ok[s][a]) ref_ok[s][a] = 0;
        end
      // write sweep
      for (int c = 0; c < 12; c++) begin
        idle_maybe();
        for (int s = 0; s < 2; s++) begin
          automatic logic [7:0] v1 = 8'($urandom), v2 = 8'($urandom);
          automatic int a1 = wr_t[s][mu[s]][c][0], a2 = wr_t[s][mu[s]][c][1];
          en[s]  <= 1'b1;
          rw1[s] <= 1'b0;
          rw2[s] <= (a2 < 0);
          di1[s] <= v1;
          di2[s] <= v2;
          ref_mem[s][a1] = v1;
          ref_ok[s][a1]  = 1;
          if (a2 >= 0) begin
            ref_mem[s][a2] = v2;
            ref_ok[s][a2]  = 1;
          end
        end
        @(posedge clk);
      end
      // read sweep
      for (int c = 0; c < 12; c++) begin
        idle_maybe();
        for (int s = 0; s < 2; s++) begin
          en[s] <= 1'b1; rw1[s] <= 1'b1; rw2[s] <= 1'b1;
        end
        @(posedge clk);
        for (int s = 0; s < 2; s++) en[s] <= 1'b0;
        @(negedge clk);
        for (int s = 0; s < 2; s++) begin
          if (ref_ok[s][2*c]) begin
            checks++;
            if (do1[s] != ref_mem[s][2*c]) begin
              failures++;
              $display("FAIL side%0d mu%0d step%0d port1 %h exp %h", s, mu[s], c, do1[s], ref_mem[s][2*c]);
            end
          end
          if (ref_ok[s][2*c+1]) begin
            checks++;
            if (do2[s] != ref_mem[s][2*c+1]) begin
              failures++;
              $display("FAIL side%0d mu%0d step%0d port2 %h exp %h", s, mu[s], c, do2[s], ref_mem[s][2*c+1]);
            end
          end
        end
      end
    end
    // 21 words of each memory carry data after a sweep
    for (int s = 0; s < 2; s++) begin
      automatic int n = 0;
      foreach (ref_ok[s][a]) if (ref_ok[s][a]) n++;
      checks++;
      if (n != 21) begin failures++; $display("FAIL side%0d written words %0d", s, n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

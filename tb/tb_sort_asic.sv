// tb_sort_asic: self-checking test of the Sort ASIC.
// 14 random candidates (with forced ties) are ranked; with sorting on, the four
// outputs must be the four highest in descending order with ties kept in input
// order (checked against a reference built here by repeated selection of the
// maximum); with sorting off, output k must be input k. One clock latency.
module tb_sort_asic;
  logic clk = 0, rst_n = 0, sort_en = 1;
  logic [5:0] ri [14];
  logic [3:0] pi [14];
  logic [5:0] ro [4];
  logic [3:0] po [4];
  int checks = 0, failures = 0, n_sorted = 0, n_pass = 0;

  sort_asic dut (
    .clk, .rst_n, .sort_en, .rank_in(ri), .pay_in(pi), .rank_out(ro), .pay_out(po));
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 14; i++) begin ri[i] = 0; pi[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      logic [5:0] er [4]; logic [3:0] ep [4];
      bit used [14];
      @(negedge clk);
      sort_en = (n % 5 != 4);
      for (int i = 0; i < 14; i++) begin
        ri[i] = (n % 2) ? 6'($urandom_range(0, 7)) : 6'($urandom);
        pi[i] = 4'(i);
        used[i] = 0;
      end
      for (int k = 0; k < 4; k++) begin
        if (sort_en) begin
          int best;
          best = -1;
          for (int i = 0; i < 14; i++)
            if (!used[i] && (best < 0 || ri[i] > ri[best])) best = i;
          used[best] = 1;
          er[k] = ri[best]; ep[k] = pi[best];
        end else begin
          er[k] = ri[k]; ep[k] = pi[k];
        end
      end
      if (sort_en) n_sorted++; else n_pass++;
      @(posedge clk); #1;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (ro[k] != er[k] || po[k] != ep[k]) begin
          failures++;
          if (failures < 6) $display("n=%0d k=%0d got %0d/%0d exp %0d/%0d", n, k, ro[k], po[k], er[k], ep[k]);
        end
      end
    end
    $display("sorted sets %0d, pass-through sets %0d", n_sorted, n_pass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

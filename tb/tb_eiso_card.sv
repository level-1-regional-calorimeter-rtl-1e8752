// tb_eiso_card: self-checking test of one Electron Isolation Card.
// Random own and neighbour towers are applied every clock; three clocks later
// the four candidates must carry rank = ET/2 of the best isolated and
// non-isolated candidate of each region (reference model), the card number and
// the region bit. A neighbour-only deposit checks that the shared ring is used,
// and a register write changes the isolation threshold.
module tb_eiso_card;
  import rct_pkg::*;
  import rct_tb_pkg::*;
  localparam int NC = 300;
  logic clk = 0, rst_n = 0;
  eg_tower_t main [CARD_PHI][CARD_ETA];
  eg_tower_t nbr  [EDGE_TOWERS];
  cfg_t cfg;
  eg_cand_t iso [2], non [2];
  eg_tower_t W [NC][10][6];
  int thr [NC];
  int cyc = 0, checks = 0, failures = 0, n_iso = 0, n_non = 0;

  eiso_card dut (.clk, .rst_n, .card_id(3'd3), .main, .nbr, .cfg, .cfg_sel(1'b1), .iso, .noniso(non));
  always #5 clk = ~clk;

  initial begin
    for (int n = 0; n < NC; n++) begin
      for (int p = 0; p < 10; p++)
        for (int e = 0; e < 6; e++) begin
          W[n][p][e].et   = ($urandom_range(0, 4) == 0) ? 7'($urandom) : 7'($urandom_range(0, 3));
          W[n][p][e].veto = ($urandom_range(0, 19) == 0);
        end
      thr[n] = (n < NC/2 - 1) ? 8 : 30;   // register written at clock NC/2, used two clocks after the data enter
    end
    // crossing 20: only a neighbour tower (phi 0, eta 2) and its partner inside
    for (int p = 0; p < 10; p++) for (int e = 0; e < 6; e++) W[20][p][e] = '0;
    W[20][0][2].et = 7'd60; W[20][1][2].et = 7'd30;
  end

  always @(negedge clk) begin
    int n;
    n = (cyc < NC) ? cyc : NC - 1;
    for (int p = 0; p < 8; p++) for (int e = 0; e < 4; e++) main[p][e] = W[n][p+1][e+1];
    for (int e = 0; e < 6; e++) begin nbr[e] = W[n][0][e]; nbr[6+e] = W[n][9][e]; end
    for (int p = 0; p < 8; p++) begin nbr[12+2*p] = W[n][p+1][0]; nbr[13+2*p] = W[n][p+1][5]; end
    cfg = '0;
    if (cyc == NC/2 - 1) begin cfg.we = 1; cfg.addr = 19'h4000; cfg.data = 16'd30; end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    #1;
    if (rst_n && cyc >= 10 && cyc < NC) begin
      int n;
      n = cyc - 3;
      for (int r = 0; r < 2; r++) begin
        eg_tower_t w [6][6]; int bi, bn;
        for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) w[i][j] = W[n][4*r+i][j];
        m_eiso(w, thr[n], bi, bn);
        checks++;
        if (iso[r] != '{rank: 6'(bi/2), card: 3'd3, region: 1'(r)} ||
            non[r] != '{rank: 6'(bn/2), card: 3'd3, region: 1'(r)}) begin
          failures++;
          if (failures < 5) $display("cyc %0d r %0d got %0d/%0d exp %0d/%0d", cyc, r, iso[r].rank, non[r].rank, bi/2, bn/2);
        end
        if (bi > 0) n_iso++;
        if (bn > 0) n_non++;
        if (n == 20 && r == 0) begin
          checks++;
          if (iso[0].rank != 6'd45) begin failures++; $display("shared ring not used"); end
        end
      end
    end
  end

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (cyc == NC + 2);
    $display("isolated %0d, non-isolated %0d", n_iso, n_non);
    checks++; if (n_iso == 0 || n_non == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (NC + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

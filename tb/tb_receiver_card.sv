// tb_receiver_card: self-checking test of one Receiver Card.
// Random tower energies (some crossings large enough to overflow a region, some
// with many active towers for the tau bit, random HCAL quality bits for the MIP
// bit) are sent on the 32 links with a per-link latency of 0..3 crossings. After
// the local bc0 strobe locks the Phase ASICs, the region sums, tau and MIP bits
// and the 32 towers to the isolation card are compared with the reference model
// at the fixed latencies: towers L+3, regions L+4 clocks after the source.
module tb_receiver_card;
  import rct_pkg::*;
  import rct_tb_pkg::*;
  localparam int NC = 400, ORBIT = 50, L = 5;

  logic clk = 0, rst_n = 0, bc0_local = 0;
  link_word_t links [RC_LINKS];
  cfg_t cfg;
  eg_tower_t eg [RC_TOWERS];
  region_t reg_o [RC_REGIONS];
  logic lk [RC_LINKS], ee [RC_LINKS], ae [RC_LINKS];
  int E [NC][32], H [NC][32];
  bit F [NC][32], Q [NC][32];
  int skew [RC_LINKS];
  int cyc = 0, checks = 0, failures = 0;
  int n_ovf = 0, n_tau = 0, n_mip = 0, n_veto = 0;

  receiver_card dut (.clk, .rst_n, .bc0_local, .links, .cfg, .cfg_sel(1'b1), .eg_out(eg), .region(reg_o),
                     .locked(lk), .ecc_err(ee), .align_err(ae));
  always #5 clk = ~clk;

  initial begin
    for (int n = 0; n < NC; n++)
      for (int t = 0; t < 32; t++) begin
        case (n % 4)
          0: begin E[n][t] = $urandom_range(0, 255); H[n][t] = $urandom_range(0, 255); end
          1: begin E[n][t] = $urandom_range(0, 3) == 0 ? $urandom_range(0, 60) : 0; H[n][t] = $urandom_range(0, 2); end
          default: begin E[n][t] = $urandom_range(0, 20); H[n][t] = $urandom_range(0, 6); end
        endcase
        F[n][t] = ($urandom_range(0, 9) == 0);
        Q[n][t] = ($urandom_range(0, 40) == 0);
      end
    for (int l = 0; l < RC_LINKS; l++) skew[l] = $urandom_range(0, 3);
  end

  always @(negedge clk) begin
    for (int l = 0; l < RC_LINKS; l++) begin
      int n, t;
      n = cyc - skew[l];
      t = 2 * (l % 16);
      if (n < 0) links[l] = make_word(0, 0, 0, 0);
      else if (l < 16) links[l] = make_word(8'(E[n][t]), 8'(E[n][t+1]), {F[n][t+1], F[n][t]}, (n % ORBIT) == 0);
      else             links[l] = make_word(8'(H[n][t]), 8'(H[n][t+1]), {Q[n][t+1], Q[n][t]}, (n % ORBIT) == 0);
    end
    bc0_local = (cyc >= L) && ((cyc - L) % ORBIT == 0);
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    #1;
    if (rst_n && cyc > ORBIT + L + 6 && cyc < NC) begin
      int n;
      // towers to the isolation card
      n = cyc - L - 3;
      for (int t = 0; t < 32; t++) begin
        eg_tower_t x;
        x = m_eg(E[n][t], H[n][t], F[n][t], 3);
        checks++;
        if (eg[t] != x) begin
          failures++;
          if (failures < 5) $display("cyc %0d tower %0d got %0h exp %0h", cyc, t, eg[t], x);
        end
        if (x.veto) n_veto++;
      end
      // regions
      n = cyc - L - 4;
      for (int r = 0; r < 2; r++) begin
        int e [16], h [16]; bit q [16]; region_t x;
        for (int k = 0; k < 16; k++) begin e[k] = E[n][16*r+k]; h[k] = H[n][16*r+k]; q[k] = Q[n][16*r+k]; end
        x = m_region(e, h, q, 4);
        checks++;
        if (reg_o[r] != x) begin
          failures++;
          if (failures < 5) $display("cyc %0d region %0d got %0h exp %0h", cyc, r, reg_o[r], x);
        end
        if (x.ovf) n_ovf++;
        if (x.tau) n_tau++;
        if (x.mip) n_mip++;
      end
      for (int l = 0; l < RC_LINKS; l++) begin
        checks++;
        if (ee[l] || ae[l] || !lk[l]) failures++;
      end
    end
  end

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (cyc == NC + 2);
    $display("regions overflowed %0d, tau %0d, mip %0d; vetoed towers %0d", n_ovf, n_tau, n_mip, n_veto);
    checks++; if (n_ovf == 0 || n_tau == 0 || n_mip == 0 || n_veto == 0) failures++;
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

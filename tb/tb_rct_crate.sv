// tb_rct_crate: end-to-end test of a full crate (all sizes as built, no
// parameter overrides). Random calorimeter data for 7 x 32 ECAL and HCAL towers,
// the ring of towers shared by neighbouring crates and 8 HF towers go in through
// the links with random per-link latencies; a reference model built from the
// trigger rules predicts every output of the Jet/Summary Card:
//   14 region sums with overflow/tau/MIP bits and Quiet bits  L+6 clocks after
//   the source crossing, the four best isolated and non-isolated candidates
//   L+7, the HF region sums L+4 (HF delay programmed to 1), and share_out L+3.
// Mechanisms that must occur at least once (counted): link locking, error-code
// error, alignment error, region overflow, tau bit, MIP bit, Quiet bit, electron
// veto, isolated and non-isolated candidates, a candidate built with a tower
// shared from a neighbouring crate, sorting switched off, configuration writes.
module tb_rct_crate;
  import rct_pkg::*;
  import rct_tb_pkg::*;
  localparam int NC = 260, ORBIT = 60, L = 5;

  logic clk = 0, rst_n = 0, bc0_local = 0;
  link_word_t rc_links [N_RC][RC_LINKS];
  link_word_t hf_links [HF_LINKS];
  eg_tower_t  share_in [SHARE_TOWERS];
  cfg_t       cfg;
  eg_tower_t  share_out [N_RC][RC_TOWERS];
  region_t    regions [N_REGIONS];
  logic       quiet [N_REGIONS];
  eg_cand_t   iso [4], non [4];
  logic [9:0] hf_et [8];
  logic       hf_q [8];
  logic       lk [N_RC][RC_LINKS], ee [N_RC][RC_LINKS], ae [N_RC][RC_LINKS];
  logic       hl [4], he [4], ha [4];

  rct_crate dut (.clk, .rst_n, .bc0_local, .rc_links, .hf_links, .share_in, .cfg,
    .share_out, .regions, .quiet, .iso_out(iso), .noniso_out(non), .hf_et, .hf_q,
    .link_locked(lk), .link_ecc_err(ee), .link_align_err(ae),
    .hf_locked(hl), .hf_ecc_err(he), .hf_align_err(ha));
  always #5 clk = ~clk;

  // stimulus per crossing: crate grid 10 x 30 of towers (ring = shared towers)
  byte unsigned E [NC][10][30], H [NC][10][30];
  bit F [NC][10][30], Q [NC][10][30];
  int HF [NC][8]; bit HQ [NC][8];
  int skew [N_RC][RC_LINKS];
  bit sort_on [NC];
  int cyc = 0, checks = 0, failures = 0;
  int n_lock = 0, n_ecc = 0, n_align = 0, n_ovf = 0, n_tau = 0, n_mip = 0, n_quiet = 0;
  int n_veto = 0, n_iso = 0, n_non = 0, n_shared = 0, n_sortoff = 0, n_cfg = 0;
  bit checking = 1;

  initial begin
    for (int n = 0; n < NC; n++) begin
      for (int p = 0; p < 10; p++)
        for (int e = 0; e < 30; e++) begin
          case (n % 4)
            0: begin E[n][p][e] = 8'($urandom_range(0, 255)); H[n][p][e] = 8'($urandom_range(0, 255)); end
            1: begin E[n][p][e] = ($urandom_range(0, 6) == 0) ? 8'($urandom_range(0, 100)) : 8'($urandom_range(0, 1));
                     H[n][p][e] = 8'($urandom_range(0, 1)); end
            default: begin E[n][p][e] = 8'($urandom_range(0, 20)); H[n][p][e] = 8'($urandom_range(0, 5)); end
          endcase
          F[n][p][e] = ($urandom_range(0, 15) == 0);
          Q[n][p][e] = ($urandom_range(0, 60) == 0);
        end
      for (int t = 0; t < 8; t++) begin HF[n][t] = $urandom_range(0, 255); HQ[n][t] = 1'($urandom); end
      sort_on[n] = !(n >= 150 && n < 170);
    end
    // crossing 101: a deposit in the shared ring (phi 0) next to crate tower (1, 10)
    for (int p = 0; p < 10; p++) for (int e = 0; e < 30; e++) begin
      E[101][p][e] = 0; H[101][p][e] = 0; F[101][p][e] = 0; Q[101][p][e] = 0;
    end
    E[101][0][10] = 8'd90; E[101][1][10] = 8'd20;
    for (int k = 0; k < N_RC; k++) for (int l = 0; l < RC_LINKS; l++) skew[k][l] = $urandom_range(0, 3);
  end

  // towers as the Receiver Cards send them (model of the lookup, default tables)
  function automatic eg_tower_t tow(int n, int p, int e);
    return m_eg(E[n][p][e], H[n][p][e], F[n][p][e], 3);
  endfunction

  always @(negedge clk) begin
    // calorimeter links: card k, tower t at grid (1 + t/4, 1 + 4k + t%4)
    for (int k = 0; k < N_RC; k++)
      for (int l = 0; l < RC_LINKS; l++) begin
        int n, t, p0, e0, p1, e1;
        n = cyc - skew[k][l];
        t = 2 * (l % 16);
        p0 = 1 + t / 4; e0 = 1 + 4*k + t % 4;
        p1 = 1 + (t+1) / 4; e1 = 1 + 4*k + (t+1) % 4;
        if (n < 0 || n >= NC) rc_links[k][l] = make_word(0, 0, 0, 0);
        else if (l < 16) rc_links[k][l] = make_word(E[n][p0][e0], E[n][p1][e1], {F[n][p1][e1], F[n][p0][e0]}, (n % ORBIT) == 0);
        else             rc_links[k][l] = make_word(H[n][p0][e0], H[n][p1][e1], {Q[n][p1][e1], Q[n][p0][e0]}, (n % ORBIT) == 0);
        if (cyc == 120 && k == 3 && l == 5) rc_links[k][l].ecc[2] = ~rc_links[k][l].ecc[2];
      end
    for (int l = 0; l < 4; l++) begin
      int n; n = (cyc < NC) ? cyc : NC - 1;
      hf_links[l] = make_word(8'(HF[n][2*l]), 8'(HF[n][2*l+1]), {HQ[n][2*l+1], HQ[n][2*l]}, (n % ORBIT) == 0);
    end
    // shared ring for the crossing the cards are sending now
    begin
      int n; n = cyc - L - 3;
      if (n < 0 || n >= NC) n = 0;
      for (int e = 0; e < 30; e++) begin share_in[e] = tow(n, 0, e); share_in[30+e] = tow(n, 9, e); end
      for (int p = 1; p <= 8; p++) begin share_in[60 + 2*(p-1)] = tow(n, p, 0); share_in[61 + 2*(p-1)] = tow(n, p, 29); end
    end
    bc0_local = (cyc >= L) && ((cyc - L) % ORBIT == 0);
    cfg = '0;
    if (cyc == 10) begin cfg.we = 1; cfg.addr = {4'd14, 1'b1, 6'd0, 8'd17}; cfg.data = 16'd1; n_cfg++; end  // HF delay 1
    // electron sorting off for crossings 150..169 (sort stage runs L+6 after the source)
    if (cyc == 150 + L + 6 - 1) begin cfg.we = 1; cfg.addr = {4'd14, 1'b1, 6'd0, 8'd16}; cfg.data = 16'd0; n_cfg++; end
    if (cyc == 170 + L + 6 - 1) begin cfg.we = 1; cfg.addr = {4'd14, 1'b1, 6'd0, 8'd16}; cfg.data = 16'd1; n_cfg++; end
    if (cyc == NC - 30) skew[6][9] = skew[6][9] + 1;   // link latency jump -> alignment error
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    #1;
    for (int k = 0; k < N_RC; k++) for (int l = 0; l < RC_LINKS; l++) begin
      if (ee[k][l]) n_ecc++;
      if (ae[k][l]) n_align++;
    end
    if (cyc == ORBIT + L + 2) begin
      for (int k = 0; k < N_RC; k++) for (int l = 0; l < RC_LINKS; l++) if (lk[k][l]) n_lock++;
      for (int l = 0; l < 4; l++) if (hl[l]) n_lock++;
      checks++; if (n_lock != N_RC*RC_LINKS + 4) begin failures++; $display("not all links locked: %0d", n_lock); end
    end
    if (rst_n && checking && cyc >= ORBIT + L + 10 && cyc < NC - 25) check_outputs();
  end

  task automatic check_outputs();
    int n;
    // share_out
    n = cyc - L - 3;
    for (int k = 0; k < N_RC; k++)
      for (int t = 0; t < 32; t++) begin
        eg_tower_t x; x = tow(n, 1 + t/4, 1 + 4*k + t%4);
        checks++;
        if (share_out[k][t] != x) begin failures++; if (failures < 5) $display("cyc %0d share_out %0d/%0d", cyc, k, t); end
        if (x.veto) n_veto++;
      end
    // regions and quiet
    n = cyc - L - 6;
    for (int k = 0; k < N_RC; k++)
      for (int r = 0; r < 2; r++) begin
        int e [16], h [16]; bit q [16]; region_t x; bit qx;
        for (int j = 0; j < 16; j++) begin
          int t; t = 16*r + j;
          e[j] = E[n][1 + t/4][1 + 4*k + t%4]; h[j] = H[n][1 + t/4][1 + 4*k + t%4]; q[j] = Q[n][1 + t/4][1 + 4*k + t%4];
        end
        x = m_region(e, h, q, 4);
        qx = !x.ovf && x.et < 5;
        checks++;
        if (regions[2*k+r] != x || quiet[2*k+r] != qx) begin
          failures++; if (failures < 5) $display("cyc %0d region %0d got %0h exp %0h", cyc, 2*k+r, regions[2*k+r], x);
        end
        n_ovf += x.ovf; n_tau += x.tau; n_mip += x.mip; n_quiet += qx;
      end
    // electrons
    n = cyc - L - 7;
    begin
      eg_cand_t ci [14], cn [14];
      for (int k = 0; k < N_RC; k++)
        for (int r = 0; r < 2; r++) begin
          eg_tower_t w [6][6]; int bi, bn;
          for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) w[i][j] = tow(n, 4*r + i, 4*k + j);
          m_eiso(w, 8, bi, bn);
          ci[2*k+r] = '{rank: 6'(bi/2), card: 3'(k), region: 1'(r)};
          cn[2*k+r] = '{rank: 6'(bn/2), card: 3'(k), region: 1'(r)};
          if (bi > 0) n_iso++;
          if (bn > 0) n_non++;
        end
      for (int ty = 0; ty < 2; ty++) begin
        bit used [14];
        for (int i = 0; i < 14; i++) used[i] = 0;
        for (int o = 0; o < 4; o++) begin
          eg_cand_t x;
          if (sort_on[n]) begin
            int b; b = -1;
            for (int i = 0; i < 14; i++)
              if (!used[i] && (b < 0 || (ty ? cn[i].rank > cn[b].rank : ci[i].rank > ci[b].rank))) b = i;
            used[b] = 1; x = ty ? cn[b] : ci[b];
          end else x = ty ? cn[o] : ci[o];
          checks++;
          if ((ty ? non[o] : iso[o]) != x) begin
            failures++; if (failures < 8) $display("cyc %0d n %0d type %0d out %0d got %0h exp %0h", cyc, n, ty, o, ty ? non[o] : iso[o], x);
          end
        end
      end
      if (!sort_on[n]) n_sortoff++;
      if (n == 101) begin
        checks++;   // 90 in the shared ring + 20 in crate tower (1,10): card 2, region 0
        if (iso[0] != '{rank: 6'd55, card: 3'd2, region: 1'b0}) begin failures++; $display("shared-ring candidate missing"); end
        else n_shared++;
      end
    end
    // HF
    n = cyc - L - 4;
    for (int t = 0; t < 8; t++) begin
      checks++;
      if (hf_et[t] != 10'(HF[n][t]) || hf_q[t] != HQ[n][t]) begin failures++; if (failures < 5) $display("cyc %0d hf %0d", cyc, t); end
    end
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (cyc == NC + 5);
    $display("links locked %0d, ecc errors %0d, alignment errors %0d", n_lock, n_ecc, n_align);
    $display("overflow %0d, tau %0d, mip %0d, quiet %0d, vetoed towers %0d", n_ovf, n_tau, n_mip, n_quiet, n_veto);
    $display("isolated %0d, non-isolated %0d, shared-ring candidate %0d, sort-off crossings %0d, cfg writes %0d",
             n_iso, n_non, n_shared, n_sortoff, n_cfg);
    checks++; if (n_ecc != 1)   begin failures++; $display("ecc error count wrong"); end
    checks++; if (n_align == 0) begin failures++; $display("no alignment error"); end
    checks++; if (n_ovf == 0 || n_tau == 0 || n_mip == 0 || n_quiet == 0 || n_veto == 0) failures++;
    checks++; if (n_iso == 0 || n_non == 0 || n_shared == 0 || n_sortoff == 0 || n_cfg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (NC + 300) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

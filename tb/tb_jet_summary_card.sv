// tb_jet_summary_card: self-checking test of the Jet/Summary Card.
// Every clock new random region sums (with overflow, tau and MIP bits) and 28
// random candidates are applied; the HF links carry random towers. Checked:
// regions and Quiet bits two clocks later against per-region thresholds that
// the test programs; the four best isolated and non-isolated candidates one
// clock later (sorting on) or the first four inputs (sorting switched off by
// register); HF region ET and quality bits after the Phase ASIC, lookup and a
// programmed Boundary Scan delay of 2 (L+5 clocks after the source).
module tb_jet_summary_card;
  import rct_pkg::*;
  localparam int NC = 300, ORBIT = 40, L = 4;
  logic clk = 0, rst_n = 0, bc0_local = 0;
  region_t  rin [N_RC][2];
  eg_cand_t iin [N_RC][2], nin [N_RC][2];
  link_word_t hfl [HF_LINKS];
  cfg_t cfg;
  region_t regions [N_REGIONS];
  logic quiet [N_REGIONS];
  eg_cand_t iso [4], non [4];
  logic [9:0] hf_et [8];
  logic hf_q [8], hl [4], he [4], ha [4];
  region_t  R [NC][14];
  eg_cand_t I [NC][14], N [NC][14];
  int HE [NC][8]; bit HQ [NC][8];
  int qthr [14];
  bit sort_on [NC];
  int cyc = 0, checks = 0, failures = 0, n_quiet = 0, n_sortoff = 0;

  jet_summary_card dut (.clk, .rst_n, .bc0_local, .rc_region(rin), .iso_in(iin), .noniso_in(nin),
    .hf_links(hfl), .cfg, .cfg_sel(1'b1), .regions, .quiet, .iso_out(iso), .noniso_out(non),
    .hf_et, .hf_q, .hf_locked(hl), .hf_ecc_err(he), .hf_align_err(ha));
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 14; i++) qthr[i] = 3 + 4 * i;
    for (int n = 0; n < NC; n++) begin
      for (int i = 0; i < 14; i++) begin
        R[n][i] = '{ovf: ($urandom_range(0, 9) == 0), et: 10'($urandom_range(0, 80)),
                    tau: 1'($urandom), mip: 1'($urandom)};
        I[n][i] = '{rank: 6'($urandom), card: 3'(i / 2), region: 1'(i % 2)};
        N[n][i] = '{rank: ($urandom_range(0, 1) ? 6'($urandom_range(0, 3)) : 6'($urandom)), card: 3'(i / 2), region: 1'(i % 2)};
      end
      for (int t = 0; t < 8; t++) begin HE[n][t] = $urandom_range(0, 255); HQ[n][t] = 1'($urandom); end
      sort_on[n] = !(n >= 200 && n < 230);
    end
  end

  always @(negedge clk) begin
    int n;
    n = (cyc < NC) ? cyc : NC - 1;
    for (int c = 0; c < 7; c++) for (int r = 0; r < 2; r++) begin
      rin[c][r] = R[n][2*c+r]; iin[c][r] = I[n][2*c+r]; nin[c][r] = N[n][2*c+r];
    end
    for (int l = 0; l < 4; l++)
      hfl[l] = make_word(8'(HE[n][2*l]), 8'(HE[n][2*l+1]), {HQ[n][2*l+1], HQ[n][2*l]}, (n % ORBIT) == 0);
    bc0_local = (cyc >= L) && ((cyc - L) % ORBIT == 0);
    cfg = '0;
    if (cyc >= 3 && cyc < 17) begin cfg.we = 1; cfg.addr = {4'd14, 1'b1, 6'd0, 8'(cyc-3)}; cfg.data = 16'(qthr[cyc-3]); end
    if (cyc == 17) begin cfg.we = 1; cfg.addr = {4'd14, 1'b1, 6'd0, 8'd17}; cfg.data = 16'd2; end
    if (cyc == 199) begin cfg.we = 1; cfg.addr = {4'd14, 1'b1, 6'd0, 8'd16}; cfg.data = 16'd0; end
    if (cyc == 229) begin cfg.we = 1; cfg.addr = {4'd14, 1'b1, 6'd0, 8'd16}; cfg.data = 16'd1; end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    #1;
    if (rst_n && cyc >= 20 && cyc < NC) begin
      int n;
      n = cyc - 2;
      for (int i = 0; i < 14; i++) begin
        bit q;
        q = !R[n][i].ovf && (R[n][i].et < qthr[i]);
        checks++;
        if (regions[i] != R[n][i] || quiet[i] != q) begin
          failures++;
          if (failures < 5) $display("cyc %0d region %0d mismatch", cyc, i);
        end
        if (q) n_quiet++;
      end
      n = cyc - 1;
      for (int ty = 0; ty < 2; ty++) begin
        eg_cand_t src [14]; eg_cand_t ex [4]; bit used [14];
        for (int i = 0; i < 14; i++) begin src[i] = ty ? N[n][i] : I[n][i]; used[i] = 0; end
        for (int k = 0; k < 4; k++) begin
          if (sort_on[n]) begin
            int b; b = -1;
            for (int i = 0; i < 14; i++) if (!used[i] && (b < 0 || src[i].rank > src[b].rank)) b = i;
            used[b] = 1; ex[k] = src[b];
          end else ex[k] = src[k];
          checks++;
          if ((ty ? non[k] : iso[k]) != ex[k]) begin
            failures++;
            if (failures < 5) $display("cyc %0d type %0d k %0d mismatch", cyc, ty, k);
          end
        end
      end
      if (!sort_on[n]) n_sortoff++;
    end
    if (rst_n && cyc >= ORBIT + L + 8 && cyc < NC) begin
      int n;
      n = cyc - L - 5;
      for (int t = 0; t < 8; t++) begin
        checks++;
        if (hf_et[t] != 10'(HE[n][t]) || hf_q[t] != HQ[n][t]) begin
          failures++;
          if (failures < 5) $display("cyc %0d hf %0d got %0d exp %0d (prev %0d next %0d)", cyc, t, hf_et[t], HE[n][t], HE[n-1][t], HE[n+1][t]);
        end
      end
      for (int l = 0; l < 4; l++) begin checks++; if (!hl[l] || he[l] || ha[l]) failures++; end
    end
  end

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (cyc == NC + 2);
    $display("quiet bits set %0d, crossings with sorting off %0d", n_quiet, n_sortoff);
    checks++; if (n_quiet == 0 || n_sortoff == 0) failures++;
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

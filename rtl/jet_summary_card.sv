// jet_summary_card: the Jet/Summary (J/S) Card, the crate's output stage.
//
// Region path: two Sort ASICs with sorting off receive the 14 region sums of the
// seven Receiver Cards (one receiver per region row). For every region a Quiet
// bit is set when its ET is below that region's programmable threshold (and it
// did not overflow). The 14 sums with their overflow, tau and minimum-ionizing
// bits and the 14 Quiet bits leave together. Region index = 2*card + region.
// Electron path: the 28 candidates of the seven Electron Isolation Cards go to
// two Sort ASICs, one for the 14 isolated and one for the 14 non-isolated, which
// pass on the four highest of each type (candidate index 2*card + region; the
// sorting can be switched off by register for tests).
// HF path: one mezzanine's four links bring the 8 forward towers (tower t on
// link t/2; phi sector t/4, eta slice t%4). A Phase ASIC aligns and checks them,
// two lookups (one per phi sector) give the region ET of each eta slice, and a
// Boundary Scan ASIC delays the ET and quality bits by hf_delay+1 clocks so they
// can be lined up with the barrel/endcap sums.
//
// Latency: regions and quiet bits 2 clocks, electrons 1 clock, HF after the
// Phase ASIC 1 + hf_delay+1 clocks.
// Configuration (cfg_sel = card selected):
//   addr[14]=0: HF table write, addr[10] lookup number, addr[9:0] entry
//   addr[14]=1: register addr[7:0]: 0..13 quiet threshold of region n (reset 5),
//               16 electron sort enable (reset 1), 17 hf_delay (reset 0)
//
// Published: reception of 14 region sums with two Sort ASICs, a Quiet bit per
// region with its own programmable threshold, 28 candidates sorted by two Sort
// ASICs into the top four of each type, the HF receiver with Phase ASIC, two
// lookups for the four eta slices and a delay in Boundary Scan ASICs, forwarding
// with a quality bit. This design's choice: index order, register defaults, the
// quiet comparison (ET < threshold) and the overflow rule.
module jet_summary_card
  import rct_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       bc0_local,
  input  region_t    rc_region [N_RC][RC_REGIONS],
  input  eg_cand_t   iso_in    [N_RC][RC_REGIONS],
  input  eg_cand_t   noniso_in [N_RC][RC_REGIONS],
  input  link_word_t hf_links  [HF_LINKS],
  input  cfg_t       cfg,
  input  logic       cfg_sel,
  output region_t    regions   [N_REGIONS],
  output logic       quiet     [N_REGIONS],
  output eg_cand_t   iso_out   [N_EG_OUT],
  output eg_cand_t   noniso_out[N_EG_OUT],
  output logic [9:0] hf_et     [HF_TOWERS],
  output logic       hf_q      [HF_TOWERS],
  output logic       hf_locked [HF_LINKS],
  output logic       hf_ecc_err[HF_LINKS],
  output logic       hf_align_err[HF_LINKS]
);
  // ---------------- registers ----------------
  logic [9:0] quiet_thr [N_REGIONS];
  logic       sort_en;
  logic [2:0] hf_delay;
  logic       reg_we;
  assign reg_we = cfg.we && cfg_sel && cfg.addr[14];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_REGIONS; i++) quiet_thr[i] <= 10'd5;
      sort_en  <= 1'b1;
      hf_delay <= 3'd0;
    end else if (reg_we) begin
      for (int i = 0; i < N_REGIONS; i++)
        if (cfg.addr[7:0] == 8'(i)) quiet_thr[i] <= cfg.data[9:0];
      if (cfg.addr[7:0] == 8'd16) sort_en  <= cfg.data[0];
      if (cfg.addr[7:0] == 8'd17) hf_delay <= cfg.data[2:0];
    end
  end

  // ---------------- region receivers and Quiet bits ----------------
  logic [9:0] rx_et  [RC_REGIONS][N_RC];
  logic [2:0] rx_pay [RC_REGIONS][N_RC];

  for (genvar r = 0; r < RC_REGIONS; r++) begin : g_rrx
    logic [9:0] et_in  [N_RC];
    logic [2:0] pay_in [N_RC];
    for (genvar c = 0; c < N_RC; c++) begin : g_c
      assign et_in[c]  = rc_region[c][r].et;
      assign pay_in[c] = {rc_region[c][r].ovf, rc_region[c][r].tau, rc_region[c][r].mip};
    end
    sort_asic #(.N_IN(N_RC), .N_OUT(N_RC), .RANK_W(10), .PAY_W(3)) u_rx (
      .clk, .rst_n, .sort_en(1'b0),
      .rank_in(et_in), .pay_in(pay_in), .rank_out(rx_et[r]), .pay_out(rx_pay[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_REGIONS; i++) begin
        regions[i] <= '0;
        quiet[i]   <= 1'b0;
      end
    end else begin
      for (int c = 0; c < N_RC; c++)
        for (int r = 0; r < RC_REGIONS; r++) begin
          regions[2*c+r] <= '{ovf: rx_pay[r][c][2], et: rx_et[r][c],
                              tau: rx_pay[r][c][1], mip: rx_pay[r][c][0]};
          quiet[2*c+r]   <= !rx_pay[r][c][2] && (rx_et[r][c] < quiet_thr[2*c+r]);
        end
    end
  end

  // ---------------- electron sorting ----------------
  logic [5:0] iso_rank [2*N_RC], non_rank [2*N_RC];
  logic [3:0] iso_pay  [2*N_RC], non_pay  [2*N_RC];
  logic [5:0] iso_ro   [N_EG_OUT], non_ro [N_EG_OUT];
  logic [3:0] iso_po   [N_EG_OUT], non_po [N_EG_OUT];

  always_comb begin
    for (int c = 0; c < N_RC; c++)
      for (int r = 0; r < RC_REGIONS; r++) begin
        iso_rank[2*c+r] = iso_in[c][r].rank;
        iso_pay [2*c+r] = {iso_in[c][r].card, iso_in[c][r].region};
        non_rank[2*c+r] = noniso_in[c][r].rank;
        non_pay [2*c+r] = {noniso_in[c][r].card, noniso_in[c][r].region};
      end
  end

  sort_asic #(.N_IN(2*N_RC), .N_OUT(N_EG_OUT), .RANK_W(6), .PAY_W(4)) u_sort_iso (
    .clk, .rst_n, .sort_en, .rank_in(iso_rank), .pay_in(iso_pay), .rank_out(iso_ro), .pay_out(iso_po));
  sort_asic #(.N_IN(2*N_RC), .N_OUT(N_EG_OUT), .RANK_W(6), .PAY_W(4)) u_sort_non (
    .clk, .rst_n, .sort_en, .rank_in(non_rank), .pay_in(non_pay), .rank_out(non_ro), .pay_out(non_po));

  for (genvar k = 0; k < N_EG_OUT; k++) begin : g_eg
    assign iso_out[k]    = '{rank: iso_ro[k], card: iso_po[k][3:1], region: iso_po[k][0]};
    assign noniso_out[k] = '{rank: non_ro[k], card: non_po[k][3:1], region: non_po[k][0]};
  end

  // ---------------- HF path ----------------
  tower_raw_t hf_raw [HF_TOWERS];
  logic       hf_bc0 [HF_LINKS];

  phase_asic #(.N_CH(HF_LINKS)) u_hf_phase (
    .clk, .rst_n, .bc0_local,
    .din(hf_links), .tw_out(hf_raw), .bc0_out(hf_bc0),
    .locked(hf_locked), .ecc_err(hf_ecc_err), .align_err(hf_align_err)
  );

  logic [9:0] lut_et [HF_TOWERS];
  logic       lut_q  [HF_TOWERS];

  for (genvar l = 0; l < 2; l++) begin : g_hflut
    hf_lut u_lut (
      .clk, .rst_n,
      .tw_in   (hf_raw[4*l +: 4]),
      .cfg_we  (cfg.we && cfg_sel && !cfg.addr[14] && cfg.addr[10] == 1'(l)),
      .cfg_addr(cfg.addr[9:0]),
      .cfg_data(cfg.data[9:0]),
      .et_out  (lut_et[4*l +: 4]),
      .q_out   (lut_q[4*l +: 4])
    );
  end

  logic [HF_TOWERS*11-1:0] hf_din, hf_dout;
  for (genvar t = 0; t < HF_TOWERS; t++) begin : g_hfbs
    assign hf_din[11*t +: 11] = {lut_q[t], lut_et[t]};
    assign hf_et[t] = hf_dout[11*t +: 10];
    assign hf_q[t]  = hf_dout[11*t + 10];
  end
  bscan_asic #(.W(HF_TOWERS*11), .MAXD(8)) u_hf_bs (
    .clk, .rst_n, .delay(hf_delay), .din(hf_din), .dout(hf_dout));

endmodule

// rct_crate: one crate of the CMS Level-1 Regional Calorimeter Trigger.
//
// A crate covers 8 trigger towers in phi by 28 in eta (7 cards x 4 eta columns)
// of the barrel/endcap calorimeter plus 8 forward (HF) towers. It holds seven
// Receiver Cards, seven Electron Isolation Cards and one Jet/Summary Card joined
// by the backplane, which here is plain wiring:
//   Receiver Card k -> Electron Isolation Card k: its 32 towers (7-bit ET + veto)
//   neighbouring towers in eta come from Receiver Cards k-1 and k+1, the rest of
//   the ring around the crate (share_in) from the neighbouring crates' cables;
//   Receiver Card k -> J/S Card: two region sums with overflow, tau, MIP bits;
//   Electron Isolation Card k -> J/S Card: 2 isolated + 2 non-isolated candidates.
// The J/S Card sends to the Global Calorimeter Trigger the 14 region sums with
// their bits, 14 Quiet bits, 8 HF region sums with quality bits and the four best
// candidates of each type. All 32 towers of every card go out on share_out for
// the neighbouring crates.
//
// Crate tower grid used for sharing: G[phi 0..9][eta 0..29], crate towers at
// [1..8][1..28] (Receiver Card k tower t at phi 1+t/4, eta 1+4k+t%4). share_in
// lists the ring: phi row 0 eta 0..29, phi row 9 eta 0..29, then for phi 1..8
// the pair (eta 0, eta 29).
//
// Clocking: one clock per bunch crossing; bc0_local is the Clock and Control
// Card's bunch-crossing-zero strobe, which the Phase ASICs align to. Configuration
// goes over the cfg write bus; card field addr[18:15]: 0..6 Receiver Card,
// 7..13 Electron Isolation Card, 14 J/S Card.
// Latency from the Phase ASIC outputs (all delays at reset value 0): region sums
// at the J/S outputs 5 clocks later; candidates 1 (lookup) + 1 (bscan) + 3 (EISO
// card) + 1 (sort) = 6 clocks; HF 2 clocks.
module rct_crate
  import rct_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       bc0_local,
  input  link_word_t rc_links   [N_RC][RC_LINKS],
  input  link_word_t hf_links   [HF_LINKS],
  input  eg_tower_t  share_in   [SHARE_TOWERS],
  input  cfg_t       cfg,
  output eg_tower_t  share_out  [N_RC][RC_TOWERS],
  output region_t    regions    [N_REGIONS],
  output logic       quiet      [N_REGIONS],
  output eg_cand_t   iso_out    [N_EG_OUT],
  output eg_cand_t   noniso_out [N_EG_OUT],
  output logic [9:0] hf_et      [HF_TOWERS],
  output logic       hf_q       [HF_TOWERS],
  output logic       link_locked   [N_RC][RC_LINKS],
  output logic       link_ecc_err  [N_RC][RC_LINKS],
  output logic       link_align_err[N_RC][RC_LINKS],
  output logic       hf_locked     [HF_LINKS],
  output logic       hf_ecc_err    [HF_LINKS],
  output logic       hf_align_err  [HF_LINKS]
);
  eg_tower_t eg      [N_RC][RC_TOWERS];
  region_t   rc_reg  [N_RC][RC_REGIONS];
  eg_cand_t  c_iso   [N_RC][RC_REGIONS];
  eg_cand_t  c_non   [N_RC][RC_REGIONS];
  eg_tower_t grid    [CRATE_PHI+2][CRATE_ETA+2];

  // ---------------- crate tower grid ----------------
  always_comb begin
    for (int e = 0; e < CRATE_ETA+2; e++) begin
      grid[0][e]           = share_in[e];
      grid[CRATE_PHI+1][e] = share_in[CRATE_ETA+2 + e];
    end
    for (int p = 1; p <= CRATE_PHI; p++) begin
      grid[p][0]           = share_in[2*(CRATE_ETA+2) + 2*(p-1)];
      grid[p][CRATE_ETA+1] = share_in[2*(CRATE_ETA+2) + 2*(p-1) + 1];
      for (int e = 1; e <= CRATE_ETA; e++)
        grid[p][e] = eg[(e-1)/CARD_ETA][(p-1)*CARD_ETA + (e-1)%CARD_ETA];
    end
  end

  // ---------------- Receiver and Electron Isolation Cards ----------------
  for (genvar k = 0; k < N_RC; k++) begin : g_card
    receiver_card u_rc (
      .clk, .rst_n, .bc0_local,
      .links    (rc_links[k]),
      .cfg      (cfg),
      .cfg_sel  (cfg.addr[18:15] == 4'(k)),
      .eg_out   (eg[k]),
      .region   (rc_reg[k]),
      .locked   (link_locked[k]),
      .ecc_err  (link_ecc_err[k]),
      .align_err(link_align_err[k])
    );

    eg_tower_t main [CARD_PHI][CARD_ETA];
    eg_tower_t nbr  [EDGE_TOWERS];
    always_comb begin
      for (int p = 0; p < CARD_PHI; p++)
        for (int e = 0; e < CARD_ETA; e++)
          main[p][e] = grid[1+p][1+CARD_ETA*k+e];
      for (int e = 0; e < CARD_ETA+2; e++) begin
        nbr[e]              = grid[0][CARD_ETA*k+e];
        nbr[CARD_ETA+2 + e] = grid[CRATE_PHI+1][CARD_ETA*k+e];
      end
      for (int p = 0; p < CARD_PHI; p++) begin
        nbr[2*(CARD_ETA+2) + 2*p]     = grid[1+p][CARD_ETA*k];
        nbr[2*(CARD_ETA+2) + 2*p + 1] = grid[1+p][CARD_ETA*k+CARD_ETA+1];
      end
    end

    eiso_card u_eiso (
      .clk, .rst_n,
      .card_id (3'(k)),
      .main    (main),
      .nbr     (nbr),
      .cfg     (cfg),
      .cfg_sel (cfg.addr[18:15] == 4'(N_RC + k)),
      .iso     (c_iso[k]),
      .noniso  (c_non[k])
    );

    assign share_out[k] = eg[k];
  end

  // ---------------- Jet/Summary Card ----------------
  jet_summary_card u_js (
    .clk, .rst_n, .bc0_local,
    .rc_region   (rc_reg),
    .iso_in      (c_iso),
    .noniso_in   (c_non),
    .hf_links    (hf_links),
    .cfg         (cfg),
    .cfg_sel     (cfg.addr[18:15] == CFG_JS),
    .regions     (regions),
    .quiet       (quiet),
    .iso_out     (iso_out),
    .noniso_out  (noniso_out),
    .hf_et       (hf_et),
    .hf_q        (hf_q),
    .hf_locked   (hf_locked),
    .hf_ecc_err  (hf_ecc_err),
    .hf_align_err(hf_align_err)
  );

endmodule

// eiso_card: one Electron Isolation Card.
//
// The card receives over the backplane the 32 towers of its Receiver Card
// (main[phi][eta], 8 x 4) and the 28 towers around them (nbr), through a Sort
// ASIC with sorting switched off that serves as the backplane receiver. From
// these it builds a 10 x 6 window (phi 0..9, eta 0..5, main at [1..8][1..4]).
// The nbr towers are listed as: phi row 0 eta 0..5, phi row 9 eta 0..5, then
// for phi 1..8 the pair (eta 0, eta 5).
// Two Electron Isolation ASICs each search one 4x4 region (region 0 = main phi
// 0..3, window rows 0..5; region 1 = main phi 4..7, window rows 4..9) and return
// their best isolated and non-isolated candidate. The output lookup compresses
// the four 7-bit energies to 6-bit ranks and stamps card number and region bit.
// Outputs iso[r] / noniso[r] belong to region r.
//
// Latency: receiver 1 + EISO ASIC 1 + lookup 1 = 3 clocks.
// Configuration (cfg_sel = card selected): addr[14]=0 writes rank table entry
// addr[6:0]; addr[14]=1 register 0 = isolation threshold (reset 8).
//
// Published: 32 central and 28 neighbour towers via the backplane, received by
// Sort ASICs with sorting off, two Electron Isolation ASICs giving one isolated
// and one non-isolated candidate per region (four per card), a lookup from 7 to
// 6 bits with a location bit. This design's choice: window geometry and edge
// order, the single receiver instance, the threshold register.
module eiso_card
  import rct_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] card_id,
  input  eg_tower_t  main   [CARD_PHI][CARD_ETA],
  input  eg_tower_t  nbr    [EDGE_TOWERS],
  input  cfg_t       cfg,
  input  logic       cfg_sel,
  output eg_cand_t   iso    [RC_REGIONS],
  output eg_cand_t   noniso [RC_REGIONS]
);
  localparam int unsigned NT = CARD_PHI*CARD_ETA + EDGE_TOWERS;  // 60

  logic [9:0] iso_thr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                            iso_thr <= 10'd8;
    else if (cfg.we && cfg_sel && cfg.addr[14] && cfg.addr[7:0] == 8'd0) iso_thr <= cfg.data[9:0];
  end

  // ---- assemble the 10x6 window as a flat list: index phi*6+eta ----
  logic [6:0] r_in  [NT], r_out [NT];
  logic [0:0] v_in  [NT], v_out [NT];

  always_comb begin
    for (int ph = 0; ph < 10; ph++)
      for (int et = 0; et < 6; et++) begin
        eg_tower_t t;
        if (ph == 0)                     t = nbr[et];
        else if (ph == 9)                t = nbr[6 + et];
        else if (et == 0)                t = nbr[12 + 2*(ph-1)];
        else if (et == 5)                t = nbr[12 + 2*(ph-1) + 1];
        else                             t = main[ph-1][et-1];
        r_in[ph*6+et] = t.et;
        v_in[ph*6+et] = t.veto;
      end
  end

  sort_asic #(.N_IN(NT), .N_OUT(NT), .RANK_W(7), .PAY_W(1)) u_rx (
    .clk, .rst_n, .sort_en(1'b0),
    .rank_in(r_in), .pay_in(v_in), .rank_out(r_out), .pay_out(v_out)
  );

  // ---- two Electron Isolation ASICs ----
  eiso_cand_t c_iso [RC_REGIONS];
  eiso_cand_t c_non [RC_REGIONS];

  for (genvar r = 0; r < RC_REGIONS; r++) begin : g_eiso
    eg_tower_t w [6][6];
    for (genvar i = 0; i < 6; i++) begin : g_i
      for (genvar j = 0; j < 6; j++) begin : g_j
        assign w[i][j] = '{veto: v_out[(4*r+i)*6+j][0], et: r_out[(4*r+i)*6+j]};
      end
    end
    eiso_asic u_eiso (.clk, .rst_n, .win(w), .iso_thr(iso_thr), .iso(c_iso[r]), .noniso(c_non[r]));
  end

  // ---- output lookup: ports 0,1 isolated r0,r1; 2,3 non-isolated r0,r1 ----
  logic [6:0] l_et  [4];
  logic       l_reg [4];
  eg_cand_t   l_out [4];
  always_comb begin
    for (int r = 0; r < 2; r++) begin
      l_et[r]    = c_iso[r].et;
      l_et[2+r]  = c_non[r].et;
      l_reg[r]   = 1'(r);
      l_reg[2+r] = 1'(r);
    end
  end

  eg_rank_lut #(.N_RD(4)) u_lut (
    .clk, .rst_n, .card_id,
    .et_in   (l_et),
    .region  (l_reg),
    .cfg_we  (cfg.we && cfg_sel && !cfg.addr[14]),
    .cfg_addr(cfg.addr[6:0]),
    .cfg_data(cfg.data[5:0]),
    .cand    (l_out)
  );

  assign iso[0]    = l_out[0];
  assign iso[1]    = l_out[1];
  assign noniso[0] = l_out[2];
  assign noniso[1] = l_out[3];

endmodule

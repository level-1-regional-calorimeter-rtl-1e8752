// receiver_card: one Receiver Card of the crate.
//
// 32 serial links (8 mezzanine cards x 4 links) bring 64 tower energies: links
// 0..15 carry the ECAL towers 0..31 and links 16..31 the HCAL towers 0..31, two
// towers per link (tower 2l on the low byte). Eight Phase ASICs align the links
// to the local bc0 strobe and check them. A lookup per tower (rc_lut) linearizes
// the energies and forms the electron veto bit and the ECAL+HCAL tower sum.
//
// The card covers 8 towers in phi by 4 in eta; tower t sits at phi=t/4, eta=t%4,
// and region r holds towers 16r..16r+15. Two stages of Adder ASICs form each 4x4
// region sum (stage 1: two adders of 8 towers per region, stage 2: one adder of
// the two partial sums). Alongside the sum go two bits per region: the minimum
// ionizing bit (OR of the 16 HCAL quality bits) and the tau veto bit (more than
// two towers whose ECAL, or more than two whose HCAL, linear ET exceeds tau_thr),
// delayed to stay with their sum. The 7-bit ECAL ET and veto of the 32 towers go
// through Boundary Scan ASICs (delay eg_delay) to the Electron Isolation Card and
// to the neighbours that share them.
//
// Latency after the Phase ASIC outputs: lookup 1, adders 2 clocks for regions;
// lookup 1 + eg_delay+1 for the electron data.
// Configuration (cfg.addr, card field already decoded into cfg_sel):
//   addr[14]=0: table write, addr[13:9] tower, addr[8] table (0 ECAL, 1 HCAL),
//               addr[7:0] entry
//   addr[14]=1: register addr[7:0]: 0 he_shift (reset 3), 1 tau_thr (reset 4),
//               2 eg_delay (reset 0)
//
// Published: link count, phase alignment, lookup, two adder stages, region sums
// with tau and minimum-ionizing bits, 32 towers with electron bit to the
// isolation card through the Boundary Scan ASICs. This design's choice: the link
// and tower numbering, the tau rule's exact form and threshold, register defaults.
module receiver_card
  import rct_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       bc0_local,
  input  link_word_t links     [RC_LINKS],
  input  cfg_t       cfg,
  input  logic       cfg_sel,
  output eg_tower_t  eg_out    [RC_TOWERS],
  output region_t    region    [RC_REGIONS],
  output logic       locked    [RC_LINKS],
  output logic       ecc_err   [RC_LINKS],
  output logic       align_err [RC_LINKS]
);
  // ---------------- configuration registers ----------------
  logic [2:0] he_shift;
  logic [8:0] tau_thr;
  logic [2:0] eg_delay;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      he_shift <= 3'd3;
      tau_thr  <= 9'd4;
      eg_delay <= 3'd0;
    end else if (cfg.we && cfg_sel && cfg.addr[14]) begin
      case (cfg.addr[7:0])
        8'd0: he_shift <= cfg.data[2:0];
        8'd1: tau_thr  <= cfg.data[8:0];
        8'd2: eg_delay <= cfg.data[2:0];
        default: ;
      endcase
    end
  end

  // ---------------- Phase ASICs ----------------
  tower_raw_t raw [2*RC_LINKS];   // 0..31 ECAL towers, 32..63 HCAL towers

  for (genvar p = 0; p < RC_LINKS/4; p++) begin : g_phase
    link_word_t din [4];
    tower_raw_t tw  [8];
    logic       bo  [4];
    for (genvar k = 0; k < 4; k++) begin : g_din
      assign din[k] = links[4*p+k];
    end
    phase_asic #(.N_CH(4)) u_phase (
      .clk, .rst_n, .bc0_local,
      .din     (din),
      .tw_out  (tw),
      .bc0_out (bo),
      .locked  (locked[4*p +: 4]),
      .ecc_err (ecc_err[4*p +: 4]),
      .align_err(align_err[4*p +: 4])
    );
    for (genvar k = 0; k < 8; k++) begin : g_raw
      assign raw[8*p+k] = tw[k];
    end
  end

  // ---------------- lookups ----------------
  eg_tower_t  eg_lut   [RC_TOWERS];
  logic [9:0] tow_et   [RC_TOWERS];
  logic [8:0] e_lin    [RC_TOWERS];
  logic [8:0] h_lin    [RC_TOWERS];
  logic       h_q      [RC_TOWERS];

  for (genvar t = 0; t < RC_TOWERS; t++) begin : g_lut
    rc_lut u_lut (
      .clk, .rst_n,
      .ecal     (raw[t]),
      .hcal     (raw[RC_TOWERS+t]),
      .he_shift (he_shift),
      .cfg_we   (cfg.we && cfg_sel && !cfg.addr[14] && cfg.addr[13:9] == 5'(t)),
      .cfg_tbl  (cfg.addr[8]),
      .cfg_addr (cfg.addr[7:0]),
      .cfg_data (cfg.data),
      .eg       (eg_lut[t]),
      .tower_et (tow_et[t]),
      .ecal_lin (e_lin[t]),
      .hcal_lin (h_lin[t]),
      .hcal_q   (h_q[t])
    );
  end

  // ---------------- adder tree, tau and MIP bits ----------------
  logic signed [10:0] s1     [2*RC_REGIONS];
  logic               s1_ovf [2*RC_REGIONS];

  for (genvar a = 0; a < 2*RC_REGIONS; a++) begin : g_add1
    logic signed [10:0] ain [8];
    logic               oin [8];
    for (genvar k = 0; k < 8; k++) begin : g_in
      assign ain[k] = 11'(tow_et[8*a+k]);
      assign oin[k] = 1'b0;
    end
    adder_asic u_add (.clk, .rst_n, .a(ain), .ovf_in(oin), .sum(s1[a]), .ovf(s1_ovf[a]));
  end

  for (genvar r = 0; r < RC_REGIONS; r++) begin : g_reg
    logic signed [10:0] ain [8];
    logic               oin [8];
    logic signed [10:0] s2;
    logic               s2_ovf;
    logic [4:0]         n_e, n_h;
    logic               tau_c, mip_c;
    logic [1:0]         tau_d, mip_d;

    for (genvar k = 0; k < 8; k++) begin : g_in
      if (k < 2) begin : g_used
        assign ain[k] = s1[2*r+k];
        assign oin[k] = s1_ovf[2*r+k];
      end else begin : g_zero
        assign ain[k] = '0;
        assign oin[k] = 1'b0;
      end
    end
    adder_asic u_add (.clk, .rst_n, .a(ain), .ovf_in(oin), .sum(s2), .ovf(s2_ovf));

    always_comb begin
      n_e   = '0;
      n_h   = '0;
      mip_c = 1'b0;
      for (int k = 0; k < TOW_PER_REG; k++) begin
        n_e   = n_e + 5'(e_lin[16*r+k] > tau_thr);
        n_h   = n_h + 5'(h_lin[16*r+k] > tau_thr);
        mip_c = mip_c | h_q[16*r+k];
      end
      tau_c = (n_e > 5'd2) || (n_h > 5'd2);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        tau_d <= '0;
        mip_d <= '0;
      end else begin
        tau_d <= {tau_d[0], tau_c};
        mip_d <= {mip_d[0], mip_c};
      end
    end

    assign region[r].et  = s2[10] ? 10'd0 : s2[9:0];
    assign region[r].ovf = s2_ovf;
    assign region[r].tau = tau_d[1];
    assign region[r].mip = mip_d[1];
  end

  // ---------------- Boundary Scan ASICs: electron data out ----------------
  for (genvar b = 0; b < RC_TOWERS/8; b++) begin : g_bscan
    logic [63:0] din, dout;
    for (genvar k = 0; k < 8; k++) begin : g_k
      assign din[8*k +: 8] = eg_lut[8*b+k];
      assign eg_out[8*b+k] = dout[8*k +: 8];
    end
    bscan_asic #(.W(64), .MAXD(8)) u_bs (.clk, .rst_n, .delay(eg_delay), .din(din), .dout(dout));
  end

endmodule

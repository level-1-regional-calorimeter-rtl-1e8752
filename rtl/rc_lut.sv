// rc_lut: the Receiver Card memory lookup of one trigger tower.
//
// Two programmable tables translate the raw 8-bit ECAL and HCAL energies of a
// tower onto the scales used downstream. The ECAL table gives a 7-bit ET for the
// electron isolation path and a 9-bit linear ET for the energy sums; the HCAL
// table gives a 9-bit linear ET. The tower sum ET(ECAL)+ET(HCAL), which feeds the
// Adder ASIC tree, and the electron veto bit are formed from the looked-up values:
// the veto is set when the ECAL fine-grain bit is set or when the hadronic energy
// is too large against the electromagnetic one, HCAL*2^he_shift > ECAL.
//
// Interface: raw towers in, registered results out one crossing later. Tables are
// written through a simple port (tbl selects ECAL=0 / HCAL=1) and start out with
// a linear default: ECAL 9-bit = raw, ECAL 7-bit = raw saturated at 127, HCAL = raw.
//
// Published: a lookup that linearizes the energies, produces 7-bit ECAL ET plus an
// electron identification bit, and the ECAL+HCAL sum. This design's choice: the
// split into two 256-entry tables, the widths of the linear scale and the H/E rule.
module rc_lut
  import rct_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  tower_raw_t ecal,
  input  tower_raw_t hcal,
  input  logic [2:0] he_shift,
  // table write port
  input  logic       cfg_we,
  input  logic       cfg_tbl,
  input  logic [7:0] cfg_addr,
  input  logic [15:0] cfg_data,
  // results
  output eg_tower_t  eg,
  output logic [9:0] tower_et,
  output logic [8:0] ecal_lin,
  output logic [8:0] hcal_lin,
  output logic       hcal_q
);
  logic [15:0] ecal_mem [256];   // {et7[6:0], lin[8:0]}
  logic [8:0]  hcal_mem [256];

  initial begin
    for (int i = 0; i < 256; i++) begin
      ecal_mem[i] = {(i > 127 ? 7'd127 : 7'(i)), 9'(i)};
      hcal_mem[i] = 9'(i);
    end
  end

  always_ff @(posedge clk) begin
    if (cfg_we && !cfg_tbl) ecal_mem[cfg_addr] <= cfg_data;
    if (cfg_we &&  cfg_tbl) hcal_mem[cfg_addr] <= cfg_data[8:0];
  end

  logic [15:0] e_word;
  logic [8:0]  h_lin;
  logic [15:0] h_scaled;
  assign e_word   = ecal_mem[ecal.e];
  assign h_lin    = hcal_mem[hcal.e];
  assign h_scaled = 16'(h_lin) << he_shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eg       <= '0;
      tower_et <= '0;
      ecal_lin <= '0;
      hcal_lin <= '0;
      hcal_q   <= 1'b0;
    end else begin
      eg.et    <= e_word[15:9];
      eg.veto  <= ecal.c || (h_scaled > 16'(e_word[8:0]));
      tower_et <= 10'(e_word[8:0]) + 10'(h_lin);
      ecal_lin <= e_word[8:0];
      hcal_lin <= h_lin;
      hcal_q   <= hcal.c;
    end
  end

endmodule

// eg_rank_lut: the Electron Isolation Card output lookup.
//
// A programmable 128-entry table compresses the 7-bit candidate energy to the
// 6-bit rank sent to the Jet/Summary Card; the card stamps each candidate with
// its card number and a location bit naming which of its two regions it came
// from. N_RD read ports share the one table (the real card may use more copies).
// Default contents: rank = ET/2. Registered, one clock.
//
// Published: the lookup compresses seven-bit energies to six bits and sets a
// location bit for each region served by the card. This design's choice: the
// default table, the card-number stamp and the write port.
module eg_rank_lut
  import rct_pkg::*;
#(
  parameter int unsigned N_RD = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] card_id,
  input  logic [6:0] et_in  [N_RD],
  input  logic       region [N_RD],
  input  logic       cfg_we,
  input  logic [6:0] cfg_addr,
  input  logic [5:0] cfg_data,
  output eg_cand_t   cand   [N_RD]
);
  logic [5:0] mem [128];

  initial for (int i = 0; i < 128; i++) mem[i] = 6'(i >> 1);

  always_ff @(posedge clk) begin
    if (cfg_we) mem[cfg_addr] <= cfg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_RD; k++) cand[k] <= '0;
    end else begin
      for (int k = 0; k < N_RD; k++)
        cand[k] <= '{rank: (et_in[k] == 0) ? 6'd0 : mem[et_in[k]], card: card_id, region: region[k]};
    end
  end

endmodule

// hf_lut: Jet/Summary Card lookup for the forward calorimeter (HF).
//
// Every HF tower is a whole trigger region. One lookup serves the four eta slices
// of one phi sector: the address is {eta slice, raw 8-bit energy} and the entry is
// the 10-bit region ET on the same scale as the barrel/endcap region sums. The
// quality bit is carried alongside. Default contents: ET = raw energy.
// Registered, one clock.
//
// Published: two memory lookups assign the energy of the four eta slices of the
// HF. This design's choice: table layout, width and default.
module hf_lut
  import rct_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  tower_raw_t tw_in  [4],
  input  logic       cfg_we,
  input  logic [9:0] cfg_addr,
  input  logic [9:0] cfg_data,
  output logic [9:0] et_out [4],
  output logic       q_out  [4]
);
  logic [9:0] mem [1024];

  initial for (int i = 0; i < 1024; i++) mem[i] = 10'(i & 255);

  always_ff @(posedge clk) begin
    if (cfg_we) mem[cfg_addr] <= cfg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 4; s++) begin
        et_out[s] <= '0;
        q_out[s]  <= 1'b0;
      end
    end else begin
      for (int s = 0; s < 4; s++) begin
        et_out[s] <= mem[{2'(s), tw_in[s].e}];
        q_out[s]  <= tw_in[s].c;
      end
    end
  end

endmodule

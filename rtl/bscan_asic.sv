// bscan_asic: data-sharing driver with programmable alignment delay.
//
// The Boundary Scan ASIC drives tower data that is shared with other cards and
// crates, and the place where shared data is aligned in time. This model is that
// data path: a bus of W bits passes through a shift register of MAXD stages and
// is taken from the stage selected by 'delay', so the latency is delay+1 clocks
// (crossings). The IEEE 1149.1 boundary-scan chain of the real chip is not
// modelled.
//
// Published: alignment in time of shared data, delay of HF data to line it up
// with the region sums, drivers for data sharing. This design's choice: the
// shift-register form and the delay range.
module bscan_asic #(
  parameter int unsigned W    = 8,
  parameter int unsigned MAXD = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(MAXD)-1:0]  delay,
  input  logic [W-1:0]             din,
  output logic [W-1:0]             dout
);
  logic [W-1:0] sr [MAXD];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAXD; i++) sr[i] <= '0;
    end else begin
      sr[0] <= din;
      for (int i = 1; i < MAXD; i++) sr[i] <= sr[i-1];
    end
  end

  assign dout = sr[delay];

endmodule

// adder_asic: sums eight signed energies in one crossing and flags overflow.
//
// The eight W-bit two's-complement inputs (11 bits, sign included) are added at
// full precision. The registered result is the sum clamped to the W-bit range;
// ovf is set when the clamp was needed or when any input already carried an
// overflow bit, so overflow propagates through a tree of these adders.
// Latency: one clock (one 25 ns crossing), a new set of inputs every clock.
//
// Published: eight 11-bit energies including the sign, summed in 25 ns, with
// overflow bits. This design's choice: saturation of the result and the
// propagation of input overflow flags.
module adder_asic #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 11
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] a      [N],
  input  logic                ovf_in [N],
  output logic signed [W-1:0] sum,
  output logic                ovf
);
  localparam int unsigned SW = W + $clog2(N) + 1;
  localparam logic signed [SW-1:0] MAXV = SW'((1 << (W-1)) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(1 << (W-1));

  logic signed [SW-1:0] full;
  logic                 any_ovf;

  always_comb begin
    full    = '0;
    any_ovf = 1'b0;
    for (int i = 0; i < N; i++) begin
      full    = full + SW'(a[i]);
      any_ovf = any_ovf | ovf_in[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum <= '0;
      ovf <= 1'b0;
    end else begin
      if (full > MAXV) begin
        sum <= MAXV[W-1:0];
        ovf <= 1'b1;
      end else if (full < MINV) begin
        sum <= MINV[W-1:0];
        ovf <= 1'b1;
      end else begin
        sum <= full[W-1:0];
        ovf <= any_ovf;
      end
    end
  end

endmodule

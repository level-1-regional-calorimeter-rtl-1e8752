// sort_asic: ranks N_IN candidates and passes on the N_OUT highest, or, with
// sorting switched off, acts as a plain registered receiver.
//
// Each input is a RANK_W-bit rank plus a PAY_W-bit payload (position, card...).
// With sort_en set, every input counts how many others beat it (a higher rank,
// or an equal rank on a lower input number); the input that is beaten by exactly
// k others goes to output k, so the outputs come out in descending rank order and
// ties keep input order. With sort_en clear, output k is input k.
// One clock of latency, a new set every clock.
//
// Published: the Sort ASIC's sorting can be set on or off; off on the Electron
// Isolation Card, where it serves as a backplane receiver; on on the Jet/Summary
// Card, where 14 candidates of one type give the top four. This design's choice:
// the counting sort network and the tie rule.
module sort_asic #(
  parameter int unsigned N_IN   = 14,
  parameter int unsigned N_OUT  = 4,
  parameter int unsigned RANK_W = 6,
  parameter int unsigned PAY_W  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sort_en,
  input  logic [RANK_W-1:0] rank_in [N_IN],
  input  logic [PAY_W-1:0]  pay_in  [N_IN],
  output logic [RANK_W-1:0] rank_out[N_OUT],
  output logic [PAY_W-1:0]  pay_out [N_OUT]
);
  localparam int unsigned CW = $clog2(N_IN + 1);

  logic [CW-1:0]     place [N_IN];
  logic [RANK_W-1:0] r_nxt [N_OUT];
  logic [PAY_W-1:0]  p_nxt [N_OUT];

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      place[i] = '0;
      for (int j = 0; j < N_IN; j++)
        if (j != i && (rank_in[j] > rank_in[i] || (rank_in[j] == rank_in[i] && j < i)))
          place[i] = place[i] + 1'b1;
    end
    for (int k = 0; k < N_OUT; k++) begin
      r_nxt[k] = '0;
      p_nxt[k] = '0;
      if (sort_en) begin
        for (int i = 0; i < N_IN; i++)
          if (int'(place[i]) == k) begin
            r_nxt[k] = rank_in[i];
            p_nxt[k] = pay_in[i];
          end
      end else if (k < N_IN) begin
        r_nxt[k] = rank_in[k];
        p_nxt[k] = pay_in[k];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_OUT; k++) begin
        rank_out[k] <= '0;
        pay_out[k]  <= '0;
      end
    end else begin
      for (int k = 0; k < N_OUT; k++) begin
        rank_out[k] <= r_nxt[k];
        pay_out[k]  <= p_nxt[k];
      end
    end
  end

endmodule

// phase_asic: aligns the parallel data of four serial-link channels to the local
// clock and checks them for transmission errors.
//
// Each channel writes its 24-bit word into a small ring buffer every crossing and
// remembers where the word carrying the bunch-crossing-zero (bc0) bit landed. When
// the local bc0 strobe from the Clock and Control Card arrives, every channel
// starts reading at its own bc0 word, so after the strobe all channels (of this
// chip and of every other chip fed by the same strobe) present the same crossing
// on the same clock. From then on the read pointer runs freely; at each later
// strobe the channel checks that its bc0 word is still where the running pointer
// is, and raises align_err for one crossing if it is not (latency changed) or if no
// bc0 bit came in during the orbit. The pointer is then re-aligned.
// The error code of every word read out is recomputed; a mismatch raises ecc_err.
//
// DEPTH must be a power of two (the pointers wrap by overflow).
// Timing: the local strobe must come 1..DEPTH-1 crossings after the latest
// channel's bc0 word; outputs are registered and change one clock after the read.
// Before a channel has locked its outputs are zero.
//
// The function (alignment to the local clock, deskew of four channels, error
// checking) is the published one; the ring-buffer mechanism, the use of the bc0
// bit as the alignment marker and the error code are this design's choices.
module phase_asic
  import rct_pkg::*;
#(
  parameter int unsigned N_CH  = 4,
  parameter int unsigned DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bc0_local,
  input  link_word_t  din      [N_CH],
  output tower_raw_t  tw_out   [2*N_CH],
  output logic        bc0_out  [N_CH],
  output logic        locked   [N_CH],
  output logic        ecc_err  [N_CH],
  output logic        align_err[N_CH]
);
  localparam int unsigned AW = $clog2(DEPTH);

  for (genvar ch = 0; ch < N_CH; ch++) begin : g_ch
    link_word_t     mem [DEPTH];
    logic [AW-1:0]  wr_ptr, rd_ptr, bc0_ptr;
    logic           bc0_seen;
    logic           lk;
    link_word_t     rd_word;
    logic           realign;

    assign realign = bc0_local && bc0_seen;
    assign rd_word = realign ? mem[bc0_ptr] : mem[rd_ptr];

    always_ff @(posedge clk) begin
      mem[wr_ptr] <= din[ch];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wr_ptr   <= '0;
        rd_ptr   <= '0;
        bc0_ptr  <= '0;
        bc0_seen <= 1'b0;
        lk       <= 1'b0;
        tw_out[2*ch]   <= '0;
        tw_out[2*ch+1] <= '0;
        bc0_out[ch]    <= 1'b0;
        ecc_err[ch]    <= 1'b0;
        align_err[ch]  <= 1'b0;
      end else begin
        wr_ptr <= wr_ptr + 1'b1;
        // a strobe consumes the recorded marker; a marker arriving in the same
        // cycle is recorded for the next orbit
        if (din[ch].bc0) begin
          bc0_ptr  <= wr_ptr;
          bc0_seen <= 1'b1;
        end else if (bc0_local) begin
          bc0_seen <= 1'b0;
        end

        if (realign) begin
          rd_ptr <= bc0_ptr + 1'b1;
          lk     <= 1'b1;
        end else begin
          rd_ptr <= rd_ptr + 1'b1;
        end

        align_err[ch] <= bc0_local && (lk || bc0_seen) &&
                         (!bc0_seen || (lk && bc0_ptr != rd_ptr));

        if (lk || realign) begin
          tw_out[2*ch]   <= '{c: rd_word.c[0], e: rd_word.e0};
          tw_out[2*ch+1] <= '{c: rd_word.c[1], e: rd_word.e1};
          bc0_out[ch]    <= rd_word.bc0;
          ecc_err[ch]    <= ecc5({rd_word.bc0, rd_word.c, rd_word.e1, rd_word.e0}) != rd_word.ecc;
        end else begin
          tw_out[2*ch]   <= '0;
          tw_out[2*ch+1] <= '0;
          bc0_out[ch]    <= 1'b0;
          ecc_err[ch]    <= 1'b0;
        end
      end
    end

    assign locked[ch] = lk;
  end

endmodule

// tb_phase_asic: self-checking test of the Phase ASIC.
// Four channels carry the same crossing sequence with different link latencies
// (skews 0..3 crossings). After the first local bc0 strobe every channel must
// present the same crossing, L+1 clocks after the strobe-defining latency L. The
// test then corrupts one bit of one word (ecc_err must fire exactly once) and
// shifts one channel's latency (align_err must fire at the next strobe).
module tb_phase_asic;
  import rct_pkg::*;
  localparam int ORBIT = 20;
  localparam int L     = 5;      // strobe comes L crossings after the source bc0

  logic clk = 0, rst_n = 0, bc0_local = 0;
  link_word_t din [4];
  tower_raw_t tw  [8];
  logic bo [4], lk [4], ee [4], ae [4];
  int checks = 0, failures = 0;
  int cyc = 0;
  int skew [4] = '{0, 2, 1, 3};
  int flip_at = -1, flip_ch = 0;
  int ecc_seen = 0, align_seen = 0;

  phase_asic dut (.clk, .rst_n, .bc0_local, .din, .tw_out(tw), .bc0_out(bo),
                  .locked(lk), .ecc_err(ee), .align_err(ae));

  always #5 clk = ~clk;

  function automatic logic [7:0] pat(int n, int ch, int half);
    return 8'((n * 7 + ch * 31 + half * 13) & 255);
  endfunction

  // drive inputs for crossing index cyc (sampled at the next posedge)
  always @(negedge clk) begin
    for (int ch = 0; ch < 4; ch++) begin
      int n;
      n = cyc - skew[ch];
      if (n < 0) din[ch] = make_word(8'd0, 8'd0, 2'b00, 1'b0);
      else begin
        din[ch] = make_word(pat(n, ch, 0), pat(n, ch, 1), 2'(n % 4), (n % ORBIT) == 0);
        if (cyc == flip_at && ch == flip_ch) din[ch].e1[3] = ~din[ch].e1[3];
      end
    end
    bc0_local = (cyc >= L) && ((cyc - L) % ORBIT == 0);
  end

  // check outputs after each edge
  always @(posedge clk) begin
    cyc <= cyc + 1;
    #1;
    for (int ch = 0; ch < 4; ch++) begin
      if (ee[ch]) ecc_seen++;
      if (ae[ch]) align_seen++;
    end
    if (rst_n && lk[0] && lk[1] && lk[2] && lk[3] && flip_at < 0) begin
      int n;
      n = cyc - L - 1;     // crossing expected at the outputs now (cyc already counts this edge)
      for (int ch = 0; ch < 4; ch++) begin
        checks++;
        if (tw[2*ch].e != pat(n, ch, 0) || tw[2*ch+1].e != pat(n, ch, 1) ||
            tw[2*ch].c != (n % 4 == 1 || n % 4 == 3) || bo[ch] != ((n % ORBIT) == 0) || ee[ch]) begin
          failures++;
          if (failures < 5) $display("mismatch cyc=%0d ch=%0d n=%0d got %0d/%0d exp %0d/%0d", cyc, ch, n,
                                     tw[2*ch].e, tw[2*ch+1].e, pat(n, ch, 0), pat(n, ch, 1));
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // locked after the first strobe
    repeat (4*ORBIT) @(posedge clk);
    checks++; if (!(lk[0] && lk[1] && lk[2] && lk[3])) failures++;
    checks++; if (align_seen != 0) begin failures++; $display("unexpected align_err"); end
    checks++; if (ecc_seen != 0) begin failures++; $display("unexpected ecc_err"); end
    // single bit error on channel 2
    flip_ch = 2; flip_at = cyc + 3;
    repeat (20) @(posedge clk);
    checks++; if (ecc_seen != 1) begin failures++; $display("ecc_err count %0d", ecc_seen); end
    // channel 1 latency changes by one crossing: next strobe must flag it
    skew[1] = 3;
    repeat (2*ORBIT) @(posedge clk);
    checks++; if (align_seen < 1) begin failures++; $display("align_err not raised"); end
    $display("ecc errors seen %0d, alignment errors seen %0d", ecc_seen, align_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_eg_rank_lut: self-checking test of the isolation card output lookup.
// With the default table the rank must be ET/2 (0 for no candidate) and card
// number and region bit must be carried; after rewriting entries through the
// write port the new ranks must appear. One clock latency.
module tb_eg_rank_lut;
  import rct_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [2:0] card_id = 3'd5;
  logic [6:0] et_in [4];
  logic reg_in [4];
  logic cfg_we = 0;
  logic [6:0] cfg_addr = 0;
  logic [5:0] cfg_data = 0;
  eg_cand_t cand [4];
  int checks = 0, failures = 0;

  eg_rank_lut dut (.clk, .rst_n, .card_id, .et_in, .region(reg_in), .cfg_we, .cfg_addr, .cfg_data, .cand);
  always #5 clk = ~clk;

  initial begin
    for (int k = 0; k < 4; k++) begin et_in[k] = 0; reg_in[k] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      logic [5:0] er [4];
      @(negedge clk);
      card_id = 3'($urandom);
      for (int k = 0; k < 4; k++) begin
        et_in[k] = 7'($urandom); reg_in[k] = 1'(k); er[k] = 6'(et_in[k] >> 1);
      end
      @(posedge clk); #1;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (cand[k].rank != er[k] || cand[k].card != card_id || cand[k].region != 1'(k)) failures++;
      end
    end
    // program rank(e) = 63 - e/2 for e = 1..127
    for (int e = 1; e < 128; e++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 7'(e); cfg_data = 6'(63 - e/2);
    end
    @(negedge clk); cfg_we = 0;
    for (int n = 0; n < 50; n++) begin
      logic [5:0] er [4];
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        et_in[k] = (k == 0) ? 7'd0 : 7'($urandom_range(1, 127));
        er[k] = (k == 0) ? 6'd0 : 6'(63 - et_in[k]/2);
      end
      @(posedge clk); #1;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (cand[k].rank != er[k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rc_lut: self-checking test of the Receiver Card tower lookup.
// Random raw ECAL/HCAL energies and bits go through the default (linear)
// tables; the 7-bit ET, veto bit and tower sum are compared one clock later
// with values computed here. Then a few table entries are rewritten and read
// back through the data path.
module tb_rc_lut;
  import rct_pkg::*;
  logic clk = 0, rst_n = 0;
  tower_raw_t ecal, hcal;
  logic [2:0] he_shift = 3'd3;
  logic cfg_we = 0, cfg_tbl = 0;
  logic [7:0] cfg_addr = 0;
  logic [15:0] cfg_data = 0;
  eg_tower_t eg;
  logic [9:0] tower_et;
  logic [8:0] e_lin, h_lin;
  logic hq;
  int checks = 0, failures = 0;

  rc_lut dut (.clk, .rst_n, .ecal, .hcal, .he_shift, .cfg_we, .cfg_tbl, .cfg_addr, .cfg_data,
              .eg, .tower_et, .ecal_lin(e_lin), .hcal_lin(h_lin), .hcal_q(hq));
  always #5 clk = ~clk;

  task automatic check(input logic [6:0] et7, input logic veto, input logic [9:0] sum, input logic q);
    checks++;
    if (eg.et !== et7 || eg.veto !== veto || tower_et !== sum || hq !== q) begin
      failures++;
      if (failures < 6) $display("mismatch: got et=%0d veto=%0d sum=%0d q=%0d exp %0d %0d %0d %0d",
                                 eg.et, eg.veto, tower_et, hq, et7, veto, sum, q);
    end
  endtask

  initial begin
    ecal = '0; hcal = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic [7:0] e, h; logic fg, mq;
      e = 8'($urandom); h = (n % 3 == 0) ? 8'($urandom_range(0, 4)) : 8'($urandom);
      fg = (n % 7 == 0); mq = 1'($urandom);
      he_shift = 3'($urandom_range(0, 5));
      @(negedge clk); ecal = '{c: fg, e: e}; hcal = '{c: mq, e: h};
      @(posedge clk); #1;
      check(e > 127 ? 7'd127 : 7'(e), fg || ((int'(h) << he_shift) > int'(e)), 10'(int'(e) + int'(h)), mq);
    end
    // rewrite ECAL entry 10 -> et7 = 99, lin = 300 ; HCAL entry 20 -> 7
    @(negedge clk); cfg_we = 1; cfg_tbl = 0; cfg_addr = 8'd10; cfg_data = {7'd99, 9'd300};
    @(negedge clk); cfg_tbl = 1; cfg_addr = 8'd20; cfg_data = 16'd7;
    @(negedge clk); cfg_we = 0; he_shift = 3'd3; ecal = '{c: 1'b0, e: 8'd10}; hcal = '{c: 1'b0, e: 8'd20};
    @(posedge clk); #1;
    check(7'd99, 1'b0, 10'd307, 1'b0);                   // 7*8 = 56 < 300
    checks++; if (e_lin != 9'd300 || h_lin != 9'd7) failures++;
    @(negedge clk); he_shift = 3'd6;                      // 7*64 = 448 > 300 -> veto
    @(posedge clk); #1;
    check(7'd99, 1'b1, 10'd307, 1'b0);
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

// tb_hf_lut: self-checking test of the HF lookup.
// Default table gives ET = raw energy for every eta slice; after programming
// slice s with ET = 2*raw + s (saturating at 1023) each slice must use its own
// part of the table. The quality bit is carried. One clock latency.
module tb_hf_lut;
  import rct_pkg::*;
  logic clk = 0, rst_n = 0;
  tower_raw_t tw [4];
  logic cfg_we = 0;
  logic [9:0] cfg_addr = 0, cfg_data = 0;
  logic [9:0] et [4];
  logic q [4];
  int checks = 0, failures = 0;

  hf_lut dut (.clk, .rst_n, .tw_in(tw), .cfg_we, .cfg_addr, .cfg_data, .et_out(et), .q_out(q));
  always #5 clk = ~clk;

  task automatic run(input bit programmed);
    for (int n = 0; n < 100; n++) begin
      logic [9:0] ex [4];
      @(negedge clk);
      for (int s = 0; s < 4; s++) begin
        tw[s] = '{c: 1'($urandom), e: 8'($urandom)};
        ex[s] = programmed ? 10'(2*tw[s].e + s) : 10'(tw[s].e);
      end
      @(posedge clk); #1;
      for (int s = 0; s < 4; s++) begin
        checks++;
        if (et[s] != ex[s] || q[s] != tw[s].c) begin
          failures++;
          if (failures < 5) $display("slice %0d got %0d exp %0d", s, et[s], ex[s]);
        end
      end
    end
  endtask

  initial begin
    for (int s = 0; s < 4; s++) tw[s] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0);
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 10'(a); cfg_data = 10'(2*(a % 256) + a / 256);
    end
    @(negedge clk); cfg_we = 0;
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

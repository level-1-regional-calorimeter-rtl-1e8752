// tb_bscan_asic: self-checking test of the Boundary Scan ASIC data path.
// A counting pattern goes in; for each delay setting 0..7 the output must equal
// the input of delay+1 clocks earlier.
module tb_bscan_asic;
  logic clk = 0, rst_n = 0;
  logic [2:0] delay = 0;
  logic [7:0] din = 0, dout;
  logic [7:0] hist [$];
  int checks = 0, failures = 0;

  bscan_asic dut (.clk, .rst_n, .delay, .din, .dout);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 8; d++) begin
      delay = 3'(d);
      for (int n = 0; n < 30; n++) begin
        @(negedge clk);
        din = 8'($urandom);
        hist.push_front(din);
        @(posedge clk); #1;
        if (n > 8) begin
          checks++;
          if (dout != hist[d]) begin
            failures++;
            if (failures < 5) $display("delay %0d: got %0h exp %0h", d, dout, hist[d]);
          end
        end
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

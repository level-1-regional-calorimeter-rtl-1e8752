// tb_adder_asic: self-checking test of the Adder ASIC.
// Random signed 11-bit operands (small ones, and large ones that overflow in
// both directions) and random input overflow flags; the saturated sum and the
// overflow bit must appear exactly one clock (one crossing) after the inputs,
// with a new set accepted every clock.
module tb_adder_asic;
  logic clk = 0, rst_n = 0;
  logic signed [10:0] a [8];
  logic ovf_in [8];
  logic signed [10:0] sum;
  logic ovf;
  int checks = 0, failures = 0, n_ovf = 0;
  int exp_sum [$];
  bit exp_ovf [$];

  adder_asic dut (.clk, .rst_n, .a, .ovf_in, .sum, .ovf);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 8; i++) begin a[i] = '0; ovf_in[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      int s; bit o;
      @(negedge clk);
      // check the result of the previous set (pipeline of one)
      if (n > 0) begin
        checks++;
        if (sum != 11'(exp_sum[0]) || ovf != exp_ovf[0]) begin
          failures++;
          if (failures < 6) $display("mismatch n=%0d got %0d/%0d exp %0d/%0d", n, sum, ovf, exp_sum[0], exp_ovf[0]);
        end
        void'(exp_sum.pop_front()); void'(exp_ovf.pop_front());
      end
      s = 0; o = 0;
      for (int i = 0; i < 8; i++) begin
        int v;
        case (n % 3)
          0: v = $urandom_range(0, 120);
          1: v = $urandom_range(0, 2047) - 1024;
          default: v = $urandom_range(0, 255) - 128;
        endcase
        a[i] = 11'(v);
        ovf_in[i] = (n % 11 == 0) && (i == 3);
        s += v; o |= ovf_in[i];
      end
      if (s > 1023) begin s = 1023; o = 1; end
      else if (s < -1024) begin s = -1024; o = 1; end
      if (o) n_ovf++;
      exp_sum.push_back(s); exp_ovf.push_back(o);
    end
    $display("overflow cases: %0d", n_ovf);
    checks++; if (n_ovf == 0) failures++;
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

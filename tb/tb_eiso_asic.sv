// tb_eiso_asic: self-checking test of the Electron Isolation ASIC.
// Random 6x6 windows (sparse, with occasional veto bits) and a few hand-made
// cases: a clean isolated deposit, the same deposit with a vetoed neighbour
// (becomes non-isolated) and with a vetoed centre (no candidate). The expected
// candidates come from a reference model written here.
module tb_eiso_asic;
  import rct_pkg::*;
  logic clk = 0, rst_n = 0;
  eg_tower_t win [6][6];
  logic [9:0] iso_thr = 10'd8;
  eiso_cand_t iso, non;
  int checks = 0, failures = 0, n_iso = 0, n_non = 0;

  eiso_asic dut (.clk, .rst_n, .win, .iso_thr, .iso, .noniso(non));
  always #5 clk = ~clk;

  task automatic model(output eiso_cand_t bi, output eiso_cand_t bn);
    bi = '0; bn = '0;
    for (int i = 1; i < 5; i++)
      for (int j = 1; j < 5; j++) begin
        int nn, e, ring; bit nv;
        nn = win[i-1][j].et;
        nn = (win[i+1][j].et > nn) ? win[i+1][j].et : nn;
        nn = (win[i][j-1].et > nn) ? win[i][j-1].et : nn;
        nn = (win[i][j+1].et > nn) ? win[i][j+1].et : nn;
        e = win[i][j].et + nn; if (e > 127) e = 127;
        ring = 0; nv = 0;
        for (int a = i-1; a <= i+1; a++)
          for (int b = j-1; b <= j+1; b++)
            if (a != i || b != j) begin ring += win[a][b].et; nv |= win[a][b].veto; end
        ring -= nn;
        if (win[i][j].et > 0 && !win[i][j].veto) begin
          if (!nv && ring <= iso_thr) begin
            if (e > bi.et) begin bi.et = 7'(e); bi.pos = 4'((i-1)*4 + j-1); end
          end else if (e > bn.et) begin bn.et = 7'(e); bn.pos = 4'((i-1)*4 + j-1); end
        end
      end
  endtask

  task automatic apply_and_check();
    eiso_cand_t ei, en;
    model(ei, en);
    @(posedge clk); #1;
    checks++;
    if (iso != ei || non != en) begin
      failures++;
      if (failures < 6) $display("got iso %0d@%0d non %0d@%0d exp iso %0d@%0d non %0d@%0d",
                                 iso.et, iso.pos, non.et, non.pos, ei.et, ei.pos, en.et, en.pos);
    end
    if (ei.et != 0) n_iso++;
    if (en.et != 0) n_non++;
  endtask

  task automatic clear();
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) win[i][j] = '0;
  endtask

  initial begin
    clear();
    repeat (2) @(posedge clk);
    rst_n = 1;
    // hand-made: isolated 40+10 at tower (2,3)
    @(negedge clk); clear(); win[2][3].et = 40; win[2][4].et = 10;
    apply_and_check();
    checks++; if (iso.et != 50 || iso.pos != 4'(1*4+2) || non.et != 0) failures++;
    // neighbour vetoed -> non-isolated
    @(negedge clk); win[3][3].veto = 1;
    apply_and_check();
    checks++; if (non.et != 50 || iso.et != 0) failures++;
    // centre vetoed -> the neighbour tower (2,4) becomes the best non-isolated: 10+40
    @(negedge clk); win[3][3].veto = 0; win[2][3].veto = 1;
    apply_and_check();
    checks++; if (non.et != 50 || non.pos != 4'(1*4+3)) begin failures++; $display("case 3: %0d@%0d", non.et, non.pos); end
    // random windows
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      iso_thr = 10'($urandom_range(0, 40));
      for (int i = 0; i < 6; i++)
        for (int j = 0; j < 6; j++) begin
          win[i][j].et   = ($urandom_range(0, 3) == 0) ? 7'($urandom) : 7'($urandom_range(0, 3));
          win[i][j].veto = ($urandom_range(0, 15) == 0);
        end
      apply_and_check();
    end
    $display("windows with isolated %0d, with non-isolated %0d", n_iso, n_non);
    checks++; if (n_iso < 10 || n_non < 10) failures++;
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

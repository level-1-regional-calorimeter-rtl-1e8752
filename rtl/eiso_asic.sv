// eiso_asic: electron/photon finder for one 4x4 trigger region.
//
// Input is the 6x6 tower window made of the region's 16 towers and the ring of
// towers around it, each a 7-bit ECAL ET with a veto bit (win[phi][eta], the
// region at [1..4][1..4]). A 3x3 window is centred on each of the 16 towers:
//   candidate ET = central ET + the largest of its four nearest neighbours
//                  (saturated at 7 bits);
//   a candidate needs a central tower with non-zero ET and a clear veto bit;
//   it is isolated when none of the eight neighbours has its veto bit set and
//   the ET of the eight neighbours, less the nearest neighbour already counted,
//   is at most iso_thr; otherwise it is non-isolated.
// Of the 16 windows the highest isolated and the highest non-isolated candidate
// are kept (ties go to the lower tower number, pos = phi*4+eta inside the region).
// A type with no candidate gives ET 0. Latency one clock.
//
// Published: 3x3 sliding window on every tower, veto bit and nearest-neighbour
// energies as inputs, one isolated and one non-isolated candidate per 4x4 region.
// This design's choice: the exact isolation rule and threshold, the saturation
// and the tie rule.
module eiso_asic
  import rct_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  eg_tower_t  win [6][6],
  input  logic [9:0] iso_thr,
  output eiso_cand_t iso,
  output eiso_cand_t noniso
);
  eiso_cand_t best_iso, best_non;

  always_comb begin
    best_iso = '0;
    best_non = '0;
    for (int i = 1; i <= 4; i++) begin
      for (int j = 1; j <= 4; j++) begin
        logic [6:0] nn;
        logic [7:0] s;
        logic [6:0] et;
        logic [9:0] ring;
        logic       nveto;
        nn = win[i-1][j].et;
        if (win[i+1][j].et > nn) nn = win[i+1][j].et;
        if (win[i][j-1].et > nn) nn = win[i][j-1].et;
        if (win[i][j+1].et > nn) nn = win[i][j+1].et;
        s  = 8'(win[i][j].et) + 8'(nn);
        et = s[7] ? 7'd127 : s[6:0];
        ring  = '0;
        nveto = 1'b0;
        for (int di = -1; di <= 1; di++)
          for (int dj = -1; dj <= 1; dj++)
            if (di != 0 || dj != 0) begin
              ring  = ring + 10'(win[i+di][j+dj].et);
              nveto = nveto | win[i+di][j+dj].veto;
            end
        ring = ring - 10'(nn);
        if (win[i][j].et != 0 && !win[i][j].veto) begin
          if (!nveto && ring <= iso_thr) begin
            if (et > best_iso.et) best_iso = '{et: et, pos: 4'((i-1)*4 + (j-1))};
          end else begin
            if (et > best_non.et) best_non = '{et: et, pos: 4'((i-1)*4 + (j-1))};
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iso    <= '0;
      noniso <= '0;
    end else begin
      iso    <= best_iso;
      noniso <= best_non;
    end
  end

endmodule

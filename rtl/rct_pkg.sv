// rct_pkg: types and constants shared by the regional calorimeter trigger crate.
//
// Everything in this design is computed once per LHC bunch crossing (25 ns); the
// clock of every module is that crossing clock. The physical transports (120 MHz
// link side, 160 MHz backplane, 80 MHz cables) move the same bits in several
// beats per crossing; here each bundle moves in one clock.
//
// Serial link word (24 bits per crossing per link, field list as published:
// two 8-bit energies, two characterization bits, one bunch-crossing bit, five
// bits of error detection). The bit order inside the word and the error code
// are this design's choice: a Hamming-style code whose five check bits are the
// XOR of the data bits whose (index+1) has the matching bit set, so that any
// single-bit error gives a non-zero syndrome.
package rct_pkg;

  // Crate organisation (Fig. 1 and Section 2)
  localparam int unsigned N_RC          = 7;   // Receiver / Electron Isolation cards per crate
  localparam int unsigned RC_LINKS      = 32;  // 8 mezzanines x 4 links
  localparam int unsigned RC_TOWERS     = 32;  // main towers per card (2 regions of 4x4)
  localparam int unsigned RC_REGIONS    = 2;
  localparam int unsigned TOW_PER_REG   = 16;
  localparam int unsigned EDGE_TOWERS   = 28;  // neighbour towers per EISO card
  localparam int unsigned CARD_PHI      = 8;   // card covers 8 towers in phi ...
  localparam int unsigned CARD_ETA      = 4;   // ... and 4 in eta (own choice of orientation)
  localparam int unsigned N_REGIONS     = N_RC * RC_REGIONS;  // 14
  localparam int unsigned HF_LINKS      = 4;
  localparam int unsigned HF_TOWERS     = 8;
  localparam int unsigned N_EG_OUT      = 4;   // top candidates of each type to the GCT
  localparam int unsigned CRATE_PHI     = CARD_PHI;            // 8
  localparam int unsigned CRATE_ETA     = N_RC * CARD_ETA;     // 28
  localparam int unsigned SHARE_TOWERS  = 2*(CRATE_ETA+2) + 2*CRATE_PHI; // ring: 76

  typedef struct packed {
    logic [4:0] ecc;   // [23:19]
    logic       bc0;   // [18]  bunch-crossing-zero marker
    logic [1:0] c;     // [17:16] characterization bit of tower 1 / tower 0
    logic [7:0] e1;    // [15:8]
    logic [7:0] e0;    // [7:0]
  } link_word_t;

  // one tower as it comes off a link: 8-bit energy and its characterization bit
  // (ECAL: fine-grain veto, HCAL: minimum-ionizing quality bit, HF: quality bit)
  typedef struct packed {
    logic       c;
    logic [7:0] e;
  } tower_raw_t;

  // tower as sent to the electron isolation card: 7-bit ECAL ET and a veto bit
  typedef struct packed {
    logic       veto;
    logic [6:0] et;
  } eg_tower_t;

  // 4x4 region summary from a Receiver Card
  typedef struct packed {
    logic       ovf;
    logic [9:0] et;
    logic       tau;   // tau veto: region has too many active towers
    logic       mip;   // OR of the 16 HCAL quality bits
  } region_t;

  // candidate inside the EISO ASIC: 7-bit energy and tower position in the region
  typedef struct packed {
    logic [6:0] et;
    logic [3:0] pos;
  } eiso_cand_t;

  // electron/photon candidate as sent on the backplane and to the GCT
  typedef struct packed {
    logic [5:0] rank;
    logic [2:0] card;
    logic       region;
  } eg_cand_t;

  // crate configuration write bus (stands in for the VME access of the real crate)
  // addr[18:15] card: 0..6 Receiver Card, 7..13 EISO card, 14 Jet/Summary card
  // addr[14]    0 = table entry, 1 = register
  // tables:     addr[13:0] table-specific; registers: addr[7:0] register number
  typedef struct packed {
    logic        we;
    logic [18:0] addr;
    logic [15:0] data;
  } cfg_t;

  localparam logic [3:0] CFG_JS = 4'd14;

  function automatic logic [4:0] ecc5(input logic [18:0] d);
    logic [4:0] p;
    p = '0;
    for (int j = 0; j < 19; j++)
      for (int i = 0; i < 5; i++)
        if ((((j + 1) >> i) & 1) != 0) p[i] ^= d[j];
    return p;
  endfunction

  function automatic link_word_t make_word(input logic [7:0] e0, input logic [7:0] e1,
                                           input logic [1:0] c, input logic bc0);
    link_word_t w;
    w.e0 = e0; w.e1 = e1; w.c = c; w.bc0 = bc0;
    w.ecc = ecc5({bc0, c, e1, e0});
    return w;
  endfunction

endpackage

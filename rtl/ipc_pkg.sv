// ipc_pkg: widths, constants and types shared by the displacement-vector (DV)
// search blocks.
//
// Coefficients are 32-bit sign-magnitude words, one per memory word. A
// precinct holds 2560x4 coefficients per colour component, split into four
// IPC Groups of 320x4, 320x4, 640x4 and 1280x4 coefficients; these sizes
// follow the paper. Every group is cut into NUM_UNITS IPC Units, and a unit of
// a group is a concatenation of band blocks whose lengths live in the TLB. The
// number of units (80) and the band-block lengths below are this design's
// choice: they reproduce the paper's group sizes (16, 16, 32 and 64
// coefficients per unit times 80 units) and its block counts per group (4, 2,
// 2, 2), but the paper does not print them.
package ipc_pkg;

  localparam int NG        = 4;        // IPC Groups
  localparam int GRP_W     = 2;        // group index width
  localparam int COEF_W    = 32;       // sign-magnitude coefficient
  localparam int MAG_W     = 32;       // residual magnitude (no overflow)
  localparam int RES_W     = MAG_W + 1;// residual {sign, magnitude}
  localparam int MAX_BANDS = 4;        // band blocks per unit, at most
  localparam int BAND_W    = 2;        // band index width
  localparam int LEN_W     = 16;       // TLB length field
  localparam int ADDR_W    = 32;       // word address
  localparam int UNIT_W    = 8;        // unit index width
  localparam int DV_W      = 8;        // signed DV (unit offset)
  localparam int BITS_W    = 24;       // bit-cost width
  localparam int GCLI_W    = 6;        // 0..32

  localparam int PREC_W    = 2560;     // precinct width
  localparam int PREC_H    = 4;        // precinct height
  localparam int PREC_WORDS = PREC_W * PREC_H;  // one component of a precinct

  localparam int NUM_UNITS_DEF = 80;

  typedef logic [LEN_W-1:0] len_t;
  typedef len_t [MAX_BANDS-1:0] band_len_t;      // one group's block lengths
  typedef band_len_t [NG-1:0] tlb_t;             // the whole TLB

  // Default block lengths of one unit, per group (zero = block absent).
  localparam tlb_t TLB_DEFAULT = '{
    '{16'd0,  16'd0,  16'd32, 16'd32},  // group 3: 64
    '{16'd0,  16'd0,  16'd16, 16'd16},  // group 2: 32
    '{16'd0,  16'd0,  16'd8,  16'd8 },  // group 1: 16
    '{16'd8,  16'd4,  16'd2,  16'd2 }   // group 0: 16
  };

  // Sum of the block lengths of one group: the IPC Unit length.
  function automatic len_t unit_len(band_len_t b);
    len_t s = '0;
    for (int i = 0; i < MAX_BANDS; i++) s += b[i];
    return s;
  endfunction

  // Read request from CTRL to CMD: which unit, and which FIFO it goes to.
  typedef struct packed {
    logic              is_recon;   // 0: query FIFO Qg, 1: candidate FIFO Cg
    logic [GRP_W-1:0]  grp;
    logic [UNIT_W-1:0] unit;
  } fetch_req_t;

  // Destination tag carried with read data.
  typedef struct packed {
    logic             is_recon;
    logic [GRP_W-1:0] grp;
  } dest_t;

  // Side information travelling with the residuals of one candidate.
  typedef struct packed {
    logic signed [DV_W-1:0] dv;
    logic [GRP_W-1:0]       grp;
    logic [UNIT_W-1:0]      unit;
    logic                   first;  // first candidate of this (group, unit)
    logic                   last;   // last candidate of this (group, unit)
  } dv_tag_t;

endpackage

// axo_pkg: types and constants shared by the AXOL1TL anomaly-detection trigger.
//
// The object counts (10 jets, 4 e/gamma, 4 muons, 1 missing-ET), the three
// coordinates per object (pT, eta, phi), the latent size of 8 and the five
// trigger seeds are the published algorithm's. Word widths, the configuration
// bus and its address map are this implementation's own choices.
//
// Configuration address map (16-bit word address, 32-bit data):
//   addr[15:12] = target   0,1,2 : encoder dense layers 1,2,3
//                          3     : seed thresholds
//   addr[11:0]  = index    in a dense layer: o*N_IN+i for weight W[o][i],
//                          N_IN*N_OUT+o for bias b[o];
//                          in the threshold bank: the seed number.
package axo_pkg;

  // ---- input objects --------------------------------------------------
  localparam int unsigned N_JET    = 10;
  localparam int unsigned N_EG     = 4;
  localparam int unsigned N_MU     = 4;
  localparam int unsigned N_MET    = 1;
  localparam int unsigned N_OBJ    = N_JET + N_EG + N_MU + N_MET;   // 19
  localparam int unsigned N_COORD  = 3;                             // pT, eta, phi
  localparam int unsigned N_IN     = N_OBJ * N_COORD;               // 57

  // Raw hardware coordinate fields, wide enough for every object type.
  localparam int unsigned PT_W  = 12;
  localparam int unsigned ETA_W = 9;
  localparam int unsigned PHI_W = 10;

  typedef struct packed {
    logic        [PT_W-1:0]  pt;    // unsigned transverse momentum count
    logic signed [ETA_W-1:0] eta;   // signed pseudorapidity index
    logic        [PHI_W-1:0] phi;   // unsigned azimuth index
  } l1_obj_t;

  // ---- network ----------------------------------------------------------
  localparam int unsigned N_LATENT = 8;
  localparam int unsigned H1       = 32;   // hidden layer widths
  localparam int unsigned H2       = 16;
  localparam int unsigned IN_W     = 13;   // signed feature word (holds 12-bit unsigned pT)
  localparam int unsigned W_W      = 8;    // signed weight, W_FRAC fractional bits
  localparam int unsigned W_FRAC   = 6;
  localparam int unsigned B_W      = 24;   // signed bias, on the accumulator scale
  localparam int unsigned ACT_W    = 14;   // signed activation / latent mean word
  localparam int unsigned SCORE_W  = 2*ACT_W + 2;  // holds 8 * (2^(ACT_W-1))^2

  // ---- trigger seeds ----------------------------------------------------
  localparam int unsigned N_SEEDS  = 5;
  typedef enum logic [2:0] {
    SEED_VERY_TIGHT = 3'd0,
    SEED_TIGHT      = 3'd1,
    SEED_NOMINAL    = 3'd2,
    SEED_LOOSE      = 3'd3,
    SEED_VERY_LOOSE = 3'd4
  } seed_e;

  // ---- configuration bus ------------------------------------------------
  localparam int unsigned CFG_AW = 16;
  localparam int unsigned CFG_DW = 32;
  localparam logic [3:0] TGT_L1  = 4'd0;
  localparam logic [3:0] TGT_L2  = 4'd1;
  localparam logic [3:0] TGT_L3  = 4'd2;
  localparam logic [3:0] TGT_THR = 4'd3;

  typedef struct packed {
    logic              we;
    logic [CFG_AW-1:0] addr;
    logic [CFG_DW-1:0] data;
  } cfg_wr_t;

endpackage

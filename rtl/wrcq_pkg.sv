// wrcq_pkg: constants and types shared by the weighted RCQ (W-RCQ) LDPC decoder.
//
// The defaults describe the main configuration: a 4-bit W-OMS-RCQ decoder with
// (b_c, b_v) = (4, 8), one quantizer/dequantizer pair and at most 10 layered
// iterations, for the rate-8/9 (9472,8192) quasi-cyclic LDPC code whose
// variable nodes all have degree 4 and whose check nodes have degree 29 or 30.
// The bit widths, the iteration count and the degrees follow the paper. The
// lifting factor Z = 256 and the 5 x 37 base matrix are this design's own
// reading of the code dimensions (9472 = 37*256, 1280 = 5*256); the paper does
// not print the parity-check matrix, so it is loaded at run time.
//
// Configuration words are written through one port. cfg_addr_t selects a table
// (cfg_table_e) and an index into it; the meaning of the data word per table is
// given next to each enum value.
package wrcq_pkg;

  localparam int unsigned Z_DEF      = 256;  // lifting factor (circulant size)
  localparam int unsigned MB_DEF     = 5;    // block rows = layers
  localparam int unsigned NB_DEF     = 37;   // block columns
  localparam int unsigned DC_MAX_DEF = 30;   // largest check-node degree
  localparam int unsigned IT_MAX_DEF = 10;   // maximum decoding iterations
  localparam int unsigned BC_DEF     = 4;    // b_c: C2V message bits
  localparam int unsigned BV_DEF     = 8;    // b_v: V2C / posterior bits
  localparam int unsigned NQ_DEF     = 3;    // quantizer/dequantizer pairs held
  localparam int unsigned NRC_DEF    = 2;    // check-degree classes (29, 30)
  localparam int unsigned NCC_DEF    = 1;    // variable-degree classes (4)

  localparam int unsigned CFG_IDX_W  = 13;

  typedef enum logic [2:0] {
    CFG_LAYER_DEG = 3'd0,  // index m          : data = number of circulants in layer m
    CFG_EDGE      = 3'd1,  // index m*DC_MAX+k : data[31:16] = block column, data[15:0] = shift
    CFG_ROW_CLASS = 3'd2,  // index m          : data = check-degree class of layer m
    CFG_COL_CLASS = 3'd3,  // index n          : data = variable-degree class of block column n
    CFG_WEIGHT    = 3'd4,  // index (s*NRC+rc)*NCC+cc : data = weight of set s (b_v bits)
    CFG_THRESH    = 3'd5,  // index q*2^(b_c-1)+j : data = threshold tau_j of pair q
    CFG_QSEL      = 3'd6,  // index t          : data = pair used in iteration t
    CFG_CTRL      = 3'd7   // index 0: data[0] = NMS mode, [15:8] = max iterations,
                           //          [23:16] = first iteration of the shared weight set,
                           //          [31:24] = layers in use (0 = all)
  } cfg_table_e;

  typedef struct packed {
    cfg_table_e             tbl;
    logic [CFG_IDX_W-1:0]   index;
  } cfg_addr_t;

  // Phase of the layer currently being processed.
  typedef enum logic [1:0] {
    PH_VC  = 2'd0,  // read posteriors, form V2C messages, run the check-node minimum
    PH_CV  = 2'd1,  // form new C2V messages, update the posteriors
    PH_SYN = 2'd2   // parity check of the hard decisions after an iteration
  } phase_e;

endpackage

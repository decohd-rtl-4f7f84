// decohd_pkg: types and constants shared by the DecoHD inference datapath.
//
// Numbers are IEEE-754-style floating point with a parameterisable layout
// (exponent EW bits, stored mantissa MW bits). Every datapath module takes
// EW/MW as parameters; the defaults here are binary32, the precision the
// method is evaluated in by default. The host load bus selects one of the
// four on-chip memories with a wr_target_e code. The sequencer either
// classifies a query (ENCODE, then PATH and SCORE per path, then RESULT) or
// materialises one channel from its latent (MATERIAL).
package decohd_pkg;

  localparam int unsigned FP_EW = 8;   // binary32 exponent width
  localparam int unsigned FP_MW = 23;  // binary32 stored mantissa width

  // Maximum channels per layer addressable by a path-select digit.
  localparam int unsigned SEL_W = 8;

  // Target memory of a host write.
  typedef enum logic [1:0] {
    TGT_FEATURE = 2'd0,  // input feature buffer x (address j)
    TGT_ENC_W   = 2'd1,  // encoder projection W_enc (address j*D + d)
    TGT_CHANNEL = 2'd2,  // channel bank, layer wr_layer (address l*D + d)
    TGT_HEAD    = 2'd3   // bundling head W (address c*M + m)
  } wr_target_e;

  // Sequencer states of the top level.
  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,
    ST_ENCODE = 3'd1,
    ST_PATH   = 3'd2,
    ST_SCORE  = 3'd3,
    ST_RESULT = 3'd4,
    ST_MATERIAL = 3'd5   // encoder output steered into the channel bank
  } state_e;

endpackage

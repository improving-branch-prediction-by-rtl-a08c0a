// cnn_pkg: constants and types shared by the ternary CNN helper predictor.
//
// The helper stores every weight and every Layer-1 response as a 2-bit
// ternary code {sign, value}. A value bit of 0 means 0; with the value bit
// set, sign 1 means +1 and sign 0 means -1 (codes 11, 01 and 00 of the
// Layer-1 table definition). The product of two codes is non-zero when
// both value bits are set, and positive when the sign bits are equal.
//
// Default sizes are those of the evaluated helper: 8-bit history index
// (7 IP bits plus the direction), 32 Layer-1 filters and a history of
// 200 branches. IP width, rollback depth and the upload port are choices
// of this design.
package cnn_pkg;

  parameter int unsigned P_BITS_DEF       = 8;    // index bits p
  parameter int unsigned NUM_FILTERS_DEF  = 32;   // Layer-1 filters m
  parameter int unsigned HIST_LEN_DEF     = 200;  // history length
  parameter int unsigned IP_W_DEF         = 64;   // instruction pointer width
  parameter int unsigned THRESH_W_DEF     = 64;   // threshold register width
  parameter int unsigned MAX_ROLLBACK_DEF = 32;   // wrong-path entries removable at once

  // Ternary 2-bit code, {sign, value}.
  typedef enum logic [1:0] {
    TERN_ZERO = 2'b00,
    TERN_NEG  = 2'b01,
    TERN_POS  = 2'b11
  } tern_e;

  // Targets of the helper upload port.
  typedef enum logic [1:0] {
    CFG_L1_ROW    = 2'd0,  // cfg_addr = table row, cfg_data[2m-1:0] = m codes
    CFG_L2_SLOT   = 2'd1,  // cfg_addr = history slot (0 = newest), cfg_data[2m-1:0]
    CFG_THRESHOLD = 2'd2,  // cfg_data[THRESH_W-1:0] = signed threshold t
    CFG_H2P_IP    = 2'd3   // cfg_data[IP_W-1:0] = IP of the H2P, enables the helper
  } cfg_target_e;

  // Signed value of a ternary code.
  function automatic int tern_value(logic [1:0] code);
    if (!code[0]) return 0;
    return code[1] ? 1 : -1;
  endfunction

endpackage

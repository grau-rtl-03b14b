// grau_pkg: types and constants shared by the GRAU activation unit.
//
// GRAU replaces "batch-norm + nonlinearity + re-quantisation" of a quantised
// neural network by a piecewise linear function of the integer MAC output.
// Each segment's slope is a power of two (PoT) or a sum of distinct powers
// of two (APoT), so the product is formed by a chain of 1-bit right shifters.
//
// This package holds the precision modes, the shifter-unit kind, and the
// configuration write bus through which thresholds (breakpoints), shifter
// encodings, biases and global settings are reloaded at run time.
// The bus layout and the register map are this design's own choice; the
// 17-bit (sign + 16 shifter bits) encoding follows the paper's encoding figure.
package grau_pkg;

  // Output precision. 1- and 2-bit outputs use the threshold (multi-threshold)
  // bypass; 4- and 8-bit outputs use the full piecewise-linear datapath.
  typedef enum logic [1:0] {
    PREC_1 = 2'd0,
    PREC_2 = 2'd1,
    PREC_4 = 2'd2,
    PREC_8 = 2'd3
  } prec_e;

  // Shifter unit kind: single power of two, or additive powers of two.
  typedef enum logic {
    SU_POT  = 1'b0,
    SU_APOT = 1'b1
  } su_kind_e;

  // What a configuration write addresses.
  //   CFG_THRESH  : threshold (breakpoint) idx, wdata = signed breakpoint
  //   CFG_SETTING : settings buffer entry idx, wdata[E] = sign, wdata[E-1:0] = shifter bits
  //   CFG_BIAS    : settings buffer entry idx, wdata = signed bias
  //   CFG_GLOBAL  : wdata[4:0] = pre-shift m, wdata[6:5] = precision, wdata[7] = signed output
  typedef enum logic [1:0] {
    CFG_THRESH  = 2'd0,
    CFG_SETTING = 2'd1,
    CFG_BIAS    = 2'd2,
    CFG_GLOBAL  = 2'd3
  } cfg_sel_e;

  localparam int CFG_DW   = 32;  // configuration data width
  localparam int CFG_IW   = 8;   // configuration index width
  localparam int PRE_W    = 5;   // width of the pre-shift amount m
  localparam int OUT_W    = 8;   // output width: the largest precision, 8 bits

  typedef struct packed {
    logic              we;
    cfg_sel_e          sel;
    logic [CFG_IW-1:0] idx;
    logic [CFG_DW-1:0] wdata;
  } cfg_wr_t;

  // Number of output bits of a precision mode.
  function automatic int unsigned prec_bits(prec_e p);
    return 1 << p;
  endfunction

endpackage

// fpmm_pkg -- types and constants shared by the multi-precision floating-point
// matrix multiplier.
//
// Every matrix element is an IEEE-754 double (1 sign, 11 exponent, 52 mantissa
// bits, bias 1023).  The run-time-reconfigurable multiplier takes the double
// with three precision-select bits prepended (a 67-bit word, bits 66..64).
// The mode codes and the mantissa width of each mode follow the paper's
// table of modes: 000 auto, 001 8-bit, 010 16-bit, 011 23-bit, 100 36-bit,
// 101 52-bit.  Codes 110 and 111 are not defined by the paper; this design
// treats them as a mode-select error.
package fpmm_pkg;

  localparam int unsigned EXP_W = 11;
  localparam int unsigned MAN_W = 52;
  localparam int unsigned FP_W  = 64;
  localparam int unsigned BIAS  = 1023;
  localparam int unsigned EXP_MAX = 2047;

  typedef struct packed {
    logic              sign;
    logic [EXP_W-1:0]  exp;
    logic [MAN_W-1:0]  man;
  } fp64_t;

  typedef enum logic [2:0] {
    MODE_AUTO = 3'b000,
    MODE_8    = 3'b001,
    MODE_16   = 3'b010,
    MODE_23   = 3'b011,
    MODE_36   = 3'b100,
    MODE_52   = 3'b101
  } mode_e;

  // Modified 67-bit operand format: precision-select bits on top of a double.
  typedef struct packed {
    logic [2:0] mode;
    fp64_t      val;
  } fp67_t;

  // Exception outputs of a floating-point product.
  typedef struct packed {
    logic zero;
    logic infinity;
    logic nan;
    logic denormal;
  } fp_flags_t;

  localparam fp64_t FP_QNAN = '{sign: 1'b0, exp: 11'h7FF, man: 52'h8_0000_0000_0000};

  // Mantissa bits kept by a resolved mode (001..101).
  function automatic int unsigned mode_man_bits(logic [2:0] m);
    case (m)
      MODE_8:  return 8;
      MODE_16: return 16;
      MODE_23: return 23;
      MODE_36: return 36;
      default: return 52;
    endcase
  endfunction

  // Exception classification of a double, as the paper defines the four
  // output flags (with the all-ones exponent standing for infinity/NaN).
  function automatic fp_flags_t classify(fp64_t x);
    fp_flags_t f;
    f.zero     = (x.exp == '0) && (x.man == '0);
    f.denormal = (x.exp == '0) && (x.man != '0);
    f.infinity = (x.exp == '1) && (x.man == '0);
    f.nan      = (x.exp == '1) && (x.man != '0);
    return f;
  endfunction

endpackage

// fp_pkg: types and constants shared by the FPADD/FPADDRE datapath.
//
// The unit is parameterised by the binary floating-point format (exponent
// width EXP_W, stored fraction width MAN_W); the defaults everywhere are IEEE
// binary64, the format the double-double and compensated algorithms use.
// The operation encodings below are this design's own choice.
package fp_pkg;

  // Operation executed by an adder lane. Both operations share the whole
  // datapath and differ only in which bits reach the result.
  typedef enum logic {
    OP_FPADD   = 1'b0,   // rounded sum, round to nearest even
    OP_FPADDRE = 1'b1    // round-off error of that sum: (a + b) - FPADD(a, b)
  } add_op_e;

  // Operation executed by a multiplier lane.
  typedef enum logic {
    OP_FPMUL   = 1'b0,   // rounded product, round to nearest even
    OP_FPMULRE = 1'b1    // round-off error of that product: a * b - FPMUL(a, b)
  } mul_op_e;

  // Default format: IEEE 754 binary64.
  localparam int unsigned DP_EXP_W = 11;
  localparam int unsigned DP_MAN_W = 52;

endpackage

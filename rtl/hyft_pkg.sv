// hyft_pkg: constants and types shared by the Hyft softmax accelerator.
//
// Defaults describe the half-precision configuration (FP16 in and out,
// 8-element vectors), which is the main configuration evaluated for the
// design. The full-precision configuration is obtained by overriding
// EXP_W/MAN_W with 8/23 on the top module.
//
// The opcode of the division/multiplication unit and the vector job mode
// are enumerations so that the control paths read as names, not bits.
package hyft_pkg;

  // Vector length and floating-point format (FP16: 5-bit exponent, 10-bit mantissa).
  localparam int unsigned N_DEF     = 8;
  localparam int unsigned EXP_W_DEF = 5;
  localparam int unsigned MAN_W_DEF = 10;

  // Fixed-point format of z and z_max: signed, FXI integer bits (sign included)
  // and at most FXF fraction bits. The runtime Precision input selects how
  // many of the FXF fraction bits are kept.
  localparam int unsigned FXI_DEF = 8;
  localparam int unsigned FXF_DEF = 10;

  // Fixed-point format of e^{z'} inside the adder tree: 1 integer bit, at
  // most ACCF fraction bits (runtime selectable).
  localparam int unsigned ACCF_DEF = 16;

  // Comparators fed per cycle by the data buffer during the max search.
  localparam int unsigned CMP_DEF = 4;

  // Operation of the division/multiplication unit (the Ctrl input).
  typedef enum logic {
    OP_DIV = 1'b0,   // A / B  (forward propagation)
    OP_MUL = 1'b1    // A * B  (backward propagation, s s^T)
  } divmul_op_e;

  // Kind of vector job flowing through the three-stage vector pipeline.
  typedef enum logic {
    MODE_FWD = 1'b0, // softmax of the input vector
    MODE_BWD = 1'b1  // products s_i*s_j of the input vector (s s^T), row by row
  } job_mode_e;

endpackage

// svm_pkg: types and constants shared by the SVM classifier IP.
//
// The classifier works entirely in IEEE-754 single precision, so the package
// defines the float word type, its fields, a few constant encodings and the
// AXI4-Lite register map of the control bus. The register map follows the
// layout that high-level-synthesis tools usually give a block-level
// start/done interface; the paper only says that an AXI-Lite control bus
// starts the IP and returns its result, so the offsets are this design's
// choice.
package svm_pkg;

  // Single-precision float word and its fields.
  typedef logic [31:0] fp32_t;

  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [22:0] frac;
  } fp32_fields_t;

  localparam fp32_t FP32_POS_ZERO = 32'h0000_0000;
  localparam fp32_t FP32_QNAN     = 32'h7FC0_0000;

  // Class labels returned by the IP (Eq. 4 of the decision function).
  localparam logic signed [31:0] CLASS_MELANOMA     = 32'sd1;
  localparam logic signed [31:0] CLASS_NON_MELANOMA = -32'sd1;

  // AXI4-Lite control register map (byte offsets).
  localparam int unsigned CTRL_ADDR_W   = 6;
  localparam logic [5:0]  REG_CTRL      = 6'h00; // [0] start (W1S), [1] done (RC), [2] idle, [3] ready
  localparam logic [5:0]  REG_RETURN    = 6'h10; // class: +1 or -1 (two's complement)
  localparam logic [5:0]  REG_THRESHOLD = 6'h18; // th, float, read/write
  localparam logic [5:0]  REG_DISTANCE  = 6'h20; // D - b, float, read only

  // AXI response codes used by the control bus.
  localparam logic [1:0] AXI_RESP_OKAY   = 2'b00;

  // Phases of the compute core, in the order of the pseudo code.
  typedef enum logic [2:0] {
    PH_IDLE,     // waiting for start
    PH_LOAD,     // stream loader filling the arrays
    PH_CLEAR,    // clear array_AC
    PH_ACCUM,    // AC[f] += ay[sv] * SVs[sv][f]    (Eq. 2)
    PH_DOT,      // D += AC[f] * test[f]            (Eq. 3)
    PH_SUB_B,    // D - b
    PH_DECIDE,   // compare with th                  (Eq. 4)
    PH_DONE      // result valid, report done
  } phase_e;

endpackage

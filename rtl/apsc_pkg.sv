// apsc_pkg: types and constants shared by the phase-stabilization controller.
//
// The controller selects one of 128 interferometer delay paths with a 7-bit
// number (one bit per fibre delay gate) and drives a phase-modulator DAC with
// a 16-bit offset-binary code. The 128 paths and the 23 calibration steps per
// path follow the paper; the code width, the Q1.15 fraction format and the
// table-entry layout are this design's own choices.
package apsc_pkg;

  localparam int unsigned N_PATHS  = 128;          // selectable delay paths
  localparam int unsigned PATH_W   = 7;            // one bit per delay gate
  localparam int unsigned DAC_W    = 16;           // PM DAC code width
  localparam int unsigned FRAC_W   = 16;           // Q1.15 unsigned, 1.0 = 32768
  localparam int unsigned N_STEPS  = 23;           // calibration steps per path
  localparam int unsigned N_FIXED  = 4;            // fixed steps for the LS fit
  localparam int unsigned N_COARSE = 9;            // preliminary calibration
  localparam int unsigned N_FINE   = 8;            // secondary calibration

  typedef logic [PATH_W-1:0] path_t;
  typedef logic [DAC_W-1:0]  code_t;
  typedef logic [FRAC_W-1:0] frac_t;

  localparam code_t DAC_MID = code_t'(1 << (DAC_W - 1));  // 0 V

  // One reference-table entry: the compensation code found for a path and
  // the port-1 fraction measured when it was applied again at step 23.
  typedef struct packed {
    frac_t check_frac;
    code_t code;
  } ref_entry_t;

  // Frame stage inside each second.
  typedef enum logic {
    STAGE_PREP = 1'b0,
    STAGE_QKD  = 1'b1
  } stage_e;

  // Add a signed offset to a DAC code, saturating at the ends of the range.
  function automatic code_t code_add(code_t c, int signed ofs);
    int signed s;
    s = int'({1'b0, c}) + ofs;
    if (s < 0) return '0;
    if (s > int'((1 << DAC_W) - 1)) return '1;
    return code_t'(s);
  endfunction

endpackage

// impact_pkg: types and electrical constants shared by the IMPACT inference engine.
//
// The Y-Flash crossbars are analog; the design represents their quantities as integers:
// conductance in picosiemens (pS) and current in picoamperes (pA). A cell read at the
// reading voltage V_R = 2 V carries I = G * V_R. The constants below are the device
// levels used for the two crossbar tiles: Boolean mode in the clause tile (include = HCS
// above 2.4 uS, exclude = LCS below 1 nS) and the 1 nS .. 2.5 uS analog range of the
// class tile. The CSA decision point of 4.1 uA is kept here too. All of these numbers
// follow the published device characterisation; the integer units are this design's.
package impact_pkg;

  localparam int unsigned VR_VOLTS      = 2;          // reading voltage V_R
  localparam int unsigned G_LCS_MAX_PS  = 1_000;      // exclude / LCS: below 1 nS
  localparam int unsigned G_HCS_MIN_PS  = 2_400_000;  // include / HCS: above 2.4 uS
  localparam int unsigned G_ERASED_PS   = 2_500_000;  // fully erased cell, about 2.5 uS
  localparam int unsigned G_SAT_PS      = 2_600_000;  // erase saturation of the cell model
  localparam int unsigned G_FLOOR_PS    = 100;        // program saturation of the cell model
  localparam int unsigned G_RANGE_MIN_PS = 1_000;     // class tile: lowest weight, 1 nS
  localparam int unsigned G_RANGE_MAX_PS = 2_500_000; // class tile: highest weight, 2.5 uS
  localparam longint unsigned CSA_TRIP_PA = 64'd4_100_000; // 4.1 uA clause decision point

  localparam int unsigned AW = 16;  // width of a row or column address on the pulse bus
  localparam int unsigned IW = 48;  // width of a current in pA

  typedef logic [IW-1:0] current_t;  // pA
  typedef logic [31:0]   cond_t;     // pS

  // Program lowers a cell's conductance, erase raises it.
  typedef enum logic { OP_PROGRAM = 1'b0, OP_ERASE = 1'b1 } pulse_op_t;

  // Pulse widths used by the two programming flows: 1 ms for TA actions,
  // 500 us for weight pre-tuning, 50 us for weight fine-tuning.
  typedef enum logic [1:0] { PW_1MS = 2'd0, PW_500US = 2'd1, PW_50US = 2'd2 } pulse_width_t;

  // One program or erase pulse aimed at a single cell.
  typedef struct packed {
    logic         valid;
    pulse_op_t    op;
    pulse_width_t width;
    logic [AW-1:0] row;
    logic [AW-1:0] col;
  } pulse_cmd_t;

  localparam pulse_cmd_t PULSE_IDLE = '{valid: 1'b0, op: OP_PROGRAM, width: PW_1MS, row: '0, col: '0};

  // Current drawn by one cell of conductance g at V_R.
  function automatic current_t cell_current(cond_t g);
    return current_t'(g) * current_t'(VR_VOLTS);
  endfunction

endpackage

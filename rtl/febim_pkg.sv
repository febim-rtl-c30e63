// febim_pkg: types and constants shared by the FeBiM Bayesian inference engine.
//
// The engine stores a naive-Bayes model as multi-level FeFET states in a
// crossbar: one row (wordline, WL) per event/class, one column (bitline, BL)
// for the prior and m columns for each of the n evidence nodes. Inference
// activates one column per evidence node and the WL currents add up the
// stored log-probabilities; a winner-take-all circuit picks the largest.
//
// Conventions used by every module of the design:
//  * Currents are integers in units of 0.1 uA. The mapping of Sec. III-C puts
//    the quantized, normalised log-probabilities on I_DS values from 0.1 uA
//    to 1.0 uA, i.e. 1..10 units. An erased cell (high V_TH) counts as 0.
//  * A level code q in 0..LEVELS-1 maps linearly onto that range:
//    units(q) = 1 + q*9/(LEVELS-1). For 4 levels (2-bit likelihoods) this
//    gives 0.1/0.4/0.7/1.0 uA, the four values printed on the scale of the
//    programmed iris array; for 10 levels it gives every 0.1 uA step.
//  * The number of V_w program pulses that sets a cell to a given current
//    (after a full erase) comes from PULSES_FOR_UNITS below. The paper shows
//    this relation only as a plot whose axis spans 40 to 70 pulses, with
//    log(I_DS) rising linearly in the pulse count; the table is this design's
//    own fit, pulses(u) = 40 + round(30*log10(u)), not numbers from the paper.
package febim_pkg;

  // Drive levels a bitline (the gates of one column) can be put at.
  //  BL_GND   : 0 V, idle / unselected column during a write
  //  BL_OFF   : V_off = -0.5 V, inhibits a cell during inference
  //  BL_ON    : V_on  = +0.5 V, activates a cell during inference
  //  BL_PROG  : V_w   = +4 V program pulse
  //  BL_ERASE : negative full-erase pulse (amplitude not given in the paper)
  typedef enum logic [2:0] {
    BL_GND   = 3'd0,
    BL_OFF   = 3'd1,
    BL_ON    = 3'd2,
    BL_PROG  = 3'd3,
    BL_ERASE = 3'd4
  } bl_drive_t;

  // Bias of one row's WL and ScL.
  //  ROW_GND   : WL and ScL grounded (idle, or the target row of a write)
  //  ROW_HALF  : WL and ScL at V_w/2 (write inhibit of unselected rows)
  //  ROW_SENSE : WL connected to its current mirror, ScL grounded (inference)
  typedef enum logic [1:0] {
    ROW_GND   = 2'd0,
    ROW_HALF  = 2'd1,
    ROW_SENSE = 2'd2
  } row_drive_t;

  // Operation requested on the command port.
  typedef enum logic {
    OP_WRITE = 1'b0,
    OP_INFER = 1'b1
  } op_t;

  // Mode the array is put in for one clock cycle.
  typedef enum logic [1:0] {
    MODE_IDLE  = 2'd0,
    MODE_WRITE = 2'd1,
    MODE_INFER = 2'd2
  } array_mode_t;

  // Largest cell current in 0.1 uA units (1.0 uA).
  localparam int unsigned IDS_MAX_UNITS = 10;

  // Width of a per-cell pulse counter: enough for the largest table entry.
  localparam int unsigned PULSE_W = 7;

  // Current (0.1 uA units) of level code q out of `levels` levels.
  function automatic int unsigned level_to_units(int unsigned q, int unsigned levels);
    if (levels < 2) return IDS_MAX_UNITS;
    return 1 + (q * (IDS_MAX_UNITS - 1)) / (levels - 1);
  endfunction

  // Program pulses after a full erase that set a cell to `units` x 0.1 uA.
  function automatic int unsigned pulses_for_units(int unsigned units);
    case (units)
      1:       return 40;
      2:       return 49;
      3:       return 54;
      4:       return 58;
      5:       return 61;
      6:       return 63;
      7:       return 65;
      8:       return 67;
      9:       return 69;
      default: return 70;
    endcase
  endfunction

  // Inverse of pulses_for_units: the current state reached after `pulses`
  // program pulses (0 = still erased, below 0.1 uA).
  function automatic int unsigned units_for_pulses(int unsigned pulses);
    int unsigned u;
    u = 0;
    for (int unsigned k = 1; k <= IDS_MAX_UNITS; k++)
      if (pulses >= pulses_for_units(k)) u = k;
    return u;
  endfunction

endpackage

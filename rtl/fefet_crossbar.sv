// fefet_crossbar: behavioural model of the FeBiM FeFET crossbar array.
// This is a behavioural model of an analog array, not synthesizable logic
// meant for silicon.
//
// What it models. NUM_ROWS rows (one per event/class) by COLS columns: an
// optional prior column followed by NUM_EVID likelihood blocks of
// EVID_LEVELS columns each. In every row the FeFET drains share the wordline
// WL and the sources the sourceline ScL; in every column the gates share the
// bitline BL. Each cell stores a quantized, normalised log-probability as a
// FeFET current state (see fefet_cell). During inference the currents of the
// activated cells of a row add up on its WL, so
//   iwl[r] = sum over activated columns c of I_DS[r][c],
// which is the log-domain posterior log P(A_r) + sum_i log P(B_i|A_r) up to
// the linear mapping of the probabilities onto currents.
//
// Interface and timing. bl_drv and row_drv are the bitline and row biases
// applied by the write/input buffer and the row driver; writes take effect on
// the rising clk edge at which a pulse is first seen, iwl is combinational
// (the analog settling time is far below one clock period). Currents are in
// 0.1 uA units. Column/row organisation, cell type and current summation
// follow the paper; the integer current scale is this model's abstraction.
module fefet_crossbar
  import febim_pkg::*;
#(
  parameter int unsigned NUM_ROWS    = 3,
  parameter int unsigned NUM_EVID    = 4,
  parameter int unsigned EVID_LEVELS = 16,
  parameter bit          HAS_PRIOR   = 1'b0,
  localparam int unsigned COLS   = (HAS_PRIOR ? 1 : 0) + NUM_EVID * EVID_LEVELS,
  localparam int unsigned CELL_W = $clog2(IDS_MAX_UNITS + 1),
  localparam int unsigned IWL_W  = $clog2(COLS * IDS_MAX_UNITS + 1)
) (
  input  logic                                  clk,
  input  bl_drive_t  [COLS-1:0]                 bl_drv,
  input  row_drive_t [NUM_ROWS-1:0]             row_drv,
  output logic       [NUM_ROWS-1:0][IWL_W-1:0]  iwl
);

  logic [NUM_ROWS-1:0][COLS-1:0][CELL_W-1:0] ids;

  for (genvar r = 0; r < NUM_ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      fefet_cell u_cell (
        .clk      (clk),
        .gate     (bl_drv[c]),
        .row      (row_drv[r]),
        .ids_units(ids[r][c])
      );
    end
  end

  always_comb begin
    for (int unsigned r = 0; r < NUM_ROWS; r++) begin
      iwl[r] = '0;
      for (int unsigned c = 0; c < COLS; c++)
        iwl[r] = iwl[r] + IWL_W'(ids[r][c]);
    end
  end

  // A program or erase pulse must never reach a row that is being sensed.
  for (genvar r = 0; r < NUM_ROWS; r++) begin : g_chk
    for (genvar c = 0; c < COLS; c++) begin : g_chk_c
      a_no_write_while_sense : assert property (@(posedge clk)
        row_drv[r] == ROW_SENSE |-> !(bl_drv[c] inside {BL_PROG, BL_ERASE}))
        else $error("write pulse on a sensed row");
    end
  end

endmodule

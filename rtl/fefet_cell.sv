// fefet_cell: behavioural model of one multi-level 1-FeFET crossbar cell.
// This is a behavioural model of an analog device, not synthesizable logic
// meant for silicon.
//
// What it models. A FeFET is a MOSFET with a ferroelectric layer in its gate
// stack. A negative gate pulse fully erases it (high V_TH, essentially no
// current); each following positive V_w pulse switches part of the
// polarization and lowers V_TH a little, so the number of pulses after an
// erase selects one of several read currents. The model keeps the number of
// program pulses seen since the last erase and turns it into a read current
// with febim_pkg::units_for_pulses (0.1 uA units, 0 = erased).
//
// A pulse is counted only when the cell's row is grounded (the selected row
// of a write); a row at V_w/2 is inhibited and keeps its state, which is the
// half-bias scheme of the paper. A pulse is counted once, on the first clock
// edge at which the gate is seen at V_w, however many cycles it lasts.
// When read (row at ROW_SENSE and gate at V_on) the cell adds its current to
// the wordline; at V_off it is cut off and adds nothing.
//
// Interface and timing. gate and row are sampled on the rising edge of clk,
// which stands in for the pulse timing of the driver; ids_units is
// combinational. The state is non-volatile and starts erased. Device
// variation is not modelled.
module fefet_cell
  import febim_pkg::*;
(
  input  logic                            clk,
  input  bl_drive_t                       gate,
  input  row_drive_t                      row,
  output logic [$clog2(IDS_MAX_UNITS+1)-1:0] ids_units
);

  // A fresh device starts erased.
  logic [PULSE_W-1:0] pulses        = '0;
  logic               gate_was_prog = 1'b0;

  always @(posedge clk) begin
    gate_was_prog <= (gate == BL_PROG);
    if (row == ROW_GND) begin
      if (gate == BL_ERASE)
        pulses <= '0;
      else if (gate == BL_PROG && !gate_was_prog && pulses != '1)
        pulses <= pulses + 1'b1;
    end
  end

  assign ids_units = (row == ROW_SENSE && gate == BL_ON)
                   ? ($clog2(IDS_MAX_UNITS+1))'(units_for_pulses(32'(pulses)))
                   : '0;

endmodule

// row_driver: wordline / sourceline bias of every crossbar row.
//
// Each row of the FeBiM array has a wordline (WL, the FeFET drains) and a
// sourceline (ScL, the sources). The row driver sets both, once per clock
// cycle, from the mode and row chosen by the write/input buffer:
//  * MODE_WRITE : the target row has WL and ScL grounded; every other row
//                 has WL and ScL at V_w/2, so a V_w pulse on a shared bitline
//                 sees only half the voltage across their cells (the
//                 half-bias write-inhibit scheme of the paper).
//  * MODE_INFER : every WL is connected to its current mirror so the WL
//                 current reaches the WTA circuit; ScLs are grounded.
//  * MODE_IDLE  : every WL and ScL is grounded.
//
// Interface and timing. row_mode/row_sel are sampled on the rising edge of
// clk and row_drv holds the result for the following cycle, the same cycle in
// which the bitline drives registered by the buffer on that edge are applied.
// The grounded/half-bias write scheme and the sense connection follow the
// paper; the idle state and the registered timing are this design's choices.
module row_driver
  import febim_pkg::*;
#(
  parameter int unsigned NUM_ROWS = 3,
  localparam int unsigned ROW_W   = (NUM_ROWS > 1) ? $clog2(NUM_ROWS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  array_mode_t                 row_mode,
  input  logic [ROW_W-1:0]            row_sel,
  output row_drive_t [NUM_ROWS-1:0]   row_drv
);

  row_drive_t [NUM_ROWS-1:0] row_d;

  always_comb begin
    for (int unsigned r = 0; r < NUM_ROWS; r++) begin
      unique case (row_mode)
        MODE_WRITE: row_d[r] = (ROW_W'(r) == row_sel) ? ROW_GND : ROW_HALF;
        MODE_INFER: row_d[r] = ROW_SENSE;
        default:    row_d[r] = ROW_GND;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) row_drv <= {NUM_ROWS{ROW_GND}};
    else        row_drv <= row_d;
  end

endmodule

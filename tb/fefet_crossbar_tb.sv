// fefet_crossbar_tb: self-checking test of the FeFET crossbar model.
// The testbench plays the part of the bitline and row drivers. It programs
// every cell of a small array (with a prior column) to a random current state
// using erase + pulse trains, with the other rows at half bias, and then:
//  * reads each column alone and checks every wordline current against the
//    intended cell current (this also shows that half-biased rows kept their
//    state while their neighbours were written),
//  * activates random column sets and checks the sums on all wordlines,
//  * checks that a pulse held for several cycles counts once, that a cell
//    with too few pulses stays erased (0) and that V_off cuts a cell off.
// Pulse counts per current come from the testbench's own copy of the
// design's pulse table. Prints one TB_RESULT line.
module fefet_crossbar_tb;
  import febim_pkg::*;

  localparam int unsigned NR = 3, NE = 2, M = 3;
  localparam bit HP = 1'b1;
  localparam int unsigned COLS = 1 + NE * M;
  localparam int unsigned IW = $clog2(COLS * 10 + 1);

  logic clk = 1'b0;
  bl_drive_t  [COLS-1:0] bl;
  row_drive_t [NR-1:0]   rows;
  logic [NR-1:0][IW-1:0] iwl;
  int checks = 0, failures = 0;
  int unsigned want [NR][COLS];

  // Independent copy of the pulse table (0.1 uA units 1..10).
  int unsigned ptab [1:10] = '{40, 49, 54, 58, 61, 63, 65, 67, 69, 70};

  fefet_crossbar #(.NUM_ROWS(NR), .NUM_EVID(NE), .EVID_LEVELS(M), .HAS_PRIOR(HP))
    dut (.clk(clk), .bl_drv(bl), .row_drv(rows), .iwl(iwl));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cyc(); @(negedge clk); endtask

  task automatic idle();
    bl = {COLS{BL_GND}}; rows = {NR{ROW_GND}};
  endtask

  // Erase then n pulses of width pw on cell (r,c); other rows at V_w/2.
  task automatic program_cell(int r, int c, int n, int pw);
    for (int i = 0; i < NR; i++) rows[i] = (i == r) ? ROW_GND : ROW_HALF;
    bl = {COLS{BL_GND}}; bl[c] = BL_ERASE; cyc();
    bl[c] = BL_GND; cyc();
    for (int p = 0; p < n; p++) begin
      bl[c] = BL_PROG; repeat (pw) cyc();
      bl[c] = BL_GND;  cyc();
    end
    idle(); cyc();
  endtask

  task automatic read_cols(logic [COLS-1:0] act);
    for (int c = 0; c < COLS; c++) bl[c] = act[c] ? BL_ON : BL_OFF;
    rows = {NR{ROW_SENSE}};
    #1;
    for (int r = 0; r < NR; r++) begin
      int unsigned e = 0;
      for (int c = 0; c < COLS; c++) if (act[c]) e += want[r][c];
      checks++;
      if (iwl[r] != IW'(e)) begin
        failures++;
        if (failures < 10) $display("row %0d cols %b: got %0d exp %0d", r, act, iwl[r], e);
      end
    end
    cyc(); idle(); cyc();
  endtask

  initial begin
    idle();
    repeat (2) cyc();
    // fresh array is erased
    for (int r = 0; r < NR; r++) for (int c = 0; c < COLS; c++) want[r][c] = 0;
    read_cols('1);
    // program every cell, random order of rows, random states
    for (int pass = 0; pass < 2; pass++) begin
      for (int k = 0; k < NR * COLS; k++) begin
        int r, c;
        int unsigned u;
        r = (k * 2 + pass) % NR;
        c = k % COLS;
        u = $urandom_range(10, 1);
        program_cell(r, c, ptab[u], (k % 4 == 0) ? 3 : 1);
        want[r][c] = u;
      end
      for (int c = 0; c < COLS; c++) read_cols(COLS'(1) << c);
      for (int t = 0; t < 50; t++) read_cols(COLS'($urandom));
    end
    // too few pulses: the cell stays below the lowest state
    program_cell(1, 2, 39, 1); want[1][2] = 0;
    read_cols(COLS'(1) << 2);
    // pulses between two table entries: the lower state is reached
    program_cell(0, 3, 56, 1); want[0][3] = 3;
    read_cols(COLS'(1) << 3);
    // all V_off: nothing conducts
    begin
      logic [COLS-1:0] none = '0;
      read_cols(none);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

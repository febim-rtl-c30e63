// write_input_buffer_tb: self-checking test of the bitline driver / write
// sequencer, with a prior column, 4 levels and 2-cycle pulses.
//  * Inference: random evidence vectors issued back to back, one per cycle;
//    after each accepting edge the bitlines must show V_on on the prior column
//    and on the selected column of each block, V_off elsewhere, with wta_en
//    high and the row mode "infer" handed to the row driver.
//  * Write: random cells and levels. The bitline trace of the whole write is
//    compared with erase / gap / N x (pulse / gap), every slot PULSE_CYCLES
//    long, on the target column only; N comes from the testbench's own pulse
//    table. The write length, cmd_ready staying low, the row handed to the row
//    driver and the write_done pulse are checked as well.
//  * Stall: an inference held valid during a write must be taken only once
//    the write has finished.
// Prints one TB_RESULT line.
module write_input_buffer_tb;
  import febim_pkg::*;

  localparam int unsigned NR = 3, NE = 2, M = 4, L = 4, PC = 2;
  localparam bit HP = 1'b1;
  localparam int unsigned COLS = 1 + NE * M;
  localparam int unsigned RW = 2, CW = $clog2(COLS), EW = 2, LW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready;
  op_t  cmd_op;
  logic [RW-1:0] cmd_row;
  logic [CW-1:0] cmd_col;
  logic [LW-1:0] cmd_level;
  logic [NE-1:0][EW-1:0] cmd_ev;
  bl_drive_t [COLS-1:0] bl;
  array_mode_t rmode;
  logic [RW-1:0] rsel;
  logic wta_en, wdone;
  int checks = 0, failures = 0;
  int n_infer = 0, n_write = 0, n_stall = 0;

  int unsigned ptab [1:10] = '{40, 49, 54, 58, 61, 63, 65, 67, 69, 70};

  write_input_buffer #(.NUM_ROWS(NR), .NUM_EVID(NE), .EVID_LEVELS(M), .NUM_LEVELS(L),
                       .HAS_PRIOR(HP), .PULSE_CYCLES(PC)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op),
    .cmd_row(cmd_row), .cmd_col(cmd_col), .cmd_level(cmd_level), .cmd_evidence(cmd_ev),
    .bl_drv(bl), .row_mode(rmode), .row_sel(rsel), .wta_en(wta_en), .write_done(wdone));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%0t FAIL: %s", $time, what);
    end
  endtask

  function automatic bl_drive_t [COLS-1:0] infer_exp(logic [NE-1:0][EW-1:0] ev);
    bl_drive_t [COLS-1:0] p;
    p[0] = BL_ON;
    for (int i = 0; i < NE; i++)
      for (int v = 0; v < M; v++)
        p[1 + i * M + v] = (int'(ev[i]) == v) ? BL_ON : BL_OFF;
    return p;
  endfunction

  task automatic do_infer(logic [NE-1:0][EW-1:0] ev);
    cmd_valid = 1'b1; cmd_op = OP_INFER; cmd_ev = ev;
    #1;
    chk(cmd_ready, "ready for inference");
    chk(rmode == MODE_INFER, "row mode infer");
    @(posedge clk); #1;
    chk(bl == infer_exp(ev), $sformatf("inference pattern %p", bl));
    chk(wta_en, "wta_en with inference");
    n_infer++;
  endtask

  task automatic do_write(int r, int c, int q, bit stall);
    int n, slots, cyc;
    bl_drive_t e;
    n = ptab[1 + q * 9 / (L - 1)];
    slots = 2 * (n + 1);
    cmd_valid = 1'b1; cmd_op = OP_WRITE;
    cmd_row = RW'(r); cmd_col = CW'(c); cmd_level = LW'(q);
    #1; chk(cmd_ready && rmode == MODE_WRITE && int'(rsel) == r, "write accepted");
    @(posedge clk); #1;
    if (stall) begin
      // hold an inference command valid during the whole write
      cmd_op = OP_INFER; cmd_ev = '0;
    end else cmd_valid = 1'b0;
    cyc = 0;
    for (int s = 0; s < slots; s++) begin
      e = (s == 0) ? BL_ERASE : (s % 2 == 1) ? BL_GND : BL_PROG;
      for (int k = 0; k < PC; k++) begin
        bit ok = 1'b1;
        for (int cc = 0; cc < COLS; cc++)
          if (bl[cc] != ((cc == c) ? e : BL_GND)) ok = 1'b0;
        chk(ok, $sformatf("write slot %0d cycle %0d", s, k));
        chk(!cmd_ready && !wta_en && !wdone, "busy during write");
        if (!(s == slots - 1 && k == PC - 1))
          chk(rmode == MODE_WRITE && int'(rsel) == r, "row kept during write");
        @(posedge clk); #1; cyc++;
        if (stall && s < slots - 1) begin
          chk(!wta_en, "stalled inference not taken"); n_stall++;
        end
      end
    end
    chk(cyc == slots * PC, "write length");
    chk(wdone, "write_done after write");
    chk(bl == {COLS{BL_GND}} && cmd_ready, "bitlines idle after write");
    if (stall) begin
      // the held inference is taken on the first edge after the write
      @(posedge clk); #1;
      chk(wta_en && bl == infer_exp('0), "stalled inference taken after write");
      cmd_valid = 1'b0;
    end
    n_write++;
  endtask

  initial begin
    cmd_valid = 1'b0; cmd_op = OP_INFER; cmd_row = '0; cmd_col = '0; cmd_level = '0; cmd_ev = '0;
    repeat (2) @(posedge clk);
    #1; chk(bl == {COLS{BL_GND}} && !wta_en, "reset state");
    @(negedge clk); rst_n = 1'b1;
    @(negedge clk);
    // back-to-back inferences
    for (int i = 0; i < 200; i++) do_infer({EW'($urandom), EW'($urandom)});
    cmd_valid = 1'b0;
    @(posedge clk); #1;
    chk(!wta_en && bl == {COLS{BL_GND}}, "idle after inferences");
    // writes of every level
    for (int i = 0; i < 12; i++) begin
      @(negedge clk);
      do_write($urandom_range(NR - 1), $urandom_range(COLS - 1), i % L, i % 3 == 2);
    end
    @(negedge clk);
    do_infer({EW'(3), EW'(1)});
    cmd_valid = 1'b0;
    $display("inferences %0d, writes %0d, stalled cycles %0d", n_infer, n_write, n_stall);
    chk(n_stall > 0, "stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

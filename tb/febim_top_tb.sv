// febim_top_tb: end-to-end test of the FeBiM engine at reduced size
// (4 events, 2 evidence nodes of 4 values, a prior column, 10 current levels).
// It programs every cell through the command port, then runs inferences and
// checks, for each one, the wordline currents against the sum of the intended
// cell currents and the registered result against a reference arg-max (lower
// index on a tie), one cycle after the command was taken. It counts the
// mechanisms of the design and fails if one never happened:
//   writes, rewrites of an already programmed cell (erase before program),
//   inference commands stalled by a write, back-to-back inferences (one per
//   cycle), WTA ties, and inferences where the prior column changed the
//   winner. Write lengths (2*(pulses+1) cycles) are checked too.
// Prints one TB_RESULT line.
module febim_top_tb;
  import febim_pkg::*;

  localparam int unsigned NR = 4, NE = 2, M = 4, L = 10;
  localparam bit HP = 1'b1;
  localparam int unsigned COLS = 1 + NE * M;
  localparam int unsigned RW = 2, CW = $clog2(COLS), EW = 2, LW = $clog2(L);
  localparam int unsigned IW = $clog2(COLS * 10 + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, wdone, res_valid;
  op_t  cmd_op;
  logic [RW-1:0] cmd_row, res_class;
  logic [CW-1:0] cmd_col;
  logic [LW-1:0] cmd_level;
  logic [NE-1:0][EW-1:0] cmd_ev;
  logic [NR-1:0] res_onehot;
  logic [NR-1:0][IW-1:0] iwl;

  int checks = 0, failures = 0;
  int n_write = 0, n_rewrite = 0, n_stall = 0, n_b2b = 0, n_tie = 0, n_prior = 0, n_infer = 0;
  int unsigned lvl [NR][COLS];
  bit written [NR][COLS];
  int unsigned ptab [1:10] = '{40, 49, 54, 58, 61, 63, 65, 67, 69, 70};

  febim_top #(.NUM_ROWS(NR), .NUM_EVID(NE), .EVID_LEVELS(M), .NUM_LEVELS(L), .HAS_PRIOR(HP)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op),
    .cmd_row(cmd_row), .cmd_col(cmd_col), .cmd_level(cmd_level), .cmd_evidence(cmd_ev),
    .write_done(wdone), .res_valid(res_valid), .res_onehot(res_onehot), .res_class(res_class),
    .iwl(iwl));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  function automatic int unsigned units(int unsigned q);
    return 1 + q * 9 / (L - 1);
  endfunction

  // Program one cell; optionally keep an inference command waiting meanwhile.
  task automatic write_cell(int r, int c, int q, bit stall);
    int n, cyc;
    n = ptab[units(q)];
    @(negedge clk);
    if (written[r][c]) n_rewrite++;
    cmd_valid = 1'b1; cmd_op = OP_WRITE; cmd_row = RW'(r); cmd_col = CW'(c); cmd_level = LW'(q);
    #1; chk(cmd_ready, "ready for write");
    @(posedge clk); #1;
    if (stall) begin cmd_op = OP_INFER; cmd_ev = '0; end
    else cmd_valid = 1'b0;
    cyc = 1;
    while (!wdone) begin
      if (stall) begin chk(!cmd_ready, "stalled while writing"); n_stall++; end
      @(posedge clk); #1; cyc++;
      if (cyc > 400) break;
    end
    chk(cyc == 2 * (n + 1) + 1, $sformatf("write length %0d for %0d pulses", cyc, n));
    lvl[r][c] = q; written[r][c] = 1'b1; n_write++;
    if (stall) begin
      @(posedge clk); #1;     // the held inference is now taken
      cmd_valid = 1'b0;
      @(posedge clk); #1;
      chk(res_valid, "result of the stalled inference");
    end
  endtask

  function automatic int unsigned row_sum(int r, logic [NE-1:0][EW-1:0] ev, bit with_prior);
    int unsigned s = with_prior ? units(lvl[r][0]) : 0;
    for (int i = 0; i < NE; i++) s += units(lvl[r][1 + i * M + int'(ev[i])]);
    return s;
  endfunction

  function automatic int best_row(logic [NE-1:0][EW-1:0] ev, bit with_prior, output bit tie);
    int b = 0;
    tie = 1'b0;
    for (int r = 1; r < NR; r++)
      if (row_sum(r, ev, with_prior) > row_sum(b, ev, with_prior)) b = r;
    for (int r = 0; r < NR; r++)
      if (r != b && row_sum(r, ev, with_prior) == row_sum(b, ev, with_prior)) tie = 1'b1;
    return b;
  endfunction

  // Issue a burst of inferences, one per cycle, and check every result.
  task automatic infer_burst(int count);
    logic [NE-1:0][EW-1:0] ev_q [$];
    @(negedge clk);
    for (int i = 0; i <= count; i++) begin
      if (i < count) begin
        logic [NE-1:0][EW-1:0] ev;
        for (int k = 0; k < NE; k++) ev[k] = EW'($urandom);
        cmd_valid = 1'b1; cmd_op = OP_INFER; cmd_ev = ev;
        ev_q.push_back(ev);
        #1; chk(cmd_ready, "ready for inference");
      end else cmd_valid = 1'b0;
      @(posedge clk); #1;
      // the array now evaluates the command taken at this edge
      if (i < count) begin
        logic [NE-1:0][EW-1:0] ev = ev_q[$];
        for (int r = 0; r < NR; r++)
          chk(iwl[r] == IW'(row_sum(r, ev, 1'b1)), $sformatf("iwl[%0d]=%0d exp %0d", r, iwl[r], row_sum(r, ev, 1'b1)));
        if (i > 0) n_b2b++;
      end
      // the result of the previous command is registered
      if (i > 0) begin
        logic [NE-1:0][EW-1:0] ev = ev_q.pop_front();
        bit tie, tie2;
        int b = best_row(ev, 1'b1, tie);
        int b2 = best_row(ev, 1'b0, tie2);
        chk(res_valid && int'(res_class) == b && res_onehot == NR'(1 << b),
            $sformatf("class %0d exp %0d", res_class, b));
        if (tie) n_tie++;
        if (b2 != b) n_prior++;
        n_infer++;
      end else chk(!res_valid, "no result before the first inference");
      @(negedge clk);
    end
  endtask

  initial begin
    cmd_valid = 1'b0; cmd_op = OP_INFER; cmd_row = '0; cmd_col = '0; cmd_level = '0; cmd_ev = '0;
    for (int r = 0; r < NR; r++) for (int c = 0; c < COLS; c++) written[r][c] = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    // program the whole array; a strong prior on some rows so it matters
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < COLS; c++)
        write_cell(r, c, (c == 0) ? ((r == 1) ? L - 1 : 0) : $urandom_range(L - 1), (r * COLS + c) % 7 == 3);
    infer_burst(60);
    // reprogram some cells, also with low-resolution levels to provoke ties
    for (int k = 0; k < 12; k++)
      write_cell($urandom_range(NR - 1), 1 + $urandom_range(COLS - 2), $urandom_range(1), k % 4 == 0);
    for (int r = 0; r < NR; r++) write_cell(r, 1, 0, 1'b0);
    infer_burst(60);
    $display("writes %0d rewrites %0d stalled-cycles %0d inferences %0d back-to-back %0d ties %0d prior-decided %0d",
             n_write, n_rewrite, n_stall, n_infer, n_b2b, n_tie, n_prior);
    chk(n_write > 0, "writes happened");
    chk(n_rewrite > 0, "rewrites happened");
    chk(n_stall > 0, "stalls happened");
    chk(n_b2b > 0, "back-to-back inferences happened");
    chk(n_tie > 0, "ties happened");
    chk(n_prior > 0, "prior decided at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// febim_scale_run: drives one febim_top instance configured as a plain
// R x C array with every column its own one-value evidence block
// (EVID_LEVELS = 1), the arrangement of the scaling study in which all
// bitlines are switched on together. Evidence code 0 switches a column on and
// code 1 switches it off.
// It programs every cell to a random level (10 levels) over the command port,
// then runs inferences: first with all bitlines on, then with random subsets,
// issued back to back. Every WL current and every result is compared with
// sums and an arg-max worked out from the intended levels. done rises when it
// has finished; checks/failures count its comparisons.
module febim_scale_run #(
  parameter int unsigned R = 2,
  parameter int unsigned C = 8,
  parameter int unsigned N_INF = 40
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import febim_pkg::*;

  localparam int unsigned L  = 10;
  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1;
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned IW = $clog2(C * 10 + 1);

  logic rst_n;
  logic cmd_valid, cmd_ready, wdone, res_valid;
  op_t  cmd_op;
  logic [RW-1:0] cmd_row, res_class;
  logic [CW-1:0] cmd_col;
  logic [3:0] cmd_level;
  logic [C-1:0][0:0] cmd_ev;
  logic [R-1:0] res_onehot;
  logic [R-1:0][IW-1:0] iwl;
  int unsigned lvl [R][C];

  febim_top #(.NUM_ROWS(R), .NUM_EVID(C), .EVID_LEVELS(1), .NUM_LEVELS(L)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op),
    .cmd_row(cmd_row), .cmd_col(cmd_col), .cmd_level(cmd_level), .cmd_evidence(cmd_ev),
    .write_done(wdone), .res_valid(res_valid), .res_onehot(res_onehot), .res_class(res_class),
    .iwl(iwl));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%0dx%0d %0t FAIL: %s", R, C, $time, what);
    end
  endtask

  function automatic int unsigned row_sum(int r, logic [C-1:0][0:0] ev);
    int unsigned s;
    s = 0;
    for (int c = 0; c < C; c++) if (ev[c] == 1'b0) s += lvl[r][c] + 1;
    return s;
  endfunction

  function automatic int best(logic [C-1:0][0:0] ev);
    int b;
    b = 0;
    for (int r = 1; r < R; r++) if (row_sum(r, ev) > row_sum(b, ev)) b = r;
    return b;
  endfunction

  initial begin
    logic [C-1:0][0:0] evq [$];
    logic [C-1:0][0:0] ev;
    int e;
    done = 1'b0; checks = 0; failures = 0;
    rst_n = 1'b0; cmd_valid = 1'b0; cmd_op = OP_INFER;
    cmd_row = '0; cmd_col = '0; cmd_level = '0; cmd_ev = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        lvl[r][c] = $urandom_range(L - 1);
        @(negedge clk);
        cmd_valid = 1'b1; cmd_op = OP_WRITE; cmd_row = RW'(r); cmd_col = CW'(c);
        cmd_level = 4'(lvl[r][c]);
        @(posedge clk); #1;
        cmd_valid = 1'b0;
        while (!wdone) begin @(posedge clk); #1; end
      end
    @(negedge clk);
    for (int t = 0; t <= N_INF; t++) begin
      if (t < N_INF) begin
        if (t < 2) ev = '0;                       // all bitlines on
        else for (int c = 0; c < C; c++) ev[c] = 1'($urandom);
        cmd_valid = 1'b1; cmd_op = OP_INFER; cmd_ev = ev;
        evq.push_back(ev);
      end else cmd_valid = 1'b0;
      @(posedge clk); #1;
      if (t < N_INF)
        for (int r = 0; r < R; r++)
          chk(iwl[r] == IW'(row_sum(r, ev)), $sformatf("iwl[%0d] %0d exp %0d", r, iwl[r], row_sum(r, ev)));
      if (t > 0) begin
        ev = evq.pop_front();
        e = best(ev);
        chk(res_valid && int'(res_class) == e && res_onehot == R'(1) << e,
            $sformatf("class %0d exp %0d", res_class, e));
      end
      @(negedge clk);
    end
    done = 1'b1;
  end
endmodule

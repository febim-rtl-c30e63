// febim_top: the FeBiM in-memory Bayesian inference engine.
//
// What it does. A naive-Bayes model (k events, n evidence nodes each
// quantized to m values) is stored as multi-level FeFET currents in a
// k x (prior + n*m) crossbar. One inference applies the quantized evidence,
// lets each wordline add up log P(A) + sum_i log P(B_i|A) as a current, and a
// winner-take-all circuit marks the event with the largest current: the
// maximum a-posteriori event. The result comes back as a one-hot vector and
// as an event index.
//
// How it is built (the block structure of the paper's array figure):
//   write_input_buffer -> bitline drives ----+
//          | mode/row                        v
//          +---------> row_driver ----> fefet_crossbar --iwl--> wta_circuit
//                                                                 | winner
//                                         result register <-------+
// The current mirrors between the wordlines and the WTA inputs copy the
// current 1:1 in this model; the wordline currents are also brought out on
// the iwl port. The clock comes from outside (the clock circuitry of the chip
// is not modelled).
//
// Interface and timing.
//  * Write: cmd_op = OP_WRITE with cmd_row, cmd_col, cmd_level. The cell is
//    erased and then programmed with the pulse train of its level; cmd_ready
//    is low meanwhile, and write_done pulses when the write has finished
//    (2*(pulses+1)*PULSE_CYCLES cycles after acceptance).
//  * Inference: cmd_op = OP_INFER with cmd_evidence (one code per evidence
//    node). The array evaluates in the cycle after acceptance and the result
//    is registered at the end of that cycle: res_valid, res_onehot and
//    res_class appear one cycle after the command was taken, and a new
//    inference may be issued every cycle (one clock cycle per inference, as
//    in the paper's comparison table).
// The array organisation, biasing, mapping and WTA sensing follow the paper;
// the command port, result register and handshake are this design's own.
// The crossbar and WTA are behavioural models of analog circuits, so this
// top is a simulation model of the whole engine rather than a netlist for
// silicon; the buffer and row driver are synthesizable.
module febim_top
  import febim_pkg::*;
#(
  parameter int unsigned NUM_ROWS     = 3,   // k: events (3 iris classes)
  parameter int unsigned NUM_EVID     = 4,   // n: evidence nodes (4 iris features)
  parameter int unsigned EVID_LEVELS  = 16,  // m: Q_f = 4 bit
  parameter int unsigned NUM_LEVELS   = 4,   // Q_l = 2 bit
  parameter bit          HAS_PRIOR    = 1'b0,// iris: uniform prior, column omitted
  parameter int unsigned PULSE_CYCLES = 1,
  localparam int unsigned COLS  = (HAS_PRIOR ? 1 : 0) + NUM_EVID * EVID_LEVELS,
  localparam int unsigned ROW_W = (NUM_ROWS > 1) ? $clog2(NUM_ROWS) : 1,
  localparam int unsigned COL_W = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned EV_W  = (EVID_LEVELS > 1) ? $clog2(EVID_LEVELS) : 1,
  localparam int unsigned LVL_W = (NUM_LEVELS > 1) ? $clog2(NUM_LEVELS) : 1,
  localparam int unsigned IWL_W = $clog2(COLS * IDS_MAX_UNITS + 1)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              cmd_valid,
  output logic                              cmd_ready,
  input  op_t                               cmd_op,
  input  logic [ROW_W-1:0]                  cmd_row,
  input  logic [COL_W-1:0]                  cmd_col,
  input  logic [LVL_W-1:0]                  cmd_level,
  input  logic [NUM_EVID-1:0][EV_W-1:0]     cmd_evidence,
  output logic                              write_done,
  output logic                              res_valid,
  output logic [NUM_ROWS-1:0]               res_onehot,
  output logic [ROW_W-1:0]                  res_class,
  output logic [NUM_ROWS-1:0][IWL_W-1:0]    iwl
);

  bl_drive_t  [COLS-1:0]     bl_drv;
  row_drive_t [NUM_ROWS-1:0] row_drv;
  array_mode_t               row_mode;
  logic [ROW_W-1:0]          row_sel;
  logic                      wta_en;
  logic [NUM_ROWS-1:0]       winner;
  logic [ROW_W-1:0]          winner_idx;

  write_input_buffer #(
    .NUM_ROWS    (NUM_ROWS),
    .NUM_EVID    (NUM_EVID),
    .EVID_LEVELS (EVID_LEVELS),
    .NUM_LEVELS  (NUM_LEVELS),
    .HAS_PRIOR   (HAS_PRIOR),
    .PULSE_CYCLES(PULSE_CYCLES)
  ) u_buffer (
    .clk         (clk),
    .rst_n       (rst_n),
    .cmd_valid   (cmd_valid),
    .cmd_ready   (cmd_ready),
    .cmd_op      (cmd_op),
    .cmd_row     (cmd_row),
    .cmd_col     (cmd_col),
    .cmd_level   (cmd_level),
    .cmd_evidence(cmd_evidence),
    .bl_drv      (bl_drv),
    .row_mode    (row_mode),
    .row_sel     (row_sel),
    .wta_en      (wta_en),
    .write_done  (write_done)
  );

  row_driver #(.NUM_ROWS(NUM_ROWS)) u_rows (
    .clk     (clk),
    .rst_n   (rst_n),
    .row_mode(row_mode),
    .row_sel (row_sel),
    .row_drv (row_drv)
  );

  fefet_crossbar #(
    .NUM_ROWS   (NUM_ROWS),
    .NUM_EVID   (NUM_EVID),
    .EVID_LEVELS(EVID_LEVELS),
    .HAS_PRIOR  (HAS_PRIOR)
  ) u_array (
    .clk    (clk),
    .bl_drv (bl_drv),
    .row_drv(row_drv),
    .iwl    (iwl)
  );

  wta_circuit #(.NUM_ROWS(NUM_ROWS), .IWL_W(IWL_W)) u_wta (
    .en    (wta_en),
    .icm   (iwl),
    .winner(winner)
  );

  // One-hot to index of the winning event.
  always_comb begin
    winner_idx = '0;
    for (int unsigned r = 0; r < NUM_ROWS; r++)
      if (winner[r]) winner_idx = ROW_W'(r);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid  <= 1'b0;
      res_onehot <= '0;
      res_class  <= '0;
    end else begin
      res_valid <= wta_en;
      if (wta_en) begin
        res_onehot <= winner;
        res_class  <= winner_idx;
      end
    end
  end

endmodule

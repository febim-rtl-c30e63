// write_input_buffer: bitline drivers and write sequencer of the FeBiM array.
//
// What it does. The buffer owns every bitline (BL, the common gate line of
// one crossbar column) and decides, one clock cycle at a time, what the array
// is doing:
//  * Inference. The quantized evidence values arrive on cmd_evidence, one
//    code per evidence node. The buffer puts V_on on the prior column (when
//    the array has one) and on the single column of each likelihood block
//    that matches the evidence code, and V_off on every other column. The
//    array thus sums log P(A) + sum_i log P(B_i=b_i|A) on each wordline in
//    that same cycle, and wta_en is raised so the winner-take-all stage
//    resolves it. A new inference can be accepted every cycle.
//  * Write. One cell (row, column) is programmed to a level code. Following
//    the FeFET multi-level write of the paper, the target column first gets
//    one negative full-erase pulse and then N positive V_w pulses, N taken
//    from febim_pkg::pulses_for_units for the level's current. Every pulse
//    lasts PULSE_CYCLES clock cycles and is followed by a gap of the same
//    length at 0 V, so a write takes 2*(N+1)*PULSE_CYCLES cycles. All other
//    columns stay at 0 V. The row to program and the mode are handed to the
//    row driver (row_mode/row_sel are the values for the next cycle; the row
//    driver registers them on the same edge on which bl_drv is registered).
//
// Interface. Commands use a valid/ready handshake: a command is taken on a
// rising clk edge with cmd_valid and cmd_ready both high; cmd_ready is low
// while a write is in progress and the requester must then hold the command.
// write_done pulses for one cycle when a write has finished.
//
// Paper vs. this design. The paper gives the bias levels (V_on = 0.5 V,
// V_off = -0.5 V, V_w = 4 V), the one-column-per-block activation, the prior
// column, and the erase-then-pulse-train write. The command port, the
// handshake, the pulse/gap timing, the idle state (all BLs at 0 V) and the
// pulse-count table are this design's own choices.
module write_input_buffer
  import febim_pkg::*;
#(
  parameter int unsigned NUM_ROWS     = 3,   // k: events (wordlines)
  parameter int unsigned NUM_EVID     = 4,   // n: evidence nodes
  parameter int unsigned EVID_LEVELS  = 16,  // m: levels per evidence (Q_f = 4 bit)
  parameter int unsigned NUM_LEVELS   = 4,   // probability levels (Q_l = 2 bit)
  parameter bit          HAS_PRIOR    = 1'b0,
  parameter int unsigned PULSE_CYCLES = 1,
  localparam int unsigned COLS  = (HAS_PRIOR ? 1 : 0) + NUM_EVID * EVID_LEVELS,
  localparam int unsigned ROW_W = (NUM_ROWS > 1) ? $clog2(NUM_ROWS) : 1,
  localparam int unsigned COL_W = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned EV_W  = (EVID_LEVELS > 1) ? $clog2(EVID_LEVELS) : 1,
  localparam int unsigned LVL_W = (NUM_LEVELS > 1) ? $clog2(NUM_LEVELS) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // command port
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  op_t                            cmd_op,
  input  logic [ROW_W-1:0]               cmd_row,
  input  logic [COL_W-1:0]               cmd_col,
  input  logic [LVL_W-1:0]               cmd_level,
  input  logic [NUM_EVID-1:0][EV_W-1:0]  cmd_evidence,
  // to the array
  output bl_drive_t [COLS-1:0]           bl_drv,
  // to the row driver (next-cycle values)
  output array_mode_t                    row_mode,
  output logic [ROW_W-1:0]               row_sel,
  // to the WTA
  output logic                           wta_en,
  output logic                           write_done
);

  localparam int unsigned PRI   = HAS_PRIOR ? 1 : 0;
  localparam int unsigned SLOT_W = 8;   // 2*(70+1) slots at most
  localparam int unsigned SUB_W  = (PULSE_CYCLES > 1) ? $clog2(PULSE_CYCLES) : 1;

  typedef enum logic {S_IDLE, S_WRITE} state_t;

  state_t               state_q, state_d;
  logic [SLOT_W-1:0]    slot_q, slot_d, last_slot_q, last_slot_d;
  logic [SUB_W-1:0]     sub_q, sub_d;
  logic [COL_W-1:0]     col_q, col_d;
  logic [ROW_W-1:0]     row_q, row_d;
  bl_drive_t [COLS-1:0] bl_d, infer_pat;
  logic                 wta_d, done_d;

  // Inference pattern: V_on on the prior column and on the selected column
  // of every likelihood block, V_off elsewhere.
  for (genvar c = 0; c < COLS; c++) begin : g_pat
    if (HAS_PRIOR && c == 0) begin : g_prior
      assign infer_pat[c] = BL_ON;
    end else begin : g_lik
      localparam int unsigned BLK = (c - PRI) / EVID_LEVELS;
      localparam int unsigned VAL = (c - PRI) % EVID_LEVELS;
      assign infer_pat[c] = (cmd_evidence[BLK] == EV_W'(VAL)) ? BL_ON : BL_OFF;
    end
  end

  // Drive of the target column in write slot s: erase, gap, pulse, gap, ...
  function automatic bl_drive_t slot_drive(logic [SLOT_W-1:0] s);
    if (s == '0)  return BL_ERASE;
    if (s[0])     return BL_GND;
    return BL_PROG;
  endfunction

  function automatic bl_drive_t [COLS-1:0] write_pat(logic [COL_W-1:0] col, bl_drive_t d);
    bl_drive_t [COLS-1:0] p;
    for (int unsigned c = 0; c < COLS; c++)
      p[c] = (COL_W'(c) == col) ? d : BL_GND;
    return p;
  endfunction

  always_comb begin
    state_d     = state_q;
    slot_d      = slot_q;
    sub_d       = sub_q;
    col_d       = col_q;
    row_d       = row_q;
    last_slot_d = last_slot_q;
    bl_d        = {COLS{BL_GND}};
    row_mode    = MODE_IDLE;
    wta_d       = 1'b0;
    done_d      = 1'b0;
    cmd_ready   = (state_q == S_IDLE);

    unique case (state_q)
      S_IDLE: begin
        if (cmd_valid) begin
          if (cmd_op == OP_INFER) begin
            bl_d     = infer_pat;
            row_mode = MODE_INFER;
            wta_d    = 1'b1;
          end else begin
            state_d     = S_WRITE;
            slot_d      = '0;
            sub_d       = '0;
            col_d       = cmd_col;
            row_d       = cmd_row;
            last_slot_d = SLOT_W'(2 * pulses_for_units(level_to_units(32'(cmd_level), NUM_LEVELS)) + 1);
            bl_d        = write_pat(cmd_col, BL_ERASE);
            row_mode    = MODE_WRITE;
          end
        end
      end
      S_WRITE: begin
        row_mode = MODE_WRITE;
        if (sub_q == SUB_W'(PULSE_CYCLES - 1)) begin
          if (slot_q == last_slot_q) begin
            state_d  = S_IDLE;
            row_mode = MODE_IDLE;
            done_d   = 1'b1;
          end else begin
            slot_d = slot_q + 1'b1;
            sub_d  = '0;
            bl_d   = write_pat(col_q, slot_drive(slot_q + 1'b1));
          end
        end else begin
          sub_d = sub_q + 1'b1;
          bl_d  = write_pat(col_q, slot_drive(slot_q));
        end
      end
      default: state_d = S_IDLE;
    endcase
  end

  assign row_sel = row_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      slot_q      <= '0;
      sub_q       <= '0;
      col_q       <= '0;
      row_q       <= '0;
      last_slot_q <= '0;
      bl_drv      <= {COLS{BL_GND}};
      wta_en      <= 1'b0;
      write_done  <= 1'b0;
    end else begin
      state_q     <= state_d;
      slot_q      <= slot_d;
      sub_q       <= sub_d;
      col_q       <= col_d;
      row_q       <= row_d;
      last_slot_q <= last_slot_d;
      bl_drv      <= bl_d;
      wta_en      <= wta_d;
      write_done  <= done_d;
    end
  end

  // Handshake rule: a command that is not taken stays valid.
  a_hold_valid : assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid)
    else $error("cmd_valid dropped before the command was accepted");

  // A write must address a row and column that exist.
  a_write_addr : assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready && cmd_op == OP_WRITE |->
      (32'(cmd_row) < NUM_ROWS) && (32'(cmd_col) < COLS))
    else $error("write to a row or column outside the array");

endmodule

// row_driver_tb: self-checking test of the row driver.
// Drives random mode/row pairs for many cycles and checks, one cycle later,
// that in a write the selected row is grounded and every other row is at half
// bias, that in an inference every row is sensed, and that idle grounds all
// rows. Also checks the reset state. Prints one TB_RESULT line.
module row_driver_tb;
  import febim_pkg::*;

  localparam int unsigned NR = 5;
  localparam int unsigned RW = $clog2(NR);

  logic clk = 1'b0, rst_n = 1'b0;
  array_mode_t mode;
  logic [RW-1:0] sel;
  row_drive_t [NR-1:0] drv;
  int checks = 0, failures = 0;

  row_driver #(.NUM_ROWS(NR)) dut (.clk(clk), .rst_n(rst_n), .row_mode(mode), .row_sel(sel), .row_drv(drv));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    array_mode_t m_prev;
    logic [RW-1:0] s_prev;
    mode = MODE_IDLE; sel = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (drv != {NR{ROW_GND}}) begin failures++; $display("reset state wrong"); end
    rst_n = 1'b1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      case ($urandom_range(2))
        0: mode = MODE_IDLE;
        1: mode = MODE_WRITE;
        default: mode = MODE_INFER;
      endcase
      sel = RW'($urandom_range(NR - 1));
      m_prev = mode; s_prev = sel;
      @(posedge clk); #1;
      for (int r = 0; r < NR; r++) begin
        row_drive_t exp;
        if (m_prev == MODE_WRITE) exp = (r == int'(s_prev)) ? ROW_GND : ROW_HALF;
        else if (m_prev == MODE_INFER) exp = ROW_SENSE;
        else exp = ROW_GND;
        checks++;
        if (drv[r] != exp) begin
          failures++;
          if (failures < 10) $display("row %0d mode %0d sel %0d: got %0d exp %0d", r, m_prev, s_prev, drv[r], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// wta_circuit_tb: self-checking test of the winner-take-all model.
// Applies random current vectors, including close races (neighbouring values
// differing by one unit) and exact ties, and compares the one-hot output with
// a reference arg-max (lowest index on a tie). With the enable low the output
// must be all zero. Prints one TB_RESULT line.
module wta_circuit_tb;
  localparam int unsigned NR = 6;
  localparam int unsigned W  = 10;

  logic en;
  logic [NR-1:0][W-1:0] icm;
  logic [NR-1:0] win;
  int checks = 0, failures = 0;
  int ties = 0, close = 0;

  wta_circuit #(.NUM_ROWS(NR), .IWL_W(W)) dut (.en(en), .icm(icm), .winner(win));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic e);
    int best; logic [NR-1:0] exp;
    best = 0;
    for (int r = 1; r < NR; r++) if (icm[r] > icm[best]) best = r;
    exp = '0;
    if (e) exp[best] = 1'b1;
    en = e; #1;
    checks++;
    if (win !== exp) begin
      failures++;
      if (failures < 10) $display("en=%0b icm=%p got %b exp %b", e, icm, win, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int mode, a, b;
      mode = i % 3;
      a = $urandom_range(NR - 1);
      b = (a + 1 + $urandom_range(NR - 2)) % NR;
      for (int r = 0; r < NR; r++) icm[r] = W'($urandom_range(1000));
      if (mode == 1) begin      // close race between two rows
        icm[a] = 10'd1010; icm[b] = 10'd1009; close++;
      end else if (mode == 2) begin  // exact tie at the top
        icm[a] = 10'd1015; icm[b] = 10'd1015; ties++;
      end
      check(1'b1);
      if (i % 10 == 0) check(1'b0);
    end
    checks++;
    if (ties == 0 || close == 0) failures++;
    $display("close races %0d, ties %0d", close, ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

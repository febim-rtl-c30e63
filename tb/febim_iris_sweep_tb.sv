// febim_iris_sweep_tb: the iris classifier at every combination of feature
// precision Q_f = 1..4 bit and likelihood precision Q_l = 1..3 bit (Q_l is
// limited by the ten steps of the 0.1 uA current grid), plus Q_f = 5 and
// 6 bit at the chosen Q_l = 2 bit, where the array grows to 3 x 128 and
// 3 x 256 cells. All fourteen points run in parallel, each on its own engine
// (febim_iris_run), and classify the same 150 samples. Every decision is checked against the reference arg-max; the
// accuracies are printed as a table for comparison with the floating-point
// classifier. Prints one TB_RESULT line.
module febim_iris_sweep_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned NQF = 4, NQL = 3, NHI = 2, NRUN = NQF * NQL + NHI;
  logic [NRUN-1:0] done;
  int ch [NRUN];
  int fl [NRUN];
  int ok [NRUN];
  int sw [NRUN];

  for (genvar f = 0; f < NQF; f++) begin : g_qf
    for (genvar l = 0; l < NQL; l++) begin : g_ql
      febim_iris_run #(.QF(f + 1), .QL(l + 1)) run (
        .clk(clk), .done(done[f * NQL + l]), .checks(ch[f * NQL + l]),
        .failures(fl[f * NQL + l]), .correct(ok[f * NQL + l]), .sw_correct(sw[f * NQL + l]));
    end
  end
  for (genvar h = 0; h < NHI; h++) begin : g_hi
    febim_iris_run #(.QF(NQF + 1 + h), .QL(2)) run (
      .clk(clk), .done(done[NQF * NQL + h]), .checks(ch[NQF * NQL + h]),
      .failures(fl[NQF * NQL + h]), .correct(ok[NQF * NQL + h]), .sw_correct(sw[NQF * NQL + h]));
  end

  initial begin
    int checks, failures;
    fork
      wait (&done);
      begin
        repeat (2000000) @(posedge clk);
        $display("watchdog expired");
      end
    join_any
    disable fork;
    checks = 0;
    failures = (&done) ? 0 : 1;
    $display("accuracy out of 150 (floating-point classifier: %0d)", sw[0]);
    $display("          Q_l=1  Q_l=2  Q_l=3");
    for (int f = 0; f < NQF; f++) begin
      $display("Q_f=%0d     %4d   %4d   %4d", f + 1, ok[f * NQL], ok[f * NQL + 1], ok[f * NQL + 2]);
      for (int l = 0; l < NQL; l++) begin
        checks += ch[f * NQL + l] + 1;
        failures += fl[f * NQL + l];
        // same seed everywhere: the floating-point reference must agree
        if (sw[f * NQL + l] != sw[0]) begin
          failures++;
          $display("FAIL: Q_f=%0d Q_l=%0d saw other samples", f + 1, l + 1);
        end
      end
    end
    for (int h = 0; h < NHI; h++) begin
      $display("Q_f=%0d            %4d", NQF + 1 + h, ok[NQF * NQL + h]);
      checks += ch[NQF * NQL + h] + 1;
      failures += fl[NQF * NQL + h];
      if (sw[NQF * NQL + h] != sw[0]) begin
        failures++;
        $display("FAIL: Q_f=%0d saw other samples", NQF + 1 + h);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

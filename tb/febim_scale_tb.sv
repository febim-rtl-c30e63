// febim_scale_tb: the two largest arrays of the paper's scaling study,
// 2 rows x 256 columns and 32 rows x 32 columns, with all bitlines active,
// programmed and checked in parallel by two febim_scale_run drivers.
// Delay and energy, which that study measures, are analog quantities and are
// not modelled; this test shows that the engine works at those sizes.
// Prints one TB_RESULT line.
module febim_scale_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic done_a, done_b;
  int ca, fa, cb, fb;

  febim_scale_run #(.R(2),  .C(256)) run_wide (.clk(clk), .done(done_a), .checks(ca), .failures(fa));
  febim_scale_run #(.R(32), .C(32))  run_tall (.clk(clk), .done(done_b), .checks(cb), .failures(fb));

  initial begin
    fork
      begin
        wait (done_a && done_b);
      end
      begin
        repeat (400000) @(posedge clk);
        $display("watchdog expired");
      end
    join_any
    disable fork;
    begin
      int checks, failures;
      checks = ca + cb;
      failures = fa + fb + ((done_a && done_b) ? 0 : 1);
      $display("2x256: %0d checks %0d failures; 32x32: %0d checks %0d failures", ca, fa, cb, fb);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    end
    $finish;
  end
endmodule

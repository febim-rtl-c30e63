// febim_iris_tb: the iris Gaussian naive-Bayes classifier on the full-size
// engine (default parameters: 3 classes x 64 columns, 4 features quantized
// to 16 values, 2-bit likelihoods, no prior column since iris classes are
// equally frequent).
//
// Model. The per-class mean and standard deviation of the four iris features
// (sepal length/width, petal length/width) are the well-known statistics of
// the public iris data set, and the feature ranges are its min/max; they are
// typed in below, not learnt here. For feature i, value bin b and class a the
// likelihood is the class Gaussian density at the bin centre x_b. The
// mapping of the design is then applied:
//   truncate P < 0.1 to 0.1, take ln P,
//   normalise per column: P' = ln P + (1 - max over classes of ln P),
//   quantize P' uniformly over [1 + ln 0.1, 1] into 4 levels,
// and each level is written to its cell through the command port.
//
// Test. 150 test samples (50 per class) are drawn from the class Gaussians
// with a Box-Muller generator, quantized to 16 bins and issued as 150
// back-to-back inferences. Every result is compared with an arg-max over the
// intended quantized cell currents; the burst must take one cycle per
// inference. Accuracy against the true labels and that of the unquantized
// floating-point classifier are printed for information; the hardware
// accuracy must stay above 80%. Prints one TB_RESULT line.
module febim_iris_tb;
  import febim_pkg::*;

  localparam int unsigned K = 3, N = 4, M = 16, L = 4, COLS = N * M;
  localparam int unsigned NS = 50;   // test samples per class

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, wdone, res_valid;
  op_t  cmd_op;
  logic [1:0] cmd_row, res_class;
  logic [5:0] cmd_col;
  logic [1:0] cmd_level;
  logic [N-1:0][3:0] cmd_ev;
  logic [K-1:0] res_onehot;
  logic [K-1:0][9:0] iwl;

  febim_top dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op),
    .cmd_row(cmd_row), .cmd_col(cmd_col), .cmd_level(cmd_level), .cmd_evidence(cmd_ev),
    .write_done(wdone), .res_valid(res_valid), .res_onehot(res_onehot), .res_class(res_class),
    .iwl(iwl));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // iris statistics: [class][feature], classes setosa/versicolor/virginica
  real mu  [K][N] = '{'{5.006, 3.428, 1.462, 0.246},
                      '{5.936, 2.770, 4.260, 1.326},
                      '{6.588, 2.974, 5.552, 2.026}};
  real sd  [K][N] = '{'{0.352, 0.379, 0.174, 0.105},
                      '{0.516, 0.314, 0.470, 0.198},
                      '{0.636, 0.322, 0.552, 0.275}};
  real fmin [N] = '{4.3, 2.0, 1.0, 0.1};
  real fmax [N] = '{7.9, 4.4, 6.9, 2.5};
  localparam real PI = 3.14159265358979;

  int unsigned lvl [K][COLS];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%0t FAIL: %s", $time, what);
    end
  endtask

  function automatic real pdf(real x, real m, real s);
    return $exp(-(x - m) * (x - m) / (2.0 * s * s)) / (s * $sqrt(2.0 * PI));
  endfunction

  function automatic real urand();
    return (real'($urandom) + 1.0) / 4294967297.0;
  endfunction

  function automatic real gauss(real m, real s);
    return m + s * $sqrt(-2.0 * $ln(urand())) * $cos(2.0 * PI * urand());
  endfunction

  function automatic int unsigned bin_of(int i, real x);
    real w = (fmax[i] - fmin[i]) / M;
    int b = $floor((x - fmin[i]) / w);
    if (b < 0) b = 0;
    if (b > M - 1) b = M - 1;
    return b;
  endfunction

  // Likelihood mapping of the design (truncate, log, column-normalise, quantize).
  task automatic build_model();
    real pmin = 1.0 + $ln(0.1);
    for (int i = 0; i < N; i++) begin
      real w;
      w = (fmax[i] - fmin[i]) / M;
      for (int b = 0; b < M; b++) begin
        real lp [K];
        real mx = -1.0e9;
        real x = fmin[i] + (b + 0.5) * w;
        for (int a = 0; a < K; a++) begin
          real p = pdf(x, mu[a][i], sd[a][i]);
          if (p < 0.1) p = 0.1;
          lp[a] = $ln(p);
          if (lp[a] > mx) mx = lp[a];
        end
        for (int a = 0; a < K; a++) begin
          real pn = lp[a] + (1.0 - mx);
          int q = int'((pn - pmin) / (1.0 - pmin) * (L - 1));   // rounds to nearest
          if (q < 0) q = 0;
          if (q > L - 1) q = L - 1;
          lvl[a][i * M + b] = q;
        end
      end
    end
  endtask

  task automatic write_cell(int r, int c, int q);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_op = OP_WRITE; cmd_row = 2'(r); cmd_col = 6'(c); cmd_level = 2'(q);
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    while (!wdone) begin @(posedge clk); #1; end
  endtask

  function automatic int ref_class(logic [N-1:0][3:0] ev);
    int best = 0, bs = -1;
    for (int a = 0; a < K; a++) begin
      int s = 0;
      for (int i = 0; i < N; i++) s += 1 + lvl[a][i * M + int'(ev[i])] * 9 / (L - 1);
      if (s > bs) begin bs = s; best = a; end
    end
    return best;
  endfunction

  initial begin
    logic [N-1:0][3:0] ev [K * NS];
    int label [K * NS];
    int sw_pred [K * NS];
    int hw_ok = 0, sw_ok = 0, t0, t1;

    cmd_valid = 1'b0; cmd_op = OP_INFER; cmd_row = '0; cmd_col = '0; cmd_level = '0; cmd_ev = '0;
    build_model();
    for (int a = 0; a < K; a++) begin
      string s;
      s = "";
      for (int c = 0; c < COLS; c++) s = {s, $sformatf("%0d", lvl[a][c])};
      $display("row %0d levels %s", a, s);
    end
    // test samples
    for (int a = 0; a < K; a++)
      for (int j = 0; j < NS; j++) begin
        real ll [K];
        int t;
        real x [N];
        t = a * NS + j;
        for (int i = 0; i < N; i++) begin
          x[i] = gauss(mu[a][i], sd[a][i]);
          ev[t][i] = 4'(bin_of(i, x[i]));
        end
        label[t] = a;
        sw_pred[t] = 0;
        for (int c = 0; c < K; c++) begin
          ll[c] = 0.0;
          for (int i = 0; i < N; i++) ll[c] += $ln(pdf(x[i], mu[c][i], sd[c][i]) + 1.0e-300);
          if (ll[c] > ll[sw_pred[t]]) sw_pred[t] = c;
        end
      end

    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int a = 0; a < K; a++)
      for (int c = 0; c < COLS; c++) write_cell(a, c, lvl[a][c]);

    // back-to-back inferences
    @(negedge clk);
    t0 = $time;
    for (int t = 0; t <= K * NS; t++) begin
      if (t < K * NS) begin cmd_valid = 1'b1; cmd_op = OP_INFER; cmd_ev = ev[t]; end
      else cmd_valid = 1'b0;
      #1; if (t < K * NS) chk(cmd_ready, "ready");
      @(posedge clk); #1;
      if (t > 0) begin
        int e;
        e = ref_class(ev[t - 1]);
        chk(res_valid && int'(res_class) == e && res_onehot == K'(1 << e),
            $sformatf("sample %0d class %0d exp %0d", t - 1, res_class, e));
        if (int'(res_class) == label[t - 1]) hw_ok++;
        if (sw_pred[t - 1] == label[t - 1]) sw_ok++;
      end
      @(negedge clk);
    end
    t1 = $time;
    chk((t1 - t0) / 10 == K * NS + 1, $sformatf("%0d inferences took %0d cycles", K * NS, (t1 - t0) / 10));
    $display("accuracy: engine %0d/%0d, floating-point classifier %0d/%0d", hw_ok, K * NS, sw_ok, K * NS);
    chk(hw_ok * 100 >= 80 * K * NS, "engine accuracy above 80%");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

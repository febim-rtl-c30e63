// febim_iris_run: one point of the iris quantization sweep. It builds the
// iris Gaussian naive-Bayes model (same statistics and mapping as
// febim_iris_tb), quantizes features to 2^QF values and likelihoods to 2^QL
// levels, programs a febim_top of that size over the command port and
// classifies NS test samples per class, back to back. Every decision is
// compared with an arg-max over the intended cell currents. The samples come
// from a fixed-seed xorshift generator, so every sweep point classifies the same samples.
// Outputs: done, the comparison counts, and the number of correct labels.
// With QL = 3 the eight levels fall on the 0.1 uA grid as 1,2,3,4,6,7,8,10
// units, which the reference uses as well.
module febim_iris_run #(
  parameter int unsigned QF = 4,
  parameter int unsigned QL = 2,
  parameter int unsigned NS = 50
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   correct,
  output int   sw_correct
);
  import febim_pkg::*;

  localparam int unsigned K = 3, N = 4, M = 1 << QF, L = 1 << QL, COLS = N * M;
  localparam int unsigned CW = $clog2(COLS);

  logic rst_n = 1'b0;
  logic cmd_valid, cmd_ready, wdone, res_valid;
  op_t  cmd_op;
  logic [1:0] cmd_row, res_class;
  logic [CW-1:0] cmd_col;
  logic [QL-1:0] cmd_level;
  logic [N-1:0][QF-1:0] cmd_ev;
  logic [K-1:0] res_onehot;
  logic [K-1:0][9:0] iwl;

  febim_top #(.EVID_LEVELS(M), .NUM_LEVELS(L)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op),
    .cmd_row(cmd_row), .cmd_col(cmd_col), .cmd_level(cmd_level), .cmd_evidence(cmd_ev),
    .write_done(wdone), .res_valid(res_valid), .res_onehot(res_onehot), .res_class(res_class),
    .iwl(iwl));



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

  // Own xorshift32 generator, so that every instance draws the same samples
  // whatever order the simulator runs the instances in.
  logic [31:0] rng = 32'd20240325;
  function automatic real urand();
    rng ^= rng << 13;
    rng ^= rng >> 17;
    rng ^= rng << 5;
    return (real'(rng) + 1.0) / 4294967297.0;
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
    cmd_valid = 1'b1; cmd_op = OP_WRITE; cmd_row = 2'(r); cmd_col = CW'(c); cmd_level = QL'(q);
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    while (!wdone) begin @(posedge clk); #1; end
  endtask

  function automatic int ref_class(logic [N-1:0][QF-1:0] ev);
    int best = 0, bs = -1;
    for (int a = 0; a < K; a++) begin
      int s = 0;
      for (int i = 0; i < N; i++) s += 1 + lvl[a][i * M + int'(ev[i])] * 9 / (L - 1);
      if (s > bs) begin bs = s; best = a; end
    end
    return best;
  endfunction

  initial begin
    logic [N-1:0][QF-1:0] ev [K * NS];
    int label [K * NS];
    int sw_pred [K * NS];
    int hw_ok = 0, sw_ok = 0, t0, t1;

    done = 1'b0; checks = 0; failures = 0; correct = 0; sw_correct = 0;
    cmd_valid = 1'b0; cmd_op = OP_INFER; cmd_row = '0; cmd_col = '0; cmd_level = '0; cmd_ev = '0;
    build_model();
    // test samples
    for (int a = 0; a < K; a++)
      for (int j = 0; j < NS; j++) begin
        real ll [K];
        int t;
        real x [N];
        t = a * NS + j;
        for (int i = 0; i < N; i++) begin
          x[i] = gauss(mu[a][i], sd[a][i]);
          ev[t][i] = QF'(bin_of(i, x[i]));
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
    correct = hw_ok;
    sw_correct = sw_ok;
    done = 1'b1;
  end
endmodule

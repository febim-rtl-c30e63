// wta_circuit: behavioural model of the winner-take-all sensing circuit.
// This is a behavioural model of an analog circuit, not synthesizable logic
// meant for silicon.
//
// What it models. Each wordline current is copied by a current mirror into
// one cell of the WTA circuit; once EN_WTA is raised the cells compete, the
// cell with the largest input current takes the output current and all
// others fall to nearly zero. The result is
// a one-hot "current" vector naming the event with the highest posterior,
// i.e. arg max over A of log P(A|B).
//
// Interface and timing. icm holds the mirrored WL currents (0.1 uA units),
// en is EN_WTA, winner is one-hot when en is high and all zero otherwise.
// The model is combinational: the circuit resolves in under 300 ps, well
// inside one clock cycle. When two inputs are exactly equal the real circuit
// has no defined winner; the model picks the lower row index so that the
// output stays one-hot. The one-hot behaviour and the enable follow the paper;
// the tie rule is this model's choice.
module wta_circuit #(
  parameter int unsigned NUM_ROWS = 3,
  parameter int unsigned IWL_W    = 10,
  localparam int unsigned IDX_W   = (NUM_ROWS > 1) ? $clog2(NUM_ROWS) : 1
) (
  input  logic                               en,
  input  logic [NUM_ROWS-1:0][IWL_W-1:0]     icm,
  output logic [NUM_ROWS-1:0]                winner
);

  always_comb begin
    logic [IWL_W-1:0] best;
    logic [IDX_W-1:0] best_idx;
    best     = icm[0];
    best_idx = 0;
    for (int unsigned r = 1; r < NUM_ROWS; r++) begin
      if (icm[r] > best) begin
        best     = icm[r];
        best_idx = IDX_W'(r);
      end
    end
    winner = '0;
    if (en) winner[best_idx] = 1'b1;
  end

  always_comb begin
    a_onehot : assert ($onehot0(winner)) else $error("WTA output is not one-hot");
  end

endmodule

// tlg: threshold logic gate, [-NEG_W, 1, ..., 1; T], as a clocked element.
//
// The circuit is a differential sense amplifier between two input networks.
// The left network (LIN) holds the positive-weight branches, the right network
// (RIN) the negative-weight branch and the threshold branches. On the rising
// clock edge the side with more conducting width discharges first. The SR
// latch behind the amplifier then holds the decision until the next edge.
// Here that race is modelled by counting: LIN = number of enabled positive
// inputs that are 1, RIN = NEG_W * (negative input enabled and 1) + number of
// enabled threshold branches. The gate captures y = (LIN >= RIN), which is
// Eq. 1 of the threshold definition with the negative term moved to the right.
// A tie resolves to 1 so that sum >= T holds exactly. The analog circuit has
// no defined tie; that choice is this model's.
//
// Interface: x/en are the positive branches (xl_i/en_li), x_neg/en_neg the
// weight -NEG_W branch, en_t the threshold branches (each worth 1, so
// T = popcount(en_t)). `d` is the decision being captured on this edge (the
// sense-amplifier output while the clock is high); `y` is the latched output.
// Timing: one cycle, y updates on each rising edge with ce high. ce stands for
// the gated clock of the array: the controller only clocks the gates during
// evaluation, so the result stays put until it is written back (the paper does
// not describe how the clock is kept off the array outside those cycles). Reset clears y (not
// mentioned in the paper; the clock-low precharge of the real gate has no
// defined output).
module tlg #(
  parameter int unsigned N_POS  = 5,  // weight-1 branches: I1..I4 and L1
  parameter int unsigned NEG_W  = 2,  // magnitude of the negative weight
  parameter int unsigned N_T    = 2   // threshold branches, T in 0..N_T
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ce,     // clock enable: gated array clock
  input  logic [N_POS-1:0] x,
  input  logic [N_POS-1:0] en,
  input  logic             x_neg,
  input  logic             en_neg,
  input  logic [N_T-1:0]   en_t,
  output logic             d,
  output logic             y
);
  localparam int unsigned SW = $clog2(N_POS + NEG_W + N_T + 1) + 1;

  logic [SW-1:0] lin, rin;

  always_comb begin
    lin = '0;
    for (int i = 0; i < N_POS; i++) lin += SW'(x[i] & en[i]);
    rin = (x_neg & en_neg) ? SW'(NEG_W) : '0;
    for (int i = 0; i < N_T; i++) rin += SW'(en_t[i]);
    d = (lin >= rin);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) y <= 1'b0;
    else if (ce) y <= d;

endmodule

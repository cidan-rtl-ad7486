// tlpe: threshold logic processing element, one bit-line of a CIDAN array.
//
// It holds one threshold gate with weights [-2,1,1,1,1,1; T], T = 1 or 2, four
// XOR gates that optionally invert the bank bits I1..I4 (C0-C3), and two
// latches L1 and L2. This structure follows the paper's processing-element
// figure. The gate's five weight-1 branches take the four XOR outputs and L1.
// Its weight -2 branch takes the gate's own output O1, which lets a second
// cycle use the first cycle's result. L2 captures O1 and L1 copies L2, so a
// carry survives from one add to the next.
//
// Single-cycle functions (copy, NOT, (N)AND, (N)OR) need one evaluation. XOR,
// XNOR and the add need two, with the second cycle using -2*O1. The adder
// runs the paper's two-cycle schedule. Cycle 1: C[i+1] = Maj(A, B, L1) is
// captured in the gate and in L2. Cycle 2: S = A + B + L1 - 2*C[i+1] >= 1,
// while L1 <= L2 makes C[i+1] the carry-in of the next add.
//
// Timing. The control word is sampled on the rising edge together with the
// data. le_l2 makes L2 take the value the gate captures on that same edge. This
// models a level latch open while O1 settles. le_l1 makes L1 take L2's value
// from before the edge. That is why cycle 2 still sees the old carry in L1 while
// L1 already moves to the new one. The paper only says the latches have enable
// signals; this edge-level timing is this design's reading of its schedule
// figure. Reset clears O1, L1 and L2.
module tlpe
  import cidan_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ce,     // array clock enable (evaluation cycles only)
  input  logic [3:0] bits,   // I1..I4: one bit-line from each of the four banks
  input  tlpe_ctrl_t ctrl,
  output logic       o1,     // TLPE output, to the write driver
  output logic       carry   // L1, the stored carry (observability)
);
  logic [3:0] xin;
  logic       d;
  logic       l1, l2;

  assign xin = bits ^ ctrl.inv;

  tlg #(.N_POS(5), .NEG_W(2), .N_T(2)) u_tlg (
    .clk    (clk),
    .rst_n  (rst_n),
    .ce     (ce),
    .x      ({l1, xin}),
    .en     ({ctrl.en_fb, ctrl.en_in}),
    .x_neg  (o1),
    .en_neg (ctrl.en_neg),
    .en_t   (ctrl.en_t),
    .d      (d),
    .y      (o1)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      l1 <= 1'b0;
      l2 <= 1'b0;
    end else if (ce) begin
      if (ctrl.le_l2) l2 <= d;
      if (ctrl.le_l1) l1 <= l2;
    end

  assign carry = l1;

endmodule

// tlpea: threshold logic processing element array (TLPEA) for one group of
// four DRAM banks.
//
// There are N processing elements, one per bit of a bank row as latched in the
// bit-line sense amplifiers. Element i takes bit i of the open row of each of
// the four banks (B1..B4) on its inputs I1..I4. Every element gets the same
// 14-bit control word, so one word applies one function to whole rows at once.
// The N outputs form TLPEA-OP, which goes to the write driver. All of this
// follows the paper's array figure and text. The default N = 8192 is a
// 1024 x 8-bit row, the paper's evaluated configuration.
//
// The figure draws arrows from element to element. The text gives them no
// function other than carrying the shared control signal. Here the control is
// therefore a broadcast that reaches every element in the same cycle; that
// reading is this design's own.
// Timing: as tlpe, one rising edge per evaluation.
module tlpea
  import cidan_pkg::*;
#(
  parameter int unsigned N = 8192
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,        // array clock enable
  input  logic [3:0][N-1:0]    bank_row,  // B1..B4, open row of each bank
  input  tlpe_ctrl_t           ctrl,
  output logic [N-1:0]         op,        // TLPEA-OP
  output logic [N-1:0]         carry      // L1 of every element
);
  for (genvar i = 0; i < N; i++) begin : g_pe
    tlpe u_pe (
      .clk   (clk),
      .rst_n (rst_n),
      .ce    (ce),
      .bits  ({bank_row[3][i], bank_row[2][i], bank_row[1][i], bank_row[0][i]}),
      .ctrl  (ctrl),
      .o1    (op[i]),
      .carry (carry[i])
    );
  end
endmodule

// cidan_pkg: types and constants shared by the CIDAN processing-in-DRAM blocks.
//
// CIDAN places one row-wide array of threshold-logic processing elements (TLPEs)
// beside a group of four DRAM banks. Every TLPE is steered by the same 14-bit
// control word: 4 input-inversion bits (C0-C3), 8 enables for the threshold
// gate's inputs and threshold, and 2 latch enables (L1, L2). The split
// 4 + 8 + 2 = 14 follows the signal counts printed in the processing-element and
// array figures; the order of the bits inside the word is this design's own.
//
// The bulk-bitwise instruction "bbop dest, src1, src2, func" is carried as a
// struct; the function codes cover the operations the paper lists (copy, NOT,
// (N)AND, (N)OR, X(N)OR, 1-bit add). FN_ADD0, an add whose carry-in is forced to
// 0 for the least significant bit, is this design's addition.
//
// Timing constants are DDR3-1600 values in DRAM clock cycles (tCK = 1.25 ns):
// tRRD = 7.5 ns and tFAW = 30 ns are the paper's numbers, tRCD = 15 ns follows
// from its "tRRD + tRCD (22.5 ns)", tRAS = 35 ns is given, tRP = 12.5 ns follows
// from AAP = 82.5 ns = 2 x tRAS + tRP. tWR = 15 ns is not given in the paper and
// is the usual DDR3 value.
package cidan_pkg;

  // Number of banks served by one processing-element array, banks per chip and
  // rows per bank (8 banks of 16384 rows in the evaluated configuration).
  localparam int unsigned BANKS_PER_GROUP = 4;
  localparam int unsigned BANK_W  = 3;                 // 8 banks
  localparam int unsigned ROW_W   = 14;                // 16384 rows
  localparam int unsigned NGROUPS = (1 << BANK_W) / BANKS_PER_GROUP;

  typedef struct packed {
    logic [BANK_W-1:0] bank;  // bank[BANK_W-1:2] = group, bank[1:0] = bank in group
    logic [ROW_W-1:0]  row;
  } dram_addr_t;

  // Control word of one TLPE (and of a whole array, which shares it).
  typedef struct packed {
    logic [3:0] inv;     // C0-C3: invert input Ik from bank k (XOR gate)
    logic [3:0] en_in;   // en_l: enable weight-1 branch of input Ik
    logic       en_neg;  // en_r: enable the weight -2 branch (fed by O1)
    logic       en_fb;   // en_r: enable the weight 1 branch fed by latch L1
    logic [1:0] en_t;    // en_r: threshold branches, T = en_t[0] + en_t[1]
    logic       le_l1;   // latch enable: L1 <= L2
    logic       le_l2;   // latch enable: L2 <= value the TLG captures
  } tlpe_ctrl_t;

  localparam tlpe_ctrl_t CTRL_IDLE = '0;

  typedef enum logic [3:0] {
    FN_COPY = 4'd0,
    FN_NOT  = 4'd1,
    FN_AND  = 4'd2,
    FN_OR   = 4'd3,
    FN_NAND = 4'd4,
    FN_NOR  = 4'd5,
    FN_XOR  = 4'd6,
    FN_XNOR = 4'd7,
    FN_ADD  = 4'd8,  // sum and carry, carry-in taken from L1
    FN_ADD0 = 4'd9   // sum and carry, carry-in 0 (first bit of a word)
  } func_e;

  // DRAM commands the controller issues.
  typedef enum logic [2:0] {
    CMD_NOP  = 3'd0,
    CMD_ACT  = 3'd1,
    CMD_WR   = 3'd2,  // full-row write of TLPEA-OP into the open row
    CMD_PREA = 3'd3,  // precharge all open banks
    CMD_RD   = 3'd4   // column read (normal memory use, not issued by CIDAN)
  } dram_cmd_e;

  // bbop dest, src1, src2, func. src2 is ignored by copy and NOT.
  typedef struct packed {
    dram_addr_t dest;
    dram_addr_t src1;
    dram_addr_t src2;
    func_e      func;
  } bbop_t;

  typedef struct packed {
    dram_cmd_e         cmd;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
  } dram_req_t;

  // Does the function read a second operand (bank n)?
  function automatic logic fn_two_src(func_e f);
    return !(f inside {FN_COPY, FN_NOT});
  endfunction

  // Does the function take two TLPE evaluation cycles?
  function automatic logic fn_two_cycle(func_e f);
    return f inside {FN_XOR, FN_XNOR, FN_ADD, FN_ADD0};
  endfunction

  // Control word for evaluation cycle `cyc` (0 or 1) of function `f`, with the
  // first operand on TLPE input `m` and the second on input `n`. Table II of the
  // paper gives the first cycle of every function; for the second cycle of
  // XOR/XNOR the weights follow Eq. 1 and the sum step of the adder schedule
  // ([-2,1,1;1]), see the block notes.
  function automatic tlpe_ctrl_t fn_ctrl(func_e f, logic cyc, logic [1:0] m, logic [1:0] n);
    tlpe_ctrl_t c;
    c = CTRL_IDLE;
    c.en_in[m] = 1'b1;
    unique case (f)
      FN_COPY: c.en_t = 2'b01;
      FN_NOT:  begin c.inv[m] = 1'b1; c.en_t = 2'b01; end
      FN_AND:  begin c.en_in[n] = 1'b1; c.en_t = 2'b11; end
      FN_OR:   begin c.en_in[n] = 1'b1; c.en_t = 2'b01; end
      FN_NAND: begin c.en_in[n] = 1'b1; c.inv[m] = 1'b1; c.inv[n] = 1'b1; c.en_t = 2'b01; end
      FN_NOR:  begin c.en_in[n] = 1'b1; c.inv[m] = 1'b1; c.inv[n] = 1'b1; c.en_t = 2'b11; end
      FN_XOR: begin
        // cycle 1: OP1 = I1 & I2 ; cycle 2: I1 + I2 - 2*OP1 >= 1
        c.en_in[n] = 1'b1;
        if (!cyc) c.en_t = 2'b11;
        else begin c.en_neg = 1'b1; c.en_t = 2'b01; end
      end
      FN_XNOR: begin
        // cycle 1: OP1 = I1 & ~I2 ; cycle 2: I1 + ~I2 - 2*OP1 >= 1
        c.en_in[n] = 1'b1; c.inv[n] = 1'b1;
        if (!cyc) c.en_t = 2'b11;
        else begin c.en_neg = 1'b1; c.en_t = 2'b01; end
      end
      FN_ADD, FN_ADD0: begin
        // cycle 1: C[i+1] = Maj(A, B, L1) -> L2 ; cycle 2: S = A+B+L1-2*C[i+1] >= 1, L1 <= L2
        c.en_in[n] = 1'b1;
        c.en_fb    = (f == FN_ADD);
        if (!cyc) begin c.en_t = 2'b11; c.le_l2 = 1'b1; end
        else begin c.en_neg = 1'b1; c.en_t = 2'b01; c.le_l1 = 1'b1; end
      end
      default: c = CTRL_IDLE;
    endcase
    return c;
  endfunction

endpackage

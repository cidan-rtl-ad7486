// cidan_ctrl: CIDAN controller, from a bbop instruction to DRAM commands and
// per-cycle processing-element control words.
//
// One instruction "bbop dest, src1, src2, func" works on whole rows. It is
// carried out with the command sequence the paper tabulates. ACT src1 (bank m,
// row i), ACT src2 (bank n, row j, two-operand functions only), ACT dest
// (bank o, row r). Then one or two evaluation cycles of the processing-element
// array, WR of the array output into bank o, and PREA. Only one row per bank is
// opened. The operands come from different banks of the same four-bank group,
// so no row copy is needed. The controller checks the DRAM timing:
//   - tRRD between ACTs,
//   - at most four ACTs in any tFAW window,
//   - tRCD from the last operand ACT to the first evaluation, and from the
//     dest ACT to the WR,
//   - tRAS from the last ACT and tWR from the WR to the PREA,
//   - tRP from the PREA to the next ACT.
// Evaluation words follow the paper's function table and adder schedule via
// cidan_pkg::fn_ctrl. src1 maps to input I(m), src2 to input I(n). The array
// clock enable `pe_ce` is high only in evaluation cycles, so the result stays
// in the gates until the WR.
//
// This design's choices, where the paper is silent:
//   - the valid/ready handshake;
//   - WR to bank o (the table's copy/NOT rows write the second activated bank,
//     which is the destination here too);
//   - rejecting (err pulse, no commands) an instruction whose banks are not all
//     distinct or not all in one group;
//   - tWR.
// The registers use an asynchronous active-low reset; the protocol assertions
// at the end use the same rst_n to disable themselves, which a lint tool
// reports as a reset used both ways. Only the assertions read it that way.
// Interface: instr_valid/instr_ready accept one instruction when idle; `done`
// pulses in the PREA cycle. dram_req is one command per cycle. pe_ctrl/pe_ce/
// pe_group drive the array of the addressed group. wb_en/wb_group/wb_bank
// drive its write driver in the WR cycle.
// Timing: AND on default timing takes 41 cycles from accept to PREA (ACTs at
// 1, 7, 13; evaluation at 19; WR at 25; PREA at 41). XOR/ADD take the same,
// because tRCD of the dest row hides the second evaluation cycle.
module cidan_ctrl
  import cidan_pkg::*;
#(
  parameter int unsigned T_RRD = 6,   // 7.5 ns
  parameter int unsigned T_FAW = 24,  // 30 ns
  parameter int unsigned T_RCD = 12,  // 15 ns
  parameter int unsigned T_RAS = 28,  // 35 ns
  parameter int unsigned T_RP  = 10,  // 12.5 ns
  parameter int unsigned T_WR  = 12   // 15 ns (assumed)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      instr_valid,
  output logic                      instr_ready,
  input  bbop_t                     instr,
  output logic                      done,
  output logic                      err,
  output logic                      busy,
  output dram_req_t                 dram_req,
  output tlpe_ctrl_t                pe_ctrl,
  output logic                      pe_ce,
  output logic [BANK_W-3:0]         pe_group,
  output logic                      wb_en,
  output logic [BANK_W-3:0]         wb_group,
  output logic [1:0]                wb_bank
);
  localparam int unsigned CNT_W = 8;
  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  typedef enum logic [2:0] {S_IDLE, S_ACT, S_EVAL, S_WR, S_PRE} state_e;

  state_e      state;
  bbop_t       op;
  logic [1:0]  act_idx;      // 0: src1, 1: src2, 2: dest
  logic        eval_cyc;     // 0 or 1
  logic        eval_done;

  // Cycles since events; 1 in the cycle after the event, saturating.
  logic [CNT_W-1:0] c_act, c_opnd, c_dst, c_wr, c_pre;
  logic [CNT_W-1:0] faw_age [4];  // ages of the four most recent ACTs

  function automatic logic [CNT_W-1:0] inc(logic [CNT_W-1:0] v);
    return (v == CNT_MAX) ? v : v + 1'b1;
  endfunction

  // --- instruction checks ---------------------------------------------------
  logic legal;
  always_comb begin
    logic [1:0] m, n, o;
    m = instr.src1.bank[1:0];
    n = instr.src2.bank[1:0];
    o = instr.dest.bank[1:0];
    legal = (instr.func <= FN_ADD0) &&
            (instr.src1.bank[BANK_W-1:2] == instr.dest.bank[BANK_W-1:2]) && (m != o);
    if (fn_two_src(instr.func))
      legal = legal && (instr.src2.bank[BANK_W-1:2] == instr.dest.bank[BANK_W-1:2]) &&
              (n != m) && (n != o);
  end

  // --- activation target ------------------------------------------------------
  dram_addr_t act_addr;
  logic       act_last, act_ok;
  always_comb begin
    unique case (act_idx)
      2'd0:    act_addr = op.src1;
      2'd1:    act_addr = op.src2;
      default: act_addr = op.dest;
    endcase
    act_last = (act_idx == 2'd2);
    act_ok   = (c_act >= CNT_W'(T_RRD)) && (faw_age[3] >= CNT_W'(T_FAW)) &&
               (c_pre >= CNT_W'(T_RP));
  end

  logic issue_act, issue_wr, issue_pre, accept;
  always_comb begin
    accept    = (state == S_IDLE) && instr_valid;
    issue_act = (state == S_ACT) && act_ok;
    eval_done = (state == S_EVAL) && (!fn_two_cycle(op.func) || eval_cyc);
    issue_wr  = (state == S_WR) && (c_dst >= CNT_W'(T_RCD));
    issue_pre = (state == S_PRE) && (c_wr >= CNT_W'(T_WR)) && (c_act >= CNT_W'(T_RAS));
  end

  // --- state ----------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      op       <= '0;
      act_idx  <= '0;
      eval_cyc <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (accept && legal) begin
          op       <= instr;
          act_idx  <= 2'd0;
          eval_cyc <= 1'b0;
          state    <= S_ACT;
        end
        S_ACT: if (issue_act) begin
          if (act_last)                                    state <= S_EVAL;
          else if (act_idx == 2'd0 && !fn_two_src(op.func)) act_idx <= 2'd2;
          else                                             act_idx <= act_idx + 2'd1;
        end
        S_EVAL: if (c_opnd >= CNT_W'(T_RCD)) begin
          eval_cyc <= 1'b1;
          if (eval_done) state <= S_WR;
        end
        S_WR:  if (issue_wr)  state <= S_PRE;
        S_PRE: if (issue_pre) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // --- timing counters ------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_act  <= CNT_MAX;
      c_opnd <= CNT_MAX;
      c_dst  <= CNT_MAX;
      c_wr   <= CNT_MAX;
      c_pre  <= CNT_MAX;
      for (int k = 0; k < 4; k++) faw_age[k] <= CNT_MAX;
    end else begin
      c_act  <= issue_act                 ? CNT_W'(1) : inc(c_act);
      c_opnd <= (issue_act && !act_last)  ? CNT_W'(1) : inc(c_opnd);
      c_dst  <= (issue_act && act_last)   ? CNT_W'(1) : inc(c_dst);
      c_wr   <= issue_wr                  ? CNT_W'(1) : inc(c_wr);
      c_pre  <= issue_pre                 ? CNT_W'(1) : inc(c_pre);
      if (issue_act) begin
        faw_age[0] <= CNT_W'(1);
        for (int k = 1; k < 4; k++) faw_age[k] <= inc(faw_age[k-1]);
      end else begin
        for (int k = 0; k < 4; k++) faw_age[k] <= inc(faw_age[k]);
      end
    end
  end

  // --- outputs --------------------------------------------------------------
  logic eval_now;
  assign eval_now = (state == S_EVAL) && (c_opnd >= CNT_W'(T_RCD));

  always_comb begin
    dram_req = '{cmd: CMD_NOP, bank: '0, row: '0};
    if (issue_act)      dram_req = '{cmd: CMD_ACT, bank: act_addr.bank, row: act_addr.row};
    else if (issue_wr)  dram_req = '{cmd: CMD_WR,  bank: op.dest.bank,  row: op.dest.row};
    else if (issue_pre) dram_req = '{cmd: CMD_PREA, bank: '0, row: '0};
  end

  assign pe_ce       = eval_now;
  assign pe_ctrl     = eval_now ? fn_ctrl(op.func, eval_cyc, op.src1.bank[1:0], op.src2.bank[1:0])
                                : CTRL_IDLE;
  assign pe_group    = op.src1.bank[BANK_W-1:2];
  assign wb_en       = issue_wr;
  assign wb_group    = op.dest.bank[BANK_W-1:2];
  assign wb_bank     = op.dest.bank[1:0];
  assign instr_ready = (state == S_IDLE);
  assign done        = issue_pre;
  assign err         = accept && !legal;
  assign busy        = (state != S_IDLE);

  // --- protocol rules -------------------------------------------------------
  // The instruction must stay stable while it waits to be accepted.
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    instr_valid && !instr_ready |=> $stable(instr));
  // Consecutive ACTs at least tRRD apart.
  a_rrd: assert property (@(posedge clk) disable iff (!rst_n)
    issue_act |-> c_act >= CNT_W'(T_RRD));

endmodule

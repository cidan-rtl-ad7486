// ctrl_timing_mon: watches the controller's command stream and array clock
// enable and checks every DRAM timing rule independently of the controller:
// tRRD between ACTs, four ACTs per tFAW window at most, tRCD from the last
// operand ACT to the first evaluation and from the dest ACT to WR, tRAS and
// tWR before PREA, tRP from PREA to the next ACT. It also counts how often a
// fourth ACT had to wait for the tFAW window (faw_stalls).
module ctrl_timing_mon
  import cidan_pkg::*;
#(
  parameter int T_RRD = 6, T_FAW = 24, T_RCD = 12, T_RAS = 28, T_RP = 10, T_WR = 12
) (
  input  logic      clk,
  input  logic      rst_n,
  input  dram_req_t dram_req,
  input  logic      pe_ce,
  output int        checks,
  output int        failures,
  output int        faw_stalls,
  output int        n_eval
);
  longint cyc = 0;
  longint act_t [$];
  longint last_pre = -1000, last_wr = -1000;
  longint ops_act [$];      // ACTs of the current instruction
  logic   in_eval = 1'b0;

  initial begin checks = 0; failures = 0; faw_stalls = 0; n_eval = 0; end

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (pe_ce) begin
      n_eval = n_eval + 1;
      if (!in_eval) begin
        // operands are the ACTs before the last one (dest) of this instruction
        checks = checks + 1;
        if (ops_act.size() < 2 || cyc - ops_act[ops_act.size() - 2] < T_RCD) failures = failures + 1;
      end
    end
    in_eval = pe_ce;
    case (dram_req.cmd)
      CMD_ACT: begin
        checks = checks + 2;
        if (act_t.size() > 0 && cyc - act_t[act_t.size() - 1] < T_RRD) failures = failures + 1;
        if (cyc - last_pre < T_RP) failures = failures + 1;
        if (act_t.size() >= 4) begin
          checks = checks + 1;
          if (cyc - act_t[act_t.size() - 4] < T_FAW) failures = failures + 1;
          if (cyc - act_t[act_t.size() - 1] > T_RRD && cyc - last_pre > T_RP &&
              cyc - act_t[act_t.size() - 4] == T_FAW) faw_stalls = faw_stalls + 1;
        end
        act_t.push_back(cyc);
        ops_act.push_back(cyc);
      end
      CMD_WR: begin
        checks = checks + 1;
        if (ops_act.size() < 2 || cyc - ops_act[ops_act.size() - 1] < T_RCD) failures = failures + 1;
        last_wr = cyc;
      end
      CMD_PREA: begin
        checks = checks + 2;
        if (cyc - last_wr < T_WR) failures = failures + 1;
        if (act_t.size() == 0 || cyc - act_t[act_t.size() - 1] < T_RAS) failures = failures + 1;
        last_pre = cyc;
        ops_act.delete();
      end
      default: ;
    endcase
  end
endmodule

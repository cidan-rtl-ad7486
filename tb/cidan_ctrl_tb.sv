// cidan_ctrl_tb: the controller's command sequences, control words and timing.
//
// Two controllers are tested. The first has the default DDR3-1600 timing. For
// every function it must issue exactly the tabulated sequence: ACT src1,
// ACT src2 (two-operand functions only), ACT dest, one or two evaluation
// cycles, WR dest, PREA. The cycle counts of the schedule are checked. The
// first evaluation comes tRRD + tRCD = 18 cycles (22.5 ns) after the first ACT
// of a two-operand function. An AND must end in PREA 41 cycles after it is
// accepted. Each evaluation word must enable exactly the operand inputs, with
// the threshold and inversions of the function; these are written out here
// independently. Illegal instructions (shared banks, two groups) must be
// rejected with err and no command.
// The second controller has shortened tRP/tRAS/tWR/tRCD so that back-to-back
// instructions run into the tFAW window; the monitor must see stalls on it.
module cidan_ctrl_tb;
  import cidan_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- default-timing controller ----------------
  logic a_valid, a_ready, a_done, a_err, a_busy, a_ce, a_wb;
  bbop_t a_instr;
  dram_req_t a_req;
  tlpe_ctrl_t a_ctrl;
  logic [BANK_W-3:0] a_pg, a_wg;
  logic [1:0] a_wbank;
  int mon_a_checks, mon_a_fail, mon_a_faw, mon_a_eval;

  cidan_ctrl dut_a (
    .clk(clk), .rst_n(rst_n), .instr_valid(a_valid), .instr_ready(a_ready), .instr(a_instr),
    .done(a_done), .err(a_err), .busy(a_busy), .dram_req(a_req), .pe_ctrl(a_ctrl), .pe_ce(a_ce),
    .pe_group(a_pg), .wb_en(a_wb), .wb_group(a_wg), .wb_bank(a_wbank));
  ctrl_timing_mon mon_a (.clk(clk), .rst_n(rst_n), .dram_req(a_req), .pe_ce(a_ce),
    .checks(mon_a_checks), .failures(mon_a_fail), .faw_stalls(mon_a_faw), .n_eval(mon_a_eval));

  // ---------------- short-timing controller ----------------
  localparam int B_RRD = 2, B_FAW = 20, B_RCD = 1, B_RAS = 1, B_RP = 1, B_WR = 1;
  logic b_valid, b_ready, b_done, b_err, b_busy, b_ce, b_wb;
  bbop_t b_instr;
  dram_req_t b_req;
  tlpe_ctrl_t b_ctrl;
  logic [BANK_W-3:0] b_pg, b_wg;
  logic [1:0] b_wbank;
  int mon_b_checks, mon_b_fail, mon_b_faw, mon_b_eval;

  cidan_ctrl #(.T_RRD(B_RRD), .T_FAW(B_FAW), .T_RCD(B_RCD), .T_RAS(B_RAS), .T_RP(B_RP), .T_WR(B_WR)) dut_b (
    .clk(clk), .rst_n(rst_n), .instr_valid(b_valid), .instr_ready(b_ready), .instr(b_instr),
    .done(b_done), .err(b_err), .busy(b_busy), .dram_req(b_req), .pe_ctrl(b_ctrl), .pe_ce(b_ce),
    .pe_group(b_pg), .wb_en(b_wb), .wb_group(b_wg), .wb_bank(b_wbank));
  ctrl_timing_mon #(.T_RRD(B_RRD), .T_FAW(B_FAW), .T_RCD(B_RCD), .T_RAS(B_RAS), .T_RP(B_RP), .T_WR(B_WR)) mon_b (
    .clk(clk), .rst_n(rst_n), .dram_req(b_req), .pe_ce(b_ce),
    .checks(mon_b_checks), .failures(mon_b_fail), .faw_stalls(mon_b_faw), .n_eval(mon_b_eval));

  function automatic dram_addr_t mk(int g, int b, int r);
    dram_addr_t a;
    a.bank = BANK_W'(g * 4 + b);
    a.row  = ROW_W'(r);
    return a;
  endfunction

  // expected evaluation word, written out per the function table
  function automatic tlpe_ctrl_t exp_word(func_e f, int c, logic [1:0] m, logic [1:0] n);
    tlpe_ctrl_t w = '0;
    w.en_in[m] = 1'b1;
    if (fn_two_src(f)) w.en_in[n] = 1'b1;
    case (f)
      FN_COPY: w.en_t = 2'b01;
      FN_NOT:  begin w.inv[m] = 1; w.en_t = 2'b01; end
      FN_AND:  w.en_t = 2'b11;
      FN_OR:   w.en_t = 2'b01;
      FN_NAND: begin w.inv[m] = 1; w.inv[n] = 1; w.en_t = 2'b01; end
      FN_NOR:  begin w.inv[m] = 1; w.inv[n] = 1; w.en_t = 2'b11; end
      FN_XOR:  w.en_t = c == 0 ? 2'b11 : 2'b01;
      FN_XNOR: begin w.inv[n] = 1; w.en_t = c == 0 ? 2'b11 : 2'b01; end
      default: begin  // ADD, ADD0
        w.en_fb = (f == FN_ADD);
        w.en_t  = c == 0 ? 2'b11 : 2'b01;
        w.le_l2 = (c == 0);
        w.le_l1 = (c == 1);
      end
    endcase
    if (c == 1) w.en_neg = 1'b1;
    return w;
  endfunction

  task automatic run_a(bbop_t ins, output int lat, output int first_eval, output int first_act,
                       output int n_act, output int n_ev, output int n_wr, output bit seq_ok);
    int cyc = 0;
    int ev = 0;
    bit seen_wr = 0;
    n_act = 0; n_wr = 0; seq_ok = 1; first_eval = -1; first_act = -1;
    repeat (10) @(negedge clk);  // let tRP of the previous PREA pass
    a_instr = ins; a_valid = 1'b1;
    @(negedge clk);
    a_valid = 1'b0;
    a_instr = '0;   // the controller must have latched it
    forever begin
      cyc++;
      if (a_req.cmd == CMD_ACT) begin
        dram_addr_t expa = n_act == 0 ? ins.src1 :
                           (n_act == 1 && fn_two_src(ins.func)) ? ins.src2 : ins.dest;
        if (first_act < 0) first_act = cyc;
        if (a_req.bank != expa.bank || a_req.row != expa.row || ev > 0) seq_ok = 0;
        n_act++;
      end
      if (a_ce) begin
        if (first_eval < 0) first_eval = cyc;
        checks++;
        if (a_ctrl !== exp_word(ins.func, ev, ins.src1.bank[1:0], ins.src2.bank[1:0])) begin
          failures++;
          $display("%s word %0d: %h", ins.func.name(), ev, a_ctrl);
        end
        checks++;
        if (a_pg != ins.src1.bank[BANK_W-1:2]) failures++;
        ev++;
      end
      if (a_req.cmd == CMD_WR) begin
        if (a_req.bank != ins.dest.bank || a_req.row != ins.dest.row || !a_wb ||
            a_wbank != ins.dest.bank[1:0] || a_wg != ins.dest.bank[BANK_W-1:2] || ev == 0) seq_ok = 0;
        n_wr++;
      end
      if (a_req.cmd == CMD_PREA) begin
        if (!a_done || n_wr != 1) seq_ok = 0;
        break;
      end
      @(negedge clk);
    end
    lat = cyc;
    n_ev = ev;
  endtask

  int n_err_seen = 0;
  initial begin
    int lat, fe, fa, na, nev, nwr;
    bit ok;
    bbop_t ins;
    a_valid = 0; b_valid = 0; a_instr = '0; b_instr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // every function, random banks within a random group
    for (int it = 0; it < 60; it++) begin
      int g;
      int perm [4];
      g = $urandom_range(0, NGROUPS - 1);
      perm = '{0, 1, 2, 3};
      perm.shuffle();
      ins.func = func_e'(it % 10);
      ins.src1 = mk(g, perm[0], $urandom_range(0, 16383));
      ins.src2 = mk(g, perm[1], $urandom_range(0, 16383));
      ins.dest = mk(g, perm[2], $urandom_range(0, 16383));
      run_a(ins, lat, fe, fa, na, nev, nwr, ok);
      checks++; if (!ok) begin failures++; $display("%s bad sequence", ins.func.name()); end
      checks++; if (na != (fn_two_src(ins.func) ? 3 : 2)) failures++;
      checks++; if (nev != (fn_two_cycle(ins.func) ? 2 : 1)) failures++;
      // first eval: tRCD after the last operand ACT
      checks++; if (fe - fa != (fn_two_src(ins.func) ? 6 + 12 : 12)) begin
        failures++; $display("%s first eval at +%0d", ins.func.name(), fe - fa); end
      // full latency from accept: two-operand 41, one-operand 35 (dest ACT at +7)
      checks++; if (lat != (fn_two_src(ins.func) ? 41 : 35)) begin
        failures++; $display("%s latency %0d", ins.func.name(), lat); end
      if (it == 0) $display("first op latency %0d cycles", lat);
    end
    // illegal instructions
    for (int it = 0; it < 4; it++) begin
      ins.func = FN_AND;
      ins.src1 = mk(0, 0, 1);
      ins.src2 = mk(0, it == 0 ? 0 : 1, 2);
      ins.dest = mk(it == 3 ? 1 : 0, it == 1 ? 1 : (it == 2 ? 0 : 2), 3);
      @(negedge clk);
      a_instr = ins; a_valid = 1'b1;
      #1;
      checks++;
      if (!a_err || !a_ready) failures++; else n_err_seen++;
      @(negedge clk);
      a_valid = 1'b0;
      repeat (3) begin
        checks++;
        if (a_req.cmd != CMD_NOP || a_busy) failures++;
        @(negedge clk);
      end
    end
    // back-to-back instructions on the short-timing controller
    for (int it = 0; it < 30; it++) begin
      int perm [4];
      perm = '{0, 1, 2, 3};
      perm.shuffle();
      @(negedge clk);
      b_instr.func = func_e'($urandom_range(2, 9));
      b_instr.src1 = mk(0, perm[0], it);
      b_instr.src2 = mk(0, perm[1], it + 1);
      b_instr.dest = mk(0, perm[2], it + 2);
      b_valid = 1'b1;
      do @(posedge clk); while (!b_ready);
      @(negedge clk);
      b_valid = 1'b0;
    end
    repeat (60) @(negedge clk);
    checks += mon_a_checks + mon_b_checks;
    failures += mon_a_fail + mon_b_fail;
    $display("tFAW stalls on short timing: %0d, evaluations %0d/%0d, rejected %0d",
             mon_b_faw, mon_a_eval, mon_b_eval, n_err_seen);
    checks++; if (mon_b_faw == 0) failures++;
    checks++; if (n_err_seen != 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

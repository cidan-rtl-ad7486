// cidan_top_tb: end-to-end run of the CIDAN chip with rows shortened to
// N = 512 bits (8 banks in two groups of four, DDR3-1600 timing). The
// default-size run is cidan_top_full_tb.
//
// A behavioural bank model holds ROWS random rows per bank. A stream of bbop
// instructions runs through the controller, the processing-element arrays and
// the write drivers; every result row lands in the model. A reference copy of
// the memory is updated with SystemVerilog bitwise operators, and all rows are
// compared at the end. The stream covers:
//   - every function,
//   - a multi-row vertical add whose carry stays in L1 between instructions,
//   - both bank groups,
//   - back-to-back instructions that must wait for the controller (backpressure),
//   - rejected instructions,
//   - K-bit column writes and reads by the conventional memory controller path.
// Each of these mechanisms is counted and must occur. The latency of an AND
// from an idle chip must be 41 DRAM cycles.
module cidan_top_tb;
  import cidan_pkg::*;
  localparam int N = 512, K = 8, CW = $clog2(N / K), ROWS = 16, NB = NGROUPS * 4;

  logic clk = 1'b0, rst_n = 1'b1;
  logic instr_valid, instr_ready, done, err, busy;
  bbop_t instr;
  dram_req_t dram_req, host_req;
  logic [NGROUPS-1:0][3:0][N-1:0] bank_row;
  logic [NGROUPS-1:0][3:0] bank_we;
  logic [NGROUPS-1:0][N-1:0] bank_wmask, bank_wdata;
  logic col_wr_en;
  logic [BANK_W-1:0] col_bank;
  logic [CW-1:0] col_addr;
  logic [K-1:0] col_wdata, col_rdata;
  int model_errors;
  int checks = 0, failures = 0;

  cidan_top #(.N(N), .K(K)) dut (.*);

  dram_bank_model #(.N(N), .ROWS(ROWS), .T_RCD(12)) model (
    .clk(clk), .req_a(dram_req), .req_b(host_req), .bank_we(bank_we),
    .bank_wmask(bank_wmask), .bank_wdata(bank_wdata), .bank_row(bank_row), .errors(model_errors));

  always #5 clk = ~clk;

  // a falling reset edge, so the asynchronous reset acts before the first clock
  initial #1 rst_n = 1'b0;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] gold [NB][ROWS];
  logic [N-1:0] gcarry [NGROUPS];
  int n_func [10];
  int n_backpressure = 0, n_reject = 0, n_colwr = 0, n_colrd = 0, n_chain = 0;
  int n_group [NGROUPS];

  function automatic logic [N-1:0] rand_row();
    logic [N-1:0] r;
    for (int i = 0; i < N; i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  function automatic dram_addr_t mk(int g, int b, int r);
    dram_addr_t a;
    a.bank = BANK_W'(g * 4 + b);
    a.row  = ROW_W'(r);
    return a;
  endfunction

  // reference result of one instruction
  task automatic ref_op(bbop_t ins);
    logic [N-1:0] a, b, r, cin;
    int g = int'(ins.dest.bank) / 4;
    a = gold[ins.src1.bank][ins.src1.row % ROWS];
    b = gold[ins.src2.bank][ins.src2.row % ROWS];
    case (ins.func)
      FN_COPY: r = a;
      FN_NOT:  r = ~a;
      FN_AND:  r = a & b;
      FN_OR:   r = a | b;
      FN_NAND: r = ~(a & b);
      FN_NOR:  r = ~(a | b);
      FN_XOR:  r = a ^ b;
      FN_XNOR: r = ~(a ^ b);
      default: begin
        cin = (ins.func == FN_ADD) ? gcarry[g] : '0;
        r = a ^ b ^ cin;
        gcarry[g] = (a & b) | (a & cin) | (b & cin);
      end
    endcase
    gold[ins.dest.bank][ins.dest.row % ROWS] = r;
  endtask

  // issue one instruction; hold it until accepted; returns cycles to done
  task automatic issue(bbop_t ins, bit wait_done, output int lat);
    int c = 0;
    @(negedge clk);
    instr = ins; instr_valid = 1'b1;
    @(posedge clk);
    while (!instr_ready) begin n_backpressure++; @(posedge clk); end
    #1;
    @(negedge clk);
    instr_valid = 1'b0;
    ref_op(ins);
    n_func[int'(ins.func)]++;
    n_group[int'(ins.dest.bank) / 4]++;
    lat = 0;
    if (wait_done) begin
      c = 1;
      while (!done) begin @(negedge clk); c++; end
      lat = c;
    end
  endtask

  task automatic rand_op(func_e f, int g, output bbop_t ins);
    int perm [4] = '{0, 1, 2, 3};
    perm.shuffle();
    ins.func = f;
    ins.src1 = mk(g, perm[0], $urandom_range(0, ROWS - 1));
    ins.src2 = mk(g, perm[1], $urandom_range(0, ROWS - 1));
    ins.dest = mk(g, perm[2], $urandom_range(0, ROWS - 1));
  endtask

  initial begin
    bbop_t ins;
    int lat;
    instr_valid = 0; instr = '0; host_req = '{cmd: CMD_NOP, bank: '0, row: '0};
    col_wr_en = 0; col_bank = '0; col_addr = '0; col_wdata = '0;
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < ROWS; r++) begin
        gold[b][r] = rand_row();
        model.mem[b][r] = gold[b][r];
      end
    for (int g = 0; g < NGROUPS; g++) gcarry[g] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (12) @(negedge clk);

    // latency of one AND from an idle chip
    rand_op(FN_AND, 0, ins);
    issue(ins, 1, lat);
    $display("AND latency %0d cycles", lat);
    checks++; if (lat != 41) failures++;

    // every function on both groups, back to back
    for (int it = 0; it < 16; it++) begin
      rand_op(func_e'(it % 8), it % NGROUPS, ins);
      issue(ins, 0, lat);
    end

    // 4-bit vertical add in group 1: rows 0..3 of banks 4 and 5 into bank 6 rows 8..11
    for (int i = 0; i < 4; i++) begin
      ins.func = (i == 0) ? FN_ADD0 : FN_ADD;
      ins.src1 = mk(1, 0, i);
      ins.src2 = mk(1, 1, i);
      ins.dest = mk(1, 2, 8 + i);
      issue(ins, 0, lat);
      if (i > 0) n_chain++;
    end
    // interleave a group-0 add: group 1's carry must survive it
    rand_op(FN_ADD0, 0, ins);
    issue(ins, 0, lat);
    ins.func = FN_ADD; ins.src1 = mk(1, 0, 4); ins.src2 = mk(1, 1, 4); ins.dest = mk(1, 3, 12);
    issue(ins, 0, lat);
    n_chain++;

    // rejected instructions: source and destination in one bank, banks in two groups
    for (int it = 0; it < 2; it++) begin
      ins.func = FN_OR;
      ins.src1 = mk(0, 1, 0);
      ins.src2 = mk(0, 2, 0);
      ins.dest = it == 0 ? mk(0, 1, 5) : mk(1, 3, 5);
      do @(negedge clk); while (!instr_ready);
      instr = ins; instr_valid = 1'b1;
      #1;
      checks++;
      if (!err) failures++; else n_reject++;
      @(negedge clk);
      instr_valid = 1'b0;
    end

    // conventional column access: ACT, column writes and reads, PREA
    do @(negedge clk); while (busy);
    repeat (12) @(negedge clk);
    for (int it = 0; it < 6; it++) begin
      int b, r, ca;
      logic [K-1:0] v;
      b = $urandom_range(0, NB - 1);
      r = $urandom_range(0, ROWS - 1);
      host_req = '{cmd: CMD_ACT, bank: BANK_W'(b), row: ROW_W'(r)};
      @(negedge clk);
      host_req.cmd = CMD_NOP;
      repeat (12) @(negedge clk);
      for (int w = 0; w < 4; w++) begin
        ca = $urandom_range(0, N / K - 1);
        v = K'($urandom);
        col_wr_en = 1'b1; col_bank = BANK_W'(b); col_addr = CW'(ca); col_wdata = v;
        @(negedge clk);
        col_wr_en = 1'b0;
        gold[b][r][ca * K +: K] = v;
        n_colwr++;
        @(negedge clk);
        checks++;
        if (col_rdata !== v) failures++;
        n_colrd++;
        ca = $urandom_range(0, N / K - 1);
        col_addr = CW'(ca);
        #1;
        checks++;
        if (col_rdata !== gold[b][r][ca * K +: K]) failures++;
        n_colrd++;
      end
      @(negedge clk);
      host_req = '{cmd: CMD_PREA, bank: '0, row: '0};
      @(negedge clk);
      host_req.cmd = CMD_NOP;
      repeat (10) @(negedge clk);
    end

    // two-cycle functions once more after column traffic
    rand_op(FN_XNOR, 1, ins);
    issue(ins, 1, lat);
    rand_op(FN_XOR, 0, ins);
    issue(ins, 1, lat);
    repeat (20) @(negedge clk);

    // compare the whole memory
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (model.mem[b][r] !== gold[b][r]) begin
          failures++;
          if (failures < 8) $display("bank %0d row %0d differs", b, r);
        end
      end
    checks++;
    if (model_errors != 0) begin failures++; $display("bank protocol errors %0d", model_errors); end

    // every mechanism must have happened
    for (int f = 0; f < 10; f++) begin
      checks++;
      if (n_func[f] == 0) begin failures++; $display("%s never ran", func_e'(f)); end
    end
    for (int g = 0; g < NGROUPS; g++) begin checks++; if (n_group[g] == 0) failures++; end
    checks++; if (n_backpressure == 0) failures++;
    checks++; if (n_reject != 2) failures++;
    checks++; if (n_colwr == 0 || n_colrd == 0) failures++;
    checks++; if (n_chain == 0) failures++;
    $display("mechanisms: backpressure %0d cycles, rejected %0d, carry chains %0d, col wr %0d rd %0d",
             n_backpressure, n_reject, n_chain, n_colwr, n_colrd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tlpea_tb: a whole processing-element array applying one function to full rows.
//
// Four random rows stand for the open rows of the four banks. For every
// function and random choice of operand banks, the row-wide result must equal
// the bitwise function of the two source rows, computed here with SystemVerilog
// operators. A bit-serial add of N independent 8-bit numbers, stored one bit
// per row as in a vertical layout, checks that every element keeps its own
// carry across instructions.
module tlpea_tb;
  import cidan_pkg::*;
  localparam int unsigned N = 256;
  logic clk = 1'b0, rst_n = 1'b0, ce = 1'b0;
  logic [3:0][N-1:0] bank_row;
  tlpe_ctrl_t ctrl;
  logic [N-1:0] op, carry;
  int checks = 0, failures = 0;

  tlpea #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] rand_row();
    logic [N-1:0] r;
    for (int i = 0; i < N; i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  function automatic logic [N-1:0] ref_fn(func_e f, logic [N-1:0] a, logic [N-1:0] b);
    case (f)
      FN_COPY: return a;
      FN_NOT:  return ~a;
      FN_AND:  return a & b;
      FN_OR:   return a | b;
      FN_NAND: return ~(a & b);
      FN_NOR:  return ~(a | b);
      FN_XOR:  return a ^ b;
      FN_XNOR: return ~(a ^ b);
      default: return '0;
    endcase
  endfunction

  task automatic run(func_e f, logic [1:0] m, logic [1:0] n);
    int ncyc = fn_two_cycle(f) ? 2 : 1;
    for (int c = 0; c < ncyc; c++) begin
      ce = 1'b1;
      ctrl = fn_ctrl(f, c[0], m, n);
      @(negedge clk);
    end
    ce = 1'b0;
    ctrl = CTRL_IDLE;
  endtask

  initial begin
    logic [1:0] m, n;
    logic [7:0] A [N], B [N];
    logic [8:0] S;
    ctrl = CTRL_IDLE;
    for (int b = 0; b < 4; b++) bank_row[b] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 200; it++) begin
      func_e f = func_e'(it % 8);
      for (int b = 0; b < 4; b++) bank_row[b] = rand_row();
      m = 2'($urandom);
      n = 2'($urandom);
      while (n == m) n = 2'($urandom);
      run(f, m, n);
      checks++;
      if (op !== ref_fn(f, bank_row[m], bank_row[n])) begin
        failures++;
        if (failures < 5) $display("%s m=%0d n=%0d mismatch", f.name(), m, n);
      end
    end
    // vertical add of N 8-bit numbers: row i holds bit i of every number
    for (int j = 0; j < N; j++) begin A[j] = 8'($urandom); B[j] = 8'($urandom); end
    m = 2'd2; n = 2'd0;
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < N; j++) begin
        bank_row[m][j] = A[j][i];
        bank_row[n][j] = B[j][i];
        bank_row[1][j] = 1'($urandom);
        bank_row[3][j] = 1'($urandom);
      end
      run(i == 0 ? FN_ADD0 : FN_ADD, m, n);
      for (int j = 0; j < N; j++) begin
        S = 9'(A[j]) + 9'(B[j]);
        checks++;
        if (op[j] !== S[i]) failures++;
        if (i == 7) begin
          checks++;
          if (carry[j] !== S[8]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

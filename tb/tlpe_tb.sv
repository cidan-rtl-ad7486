// tlpe_tb: the processing element running every function of the paper's table
// and the two-cycle adder schedule.
//
// For random operand bits on random input positions (the other two inputs
// carry random, disabled bits), each function's control words from cidan_pkg
// are applied with the array clock enabled, and O1 is compared with the
// Boolean function written directly in SystemVerilog. Two-cycle functions must
// be right after the second cycle; a one-cycle function is right after one.
// For the adder, a random multi-bit addition runs bit-serially (FN_ADD0 for
// bit 0, FN_ADD after), checking each sum bit and the carry kept in L1.
module tlpe_tb;
  import cidan_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, ce = 1'b0;
  logic [3:0] bits;
  tlpe_ctrl_t ctrl;
  logic o1, carry;
  int checks = 0, failures = 0;

  tlpe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic ref_fn(func_e f, logic a, logic b);
    case (f)
      FN_COPY: return a;
      FN_NOT:  return ~a;
      FN_AND:  return a & b;
      FN_OR:   return a | b;
      FN_NAND: return ~(a & b);
      FN_NOR:  return ~(a | b);
      FN_XOR:  return a ^ b;
      FN_XNOR: return ~(a ^ b);
      default: return 1'b0;
    endcase
  endfunction

  task automatic run(func_e f, logic [1:0] m, logic [1:0] n, logic a, logic b);
    int ncyc = fn_two_cycle(f) ? 2 : 1;
    @(negedge clk);
    bits = 4'($urandom);
    bits[m] = a;
    if (fn_two_src(f)) bits[n] = b;
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
    logic a, b;
    logic [15:0] A, B;
    logic [16:0] S, mask;
    bits = '0; ctrl = CTRL_IDLE;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 2000; it++) begin
      func_e f = func_e'(it % 8);
      m = 2'($urandom);
      n = 2'($urandom);
      while (n == m) n = 2'($urandom);
      a = 1'($urandom); b = 1'($urandom);
      run(f, m, n, a, b);
      checks++;
      if (o1 !== ref_fn(f, a, b)) begin
        failures++;
        if (failures < 10) $display("%s m=%0d n=%0d a=%b b=%b got %b", f.name(), m, n, a, b, o1);
      end
      // result must hold while the array clock is off
      @(negedge clk); bits = ~bits; @(negedge clk);
      checks++;
      if (o1 !== ref_fn(f, a, b)) failures++;
    end
    // bit-serial addition through L1
    for (int it = 0; it < 50; it++) begin
      A = 16'($urandom); B = 16'($urandom);
      S = 17'(A) + 17'(B);
      m = 2'($urandom); n = m + 2'd1 + 2'($urandom_range(0, 2));
      for (int i = 0; i < 16; i++) begin
        run(i == 0 ? FN_ADD0 : FN_ADD, m, n, A[i], B[i]);
        checks++;
        if (o1 !== S[i]) begin
          failures++;
          if (failures < 10) $display("add bit %0d got %b exp %b", i, o1, S[i]);
        end
        checks++;
        mask = (17'd1 << (i + 1)) - 17'd1;
        if (carry !== 1'(((17'(A) & mask) + (17'(B) & mask)) >> (i + 1))) failures++;
      end
      checks++;
      if (carry !== S[16]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tlg_tb: exhaustive check of the threshold gate [-2,1,1,1,1,1; T].
//
// Every combination of the five positive inputs, their enables, the negative
// input and its enable, and the two threshold branches (2^14 cases) is applied.
// The expected output is computed directly from the threshold definition
// f = (sum of enabled w_i x_i >= T), with w = -2 for the negative branch and
// T = number of enabled threshold branches. Both the decision d and the value
// captured on the next edge are checked, and a cycle with ce low must hold y.
module tlg_tb;
  logic clk = 1'b0, rst_n = 1'b0, ce = 1'b0;
  logic [4:0] x, en;
  logic x_neg, en_neg, d, y;
  logic [1:0] en_t;
  int checks = 0, failures = 0;

  tlg #(.N_POS(5), .NEG_W(2), .N_T(2)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum, t;
    logic exp_y;
    {x, en, x_neg, en_neg, en_t} = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    checks++; if (y !== 1'b0) failures++;
    for (int v = 0; v < (1 << 14); v++) begin
      @(negedge clk);
      {x, en, x_neg, en_neg, en_t} = 14'(v);
      ce = 1'b1;
      sum = 0;
      for (int i = 0; i < 5; i++) if (x[i] && en[i]) sum += 1;
      if (x_neg && en_neg) sum -= 2;
      t = int'(en_t[0]) + int'(en_t[1]);
      exp_y = (sum >= t);
      #1;
      checks++;
      if (d !== exp_y) begin
        failures++;
        if (failures < 10) $display("d mismatch v=%h got %b exp %b", v, d, exp_y);
      end
      @(posedge clk); #1;
      checks++;
      if (y !== exp_y) failures++;
      // hold with the array clock gated
      if ((v % 97) == 0) begin
        @(negedge clk);
        ce = 1'b0;
        {x, en} = ~{x, en};
        @(posedge clk); #1;
        checks++;
        if (y !== exp_y) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

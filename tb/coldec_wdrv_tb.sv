// coldec_wdrv_tb: column reads, column writes and full-row write-back.
//
// Random open rows feed the block. A column read must return bits
// [col*K +: K] of the selected bank's row. A column write must enable only that
// bank and only those K bit-lines, carrying the bus data. A write-back must
// enable only the destination bank, drive every bit-line and carry the array
// output unchanged. Expected values are built independently in the testbench.
module coldec_wdrv_tb;
  localparam int unsigned N = 128, K = 8, CW = $clog2(N / K);
  logic clk = 1'b0;
  logic [3:0][N-1:0] bank_row;
  logic [N-1:0] tlpea_op, bank_wmask, bank_wdata;
  logic wb_en, col_wr_en;
  logic [1:0] wb_bank, col_bank;
  logic [CW-1:0] col_addr;
  logic [K-1:0] col_wdata, col_rdata;
  logic [3:0] bank_we;
  int checks = 0, failures = 0;

  coldec_wdrv #(.N(N), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] exp_mask, exp_data;
    wb_en = 0; col_wr_en = 0; wb_bank = 0; col_bank = 0; col_addr = 0; col_wdata = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      for (int b = 0; b < 4; b++)
        for (int i = 0; i < N; i += 32) bank_row[b][i +: 32] = $urandom;
      for (int i = 0; i < N; i += 32) tlpea_op[i +: 32] = $urandom;
      wb_bank = 2'($urandom); col_bank = 2'($urandom);
      col_addr = CW'($urandom); col_wdata = K'($urandom);
      case (it % 3)
        0: begin wb_en = 0; col_wr_en = 0; end
        1: begin wb_en = 0; col_wr_en = 1; end
        default: begin wb_en = 1; col_wr_en = 0; end
      endcase
      #1;
      checks++;
      for (int k = 0; k < K; k++)
        if (col_rdata[k] !== bank_row[col_bank][int'(col_addr) * K + k]) begin failures++; break; end
      exp_mask = '0; exp_data = '0;
      if (wb_en) begin exp_mask = '1; exp_data = tlpea_op; end
      else if (col_wr_en)
        for (int k = 0; k < K; k++) begin
          exp_mask[int'(col_addr) * K + k] = 1'b1;
          exp_data[int'(col_addr) * K + k] = col_wdata[k];
        end
      checks++;
      if (bank_we !== (wb_en ? 4'(1) << wb_bank : col_wr_en ? 4'(1) << col_bank : 4'b0)) failures++;
      checks++;
      if (bank_wmask !== exp_mask) failures++;
      checks++;
      if ((bank_wdata & exp_mask) !== exp_data) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// cidan_matching_index_tb: the graph "matching index" workload and a multi-row
// bulk XOR, run through the whole chip (rows shortened to N = 512 bits).
//
// A random undirected graph with V = 512 vertices is stored as an adjacency
// matrix. Vertex v's neighbour bits are row v mod 16 of bank v / 16 (banks 0..1
// of group 0 hold the first 32 vertices). For pairs of vertices in different
// banks, the chip computes AND (common neighbours) and OR (all neighbours of
// either) into banks 2 and 3. The host side (this testbench) then counts the
// ones. The reference counts come from an edge list, not from the rows. The
// bulk part XORs two 8-row vectors row by row, one instruction per row, as the
// instruction stream would for data longer than a row.
module cidan_matching_index_tb;
  import cidan_pkg::*;
  localparam int N = 512, K = 8, CW = $clog2(N / K), ROWS = 16, NB = NGROUPS * 4;
  localparam int V = N;

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
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // edge list of the first 32 vertices' neighbourhoods: adj[u][w]
  bit adj [32][V];

  task automatic run(func_e f, dram_addr_t s1, dram_addr_t s2, dram_addr_t d);
    @(negedge clk);
    instr = '{dest: d, src1: s1, src2: s2, func: f};
    instr_valid = 1'b1;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    @(negedge clk);
    instr_valid = 1'b0;
    while (!done) @(negedge clk);
  endtask

  function automatic dram_addr_t at(int bank, int row);
    return '{bank: BANK_W'(bank), row: ROW_W'(row)};
  endfunction

  initial begin
    int n_pairs = 0, common, total, hw_c, hw_t;
    logic [N-1:0] a, b;
    instr_valid = 0; instr = '0; host_req = '{cmd: CMD_NOP, bank: '0, row: '0};
    col_wr_en = 0; col_bank = '0; col_addr = '0; col_wdata = '0;
    // random sparse graph: about 1 in 8 possible edges
    for (int u = 0; u < 32; u++) for (int w = 0; w < V; w++) adj[u][w] = 1'b0;
    for (int u = 0; u < 32; u++)
      for (int w = 0; w < V; w++)
        if (w != u && $urandom_range(0, 7) == 0) begin
          adj[u][w] = 1'b1;
          if (w < 32) adj[w][u] = 1'b1;
        end
    for (int u = 0; u < 32; u++)
      for (int w = 0; w < V; w++) model.mem[u / 16][u % 16][w] = adj[u][w];
    // two 8-row vectors for the bulk XOR in group 1
    for (int r = 0; r < 8; r++) begin
      for (int i = 0; i < N; i += 32) begin
        model.mem[4][r][i +: 32] = $urandom;
        model.mem[5][r][i +: 32] = $urandom;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (12) @(negedge clk);

    // matching index for 12 random vertex pairs (u in bank 0, w in bank 1)
    for (int it = 0; it < 12; it++) begin
      int u, w;
      u = $urandom_range(0, 15);
      w = 16 + $urandom_range(0, 15);
      run(FN_AND, at(0, u), at(1, w - 16), at(2, it));
      run(FN_OR,  at(0, u), at(1, w - 16), at(3, it));
      common = 0; total = 0;
      for (int x = 0; x < V; x++) begin
        if (adj[u][x] && adj[w][x]) common++;
        if (adj[u][x] || adj[w][x]) total++;
      end
      a = model.mem[2][it];
      b = model.mem[3][it];
      hw_c = $countones(a);
      hw_t = $countones(b);
      checks += 2;
      if (hw_c != common) failures++;
      if (hw_t != total) failures++;
      if (it < 3) $display("M(%0d,%0d) = %0d / %0d", u, w, hw_c, hw_t);
      n_pairs++;
    end

    // bulk XOR of two 8-row vectors (4096 bits each)
    for (int r = 0; r < 8; r++) run(FN_XOR, at(4, r), at(5, r), at(6, r));
    for (int r = 0; r < 8; r++) begin
      checks++;
      if (model.mem[6][r] !== (model.mem[4][r] ^ model.mem[5][r])) failures++;
    end
    checks++;
    if (model_errors != 0) failures++;
    checks++;
    if (n_pairs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

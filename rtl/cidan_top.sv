// cidan_top: the compute side of a CIDAN DRAM chip.
//
// A chip has NGROUPS groups of four banks (8 banks, 2 groups, by default). Each
// group has one processing-element array (tlpea) of N elements, fed by the four
// banks' open rows. Each group also has one column decoder and write driver
// (coldec_wdrv). It writes the array output back into a bank or serves K-bit
// column accesses from the memory data bus. One controller (cidan_ctrl) turns
// bbop instructions into DRAM commands, array control words and the
// write-back strobe. The banks themselves are unmodified commodity DRAM and
// stay outside. Their open rows (bank_row) come in; their write ports
// (bank_we/wmask/wdata) and the command stream (dram_req) go out. The
// conventional memory controller drives the column port directly.
//
// Defaults follow the evaluated configuration: N = 8192 bits per row
// (1024 columns x 8 bits), K = 8 data-bus bits, 8 banks of 16384 rows,
// DDR3-1600 timing (see cidan_pkg). Everything a group does besides what the
// controller commands is this design's own: array clock enable, write-back
// strobe, grouping by the top bank-address bit.
// Each array's carry outputs stay inside the top: the adder keeps its carry in
// the elements between instructions, and nothing in the chip reads it
// directly, so a lint tool reports the per-group `carry` net as unused.
// Timing: see cidan_ctrl; an instruction occupies the chip for about 41 DRAM
// cycles plus tRP before the next one can activate.
module cidan_top
  import cidan_pkg::*;
#(
  parameter int unsigned N = 8192,
  parameter int unsigned K = 8,
  localparam int unsigned CW = $clog2(N / K)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // bbop instruction port
  input  logic                           instr_valid,
  output logic                           instr_ready,
  input  bbop_t                          instr,
  output logic                           done,
  output logic                           err,
  output logic                           busy,
  // DRAM command stream to the banks
  output dram_req_t                      dram_req,
  // bank bit-lines: open rows in, write drivers out
  input  logic [NGROUPS-1:0][3:0][N-1:0] bank_row,
  output logic [NGROUPS-1:0][3:0]        bank_we,
  output logic [NGROUPS-1:0][N-1:0]      bank_wmask,
  output logic [NGROUPS-1:0][N-1:0]      bank_wdata,
  // column access from the memory data bus
  input  logic                           col_wr_en,
  input  logic [BANK_W-1:0]              col_bank,
  input  logic [CW-1:0]                  col_addr,
  input  logic [K-1:0]                   col_wdata,
  output logic [K-1:0]                   col_rdata
);
  tlpe_ctrl_t         pe_ctrl;
  logic               pe_ce, wb_en;
  logic [BANK_W-3:0]  pe_group, wb_group;
  logic [1:0]         wb_bank;
  logic [NGROUPS-1:0][K-1:0] grp_rdata;

  cidan_ctrl u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .instr_valid (instr_valid),
    .instr_ready (instr_ready),
    .instr       (instr),
    .done        (done),
    .err         (err),
    .busy        (busy),
    .dram_req    (dram_req),
    .pe_ctrl     (pe_ctrl),
    .pe_ce       (pe_ce),
    .pe_group    (pe_group),
    .wb_en       (wb_en),
    .wb_group    (wb_group),
    .wb_bank     (wb_bank)
  );

  for (genvar g = 0; g < NGROUPS; g++) begin : g_grp
    logic [N-1:0] op;
    logic [N-1:0] carry;
    logic         sel_pe, sel_wb, sel_col;

    assign sel_pe  = (pe_group == (BANK_W-2)'(g));
    assign sel_wb  = wb_en && (wb_group == (BANK_W-2)'(g));
    assign sel_col = col_wr_en && (col_bank[BANK_W-1:2] == (BANK_W-2)'(g));

    tlpea #(.N(N)) u_tlpea (
      .clk      (clk),
      .rst_n    (rst_n),
      .ce       (pe_ce && sel_pe),
      .bank_row (bank_row[g]),
      .ctrl     (sel_pe ? pe_ctrl : CTRL_IDLE),
      .op       (op),
      .carry    (carry)
    );

    coldec_wdrv #(.N(N), .K(K)) u_coldec (
      .clk        (clk),
      .bank_row   (bank_row[g]),
      .tlpea_op   (op),
      .wb_en      (sel_wb),
      .wb_bank    (wb_bank),
      .col_wr_en  (sel_col),
      .col_bank   (col_bank[1:0]),
      .col_addr   (col_addr),
      .col_wdata  (col_wdata),
      .col_rdata  (grp_rdata[g]),
      .bank_we    (bank_we[g]),
      .bank_wmask (bank_wmask[g]),
      .bank_wdata (bank_wdata[g])
    );
  end

  assign col_rdata = grp_rdata[col_bank[BANK_W-1:2]];

endmodule

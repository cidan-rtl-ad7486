// coldec_wdrv: column decoder and write driver of one group of four banks.
//
// For normal memory use, the column decoder picks K bits at column `col_addr`
// out of the open row of bank `col_bank`. It puts them on the memory data bus
// (col_rdata). A column write drives the same K bit-lines with col_wdata. For
// CIDAN write-back, the paper says the column decoder selects all bit-lines of
// the destination bank, and the write drivers put TLPEA-OP on them. The row
// being computed is written whole in one command. The paper names this block
// and these two uses; the bit-mask form below is this design's simplest way
// to do both. K = 8 matches the x8 organisation (1024 x 8 columns) the paper
// evaluates.
//
// Interface: wb_en/wb_bank request a full-row write-back; col_wr_en/col_bank/
// col_addr/col_wdata request a column write. Both produce bank_we (one-hot
// bank), bank_wmask (bit-lines driven) and bank_wdata. A write-back wins over
// a column write; the two are not expected together (asserted).
// Timing: purely combinational; the bank takes the write on its clock edge.
module coldec_wdrv #(
  parameter int unsigned N = 8192,  // bits per row
  parameter int unsigned K = 8,     // data bus width
  localparam int unsigned CW = $clog2(N / K)
) (
  input  logic                 clk,
  input  logic [3:0][N-1:0]    bank_row,    // open rows of B1..B4
  input  logic [N-1:0]         tlpea_op,
  // CIDAN write-back
  input  logic                 wb_en,
  input  logic [1:0]           wb_bank,
  // normal column access
  input  logic                 col_wr_en,
  input  logic [1:0]           col_bank,
  input  logic [CW-1:0]        col_addr,
  input  logic [K-1:0]         col_wdata,
  output logic [K-1:0]         col_rdata,
  // to the bit-lines of the four banks
  output logic [3:0]           bank_we,
  output logic [N-1:0]         bank_wmask,
  output logic [N-1:0]         bank_wdata
);
  logic [N-1:0] row_sel;

  always_comb begin
    row_sel   = bank_row[col_bank];
    col_rdata = row_sel[col_addr*K +: K];
  end

  always_comb begin
    bank_we    = '0;
    bank_wmask = '0;
    bank_wdata = '0;
    if (wb_en) begin
      bank_we[wb_bank] = 1'b1;
      bank_wmask       = '1;
      bank_wdata       = tlpea_op;
    end else if (col_wr_en) begin
      bank_we[col_bank]            = 1'b1;
      bank_wmask[col_addr*K +: K]  = '1;
      bank_wdata[col_addr*K +: K]  = col_wdata;
    end
  end

  // A row write-back and a column write must not share a cycle.
  a_one_writer: assert property (@(posedge clk) !(wb_en && col_wr_en));

endmodule

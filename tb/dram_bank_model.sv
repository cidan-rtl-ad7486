// dram_bank_model: behavioural model of the DRAM banks of one chip, for
// simulation only (not synthesizable logic, and not part of the design).
//
// Each of the 8 banks stores ROWS rows of N bits; a row address is taken modulo
// ROWS. ACT copies a row into the bank's row buffer (the bit-line sense
// amplifiers), which drives bank_row. The row buffer reads as the inverted
// row until T_RCD cycles after the ACT, so a controller that evaluates or
// writes too early produces wrong data. A write (bank_we with a bit mask)
// updates the open row in the array and in the row buffer. PREA closes every
// bank. Protocol errors (ACT on an open bank, write to a closed bank, write
// before tRCD) are counted in `errors`. Commands arrive from the CIDAN
// controller (req_a) and from the conventional memory controller (req_b);
// the two never issue in the same cycle.
module dram_bank_model
  import cidan_pkg::*;
#(
  parameter int N     = 8192,
  parameter int ROWS  = 16,
  parameter int T_RCD = 12
) (
  input  logic                           clk,
  input  dram_req_t                      req_a,
  input  dram_req_t                      req_b,
  input  logic [NGROUPS-1:0][3:0]        bank_we,
  input  logic [NGROUPS-1:0][N-1:0]      bank_wmask,
  input  logic [NGROUPS-1:0][N-1:0]      bank_wdata,
  output logic [NGROUPS-1:0][3:0][N-1:0] bank_row,
  output int                             errors
);
  localparam int NB = NGROUPS * 4;
  logic [N-1:0] mem [NB][ROWS];
  logic [N-1:0] rowbuf [NB];
  logic         open_ [NB];
  int           open_row [NB];
  int           age [NB];

  initial begin
    errors = 0;
    for (int b = 0; b < NB; b++) begin
      open_[b] = 1'b0; age[b] = 0; open_row[b] = 0; rowbuf[b] = '0;
    end
  end

  always_comb
    for (int b = 0; b < NB; b++)
      bank_row[b / 4][b % 4] = (open_[b] && age[b] >= T_RCD) ? rowbuf[b] : ~rowbuf[b];

  task automatic do_cmd(dram_req_t r);
    case (r.cmd)
      CMD_ACT: begin
        if (open_[r.bank]) errors++;
        open_[r.bank]    = 1'b1;
        open_row[r.bank] = int'(r.row) % ROWS;
        rowbuf[r.bank]   = mem[r.bank][int'(r.row) % ROWS];
        age[r.bank]      = 0;
      end
      CMD_PREA: for (int b = 0; b < NB; b++) open_[b] = 1'b0;
      default: ;
    endcase
  endtask

  always @(posedge clk) begin
    for (int b = 0; b < NB; b++)
      if (bank_we[b / 4][b % 4]) begin
        if (!open_[b] || age[b] < T_RCD) errors++;
        rowbuf[b] = (rowbuf[b] & ~bank_wmask[b / 4]) | (bank_wdata[b / 4] & bank_wmask[b / 4]);
        mem[b][open_row[b]] = rowbuf[b];
      end
    if (req_a.cmd != CMD_NOP && req_b.cmd != CMD_NOP) errors++;
    do_cmd(req_a);
    do_cmd(req_b);
    for (int b = 0; b < NB; b++) if (age[b] < 1000) age[b]++;
  end
endmodule

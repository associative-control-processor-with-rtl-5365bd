// pamu_matrix: matrix M of deciding elements (DE) with end-description gates.
//
// The matrix has M_LEN rows and N_ET columns. Column j holds etalon j: the DE
// in row r stores the symbol at position r+1 of that etalon ("flashing" sets
// which decoder bus the element listens to). A DE fires when its decoder bus
// and its distributor row are both active; the DEs of a column are ORed into
// the column signal col[j], the match signal alpha of that etalon for the
// current step.
//
// Etalons shorter than M_LEN leave their upper DEs unused. In the row after
// the last symbol of a column sits the end-description gate B1: it fires when
// the distributor has reached that row and the column's detector ie[j] is
// still 1, i.e. the whole etalon has been matched. The B1 outputs together
// form the completion signal K2 (ORed in the PAMU). The distributor therefore
// has M_LEN+1 rows.
//
// Structure and gating follow the paper's schemes; holding each DE's bus
// selection in a register written through `flash` (instead of a fixed wire)
// is this design's choice. Writes take effect on the next clock; col and b1
// are combinational in line, row and ie. Reset clears all DEs and B1s.
module pamu_matrix
  import assoc_pkg::*;
#(
  parameter int unsigned N_ET  = 3,
  parameter int unsigned M_LEN = 5,
  parameter int unsigned NSYM  = 5,
  parameter int unsigned SYM_W = (NSYM > 1) ? $clog2(NSYM) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pamu_flash_t       flash,
  input  logic [NSYM-1:0]   line,   // decoder buses
  input  logic [M_LEN:0]    row,    // distributor, M_LEN+1 digits
  input  logic [N_ET-1:0]   ie,     // indicator states, inputs of B1
  output logic [N_ET-1:0]   col,    // column signals to LI and B2
  output logic [N_ET-1:0]   b1      // end-description gate outputs
);

  localparam int unsigned ROW_W = $clog2(M_LEN + 1);

  localparam int unsigned COL_W = (N_ET > 1) ? $clog2(N_ET) : 1;
  localparam int unsigned DER_W = (M_LEN > 1) ? $clog2(M_LEN) : 1;

  logic [SYM_W-1:0] de_code [M_LEN][N_ET];
  logic             de_used [M_LEN][N_ET];
  logic [ROW_W-1:0] end_row [N_ET];
  logic             end_set [N_ET];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < M_LEN; r++)
        for (int j = 0; j < N_ET; j++) begin
          de_code[r][j] <= '0;
          de_used[r][j] <= 1'b0;
        end
      for (int j = 0; j < N_ET; j++) begin
        end_row[j] <= '0;
        end_set[j] <= 1'b0;
      end
    end else if (flash.we && 32'(flash.col) < N_ET) begin
      if (flash.is_end) begin
        if (32'(flash.row) <= M_LEN) begin
          end_row[COL_W'(flash.col)] <= ROW_W'(flash.row);
          end_set[COL_W'(flash.col)] <= 1'b1;
        end
      end else if (32'(flash.row) < M_LEN) begin
        de_code[DER_W'(flash.row)][COL_W'(flash.col)] <= SYM_W'(flash.code);
        de_used[DER_W'(flash.row)][COL_W'(flash.col)] <= 32'(flash.code) < NSYM;
      end
    end
  end

  // Deciding elements: DE_rj = row[r] & line[code_rj]; column = OR over rows.
  always_comb begin
    for (int j = 0; j < N_ET; j++) begin
      col[j] = 1'b0;
      for (int r = 0; r < M_LEN; r++)
        if (de_used[r][j] && row[r] && line[de_code[r][j]]) col[j] = 1'b1;
    end
  end

  // End-description gates B1: distributor at the end row and detector still 1.
  always_comb begin
    for (int j = 0; j < N_ET; j++)
      b1[j] = end_set[j] && row[end_row[j]] && ie[j];
  end

endmodule

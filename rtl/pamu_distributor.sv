// pamu_distributor: the distributor (shift register) of the PAMU.
//
// Holds the position in the chain being compared as a one-hot word: digit r
// selects row r of the matrix, i.e. the (r+1)-th symbol of every etalon.
// init sets the first digit (the paper's "first digit of the distributor is
// set to 1"); shift, raised on every accepted step (K and K1), moves the one
// to the next digit. Shifting past the last digit leaves no row selected.
// ROWS is one more than the longest etalon so that the end-description gates
// B1 of the longest column also have a row. init wins over shift.
//
// Timing: row changes one clock after init or shift; asynchronous
// active-low reset clears it.
module pamu_distributor #(
  parameter int unsigned ROWS = 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init,
  input  logic            shift,
  output logic [ROWS-1:0] row
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     row <= '0;
    else if (init)  row <= ROWS'(1);
    else if (shift) row <= row << 1;
  end

  // The distributor selects at most one row.
  a_one_row: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(row));

endmodule

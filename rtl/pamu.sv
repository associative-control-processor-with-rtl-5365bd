// pamu: parallel associative memory unit with correction.
//
// Compares an incoming chain of symbols with N_ET etalon chains at once, one
// symbol per step, using the "complete coincidence" rule: an etalon matches
// when every one of its symbols has been met in order.
//
// Before a comparison nu sets every detector to 1 and the distributor to its
// first row. In each step the symbol is decoded to a unary bus; the deciding
// elements of the current row that were flashed with that symbol raise their
// column signals. With K1 (some live etalon accepts the symbol) the strobe K
// updates the detectors (a column without signal drops out) and shifts the
// distributor. Without K1 the symbol is treated as interference: nothing
// changes and the next symbol is compared at the same position. When the
// distributor reaches the row after the last symbol of an etalon whose
// detector is still 1, that column's end gate B1 fires and K2 reports
// completion; end_hit names the column. d reads the detectors out on s.
//
// Etalons may have different lengths (1..M_LEN). The unit follows the
// paper's structural scheme with correction; the flash port and the single
// clock are this design's choices. CORRECTION = 0 gives the paper's basic
// scheme instead: no K1 gating of K and no end gates (K2 stays 0), so every
// etalon must be M_LEN symbols long, every symbol is strobed into the
// detectors, and the answer is read on s after the whole chain.
//
// Timing: one step per clock with k = 1. K1 is combinational in the current
// symbol; K2 and end_hit are combinational in the state and rise in the
// clock after the accepting step of an etalon's last symbol.
module pamu
  import assoc_pkg::*;
#(
  parameter int unsigned N_ET  = 3,
  parameter int unsigned M_LEN = 5,
  parameter int unsigned NSYM  = 5,
  parameter int unsigned SYM_W = (NSYM > 1) ? $clog2(NSYM) : 1,
  parameter bit          CORRECTION = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  pamu_flash_t      flash,
  input  logic             nu,
  input  logic             k,
  input  logic             sym_valid,
  input  logic [SYM_W-1:0] sym,
  input  logic             d,
  output logic             k1,
  output logic             k2,
  output logic [N_ET-1:0]  s,
  output logic [N_ET-1:0]  end_hit,
  output logic [N_ET-1:0]  ie,
  output logic [M_LEN:0]   row
);

  logic [NSYM-1:0] line;
  logic [N_ET-1:0] col;
  logic            b3;
  logic [N_ET-1:0] b1;

  pamu_decoder #(.NSYM(NSYM), .SYM_W(SYM_W)) u_dc (
    .en  (sym_valid),
    .code(sym),
    .line(line)
  );

  pamu_distributor #(.ROWS(M_LEN + 1)) u_dist (
    .clk  (clk),
    .rst_n(rst_n),
    .init (nu),
    .shift(b3),
    .row  (row)
  );

  pamu_matrix #(.N_ET(N_ET), .M_LEN(M_LEN), .NSYM(NSYM), .SYM_W(SYM_W)) u_m (
    .clk  (clk),
    .rst_n(rst_n),
    .flash(flash),
    .line (line),
    .row  (row),
    .ie   (ie),
    .col  (col),
    .b1   (b1)
  );

  indication_line #(.N_ET(N_ET), .CORRECTION(CORRECTION)) u_li (
    .clk  (clk),
    .rst_n(rst_n),
    .nu   (nu),
    .k    (k),
    .col  (col),
    .d    (d),
    .ie   (ie),
    .s    (s),
    .k1   (k1),
    .b3   (b3)
  );

  // Without correction there are no end gates: all etalons have length
  // M_LEN and the result is read from the detectors with d.
  assign end_hit = CORRECTION ? b1 : '0;
  assign k2      = |end_hit;

endmodule

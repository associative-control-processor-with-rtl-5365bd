// pamu_decoder: input decoder DC of the PAMU.
//
// Turns the binary code of the incoming symbol into unary code: exactly one
// of NSYM output buses is active while a symbol is present (en = 1). Each bus
// runs past every deciding element of the matrix; the elements "flashed" to
// that symbol respond to it. A code of NSYM or more activates no bus.
// The unary conversion is the paper's; the binary input coding is this
// design's choice. Purely combinational.
module pamu_decoder #(
  parameter int unsigned NSYM  = 5,
  parameter int unsigned SYM_W = (NSYM > 1) ? $clog2(NSYM) : 1
) (
  input  logic             en,
  input  logic [SYM_W-1:0] code,
  output logic [NSYM-1:0]  line
);

  always_comb begin
    line = '0;
    for (int unsigned k = 0; k < NSYM; k++)
      if (en && code == SYM_W'(k)) line[k] = 1'b1;
  end

endmodule

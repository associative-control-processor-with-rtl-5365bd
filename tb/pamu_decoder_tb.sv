// pamu_decoder_tb: exhaustive test of the input decoder: every code with
// en = 0 and en = 1 against the unary code computed here.
module pamu_decoder_tb;
  localparam int NSYM = 5, SYM_W = 3;
  logic en;
  logic [SYM_W-1:0] code;
  logic [NSYM-1:0] line, exp_line;
  int checks = 0, failures = 0;

  pamu_decoder #(.NSYM(NSYM), .SYM_W(SYM_W)) dut (.en, .code, .line);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int cv = 0; cv < (1 << SYM_W); cv++) begin
        en = e[0]; code = cv[SYM_W-1:0];
        #1;
        exp_line = (e == 1 && cv < NSYM) ? NSYM'(1 << cv) : '0;
        checks++;
        if (line !== exp_line) begin
          failures++;
          $display("en=%0d code=%0d line=%b exp %b", e, cv, line, exp_line);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

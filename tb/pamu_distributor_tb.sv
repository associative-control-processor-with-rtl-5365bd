// pamu_distributor_tb: random init/shift sequences against a model of the
// one-hot position (init -> first digit, shift -> next digit, past the end
// -> no digit).
module pamu_distributor_tb;
  localparam int ROWS = 6;
  logic clk = 0, rst_n = 0, init, shift;
  logic [ROWS-1:0] row;
  int pos_ref;  // -1: none
  int checks = 0, failures = 0;

  pamu_distributor #(.ROWS(ROWS)) dut (.clk, .rst_n, .init, .shift, .row);

  always #5 clk = ~clk;

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init = 0; shift = 0; pos_ref = -1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      init  = (n == 0) || ($urandom % 10 == 0);
      shift = $urandom % 2;
      @(posedge clk);
      if (init) pos_ref = 0;
      else if (shift && pos_ref >= 0) pos_ref = (pos_ref + 1 < ROWS) ? pos_ref + 1 : -1;
      #1;
      checks++;
      if (row !== ((pos_ref < 0) ? ROWS'(0) : ROWS'(1 << pos_ref))) begin
        failures++;
        $display("row=%b expected position %0d", row, pos_ref);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

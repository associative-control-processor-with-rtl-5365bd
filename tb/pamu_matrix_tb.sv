// pamu_matrix_tb: flashes the three etalons of the worked example
// E1 = (a,b,c,d,e), E2 = (e,a,b), E3 = (b,a,d,e) with their end gates, then
// drives random distributor rows, decoder buses and detector states and
// compares the column and end-gate outputs with values computed here from
// the etalon lists.
module pamu_matrix_tb;
  import assoc_pkg::*;
  localparam int N_ET = 3, M_LEN = 5, NSYM = 5;
  logic clk = 0, rst_n = 0;
  pamu_flash_t flash;
  logic [NSYM-1:0] line;
  logic [M_LEN:0] row;
  logic [N_ET-1:0] ie, col, b1, exp_col, exp_b1;
  int checks = 0, failures = 0;
  int et [N_ET][M_LEN];
  int len [N_ET];

  pamu_matrix #(.N_ET(N_ET), .M_LEN(M_LEN), .NSYM(NSYM)) dut (.clk, .rst_n, .flash, .line, .row, .ie, .col, .b1);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fl(input int c, r, code, input logic is_end);
    @(negedge clk);
    flash = '{we: 1'b1, is_end: is_end, col: 8'(c), row: 8'(r), code: 8'(code)};
    @(posedge clk);
    #1 flash = '0;
  endtask

  initial begin
    // a=0 b=1 c=2 d=3 e=4
    et = '{'{0,1,2,3,4}, '{4,0,1,-1,-1}, '{1,0,3,4,-1}};
    len = '{5, 3, 4};
    flash = '0; line = '0; row = '0; ie = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < N_ET; j++) begin
      for (int r = 0; r < len[j]; r++) fl(j, r, et[j][r], 1'b0);
      fl(j, len[j], 0, 1'b1);
    end
    for (int n = 0; n < 600; n++) begin
      int pr, sy;
      pr = $urandom % (M_LEN + 2);  // M_LEN+1: no row
      sy = $urandom % (NSYM + 1);   // NSYM: no bus
      row  = (pr <= M_LEN) ? (M_LEN+1)'(1 << pr) : '0;
      line = (sy < NSYM) ? NSYM'(1 << sy) : '0;
      ie   = N_ET'($urandom);
      #1;
      for (int j = 0; j < N_ET; j++) begin
        exp_col[j] = (pr < len[j]) && (et[j][pr] == sy);
        exp_b1[j]  = (pr == len[j]) && ie[j];
      end
      checks++;
      if (col !== exp_col || b1 !== exp_b1) begin
        failures++;
        $display("row %0d sym %0d ie %b: col=%b exp %b b1=%b exp %b", pr, sy, ie, col, exp_col, b1, exp_b1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// indication_line_tb: random test of the line of indication against a model
// of the gates (B2 = col & ie, K1 = OR B2, B3 = K & K1) and of the detectors
// (nu sets all, B3 clears those without a column signal).
module indication_line_tb;
  localparam int N_ET = 4;
  logic clk = 0, rst_n = 0, nu, k, d, k1, b3;
  logic [N_ET-1:0] col, ie, s, ie_ref;
  logic k1_ref;
  int checks = 0, failures = 0;
  int n_noise = 0, n_update = 0;

  indication_line #(.N_ET(N_ET)) dut (.clk, .rst_n, .nu, .k, .col, .d, .ie, .s, .k1, .b3);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nu = 0; k = 0; d = 0; col = '0; ie_ref = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      nu  = (n == 0) || ($urandom % 6 == 0);
      k   = $urandom % 2;
      d   = $urandom % 2;
      col = N_ET'($urandom);
      #1;
      k1_ref = |(col & ie_ref);
      checks++;
      if (k1 !== k1_ref || b3 !== (k & k1_ref) || s !== (ie_ref & {N_ET{d}})) begin
        failures++;
        $display("comb: k1=%b exp %b b3=%b s=%b ie_ref=%b", k1, k1_ref, b3, s, ie_ref);
      end
      @(posedge clk);
      if (nu) ie_ref = '1;
      else if (k && k1_ref) begin ie_ref = ie_ref & col; n_update++; end
      else if (k) n_noise++;
      #1;
      checks++;
      if (ie !== ie_ref) begin
        failures++;
        $display("state: ie=%b exp %b", ie, ie_ref);
      end
    end
    checks++;
    if (n_noise == 0 || n_update == 0) begin failures++; $display("noise or update never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// indicator_tb: random test of the indication element against a reference
// model of its rule (c sets, b & ~l resets, s = T & d), plus a directed run of
// one 4-symbol chain with one mismatch.
module indicator_tb;
  logic clk = 0, rst_n = 0;
  logic c, b, l, d, s, t;
  int checks = 0, failures = 0;
  logic t_ref;

  indicator dut (.clk, .rst_n, .c, .b, .l, .d, .s, .t);

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic ci, bi, li, di);
    @(negedge clk);
    c = ci; b = bi; l = li; d = di;
    @(posedge clk);
    if (ci) t_ref = 1'b1;
    else if (bi && !li) t_ref = 1'b0;
    #1;
    checks++;
    if (t !== t_ref || s !== (t_ref & d)) begin
      failures++;
      $display("mismatch c=%b b=%b l=%b d=%b: t=%b exp %b s=%b", ci, bi, li, di, t, t_ref, s);
    end
  endtask

  initial begin
    c = 0; b = 0; l = 0; d = 0; t_ref = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed: chain alpha = 1,1,0,1 -> result 0; chain 1,1,1 -> result 1
    step(1, 0, 0, 0);
    step(0, 1, 1, 0); step(0, 1, 1, 0); step(0, 1, 0, 0); step(0, 1, 1, 0);
    step(0, 0, 0, 1);
    checks++; if (s !== 1'b0) begin failures++; $display("chain with mismatch read 1"); end
    step(1, 0, 0, 0);
    step(0, 1, 1, 0); step(0, 1, 1, 0); step(0, 1, 1, 0);
    step(0, 0, 0, 1);
    checks++; if (s !== 1'b1) begin failures++; $display("matching chain read 0"); end
    // random
    repeat (400) step(($urandom % 8) == 0, $urandom % 2, $urandom % 2, $urandom % 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

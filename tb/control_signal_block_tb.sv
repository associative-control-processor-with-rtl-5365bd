// control_signal_block_tb: random class and u_k tables are written, then
// random requests (matched or not) are checked against the tables kept here,
// including the one-clock latency.
module control_signal_block_tb;
  import assoc_pkg::*;
  localparam int N_ET = 6, K_CL = 4, GAMMA = 8, ET_W = 3, K_W = 2;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic req, matched, u_valid, hit;
  logic [ET_W-1:0] etalon;
  logic [GAMMA-1:0] u;
  logic [K_W-1:0] k;
  int cls [N_ET];
  int ut [K_CL];
  int checks = 0, failures = 0;

  control_signal_block #(.N_ET(N_ET), .K_CL(K_CL), .GAMMA(GAMMA)) dut (
    .clk, .rst_n, .cfg, .req, .matched, .etalon, .u_valid, .u, .k, .hit);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input cfg_sel_e sel, input int a, dv);
    @(negedge clk);
    cfg = '{we: 1'b1, sel: sel, unit: 4'd0, addr: 16'(a), data: 16'(dv)};
    @(negedge clk);
    cfg = '0;
  endtask

  initial begin
    cfg = '0; req = 0; matched = 0; etalon = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < N_ET; e++) begin cls[e] = $urandom % K_CL; wr(CFG_CLASS, e, cls[e]); end
    for (int c = 0; c < K_CL; c++) begin ut[c] = $urandom % 256; wr(CFG_UTAB, c, ut[c]); end
    for (int t = 0; t < 300; t++) begin
      int e; logic m;
      e = $urandom % N_ET; m = ($urandom % 4) != 0;
      @(negedge clk);
      req = 1; matched = m; etalon = ET_W'(e);
      @(negedge clk);
      req = 0;
      checks++;
      if (!u_valid || hit !== m || (m && (k !== K_W'(cls[e]) || u !== GAMMA'(ut[cls[e]]))) || (!m && u !== '0)) begin
        failures++;
        $display("etalon %0d m=%b: valid=%b hit=%b k=%0d u=%0d expected k=%0d u=%0d", e, m, u_valid, hit, k, u, cls[e], ut[cls[e]]);
      end
      @(negedge clk);
      checks++;
      if (u_valid) begin failures++; $display("u_valid longer than one clock"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

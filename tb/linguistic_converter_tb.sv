// linguistic_converter_tb: random grid points (ascending), fuzzy values and
// reference sets are written; random inputs are converted and the point
// index, the chosen term and its degree are compared with the model here:
// i = last grid point not above x, degree of fuzzy equality
// min_j max(min(a, a'), min(abar, abar')), largest degree, lowest index on ties.
// Latency 2 clocks and one conversion per clock are checked by streaming.
module linguistic_converter_tb;
  import assoc_pkg::*;
  localparam int GAMMA = 8, I_PTS = 16, J_T = 4, J0 = 5, SYM_W = 3, PT_W = 4;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic x_valid, sym_valid;
  logic [GAMMA-1:0] x, degree;
  logic [SYM_W-1:0] sym;
  logic [PT_W-1:0] pt;
  int grid [I_PTS];
  int ma [I_PTS][J_T];
  int mc [I_PTS][J_T];
  int ra [J0][J_T];
  int rc [J0][J_T];
  int checks = 0, failures = 0;
  int xq[$];
  int terms_seen [J0];

  linguistic_converter #(.GAMMA(GAMMA), .I_PTS(I_PTS), .J_T(J_T), .J0(J0), .UNIT(1)) dut (
    .clk, .rst_n, .cfg, .x_valid, .x, .sym_valid, .sym, .pt, .degree);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input cfg_sel_e sel, input int unit, a, dv);
    @(negedge clk);
    cfg = '{we: 1'b1, sel: sel, unit: 4'(unit), addr: 16'(a), data: 16'(dv)};
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic int mn(int a, int b); return a < b ? a : b; endfunction
  function automatic int mxf(int a, int b); return a > b ? a : b; endfunction

  task automatic model(input int xv, output int i, best, bdeg);
    int cnt;
    cnt = 0;
    for (int q = 0; q < I_PTS; q++) if (grid[q] <= xv) cnt++;
    i = (cnt == 0) ? 0 : cnt - 1;
    best = 0; bdeg = -1;
    for (int r = 0; r < J0; r++) begin
      int sim;
      sim = 255;
      for (int j = 0; j < J_T; j++) sim = mn(sim, mxf(mn(ra[r][j], ma[i][j]), mn(rc[r][j], mc[i][j])));
      if (sim > bdeg) begin bdeg = sim; best = r; end
    end
  endtask

  // checker: every output compared with the input sent two clocks earlier
  always @(negedge clk) begin
    if (rst_n && sym_valid) begin
      int i, b, dg, xv;
      if (xq.size() == 0) begin failures++; $display("output without input"); end
      else begin
        xv = xq.pop_front();
        model(xv, i, b, dg);
        checks++;
        terms_seen[b]++;
        if (pt !== PT_W'(i) || sym !== SYM_W'(b) || degree !== GAMMA'(dg)) begin
          failures++;
          $display("x=%0d: pt=%0d sym=%0d deg=%0d expected %0d %0d %0d", xv, pt, sym, degree, i, b, dg);
        end
      end
    end
  end

  initial begin
    cfg = '0; x_valid = 0; x = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // writes to another unit must be ignored
    wr(CFG_COORD, 0, 3, 200);
    for (int q = 0; q < I_PTS; q++) begin grid[q] = q * 16; wr(CFG_COORD, 1, q, grid[q]); end
    for (int q = 0; q < I_PTS; q++)
      for (int j = 0; j < J_T; j++) begin
        ma[q][j] = $urandom % 256; mc[q][j] = 255 - ma[q][j];
        wr(CFG_MEMB, 1, q * J_T + j, ma[q][j]);
        wr(CFG_MEMB_C, 1, q * J_T + j, mc[q][j]);
      end
    for (int r = 0; r < J0; r++)
      for (int j = 0; j < J_T; j++) begin
        ra[r][j] = $urandom % 256; rc[r][j] = 255 - ra[r][j];
        wr(CFG_REF, 1, r * J_T + j, ra[r][j]);
        wr(CFG_REF_C, 1, r * J_T + j, rc[r][j]);
      end
    // stream: back-to-back and with gaps
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      x_valid = ($urandom % 3) != 0;
      x = GAMMA'($urandom);
      if (x_valid) xq.push_back(int'(x));
    end
    @(negedge clk); x_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (xq.size() != 0) begin failures++; $display("%0d inputs without output", xq.size()); end
    $display("terms chosen: %0d %0d %0d %0d %0d", terms_seen[0], terms_seen[1], terms_seen[2], terms_seen[3], terms_seen[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// pamu_control_tb: the control device driving a PAMU flashed with the worked
// example E1 = (a,b,c,d,e), E2 = (e,a,b), E3 = (b,a,d,e). Random chains (an
// etalon with noise symbols inserted, or random symbols) are started; the
// result (matched, etalon, noise count, S_j) and the number of clocks from
// start to done (symbols presented + 4) are compared with a model computed
// here.
module pamu_control_tb;
  import assoc_pkg::*;
  localparam int N_ET = 3, M_LEN = 5, NSYM = 5, SYM_W = 3, CHAIN_MAX = 8;
  localparam int LEN_W = 4, ET_W = 2;
  logic clk = 0, rst_n = 0;
  pamu_flash_t flash;
  logic nu, k, sym_valid, d, k1, k2, start, busy, done, matched;
  logic [SYM_W-1:0] sym;
  logic [N_ET-1:0] s, end_hit, ie, s_out;
  logic [M_LEN:0] row;
  logic [CHAIN_MAX-1:0][SYM_W-1:0] chain;
  logic [LEN_W-1:0] chain_len, noise_cnt;
  logic [ET_W-1:0] etalon;
  int checks = 0, failures = 0;
  int et [N_ET][M_LEN];
  int len [N_ET];
  int n_match = 0, n_miss = 0, n_noise = 0;

  pamu #(.N_ET(N_ET), .M_LEN(M_LEN), .NSYM(NSYM)) u_pamu (
    .clk, .rst_n, .flash, .nu, .k, .sym_valid, .sym, .d, .k1, .k2, .s, .end_hit, .ie, .row);

  pamu_control #(.CHAIN_MAX(CHAIN_MAX), .NSYM(NSYM), .N_ET(N_ET)) dut (
    .clk, .rst_n, .start, .chain, .chain_len, .nu, .k, .sym_valid, .sym, .d,
    .k1, .k2, .end_hit, .s, .busy, .done, .matched, .etalon, .s_out, .noise_cnt);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fl(input int c, r, code, input logic is_end);
    @(negedge clk);
    flash = '{we: 1'b1, is_end: is_end, col: 8'(c), row: 8'(r), code: 8'(code)};
    @(posedge clk);
    #1 flash = '0;
  endtask

  initial begin
    et = '{'{0,1,2,3,4}, '{4,0,1,-1,-1}, '{1,0,3,4,-1}};
    len = '{5, 3, 4};
    flash = '0; start = 0; chain = '0; chain_len = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < N_ET; j++) begin
      for (int r = 0; r < len[j]; r++) fl(j, r, et[j][r], 1'b0);
      fl(j, len[j], 0, 1'b1);
    end
    for (int t = 0; t < 300; t++) begin
      int ch[$];
      int e, n, pos, presented, noise, cycles, exp_et;
      logic [N_ET-1:0] live, colm;
      logic fin, exp_m;
      ch = {};
      e = $urandom % N_ET;
      if ($urandom % 3 != 0) begin
        for (int q = 0; q < len[e]; q++) begin
          if ($urandom % 4 == 0 && ch.size() < CHAIN_MAX) ch.push_back(int'($urandom % NSYM));
          if (ch.size() < CHAIN_MAX) ch.push_back(et[e][q]);
        end
      end else begin
        n = $urandom % (CHAIN_MAX + 1);
        for (int q = 0; q < n; q++) ch.push_back(int'($urandom % NSYM));
      end
      // model
      live = '1; pos = 0; presented = 0; noise = 0; fin = 0;
      while (!fin) begin
        logic c2;
        c2 = 0;
        for (int j = 0; j < N_ET; j++) if (live[j] && pos == len[j]) c2 = 1;
        if (c2 || presented >= ch.size()) fin = 1;
        else begin
          for (int j = 0; j < N_ET; j++) colm[j] = (pos < len[j]) && (et[j][pos] == ch[presented]);
          if (|(colm & live)) begin live &= colm; pos++; end
          else noise++;
          presented++;
        end
      end
      exp_m = 0; exp_et = 0;
      for (int j = N_ET - 1; j >= 0; j--) if (live[j] && pos == len[j]) begin exp_m = 1; exp_et = j; end
      // drive
      @(negedge clk);
      for (int q = 0; q < CHAIN_MAX; q++) chain[q] = (q < ch.size()) ? SYM_W'(ch[q]) : '0;
      chain_len = LEN_W'(ch.size());
      start = 1;
      @(negedge clk);
      start = 0;
      cycles = 1;
      while (!done && cycles < 100) begin @(negedge clk); cycles++; end
      chk(cycles == presented + 4, $sformatf("start->done %0d clocks, expected %0d", cycles, presented + 4));
      chk(matched === exp_m, $sformatf("matched=%b expected %b", matched, exp_m));
      if (exp_m) chk(etalon === ET_W'(exp_et), $sformatf("etalon=%0d expected %0d", etalon, exp_et));
      chk(noise_cnt === LEN_W'(noise), $sformatf("noise=%0d expected %0d", noise_cnt, noise));
      chk(s_out === live, $sformatf("S=%b expected %b", s_out, live));
      if (exp_m) n_match++; else n_miss++;
      if (noise > 0) n_noise++;
      @(negedge clk);
      chk(!busy, "idle after done");
    end
    chk(n_match > 0 && n_miss > 0 && n_noise > 0, "match, no-match and noise all exercised");
    $display("matched %0d, not matched %0d, with noise %0d", n_match, n_miss, n_noise);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

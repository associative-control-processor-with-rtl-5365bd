// pamu_tb: the worked example of the PAMU, E1 = (a,b,c,d,e), E2 = (e,a,b),
// E3 = (b,a,d,e), then random etalon sets and random chains with noise.
// Every step compares K1 and K2 with a model of the complete-coincidence rule
// computed here (live etalons, common position, a step without K1 changes
// nothing); at the end the end-gate outputs and the detector read-out S_j
// are checked. K2 is checked in every step, so the clock in which it rises
// (the one after the last accepted symbol) is checked too.
module pamu_tb;
  import assoc_pkg::*;
  localparam int N_ET = 3, M_LEN = 5, NSYM = 5, SYM_W = 3;
  logic clk = 0, rst_n = 0;
  pamu_flash_t flash;
  logic nu, k, sym_valid, d, k1, k2;
  logic [SYM_W-1:0] sym;
  logic [N_ET-1:0] s, end_hit, ie;
  logic [M_LEN:0] row;
  int checks = 0, failures = 0;
  int et [N_ET][M_LEN];
  int len [N_ET];
  int n_complete = 0, n_noise = 0, n_nomatch = 0;

  pamu #(.N_ET(N_ET), .M_LEN(M_LEN), .NSYM(NSYM)) dut (
    .clk, .rst_n, .flash, .nu, .k, .sym_valid, .sym, .d, .k1, .k2, .s, .end_hit, .ie, .row);

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

  task automatic flash_all();
    for (int j = 0; j < N_ET; j++) begin
      for (int r = 0; r < len[j]; r++) fl(j, r, et[j][r], 1'b0);
      fl(j, len[j], 0, 1'b1);
    end
  endtask

  // Run one chain; returns the completed etalon or -1.
  task automatic run_chain(input int ch[$], output int result);
    logic [N_ET-1:0] live, colm, ehm;
    int pos, p;
    logic done;
    live = '1; pos = 0; done = 0;
    @(negedge clk); nu = 1;
    @(negedge clk); nu = 0;
    p = 0;
    while (!done) begin
      logic k2m, k1m;
      k2m = 0;
      for (int j = 0; j < N_ET; j++) if (live[j] && pos == len[j]) k2m = 1;
      #1;
      chk(k2 === k2m, $sformatf("K2=%b expected %b at position %0d", k2, k2m, pos));
      if (k2m || p >= ch.size()) begin
        done = 1;
      end else begin
        sym = SYM_W'(ch[p]); sym_valid = 1; k = 1;
        for (int j = 0; j < N_ET; j++) colm[j] = (pos < len[j]) && (et[j][pos] == ch[p]);
        k1m = |(colm & live);
        #1;
        chk(k1 === k1m, $sformatf("K1=%b expected %b, symbol %0d position %0d", k1, k1m, ch[p], pos));
        @(negedge clk);
        k = 0; sym_valid = 0;
        if (k1m) begin live = live & colm; pos++; end
        else n_noise++;
        p++;
      end
    end
    for (int j = 0; j < N_ET; j++) ehm[j] = live[j] && (pos == len[j]);
    d = 1;
    #1;
    chk(end_hit === ehm, $sformatf("end_hit=%b expected %b", end_hit, ehm));
    chk(s === live, $sformatf("S=%b expected %b", s, live));
    @(negedge clk); d = 0;
    result = -1;
    for (int j = N_ET - 1; j >= 0; j--) if (ehm[j]) result = j;
    if (result >= 0) n_complete++; else n_nomatch++;
  endtask

  initial begin
    int r;
    flash = '0; nu = 0; k = 0; sym_valid = 0; sym = '0; d = 0;
    // a=0 b=1 c=2 d=3 e=4
    et = '{'{0,1,2,3,4}, '{4,0,1,-1,-1}, '{1,0,3,4,-1}};
    len = '{5, 3, 4};
    repeat (2) @(posedge clk);
    rst_n = 1;
    flash_all();
    run_chain('{0,1,2,3,4}, r); chk(r == 0, "abcde -> E1");
    run_chain('{4,0,1}, r);     chk(r == 1, "eab -> E2");
    run_chain('{1,0,3,4}, r);   chk(r == 2, "bade -> E3");
    run_chain('{1,2,0,3,4}, r); chk(r == 2, "b c(noise) a d e -> E3");
    run_chain('{4,0,2,1}, r);   chk(r == 1, "e a c(noise) b -> E2");
    run_chain('{3,3}, r);       chk(r == -1, "dd -> no etalon");
    run_chain('{0,1,2}, r);     chk(r == -1, "abc -> incomplete");
    // random etalon sets
    for (int set = 0; set < 20; set++) begin
      @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
      for (int j = 0; j < N_ET; j++) begin
        len[j] = 1 + $urandom % M_LEN;
        for (int q = 0; q < M_LEN; q++) et[j][q] = (q < len[j]) ? int'($urandom % NSYM) : -1;
      end
      flash_all();
      for (int t = 0; t < 20; t++) begin
        int ch[$];
        int e, n;
        ch = {};
        e = $urandom % N_ET;
        // an etalon with random noise symbols inserted, or a random chain
        if ($urandom % 3 != 0) begin
          for (int q = 0; q < len[e]; q++) begin
            if ($urandom % 4 == 0) ch.push_back(int'($urandom % NSYM));
            ch.push_back(et[e][q]);
          end
        end else begin
          n = $urandom % 7;
          for (int q = 0; q < n; q++) ch.push_back(int'($urandom % NSYM));
        end
        run_chain(ch, r);
      end
    end
    chk(n_complete > 0 && n_noise > 0 && n_nomatch > 0, "completion, noise and no-match all exercised");
    $display("completed %0d, noise steps %0d, no match %0d", n_complete, n_noise, n_nomatch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// pamu_basic_tb: the PAMU and control device built without correction
// (CORRECTION = 0), the basic scheme in which all etalons have the full
// length M_LEN and every symbol is strobed into the detectors. Random etalon
// sets and chains of M_LEN symbols (an etalon, an etalon with one symbol
// corrupted, or random symbols) are compared with a model: a detector stays
// 1 only if its etalon equals the chain symbol for symbol, and the result is
// the lowest-numbered such etalon. A corrupted symbol must make the chain
// fail (no self-correction in this scheme), and start -> done must take
// M_LEN + 4 clocks.
module pamu_basic_tb;
  import assoc_pkg::*;
  localparam int N_ET = 4, M_LEN = 5, NSYM = 5, SYM_W = 3, CHAIN_MAX = 5;
  localparam int LEN_W = 3, ET_W = 2;
  logic clk = 0, rst_n = 0;
  pamu_flash_t flash;
  logic nu, k, sym_valid, d, k1, k2, start, busy, done, matched;
  logic [SYM_W-1:0] sym;
  logic [N_ET-1:0] s, end_hit, ie, s_out;
  logic [M_LEN:0] row;
  logic [CHAIN_MAX-1:0][SYM_W-1:0] chain;
  logic [LEN_W-1:0] noise_cnt;
  logic [ET_W-1:0] etalon;
  int checks = 0, failures = 0;
  int et [N_ET][M_LEN];
  int n_match = 0, n_corrupt_fail = 0, n_miss = 0;

  pamu #(.N_ET(N_ET), .M_LEN(M_LEN), .NSYM(NSYM), .CORRECTION(1'b0)) u_pamu (
    .clk, .rst_n, .flash, .nu, .k, .sym_valid, .sym, .d, .k1, .k2, .s, .end_hit, .ie, .row);

  pamu_control #(.CHAIN_MAX(CHAIN_MAX), .NSYM(NSYM), .N_ET(N_ET), .CORRECTION(1'b0)) u_cd (
    .clk, .rst_n, .start, .chain, .chain_len(LEN_W'(CHAIN_MAX)), .nu, .k, .sym_valid, .sym, .d,
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

  task automatic fl(input int c, r, code);
    @(negedge clk);
    flash = '{we: 1'b1, is_end: 1'b0, col: 8'(c), row: 8'(r), code: 8'(code)};
    @(posedge clk);
    #1 flash = '0;
  endtask

  initial begin
    flash = '0; start = 0; chain = '0;
    repeat (2) @(posedge clk);
    for (int set = 0; set < 10; set++) begin
      @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
      for (int j = 0; j < N_ET; j++)
        for (int q = 0; q < M_LEN; q++) begin et[j][q] = $urandom % NSYM; fl(j, q, et[j][q]); end
      for (int t = 0; t < 30; t++) begin
        int ch [CHAIN_MAX];
        int e, mode, cycles, exp_et;
        logic [N_ET-1:0] live;
        e = $urandom % N_ET;
        mode = $urandom % 3;
        for (int q = 0; q < M_LEN; q++) ch[q] = (mode == 2) ? int'($urandom % NSYM) : et[e][q];
        if (mode == 1) begin
          int q;
          q = $urandom % M_LEN;
          ch[q] = (et[e][q] + 1 + $urandom % (NSYM - 1)) % NSYM;
        end
        live = '1;
        for (int q = 0; q < M_LEN; q++)
          for (int j = 0; j < N_ET; j++) if (et[j][q] != ch[q]) live[j] = 1'b0;
        exp_et = -1;
        for (int j = N_ET - 1; j >= 0; j--) if (live[j]) exp_et = j;
        @(negedge clk);
        for (int q = 0; q < CHAIN_MAX; q++) chain[q] = SYM_W'(ch[q]);
        start = 1;
        @(negedge clk);
        start = 0;
        cycles = 1;
        while (!done && cycles < 100) begin @(negedge clk); cycles++; end
        chk(cycles == M_LEN + 4, $sformatf("start->done %0d clocks, expected %0d", cycles, M_LEN + 4));
        chk(matched === (exp_et >= 0), $sformatf("matched=%b expected %b", matched, exp_et >= 0));
        if (exp_et >= 0) chk(etalon === ET_W'(exp_et), $sformatf("etalon=%0d expected %0d", etalon, exp_et));
        chk(s_out === live, $sformatf("S=%b expected %b", s_out, live));
        chk(!k2, "no K2 without end gates");
        if (exp_et >= 0) n_match++;
        else if (mode == 1) n_corrupt_fail++;
        else n_miss++;
      end
    end
    $display("matched %0d, corrupted chains rejected %0d, other misses %0d", n_match, n_corrupt_fail, n_miss);
    chk(n_match > 0 && n_corrupt_fail > 0, "match and rejection of a corrupted chain occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
